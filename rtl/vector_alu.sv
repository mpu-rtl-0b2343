// vector_alu: the 32-lane SIMT integer ALU, instantiated both in each subcore (far-bank ALU)
// and in each NBU (near-bank ALU).
//
// All lanes compute the same operation in one combinational step; the result is registered,
// so out_valid follows in_valid by exactly one cycle. Lanes outside the active mask return 0
// and are not written back by the caller. TID gives each lane its global thread number
// (base + lane). The paper names the ALU and its 32-lane SIMT width; the operation set (an
// integer subset of PTX arithmetic) and the one-cycle latency are this design's choices.
module vector_alu
  import mpu_pkg::*;
#(
  parameter int unsigned LANES_P = mpu_pkg::LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  opcode_e                 op,
  input  logic [31:0]             imm,
  input  logic [31:0]             tid_base,   // global thread number of lane 0 (TID)
  input  logic [LANES_P-1:0]      mask,
  input  logic [LANES_P*32-1:0]   a,          // src0
  input  logic [LANES_P*32-1:0]   b,          // src1
  input  logic [LANES_P*32-1:0]   c,          // old dst (MAD accumulator)
  output logic                    out_valid,
  output logic [LANES_P*32-1:0]   result
);
  logic [LANES_P*32-1:0] r;

  always_comb begin
    r = '0;
    for (int l = 0; l < LANES_P; l++) begin
      logic [31:0] x, y, z, o;
      x = a[32*l +: 32]; y = b[32*l +: 32]; z = c[32*l +: 32];
      unique case (op)
        OP_ADD:  o = x + y;
        OP_SUB:  o = x - y;
        OP_MUL:  o = x * y;
        OP_AND:  o = x & y;
        OP_OR:   o = x | y;
        OP_XOR:  o = x ^ y;
        OP_SHL:  o = x << y[4:0];
        OP_SHR:  o = x >> y[4:0];
        OP_MIN:  o = ($signed(x) < $signed(y)) ? x : y;
        OP_MAX:  o = ($signed(x) > $signed(y)) ? x : y;
        OP_ADDI: o = x + imm;
        OP_MULI: o = x * imm;
        OP_SLT:  o = {31'd0, $signed(x) < $signed(y)};
        OP_MAD:  o = x * y + z;
        OP_MOVI: o = imm;
        OP_TID:  o = tid_base + 32'(l);
        default: o = '0;
      endcase
      r[32*l +: 32] = mask[l] ? o : 32'd0;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      result    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) result <= r;
    end
endmodule
