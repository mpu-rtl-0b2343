// operand_collector: gathers the source operands of one instruction from a register file.
//
// On accepting {warp, instruction, mask} it reads, through one register-file read port, each
// register the opcode uses: src0, src1, and for MAD the old destination. Reads are issued one
// per cycle and the registered RF returns each value a cycle later. When all operands are
// collected, out_valid holds the instruction with operands a (src0), b (src1), c (dst) until
// out_ready. Used in the subcore (far-bank) and in the NBU (near-bank, register number taken
// modulo the near-bank register count). The paper names operand collectors on both sides; the
// single read port and serial reads are this design's choices. The data register of a
// st.global is never collected here: by the paper's register policy it lives near-bank and
// the LSU fetches it itself.
// Timing: with k operands, out_valid rises k+1 cycles after the instruction is accepted
// (k = 0 gives 1 cycle).
module operand_collector
  import mpu_pkg::*;
#(
  parameter int unsigned REGS = mpu_pkg::FB_REGS,
  localparam int unsigned AW  = $clog2(NUM_WARPS*REGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WARP_W-1:0] in_warp,
  input  instr_t            in_instr,
  input  mask_t             in_mask,
  output logic [AW-1:0]     rf_raddr,
  input  vreg_t             rf_rdata,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WARP_W-1:0] out_warp,
  output instr_t            out_instr,
  output mask_t             out_mask,
  output vreg_t             a,
  output vreg_t             b,
  output vreg_t             c
);
  typedef enum logic [1:0] { S_IDLE, S_READ, S_OUT } state_e;
  state_e st;
  logic [2:0] left;        // operands still to read (bit 0 src0, 1 src1, 2 dst)
  logic [1:0] pend;        // operand whose read is in flight (+1), 0 = none
  logic [1:0] cur;

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_OUT);

  always_comb begin
    cur = left[0] ? 2'd0 : left[1] ? 2'd1 : 2'd2;
  end
  logic [4:0] rsel;
  assign rsel = (cur == 2'd0) ? out_instr.src0 : (cur == 2'd1) ? out_instr.src1 : out_instr.dst;
  assign rf_raddr = AW'(out_warp * REGS + (32'(rsel) % REGS));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; left <= '0; pend <= '0;
      out_warp <= '0; out_instr <= '0; out_mask <= '0; a <= '0; b <= '0; c <= '0;
    end else begin
      // capture the value read in the previous cycle
      if (pend == 2'd1) a <= rf_rdata;
      if (pend == 2'd2) b <= rf_rdata;
      if (pend == 2'd3) c <= rf_rdata;
      unique case (st)
        S_IDLE: begin
          pend <= '0;
          if (in_valid) begin
            out_warp <= in_warp; out_instr <= in_instr; out_mask <= in_mask;
            left <= {in_instr.op == OP_MAD,
                     reads_src1(in_instr.op) && in_instr.op != OP_STG,
                     reads_src0(in_instr.op)};
            st <= S_READ;
          end
        end
        S_READ: begin
          if (left != '0) begin
            pend <= cur + 2'd1;
            left[cur] <= 1'b0;
          end else begin
            pend <= '0;
            st <= S_OUT;
          end
        end
        S_OUT: begin
          pend <= '0;
          if (out_ready) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
endmodule
