// vector_alu_tb: drives the 32-lane integer ALU with every opcode and random operands,
// masks and immediates, and compares the registered result one cycle later with values
// computed here lane by lane. Masked-off lanes must read 0; out_valid must follow in_valid
// by exactly one cycle.
module vector_alu_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  opcode_e op;
  logic [31:0] imm, tid_base;
  logic [31:0] mask;
  logic [1023:0] a, b, c, result;
  vector_alu dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  function automatic logic [31:0] ref_op(opcode_e o, logic [31:0] x, y, z, im, tb, int l);
    case (o)
      OP_ADD: return x + y;
      OP_SUB: return x - y;
      OP_MUL: return x * y;
      OP_AND: return x & y;
      OP_OR:  return x | y;
      OP_XOR: return x ^ y;
      OP_SHL: return x << (y % 32);
      OP_SHR: return x >> (y % 32);
      OP_MIN: return (int'(x) < int'(y)) ? x : y;
      OP_MAX: return (int'(x) > int'(y)) ? x : y;
      OP_ADDI: return x + im;
      OP_MULI: return x * im;
      OP_SLT: return (int'(x) < int'(y)) ? 1 : 0;
      OP_MAD: return x * y + z;
      OP_MOVI: return im;
      OP_TID: return tb + l;
      default: return 0;
    endcase
  endfunction

  opcode_e ops [16] = '{OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR,
                        OP_MIN, OP_MAX, OP_ADDI, OP_MULI, OP_SLT, OP_MAD, OP_MOVI, OP_TID};
  initial begin
    logic [1023:0] exp_r;
    in_valid = 0; op = OP_NOP; imm = 0; tid_base = 0; mask = 0; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 800; t++) begin
      @(negedge clk);
      in_valid = 1; op = ops[t % 16]; imm = $urandom; tid_base = $urandom; mask = $urandom;
      if (t % 7 == 0) mask = '1;
      for (int l = 0; l < 32; l++) begin
        a[32*l +: 32] = $urandom; b[32*l +: 32] = $urandom; c[32*l +: 32] = $urandom;
        if (t % 3 == 0) b[32*l +: 32] = $urandom_range(40);
        exp_r[32*l +: 32] = mask[l] ? ref_op(op, a[32*l +: 32], b[32*l +: 32], c[32*l +: 32],
                                             imm, tid_base, l) : 32'd0;
      end
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || result !== exp_r) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d op %s", t, op.name());
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
