// operand_collector_tb: the operand collector in front of a far-bank register file (8 warps x
// 32 registers) preloaded with random values. 500 random instructions (ADD: two operands,
// MAD: three, ADDI: one, MOVI: none, STG: address only) arrive from random warps; out_ready
// is random. Checks: operands a/b/c equal the registers named by src0/src1/dst (for those the
// opcode reads), instruction/warp/mask pass through, and out_valid rises exactly k+1 cycles
// after acceptance for k operands.
module operand_collector_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [2:0] in_warp, out_warp; instr_t in_instr, out_instr; mask_t in_mask, out_mask;
  logic [7:0] rf_raddr; vreg_t rf_rdata, a, b, c;
  logic wr_en; logic [7:0] wr_addr; vreg_t wr_data;
  operand_collector dut (.*);
  register_file #(.WARPS(8), .REGS(32), .LANES(32), .NRD(1), .NWR(1)) rf (.clk,
    .rd_addr(rf_raddr), .rd_data(rf_rdata), .wr_en(wr_en), .wr_addr(wr_addr),
    .wr_mask('1), .wr_data(wr_data));

  vreg_t sh [256];
  int checks = 0, failures = 0, cyc = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  task automatic chk(logic cnd, string s);
    checks++; if (!cnd) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    opcode_e ops [5] = '{OP_ADD, OP_MAD, OP_ADDI, OP_MOVI, OP_STG};
    int k, t0;
    in_valid = 0; in_warp = 0; in_instr = '0; in_mask = '0; out_ready = 0;
    wr_en = 0; wr_addr = 0; wr_data = '0;
    for (int r = 0; r < 256; r++) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(r);
      for (int l = 0; l < 32; l++) wr_data[32*l +: 32] = $urandom;
      sh[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      instr_t i; logic [2:0] w; mask_t m;
      i = '0; i.op = ops[$urandom_range(4)];
      i.dst = 5'($urandom); i.src0 = 5'($urandom); i.src1 = 5'($urandom); i.imm = $urandom;
      w = 3'($urandom); m = $urandom;
      k = (i.op == OP_MAD) ? 3 : (i.op == OP_ADD) ? 2 : (i.op == OP_MOVI) ? 0 : 1;
      @(negedge clk);
      in_valid = 1; in_instr = i; in_warp = w; in_mask = m; out_ready = 0;
      #4; while (!in_ready) begin @(negedge clk); #4; end
      t0 = cyc + 1;   // count of the accepting edge
      @(posedge clk); #1; in_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      chk(cyc - t0 == k + 1, $sformatf("latency %0d for %0d operands", cyc - t0, k));
      chk(out_instr == i && out_warp == w && out_mask == m, "pass-through");
      if (k >= 1) chk(a == sh[{w, i.src0}], $sformatf("a of %s", i.op.name()));
      if (k >= 2) chk(b == sh[{w, i.src1}], "b");
      if (k == 3) chk(c == sh[{w, i.dst}], "c");
      repeat ($urandom_range(2)) @(posedge clk);
      @(negedge clk); out_ready = 1;
      @(posedge clk); #1; out_ready = 0;
      chk(!out_valid, "released after out_ready");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
