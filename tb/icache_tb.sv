// icache_tb: writes 2000 random 64-bit instructions at random addresses of the 16384-entry
// instruction store, then reads random addresses on all four ports at once and compares
// them with a shadow copy (reads are combinational: data valid in the same cycle).
module icache_tb;
  import mpu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [13:0] wr_addr; instr_t wr_data;
  logic [3:0][15:0] rd_pc; instr_t [3:0] rd_instr;
  icache dut (.*);

  instr_t sh [int];
  int keys [$];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = '0; rd_pc = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 14'($urandom); wr_data = {$urandom, $urandom};
      if (!sh.exists(wr_addr)) keys.push_back(wr_addr);
      sh[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int p = 0; p < 4; p++) rd_pc[p] = 16'(keys[$urandom_range(keys.size() - 1)]);
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd_instr[p] !== sh[rd_pc[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d pc %0d", p, rd_pc[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
