// scoreboard_tb: checks the per-warp pending-write bits against a reference. 4000 random
// cycles set one register and clear up to three (the three writeback ports); a set and a
// clear of the same register in one cycle leaves it pending (the new instruction wins).
// pend_o and empty are compared after every edge.
module scoreboard_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic set_en; logic [2:0] set_warp; logic [4:0] set_reg;
  logic [2:0] clr_en; logic [2:0][2:0] clr_warp; logic [2:0][4:0] clr_reg;
  logic [7:0][31:0] pend_o; logic empty;
  scoreboard dut (.*);

  logic [7:0][31:0] pr;
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  initial begin
    set_en = 0; set_warp = 0; set_reg = 0; clr_en = 0; clr_warp = '0; clr_reg = '0; pr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      set_en = 1'($urandom); set_warp = 3'($urandom); set_reg = 5'($urandom);
      for (int c = 0; c < 3; c++) begin
        clr_en[c] = 1'($urandom); clr_warp[c] = 3'($urandom_range(1)); clr_reg[c] = 5'($urandom_range(3));
        if ($urandom_range(1)) begin clr_warp[c] = set_warp; clr_reg[c] = 5'($urandom); end
        if (clr_en[c]) pr[clr_warp[c]][clr_reg[c]] = 0;
      end
      if (t % 9 == 0) begin set_warp = 0; set_reg = 5'($urandom_range(3)); end
      if (t > 3900) set_en = 0;
      if (set_en) pr[set_warp][set_reg] = 1;
      @(posedge clk); #1;
      checks++;
      if (pend_o !== pr || empty !== (pr == '0)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d", t);
      end
    end
    // clear everything and expect empty
    for (int w = 0; w < 8; w++) for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      set_en = 0; clr_en = 3'b001; clr_warp[0] = 3'(w); clr_reg[0] = 5'(r);
    end
    @(negedge clk); clr_en = 0;
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
