// warp_scheduler_tb: launches n warps (n = 1..8), then drives random ready vectors, random
// take and random exits. A reference round-robin pointer predicts the granted warp: the first
// warp at or after the pointer that is both active and ready; the pointer moves past a warp
// whose grant is taken. Checks active, gnt_valid, gnt_warp and all_exited every cycle.
module warp_scheduler_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic launch; logic [3:0] launch_n; logic exit_en; logic [2:0] exit_warp;
  logic [7:0] ready; logic take;
  logic [7:0] active; logic gnt_valid; logic [2:0] gnt_warp; logic all_exited;
  warp_scheduler dut (.*);

  logic [7:0] act; int rr;
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  initial begin
    int gv, gw;
    launch = 0; launch_n = 0; exit_en = 0; exit_warp = 0; ready = 0; take = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int round = 0; round < 24; round++) begin
      @(negedge clk);
      launch = 1; launch_n = 4'(round % 8 + 1);
      @(posedge clk); #1; launch = 0;
      act = '0; for (int w = 0; w < 8; w++) act[w] = (w < round % 8 + 1); rr = 0;
      while (act != 0) begin
        @(negedge clk);
        ready = 8'($urandom); take = 1'($urandom); exit_en = ($urandom_range(5) == 0);
        exit_warp = 3'($urandom);
        gv = 0; gw = rr;
        for (int k = 0; k < 8; k++) if (!gv && act[(rr + k) % 8] && ready[(rr + k) % 8]) begin
          gv = 1; gw = (rr + k) % 8;
        end
        #1;
        checks++;
        if (active !== act || gnt_valid !== 1'(gv) || (gv && gnt_warp !== 3'(gw)) || all_exited !== (act == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL round %0d act %b/%b gnt %0d/%0d", round, active, act, gnt_warp, gw);
        end
        if (take && gv) rr = (gw + 1) % 8;
        if (exit_en) act[exit_warp] = 0;
        @(posedge clk);
      end
      #1; exit_en = 0;
      checks++;
      if (!all_exited) begin failures++; $display("FAIL all_exited"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
