// reg_track_table_tb: checks the register track table (FBValid / NBValid bit per warp
// register) against a reference kept here. After reset every register must be valid far-bank
// only. 4000 random cycles then apply register moves (a move adds a copy, and a move to near
// of a register with no near-bank slot adds nothing) and instruction writebacks (a write
// leaves only the written copy valid); the three combinational lookup ports are compared
// every cycle.
module reg_track_table_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] lk_warp;
  logic [2:0][4:0] lk_reg;
  logic [2:0] lk_fb, lk_nb;
  logic mv_en, wr_en;
  logic [2:0] mv_warp, wr_warp;
  logic [4:0] mv_reg, wr_reg;
  loc_e mv_to, wr_loc;
  reg_track_table dut (.*);

  logic fb [8][32], nb [8][32];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  task automatic compare(int t);
    #1;
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (lk_fb[i] !== fb[lk_warp][lk_reg[i]] || lk_nb[i] !== nb[lk_warp][lk_reg[i]]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d w%0d r%0d fb %b/%b nb %b/%b", t, lk_warp, lk_reg[i], lk_fb[i], fb[lk_warp][lk_reg[i]], lk_nb[i], nb[lk_warp][lk_reg[i]]);
      end
    end
  endtask

  initial begin
    lk_warp = 0; lk_reg = '0; mv_en = 0; wr_en = 0; mv_warp = 0; wr_warp = 0;
    mv_reg = 0; wr_reg = 0; mv_to = LOC_NONE; wr_loc = LOC_NONE;
    for (int w = 0; w < 8; w++) for (int r = 0; r < 32; r++) begin fb[w][r] = 1; nb[w][r] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      lk_warp = 3'($urandom); for (int i = 0; i < 3; i++) lk_reg[i] = 5'($urandom);
      compare(t);
      mv_en = 1'($urandom); mv_warp = 3'($urandom); mv_reg = 5'($urandom_range(20));
      mv_to = $urandom_range(1) ? LOC_NEAR : LOC_FAR;
      wr_en = 1'($urandom); wr_warp = 3'($urandom);
      wr_loc = $urandom_range(1) ? LOC_NEAR : LOC_FAR;
      wr_reg = (wr_loc == LOC_NEAR) ? 5'($urandom_range(15)) : 5'($urandom);
      if (mv_en && wr_en && mv_warp == wr_warp && mv_reg == wr_reg) wr_en = 0;
      if (mv_en) begin
        if (mv_to == LOC_FAR) fb[mv_warp][mv_reg] = 1;
        else if (mv_reg < 16) nb[mv_warp][mv_reg] = 1;
      end
      if (wr_en) begin
        fb[wr_warp][wr_reg] = (wr_loc == LOC_FAR);
        nb[wr_warp][wr_reg] = (wr_loc == LOC_NEAR);
      end
      @(posedge clk); #1;
      mv_en = 0; wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
