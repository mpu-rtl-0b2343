// simt_stack_tb: checks the per-warp SIMT reconvergence stacks.
// Part 1 is a directed if/else: warp 3 at pc 10 branches with odd lanes taken to 13,
// reconverging at 15. Expected trace: odd lanes run 13, 14, even lanes run 11..14, then all
// lanes at 15; st_diverge must pulse once.
// Part 2 runs 3000 random adv/branch operations on random warps against a reference model
// (one queue per warp, written here) and compares pc and mask of every warp after each edge.
module simt_stack_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init; logic [15:0] init_pc; logic [2:0] rd_warp; logic [15:0] rd_pc; mask_t rd_mask;
  logic adv_en; logic [2:0] adv_warp; logic br_en; logic [2:0] br_warp; mask_t br_taken;
  logic [15:0] br_target, br_reconv; logic st_diverge;
  simt_stack dut (.*);

  typedef struct { int pc; int rpc; mask_t m; } ent_t;
  ent_t q [8][$];
  int checks = 0, failures = 0, ndiv = 0;
  initial begin
    #2_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  always @(posedge clk) if (rst_n && st_diverge) ndiv++;

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic look(int w, int pc, mask_t m, string s);
    rd_warp = 3'(w); #1;
    chk(rd_pc == 16'(pc) && rd_mask == m, $sformatf("%s: w%0d pc %0d/%0d mask %h/%h", s, w, rd_pc, pc, rd_mask, m));
  endtask
  task automatic step_adv(int w);
    @(negedge clk); adv_en = 1; adv_warp = 3'(w); @(posedge clk); #1; adv_en = 0;
  endtask

  // reference
  function automatic void r_adv(int w);
    ent_t t; t = q[w][$];
    if (t.pc + 1 == t.rpc && q[w].size() > 1) void'(q[w].pop_back());
    else q[w][$].pc = t.pc + 1;
  endfunction
  function automatic void r_br(int w, mask_t tkin, int tgt, int rc);
    ent_t t; mask_t tk; t = q[w][$]; tk = tkin & t.m;
    if (tk == t.m) begin
      if (tgt == t.rpc && q[w].size() > 1) void'(q[w].pop_back()); else q[w][$].pc = tgt;
    end else if (tk == 0) r_adv(w);
    else begin
      q[w][$].pc = rc;
      if (t.pc + 1 != rc) q[w].push_back('{t.pc + 1, rc, t.m & ~tk});
      if (tgt != rc) q[w].push_back('{tgt, rc, tk});
    end
  endfunction

  initial begin
    init = 0; init_pc = 0; rd_warp = 0; adv_en = 0; adv_warp = 0; br_en = 0; br_warp = 0;
    br_taken = 0; br_target = 0; br_reconv = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); init = 1; init_pc = 16'd10; @(posedge clk); #1; init = 0;
    look(3, 10, '1, "init");
    @(negedge clk); br_en = 1; br_warp = 3; br_taken = 32'haaaa_aaaa; br_target = 13; br_reconv = 15;
    @(posedge clk); #1; br_en = 0;
    look(3, 13, 32'haaaa_aaaa, "taken side first");
    step_adv(3); look(3, 14, 32'haaaa_aaaa, "taken 14");
    step_adv(3); look(3, 11, 32'h5555_5555, "not-taken side");
    step_adv(3); look(3, 12, 32'h5555_5555, "not-taken 12");
    step_adv(3); look(3, 13, 32'h5555_5555, "not-taken falls into 13");
    step_adv(3); look(3, 14, 32'h5555_5555, "not-taken 14");
    step_adv(3); look(3, 15, '1, "reconverged");
    look(0, 10, '1, "other warp untouched");
    chk(ndiv == 1, "one divergence");

    // random against the reference
    @(negedge clk); init = 1; init_pc = 16'd0; @(posedge clk); #1; init = 0;
    for (int w = 0; w < 8; w++) begin q[w].delete(); q[w].push_back('{0, 16'hffff, '1}); end
    for (int t = 0; t < 3000; t++) begin
      int w, pc, tgt, rc; mask_t tk;
      @(negedge clk);
      w = $urandom_range(7); pc = q[w][$].pc;
      if ($urandom_range(2) == 0 && q[w].size() <= 5 && q[w][$].rpc - pc > 3) begin
        rc  = $urandom_range(pc + 2, q[w][$].rpc - 1);
        tgt = $urandom_range(pc + 1, rc);
        case ($urandom_range(3))
          0: tk = '0;
          1: tk = '1;
          default: tk = $urandom;
        endcase
        br_en = 1; br_warp = 3'(w); br_taken = tk; br_target = 16'(tgt); br_reconv = 16'(rc);
        r_br(w, tk, tgt, rc);
      end else begin
        adv_en = 1; adv_warp = 3'(w);
        r_adv(w);
      end
      @(posedge clk); #1; adv_en = 0; br_en = 0;
      for (int v = 0; v < 8; v++) look(v, q[v][$].pc, q[v][$].m, $sformatf("rand t=%0d", t));
      if (q[w][$].pc > 60000) begin   // restart the warp before pc wraps
        @(negedge clk); init = 1; @(posedge clk); #1; init = 0;
        for (int v = 0; v < 8; v++) begin q[v].delete(); q[v].push_back('{0, 16'hffff, '1}); end
      end
    end
    chk(ndiv > 30, $sformatf("random run diverged %0d times", ndiv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
