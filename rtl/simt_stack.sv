// simt_stack: per-warp SIMT reconvergence stacks of a subcore.
//
// Each warp has a stack of {pc, reconvergence pc, active mask}; the top entry is the warp's
// current pc and SIMT mask (rd_pc/rd_mask, combinational). An ordinary instruction advances
// the top pc by one. A branch with taken lanes T of active mask M: if T = M the top jumps to the
// target; if T is empty it advances; otherwise the top entry becomes the reconvergence entry
// (pc := reconvergence pc) and two entries are pushed, not-taken lanes (pc + 1) then taken
// lanes (target), both reconverging at the given pc. Whenever the top's pc reaches its
// reconvergence pc it is popped, so the lanes merge again. The reconvergence pc comes with
// the branch, as the compiler's branch analysis (post-dominators) supplies it. The paper
// names the SIMT stack and cites this post-dominator scheme; depth, encoding and one update
// per cycle are this design's choices.
module simt_stack
  import mpu_pkg::*;
#(
  parameter int unsigned WARPS = mpu_pkg::NUM_WARPS,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned WW   = $clog2(WARPS),
  localparam int unsigned DW   = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,          // launch: every warp starts at init_pc, all lanes
  input  logic [15:0]    init_pc,
  input  logic [WW-1:0]  rd_warp,
  output logic [15:0]    rd_pc,
  output mask_t          rd_mask,
  input  logic           adv_en,        // ordinary instruction issued
  input  logic [WW-1:0]  adv_warp,
  input  logic           br_en,         // branch resolved
  input  logic [WW-1:0]  br_warp,
  input  mask_t          br_taken,
  input  logic [15:0]    br_target,
  input  logic [15:0]    br_reconv,
  output logic           st_diverge     // pulses when a branch splits a warp
);
  typedef struct packed { logic [15:0] pc; logic [15:0] rpc; mask_t mask; } entry_t;
  entry_t stk [WARPS][DEPTH];
  logic [DW-1:0] sp [WARPS];            // number of entries

  assign rd_pc   = stk[rd_warp][sp[rd_warp] - 1'b1].pc;
  assign rd_mask = stk[rd_warp][sp[rd_warp] - 1'b1].mask;

  entry_t bt;
  assign bt = stk[br_warp][sp[br_warp] - 1'b1];
  assign st_diverge = br_en && (br_taken & bt.mask) != '0 && (br_taken & bt.mask) != bt.mask;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int w = 0; w < WARPS; w++) begin
        sp[w] <= DW'(1);
        for (int d = 0; d < DEPTH; d++) stk[w][d] <= '0;
      end
    end else if (init) begin
      for (int w = 0; w < WARPS; w++) begin
        sp[w] <= DW'(1);
        stk[w][0] <= '{pc: init_pc, rpc: 16'hffff, mask: '1};
      end
    end else begin
      if (adv_en) begin
        entry_t t;
        t = stk[adv_warp][sp[adv_warp] - 1'b1];
        if (t.pc + 16'd1 == t.rpc && sp[adv_warp] > 1) sp[adv_warp] <= sp[adv_warp] - 1'b1;
        else stk[adv_warp][sp[adv_warp] - 1'b1].pc <= t.pc + 16'd1;
      end
      if (br_en) begin
        mask_t tk;
        logic [DW-1:0] s;
        s  = sp[br_warp];
        tk = br_taken & bt.mask;
        if (tk == bt.mask) begin
          if (br_target == bt.rpc && s > 1) sp[br_warp] <= s - 1'b1;
          else stk[br_warp][s - 1'b1].pc <= br_target;
        end else if (tk == '0) begin
          if (bt.pc + 16'd1 == bt.rpc && s > 1) sp[br_warp] <= s - 1'b1;
          else stk[br_warp][s - 1'b1].pc <= bt.pc + 16'd1;
        end else begin
          // a side that starts at the reconvergence pc has nothing to run: not pushed
          logic [DW-1:0] n;
          n = s;
          stk[br_warp][s - 1'b1].pc <= br_reconv;
          if (bt.pc + 16'd1 != br_reconv) begin
            stk[br_warp][n] <= '{pc: bt.pc + 16'd1, rpc: br_reconv, mask: bt.mask & ~tk};
            n = n + 1'b1;
          end
          if (br_target != br_reconv) begin
            stk[br_warp][n] <= '{pc: br_target, rpc: br_reconv, mask: tk};
            n = n + 1'b1;
          end
          sp[br_warp] <= n;
        end
      end
    end

  assert property (@(posedge clk) disable iff (!rst_n)
                   br_en |-> 32'(sp[br_warp]) + 2 <= DEPTH);
  assert property (@(posedge clk) disable iff (!rst_n) !(adv_en && br_en && adv_warp == br_warp));
endmodule
