// reg_track_table: the per-warp register track table of a subcore.
//
// For every {warp, register} it keeps two bits: FBValid (a valid copy is in the far-bank
// register file) and NBValid (a valid copy is in the near-bank register file). Three
// combinational lookups serve the instruction offload engine (destination and two sources).
// Two update ports act at the clock edge: a register move sets the valid bit of the side the
// register was copied to, and an instruction write leaves only the side that was written
// valid. A move and a write in the same cycle on the same entry: the write wins.
// The fields FBValid/NBValid and the per-warp organisation follow the paper; the reset state
// (every register valid far-bank only, since kernel parameters arrive through the base die)
// and the fact that only registers below NBR can ever be near-bank valid are this design's
// choices.
module reg_track_table
  import mpu_pkg::*;
#(
  parameter int unsigned WARPS = mpu_pkg::NUM_WARPS,
  parameter int unsigned REGS  = mpu_pkg::FB_REGS,
  parameter int unsigned NBR   = mpu_pkg::NB_REGS,
  localparam int unsigned WW   = $clog2(WARPS),
  localparam int unsigned RW   = $clog2(REGS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // lookups
  input  logic [WW-1:0]  lk_warp,
  input  logic [2:0][RW-1:0] lk_reg,
  output logic [2:0]     lk_fb,
  output logic [2:0]     lk_nb,
  // register move completed: reg now valid at mv_to
  input  logic           mv_en,
  input  logic [WW-1:0]  mv_warp,
  input  logic [RW-1:0]  mv_reg,
  input  loc_e           mv_to,
  // instruction writes reg at wr_loc: only that copy stays valid
  input  logic           wr_en,
  input  logic [WW-1:0]  wr_warp,
  input  logic [RW-1:0]  wr_reg,
  input  loc_e           wr_loc
);
  logic [WARPS-1:0][REGS-1:0] fbv, nbv;

  always_comb
    for (int i = 0; i < 3; i++) begin
      lk_fb[i] = fbv[lk_warp][lk_reg[i]];
      lk_nb[i] = nbv[lk_warp][lk_reg[i]];
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      fbv <= '1;
      nbv <= '0;
    end else begin
      if (mv_en) begin
        if (mv_to == LOC_FAR) fbv[mv_warp][mv_reg] <= 1'b1;
        if (mv_to == LOC_NEAR && 32'(mv_reg) < NBR) nbv[mv_warp][mv_reg] <= 1'b1;
      end
      if (wr_en) begin
        fbv[wr_warp][wr_reg] <= (wr_loc == LOC_FAR);
        nbv[wr_warp][wr_reg] <= (wr_loc == LOC_NEAR);
      end
    end

  // an instruction never writes a near-bank copy of a register that has no near-bank slot
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_en && wr_loc == LOC_NEAR |-> 32'(wr_reg) < NBR);
endmodule
