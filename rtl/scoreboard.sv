// scoreboard: per-warp record of registers with a write in flight.
//
// An instruction sets the pending bit of its destination when it issues; the bit clears when
// the instruction commits, whether it ran far-bank, in the LSU, or near-bank (the NBU's
// completion message). pend_o exposes every warp's pending vector so the issue stage can
// check read-after-write and write-after-write hazards of all warps in the same cycle. Three
// clear ports let the three completion paths commit in one cycle; a set and a clear of the
// same bit in one cycle leaves it set. The paper names the scoreboard and says commit clears
// it; the bit-vector form is this design's choice.
module scoreboard
  import mpu_pkg::*;
#(
  parameter int unsigned WARPS = mpu_pkg::NUM_WARPS,
  parameter int unsigned REGS  = mpu_pkg::FB_REGS,
  parameter int unsigned NCLR  = 3,
  localparam int unsigned WW   = $clog2(WARPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 set_en,
  input  logic [WW-1:0]        set_warp,
  input  logic [4:0]           set_reg,
  input  logic [NCLR-1:0]      clr_en,
  input  logic [NCLR-1:0][WW-1:0] clr_warp,
  input  logic [NCLR-1:0][4:0] clr_reg,
  output logic [WARPS-1:0][REGS-1:0] pend_o,
  output logic                 empty
);
  logic [WARPS-1:0][REGS-1:0] pend;
  assign pend_o = pend;
  assign empty  = (pend == '0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pend <= '0;
    else begin
      for (int c = 0; c < NCLR; c++)
        if (clr_en[c]) pend[clr_warp[c]][clr_reg[c]] <= 1'b0;
      if (set_en) pend[set_warp][set_reg] <= 1'b1;
    end
endmodule
