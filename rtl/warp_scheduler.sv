// warp_scheduler: the warp table and issue selection of a subcore.
//
// The warp table marks which warps are running: a launch activates warps 0..n-1 and an EXIT
// retires its warp. Each cycle the scheduler grants one warp among those the issue stage
// reports ready (instruction fetched, no scoreboard hazard, back end free), round-robin
// starting after the last warp granted, so warps interleave as the paper's dynamic
// scheduling does. The grant is combinational; the pointer moves when the grant is used.
// The paper names the warp table and the warp scheduler; round-robin order is this design's
// choice.
module warp_scheduler
  import mpu_pkg::*;
#(
  parameter int unsigned WARPS = mpu_pkg::NUM_WARPS,
  localparam int unsigned WW   = $clog2(WARPS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             launch,
  input  logic [WW:0]      launch_n,       // number of warps to start (1..WARPS)
  input  logic             exit_en,
  input  logic [WW-1:0]    exit_warp,
  input  logic [WARPS-1:0] ready,          // from issue: warp could issue now
  input  logic             take,           // the grant is used this cycle
  output logic [WARPS-1:0] active,
  output logic             gnt_valid,
  output logic [WW-1:0]    gnt_warp,
  output logic             all_exited
);
  logic [WW-1:0] rr;
  logic [WARPS-1:0] cand;
  assign cand = ready & active;
  assign all_exited = (active == '0);

  always_comb begin
    gnt_valid = 1'b0; gnt_warp = rr;
    for (int k = WARPS - 1; k >= 0; k--) begin
      logic [WW-1:0] w;
      w = WW'((32'(rr) + 32'(k)) % WARPS);
      if (cand[w]) begin gnt_valid = 1'b1; gnt_warp = w; end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      active <= '0; rr <= '0;
    end else begin
      if (launch) begin
        for (int w = 0; w < WARPS; w++) active[w] <= (32'(w) < 32'(launch_n));
        rr <= '0;
      end else begin
        if (exit_en) active[exit_warp] <= 1'b0;
        if (take && gnt_valid) rr <= WW'((32'(gnt_warp) + 1) % WARPS);
      end
    end
endmodule
