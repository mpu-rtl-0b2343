// tsv_arbiter: the arbitration logic in front of a core's TSV data bus, one per direction.
//
// N sources compete for the bus that links the base-die subcores with the core's NBUs on
// the DRAM die. A round-robin arbiter grants one message at a time. The 64-bit bus runs at
// twice the core clock, so it moves 128 bits per core cycle; a message holds the bus for
// ceil(bits / 128) cycles (msg_cycles in the package), then is presented at the far end with
// out_valid until the receiver takes it (out_ready). The next grant starts when the bus is
// free. Per-core bus width and clock are the paper's; the round-robin policy, the message
// sizes and delivering a whole message at once are this design's choices.
// Timing: a message granted (in_ready) in cycle t occupies the bus in cycles t+1 .. t+k,
// k = msg_cycles, and is offered (out_valid) from cycle t+k+1.
module tsv_arbiter
  import mpu_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       in_valid,
  output logic [N-1:0]       in_ready,
  input  tsv_msg_t [N-1:0]   in_msg,
  output logic               out_valid,
  input  logic               out_ready,
  output tsv_msg_t           out_msg,
  output logic [31:0]        st_busy_cycles   // cycles the bus carried data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] rr, gnt;
  logic any;
  logic [7:0] cnt;            // cycles left on the bus
  logic held;                 // message waiting at the far end

  always_comb begin
    gnt = rr; any = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      logic [IW-1:0] p;
      p = IW'((32'(rr) + 32'(k)) % N);
      if (in_valid[p]) begin gnt = p; any = 1'b1; end
    end
  end

  logic idle;
  assign idle = (cnt == 0) && !held;
  always_comb begin
    in_ready = '0;
    if (idle && any) in_ready[gnt] = 1'b1;
  end
  assign out_valid = held;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rr <= '0; cnt <= '0; held <= 1'b0; out_msg <= '0; st_busy_cycles <= '0;
    end else begin
      if (idle && any) begin
        out_msg <= in_msg[gnt];
        cnt <= 8'(msg_cycles(in_msg[gnt].kind));
        rr <= IW'((32'(gnt) + 1) % N);
      end else if (cnt != 0) begin
        cnt <= cnt - 8'd1;
        st_busy_cycles <= st_busy_cycles + 1;
        if (cnt == 8'd1) held <= 1'b1;
      end
      if (held && out_ready) held <= 1'b0;
    end
endmodule
