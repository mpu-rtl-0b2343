// regmov_engine_fb: far-bank register move engine of a subcore.
//
// One request moves one warp register across the TSVs. To the near bank (mv_to = NEAR) it
// reads the far-bank register file, sends a register-write message carrying the 1024-bit
// value and waits for the near-bank engine's acknowledge. To the far bank (mv_to = FAR) it
// sends a register-read request, waits for the returned value and writes it, all lanes, into
// the far-bank register file. mv_done pulses for one cycle when the copy is in place.
// The request/reply exchange between the two engines follows the paper; the message format
// and the single outstanding move are this design's choices. Message tag 0 marks replies
// that belong to this engine.
// Timing: TSV transfer time both ways (set by the arbiters) plus 3 cycles to read and send
// and 2 to write back.
module regmov_engine_fb
  import mpu_pkg::*;
#(
  parameter int unsigned SUBCORE_ID = 0,
  parameter int unsigned FBR        = mpu_pkg::FB_REGS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mv_req,
  input  logic [WARP_W-1:0] mv_warp,
  input  logic [4:0]        mv_reg,
  input  loc_e              mv_to,
  output logic              mv_done,
  // far-bank register file port
  output logic [$clog2(NUM_WARPS*FBR)-1:0] rf_raddr,
  input  vreg_t             rf_rdata,
  output logic              rf_we,
  output logic [$clog2(NUM_WARPS*FBR)-1:0] rf_waddr,
  output vreg_t             rf_wdata,
  // TSV
  output logic              tx_valid,
  input  logic              tx_ready,
  output tsv_msg_t          tx_msg,
  input  logic              rx_valid,   // M_REG_DATA or M_WR_ACK with tag 0
  input  tsv_msg_t          rx_msg
);
  typedef enum logic [2:0] { S_IDLE, S_READ, S_CAP, S_SEND, S_WAIT, S_WRITE } state_e;
  state_e st;
  logic [WARP_W-1:0] warp;
  logic [4:0] rg;
  loc_e to;
  vreg_t data;

  assign rf_raddr = ($clog2(NUM_WARPS*FBR))'(warp * FBR + rg);
  assign rf_waddr = rf_raddr;
  assign rf_we    = (st == S_WRITE);
  assign rf_wdata = data;
  assign mv_done  = (st == S_WRITE) || (st == S_WAIT && to == LOC_NEAR && rx_valid && rx_msg.kind == M_WR_ACK);

  always_comb begin
    tx_msg        = '0;
    tx_msg.kind   = (to == LOC_NEAR) ? M_REG_WR : M_REG_RD;
    tx_msg.req    = 3'(SUBCORE_ID);
    tx_msg.nbu    = 2'(SUBCORE_ID);
    tx_msg.warp   = warp;
    tx_msg.reg_id = rg;
    tx_msg.mask   = '1;
    tx_msg.data   = data;
    tx_msg.tag    = 5'd0;
  end
  assign tx_valid = (st == S_SEND);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; warp <= '0; rg <= '0; to <= LOC_NONE; data <= '0;
    end else unique case (st)
      S_IDLE:  if (mv_req) begin
                 warp <= mv_warp; rg <= mv_reg; to <= mv_to;
                 st <= (mv_to == LOC_NEAR) ? S_READ : S_SEND;
               end
      S_READ:  st <= S_CAP;                        // RF read data valid next cycle
      S_CAP:   begin data <= rf_rdata; st <= S_SEND; end
      S_SEND:  if (tx_ready) st <= S_WAIT;
      S_WAIT:  if (rx_valid) begin
                 if (to == LOC_FAR && rx_msg.kind == M_REG_DATA) begin
                   data <= rx_msg.data; st <= S_WRITE;
                 end else if (to == LOC_NEAR && rx_msg.kind == M_WR_ACK) st <= S_IDLE;
               end
      S_WRITE: st <= S_IDLE;
      default: st <= S_IDLE;
    endcase
endmodule
