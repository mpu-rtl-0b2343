// regmov_engine_nb: near-bank register move engine of an NBU.
//
// It serves the two register messages that arrive over the TSVs. A register-read request
// reads {warp, register} from the near-bank register file and returns the 1024-bit value to
// the requester. A register-write request writes the carried value, under its lane mask,
// into the near-bank register file and returns an acknowledge with the request's tag. The
// far-bank engine uses both for register moves; the LSU uses the write for the near-bank
// writeback of gathered load data. The exchange follows the paper; the one-request-at-a-time
// engine and the message format are this design's choices.
// Timing: a write is acknowledged 1 cycle after it is accepted; a read returns its data
// 3 cycles after it is accepted (address, registered RF read, capture), then waits for the TSV.
module regmov_engine_nb
  import mpu_pkg::*;
#(
  parameter int unsigned NBR = mpu_pkg::NB_REGS,
  localparam int unsigned AW = $clog2(NUM_WARPS*NBR)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_valid,
  output logic        rx_ready,
  input  tsv_msg_t    rx_msg,
  // near-bank register file
  output logic        rf_re,
  output logic [AW-1:0] rf_raddr,
  input  vreg_t       rf_rdata,
  output logic        rf_we,
  output logic [AW-1:0] rf_waddr,
  output mask_t       rf_wmask,
  output vreg_t       rf_wdata,
  // reply
  output logic        tx_valid,
  input  logic        tx_ready,
  output tsv_msg_t    tx_msg
);
  typedef enum logic [1:0] { S_IDLE, S_READ, S_CAP, S_REPLY } state_e;
  state_e st;
  tsv_msg_t m;

  assign rx_ready = (st == S_IDLE);
  assign rf_re    = (st == S_READ);
  assign rf_raddr = AW'(m.warp * NBR + m.reg_id);
  assign rf_we    = (st == S_IDLE) && rx_valid && rx_msg.kind == M_REG_WR;
  assign rf_waddr = AW'(rx_msg.warp * NBR + rx_msg.reg_id);
  assign rf_wmask = rx_msg.mask;
  assign rf_wdata = rx_msg.data;
  assign tx_valid = (st == S_REPLY);
  assign tx_msg   = m;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; m <= '0;
    end else unique case (st)
      S_IDLE: if (rx_valid) begin
        m <= rx_msg;
        if (rx_msg.kind == M_REG_RD) st <= S_READ;
        else begin
          m.kind <= M_WR_ACK; m.data <= '0; st <= S_REPLY;
        end
      end
      S_READ:  st <= S_CAP;
      S_CAP:   begin m.kind <= M_REG_DATA; m.data <= rf_rdata; st <= S_REPLY; end
      S_REPLY: if (tx_ready) st <= S_IDLE;
      default: st <= S_IDLE;
    endcase

  assert property (@(posedge clk) disable iff (!rst_n)
                   rx_valid && rx_ready |-> rx_msg.kind inside {M_REG_RD, M_REG_WR});
endmodule
