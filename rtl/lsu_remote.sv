// lsu_remote: serves ld/st.global requests that other cores send to this core.
//
// A remote request (from the network interface) carries up to 32 lane addresses, a lane mask
// and, for a store, the data words. LSU-Remote decodes it into one word transaction per active
// lane, each sent down the TSVs to the NBU named by the address's NBU field, collects the
// returned words (or write acknowledges), and then offers a response carrying the requester's
// core, subcore and warp and the gathered data, for the network interface to encode and send
// back. One request is handled at a time. The flow is the paper's; the request and response
// fields and the per-lane word transactions are this design's choices. Replies for this unit
// carry requester number 4 and the lane number as tag.
module lsu_remote
  import mpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_store,
  input  mask_t             req_mask,
  input  logic [LANES-1:0][31:0] req_addr,
  input  vreg_t             req_wdata,
  input  logic [7:0]        req_src,        // requesting {core, subcore, ...}, returned as is
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [7:0]        rsp_src,
  output vreg_t             rsp_data,
  // TSV
  output logic              tx_valid,
  input  logic              tx_ready,
  output tsv_msg_t          tx_msg,
  input  logic              rx_valid,       // M_DRAM_DATA / M_DRAM_ACK with req = 4
  input  tsv_msg_t          rx_msg
);
  typedef enum logic [1:0] { S_IDLE, S_SEND, S_WAIT, S_RESP } state_e;
  state_e st;
  logic store;
  mask_t left, pend;
  logic [LANES-1:0][31:0] addr;
  vreg_t data;
  logic [7:0] src;
  logic [4:0] nxt;

  always_comb begin
    nxt = '0;
    for (int l = LANES - 1; l >= 0; l--) if (left[l]) nxt = 5'(l);
  end

  assign req_ready = (st == S_IDLE);
  assign rsp_valid = (st == S_RESP);
  assign rsp_src   = src;
  assign rsp_data  = data;
  assign tx_valid  = (st == S_SEND) && left != '0;
  always_comb begin
    tx_msg = '0;
    tx_msg.kind = store ? M_DRAM_WR : M_DRAM_RD;
    tx_msg.req  = 3'(REQ_LSUR);
    tx_msg.nbu  = addr_nbu(addr[nxt]);
    tx_msg.addr = addr[nxt];
    tx_msg.tag  = nxt;
    tx_msg.data = REG_W'(data[32*nxt +: 32]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; store <= 1'b0; left <= '0; pend <= '0; addr <= '0; data <= '0; src <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (req_valid) begin
          store <= req_store; left <= req_mask; pend <= req_mask; addr <= req_addr;
          data <= req_store ? req_wdata : '0; src <= req_src;
          st <= (req_mask == '0) ? S_RESP : S_SEND;
        end
        S_SEND: begin
          if (tx_valid && tx_ready) left[nxt] <= 1'b0;
          if (left == '0) st <= S_WAIT;
        end
        S_WAIT: if (pend == '0) st <= S_RESP;
        S_RESP: if (rsp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      if (rx_valid && (st == S_SEND || st == S_WAIT)) begin
        pend[rx_msg.tag] <= 1'b0;
        if (!store) data[32*rx_msg.tag +: 32] <= rx_msg.data[31:0];
      end
    end
endmodule
