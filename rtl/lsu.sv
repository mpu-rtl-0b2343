// lsu: the load-store unit of a subcore, extended for near-bank offloading.
//
// It takes a ld.global or st.global whose address register has been collected far-bank and
// forms the 32 lane addresses (src0 + imm). Then, as the paper describes:
//  (1) access range check: lanes whose address lies in another core are remote, the rest
//      local; the remote lanes leave through the network port as one request;
//  (3) divergence check: every lane must be active and local ("uniform threads");
//  (4) coalescing check: lane l must address leading + 4*l ("all accesses coalesced");
//  (5) NBU_id compare: every address must lie in the NBU paired with this subcore, the NBU
//      whose register file holds the warp's near-bank registers ("reg & DRAM collocated").
//  (6) If all three hold, only the leading address, the register number and the NBU_id go
//      down the TSVs and the NBU's LSU-Extension performs the whole access.
//  (7) Otherwise each local lane becomes one word transaction to the NBU that owns its
//      address; returned local and remote words are gathered, and a load's result is sent as
//      one register write to the near-bank register file.
// For a non-offloaded store the data register (near-bank by the register policy) is first
// read from the NBU with a register-read message; that fetch is this design's choice, since the
// paper details only the load path. Word (not column) transactions for step (7) are also this
// design's simplification. One instruction is handled at a time. done pulses when the access
// is complete and the instruction may commit. Replies for this unit carry tag 1 on register
// messages and the lane number on DRAM word messages.
module lsu
  import mpu_pkg::*;
#(
  parameter int unsigned SUBCORE_ID = 0,
  parameter int unsigned CORE_ID    = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WARP_W-1:0] in_warp,
  input  instr_t            in_instr,
  input  mask_t             in_mask,
  input  vreg_t             in_addr_reg,     // src0 values
  // TSV (down / up)
  output logic              tx_valid,
  input  logic              tx_ready,
  output tsv_msg_t          tx_msg,
  input  logic              rx_valid,        // replies addressed to this LSU
  input  tsv_msg_t          rx_msg,
  // network (remote lanes)
  output logic              rem_valid,
  input  logic              rem_ready,
  output logic              rem_store,
  output mask_t             rem_mask,
  output logic [LANES-1:0][31:0] rem_addr,
  output vreg_t             rem_wdata,
  input  logic              rem_resp_valid,
  input  vreg_t             rem_resp_data,
  // completion
  output logic              done,
  output logic [WARP_W-1:0] done_warp,
  output instr_t            done_instr,
  // statistics
  output logic              st_offload,      // pulses for an offloaded ld/st.global
  output logic              st_split,        // pulses for a ld/st split into transactions
  output logic              st_remote        // pulses when remote lanes are sent out
);
  typedef enum logic [3:0] { S_IDLE, S_CHECK, S_OFF, S_OFF_WAIT, S_FETCH, S_FETCH_WAIT,
                             S_TXN, S_GATHER, S_WB, S_WB_WAIT, S_DONE } state_e;
  state_e st;
  logic [WARP_W-1:0] warp;
  instr_t ins;
  mask_t  mask, lmask, rmask, pend_l, todo_l;
  logic   rem_pend, rem_sent;
  logic [LANES-1:0][31:0] addr;
  vreg_t  data;            // store data, or gathered load data
  logic   store;

  assign in_ready = (st == S_IDLE);
  logic [4:0] reg_no;
  assign reg_no = store ? ins.src1 : ins.dst;

  // ---- checks (combinational on latched addresses) ----
  logic uniform, coalesced, colloc;
  always_comb begin
    uniform = (lmask == '1);
    coalesced = 1'b1; colloc = 1'b1;
    for (int l = 0; l < LANES; l++) begin
      if (addr[l] != addr[0] + 32'(4 * l)) coalesced = 1'b0;
      if (addr_nbu(addr[l]) != 2'(SUBCORE_ID)) colloc = 1'b0;
    end
  end

  // lowest lane still to send in step (7)
  logic [4:0] nxt;
  always_comb begin
    nxt = '0;
    for (int l = LANES - 1; l >= 0; l--) if (todo_l[l]) nxt = 5'(l);
  end

  always_comb begin
    tx_msg = '0;
    tx_msg.req = 3'(SUBCORE_ID);
    tx_msg.warp = warp;
    tx_msg.reg_id = reg_no;
    tx_msg.mask = mask;
    tx_msg.nbu = 2'(SUBCORE_ID);
    tx_msg.tag = 5'd1;
    tx_valid = 1'b0;
    unique case (st)
      S_OFF: begin
        tx_valid = 1'b1; tx_msg.kind = store ? M_STG_OFF : M_LDG_OFF; tx_msg.addr = addr[0];
        tx_msg.instr = ins;
      end
      S_FETCH: begin tx_valid = 1'b1; tx_msg.kind = M_REG_RD; end
      S_TXN: if (todo_l != '0) begin
        tx_valid = 1'b1; tx_msg.kind = store ? M_DRAM_WR : M_DRAM_RD;
        tx_msg.addr = addr[nxt]; tx_msg.nbu = addr_nbu(addr[nxt]); tx_msg.tag = nxt;
        tx_msg.data = REG_W'(data[32*nxt +: 32]);
      end
      S_WB: begin tx_valid = 1'b1; tx_msg.kind = M_REG_WR; tx_msg.data = data; end
      default: ;
    endcase
  end

  assign rem_valid = (st == S_TXN || st == S_GATHER) && rem_pend && !rem_sent;
  assign rem_store = store;
  assign rem_mask  = rmask;
  assign rem_addr  = addr;
  assign rem_wdata = data;

  assign done       = (st == S_DONE);
  assign done_warp  = warp;
  assign done_instr = ins;
  assign st_offload = (st == S_OFF) && tx_ready;
  assign st_split   = (st == S_CHECK) && !(uniform && coalesced && colloc && rmask == '0);
  assign st_remote  = rem_valid && rem_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; warp <= '0; ins <= '0; mask <= '0; lmask <= '0; rmask <= '0;
      pend_l <= '0; todo_l <= '0; rem_pend <= 1'b0; rem_sent <= 1'b0; addr <= '0;
      data <= '0; store <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          warp <= in_warp; ins <= in_instr; mask <= in_mask; store <= (in_instr.op == OP_STG);
          data <= '0;
          for (int l = 0; l < LANES; l++) begin
            logic [31:0] a;
            a = in_addr_reg[32*l +: 32] + in_instr.imm;
            addr[l]  <= a;
            lmask[l] <= in_mask[l] && (addr_core(a) == 4'(CORE_ID));   // (1) range check
            rmask[l] <= in_mask[l] && (addr_core(a) != 4'(CORE_ID));
          end
          st <= S_CHECK;
        end
        S_CHECK: begin                                                 // (3)(4)(5)
          rem_pend <= (rmask != '0);
          rem_sent <= 1'b0;
          if (uniform && coalesced && colloc) st <= S_OFF;             // (6)
          else begin
            todo_l <= lmask; pend_l <= lmask;
            st <= store ? S_FETCH : S_TXN;                             // (7)
          end
        end
        S_OFF:      if (tx_ready) st <= S_OFF_WAIT;
        S_OFF_WAIT: if (rx_valid && rx_msg.kind == M_DONE) st <= S_DONE;
        S_FETCH:    if (tx_ready) st <= S_FETCH_WAIT;
        S_FETCH_WAIT: if (rx_valid && rx_msg.kind == M_REG_DATA) begin
          data <= rx_msg.data; st <= S_TXN;
        end
        S_TXN, S_GATHER: begin
          if (st == S_TXN && tx_valid && tx_ready) todo_l[nxt] <= 1'b0;
          if (st == S_TXN && todo_l == '0) st <= S_GATHER;
          if (rem_valid && rem_ready) rem_sent <= 1'b1;
          if (rx_valid && (rx_msg.kind == M_DRAM_DATA || rx_msg.kind == M_DRAM_ACK)) begin
            pend_l[rx_msg.tag] <= 1'b0;
            if (!store) data[32*rx_msg.tag +: 32] <= rx_msg.data[31:0];
          end
          if (rem_resp_valid) begin
            rem_pend <= 1'b0;
            if (!store)
              for (int l = 0; l < LANES; l++)
                if (rmask[l]) data[32*l +: 32] <= rem_resp_data[32*l +: 32];
          end
          if (st == S_GATHER && pend_l == '0 && !rem_pend) st <= store ? S_DONE : S_WB;
        end
        S_WB:      if (tx_ready) st <= S_WB_WAIT;
        S_WB_WAIT: if (rx_valid && rx_msg.kind == M_WR_ACK) st <= S_DONE;
        S_DONE:    st <= S_IDLE;
        default:   st <= S_IDLE;
      endcase
    end
endmodule
