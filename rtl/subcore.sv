// subcore: the base-logic-die half of the hybrid SIMT pipeline (one of four per core).
//
// Front end: each warp has a one-entry instruction buffer filled from the instruction cache at
// the pc and mask on top of its SIMT stack. The warp scheduler picks, round-robin, a warp whose
// buffered instruction has no scoreboard hazard; NOP and EXIT finish at issue, everything else
// goes to the instruction offload engine, which consults the register track table, moves
// registers through the far-bank register move engine if needed, and dispatches:
//  - far-bank: far-bank operand collector -> far-bank ALU -> far-bank writeback -> commit;
//    a branch is resolved after the collector (lanes with src0 != 0 are taken) and updates the
//    SIMT stack; a warp fetches nothing while its branch is unresolved;
//  - ld/st.global: far-bank operand collector (address register) -> LSU;
//  - near-bank: an offload message down the TSVs; the NBU's completion message commits it.
// Commit clears the scoreboard. All traffic to the NBUs leaves through one TSV port (LSU
// first, then register moves, then offloads); replies are routed inside by kind and tag.
// The block structure is the paper's (Fig. 2 subcore); buffer sizes, the single-issue
// in-order front end and the arbitration order are this design's choices.
// done is high when every launched warp has exited and nothing is in flight.
module subcore
  import mpu_pkg::*;
#(
  parameter int unsigned SUBCORE_ID = 0,
  parameter int unsigned CORE_ID    = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              launch,
  input  logic [WARP_W:0]   launch_n,
  input  logic [15:0]       start_pc,
  output logic              done,
  // instruction cache port
  output logic [15:0]       fetch_pc,
  input  instr_t            fetch_instr,
  // TSV
  output logic              tx_valid,
  input  logic              tx_ready,
  output tsv_msg_t          tx_msg,
  input  logic              rx_valid,
  input  tsv_msg_t          rx_msg,
  // network (remote lanes of ld/st.global)
  output logic              rem_valid,
  input  logic              rem_ready,
  output logic              rem_store,
  output mask_t             rem_mask,
  output logic [LANES-1:0][31:0] rem_addr,
  output vreg_t             rem_wdata,
  input  logic              rem_resp_valid,
  input  vreg_t             rem_resp_data,
  // statistics pulses
  output logic              st_issue,
  output logic              st_nb_offload,
  output logic              st_reg_move,
  output logic              st_ldst_offload,
  output logic              st_ldst_split,
  output logic              st_remote,
  output logic              st_diverge,
  output logic              st_commit_nb
);
  localparam int unsigned W  = NUM_WARPS;
  localparam int unsigned AW = $clog2(W * FB_REGS);

  // ---------------- warp state ----------------
  logic [W-1:0] ib_v, brp;
  instr_t       ib_i [W];
  mask_t        ib_m [W];
  logic [W-1:0] active;
  logic         all_exited;

  // ---------------- fetch ----------------
  logic [WARP_W-1:0] fptr, fw;
  logic fvalid;
  always_comb begin
    fvalid = 1'b0; fw = fptr;
    for (int k = W - 1; k >= 0; k--) begin
      logic [WARP_W-1:0] w;
      w = WARP_W'((32'(fptr) + 32'(k)) % W);
      if (active[w] && !ib_v[w] && !brp[w]) begin fvalid = 1'b1; fw = w; end
    end
  end
  mask_t stk_mask;
  logic [15:0] stk_pc;

  // ---------------- scoreboard / issue ----------------
  logic [W-1:0][FB_REGS-1:0] pend;
  logic sb_empty;
  logic [W-1:0] ready;
  logic ioe_in_ready;
  always_comb
    for (int w = 0; w < W; w++) begin
      instr_t i; logic hz;
      i  = ib_i[w];
      hz = (reads_src0(i.op) && pend[w][i.src0]) || (reads_src1(i.op) && pend[w][i.src1]) ||
           (writes_dst(i.op) && pend[w][i.dst]) || (i.op == OP_MAD && pend[w][i.dst]);
      if (i.op == OP_EXIT) hz = (pend[w] != '0);
      ready[w] = ib_v[w] && !hz && ((i.op inside {OP_NOP, OP_EXIT}) || ioe_in_ready);
    end

  logic gv; logic [WARP_W-1:0] gw;
  instr_t gi;
  assign gi = ib_i[gw];
  logic issue;
  assign issue = gv;

  warp_scheduler #(.WARPS(W)) u_ws (
    .clk, .rst_n, .launch, .launch_n,
    .exit_en(issue && gi.op == OP_EXIT), .exit_warp(gw),
    .ready, .take(issue), .active, .gnt_valid(gv), .gnt_warp(gw), .all_exited);

  // ---------------- SIMT stack ----------------
  logic br_en; logic [WARP_W-1:0] br_warp; mask_t br_taken; instr_t br_i;
  simt_stack #(.WARPS(W)) u_stk (
    .clk, .rst_n, .init(launch), .init_pc(start_pc),
    .rd_warp(fw), .rd_pc(stk_pc), .rd_mask(stk_mask),
    .adv_en(issue && gi.op != OP_BRA), .adv_warp(gw),
    .br_en, .br_warp, .br_taken, .br_target(br_i.imm[15:0]), .br_reconv(br_i.imm[31:16]),
    .st_diverge);
  assign fetch_pc = stk_pc;

  // ---------------- commit bookkeeping ----------------
  logic [2:0] clr_en; logic [2:0][WARP_W-1:0] clr_w; logic [2:0][4:0] clr_r;
  scoreboard #(.WARPS(W), .REGS(FB_REGS), .NCLR(3)) u_sb (
    .clk, .rst_n, .set_en(issue && writes_dst(gi.op)), .set_warp(gw), .set_reg(gi.dst),
    .clr_en, .clr_warp(clr_w), .clr_reg(clr_r), .pend_o(pend), .empty(sb_empty));

  // ---------------- offload engine, track table, register moves ----------------
  logic [WARP_W-1:0] rtt_warp; logic [2:0][4:0] rtt_reg; logic [2:0] rtt_fb, rtt_nb;
  logic rtt_mv_en, rtt_wr_en; logic [4:0] rtt_mv_reg, rtt_wr_reg; loc_e rtt_mv_to, rtt_wr_loc;
  logic mv_req, mv_done; logic [WARP_W-1:0] mv_warp; logic [4:0] mv_reg; loc_e mv_to;
  logic [WARP_W-1:0] d_warp; instr_t d_instr; mask_t d_mask;
  logic fb_valid, fb_ready, lsu_valid, lsu_ready, nb_valid, nb_ready;

  instr_offload_engine u_ioe (
    .clk, .rst_n, .in_valid(issue && !(gi.op inside {OP_NOP, OP_EXIT})), .in_ready(ioe_in_ready),
    .in_warp(gw), .in_instr(gi), .in_mask(ib_m[gw]),
    .rtt_warp, .rtt_reg, .rtt_fb, .rtt_nb, .rtt_mv_en, .rtt_mv_reg, .rtt_mv_to,
    .rtt_wr_en, .rtt_wr_reg, .rtt_wr_loc,
    .mv_req, .mv_warp, .mv_reg, .mv_to, .mv_done,
    .d_warp, .d_instr, .d_mask, .fb_valid, .fb_ready, .lsu_valid, .lsu_ready,
    .nb_valid, .nb_ready, .st_offload(st_nb_offload), .st_move(st_reg_move));

  reg_track_table u_rtt (
    .clk, .rst_n, .lk_warp(rtt_warp), .lk_reg(rtt_reg), .lk_fb(rtt_fb), .lk_nb(rtt_nb),
    .mv_en(rtt_mv_en), .mv_warp(rtt_warp), .mv_reg(rtt_mv_reg), .mv_to(rtt_mv_to),
    .wr_en(rtt_wr_en), .wr_warp(d_warp), .wr_reg(rtt_wr_reg), .wr_loc(rtt_wr_loc));

  // far-bank register file: read 0 collector, read 1 move engine; write 0 ALU, write 1 move
  logic [1:0][AW-1:0] rf_raddr; vreg_t [1:0] rf_rdata;
  logic [1:0] rf_we; logic [1:0][AW-1:0] rf_waddr; mask_t [1:0] rf_wmask; vreg_t [1:0] rf_wdata;
  register_file #(.WARPS(W), .REGS(FB_REGS), .LANES(LANES), .NRD(2), .NWR(2)) u_fbrf (
    .clk, .rd_addr(rf_raddr), .rd_data(rf_rdata),
    .wr_en(rf_we), .wr_addr(rf_waddr), .wr_mask(rf_wmask), .wr_data(rf_wdata));

  logic rm_tx_valid, rm_tx_ready, rm_rx_valid; tsv_msg_t rm_tx_msg;
  regmov_engine_fb #(.SUBCORE_ID(SUBCORE_ID)) u_rmfb (
    .clk, .rst_n, .mv_req, .mv_warp, .mv_reg, .mv_to, .mv_done,
    .rf_raddr(rf_raddr[1]), .rf_rdata(rf_rdata[1]), .rf_we(rf_we[1]), .rf_waddr(rf_waddr[1]),
    .rf_wdata(rf_wdata[1]),
    .tx_valid(rm_tx_valid), .tx_ready(rm_tx_ready), .tx_msg(rm_tx_msg),
    .rx_valid(rm_rx_valid), .rx_msg);
  assign rf_wmask[1] = '1;

  // ---------------- far-bank operand collector and its consumers ----------------
  logic oc_in_ready, oc_valid, oc_ready; logic [WARP_W-1:0] oc_warp; instr_t oc_i; mask_t oc_m;
  vreg_t oc_a, oc_b, oc_c;
  operand_collector #(.REGS(FB_REGS)) u_oc (
    .clk, .rst_n, .in_valid(fb_valid || lsu_valid), .in_ready(oc_in_ready),
    .in_warp(d_warp), .in_instr(d_instr), .in_mask(d_mask),
    .rf_raddr(rf_raddr[0]), .rf_rdata(rf_rdata[0]),
    .out_valid(oc_valid), .out_ready(oc_ready), .out_warp(oc_warp), .out_instr(oc_i),
    .out_mask(oc_m), .a(oc_a), .b(oc_b), .c(oc_c));
  assign fb_ready  = oc_in_ready;
  assign lsu_ready = oc_in_ready;

  logic oc_is_mem, oc_is_br;
  assign oc_is_mem = oc_i.op inside {OP_LDG, OP_STG};
  assign oc_is_br  = (oc_i.op == OP_BRA);

  // branch resolution
  assign br_en   = oc_valid && oc_is_br;
  assign br_warp = oc_warp;
  assign br_i    = oc_i;
  always_comb
    for (int l = 0; l < LANES; l++) br_taken[l] = oc_m[l] && (oc_a[32*l +: 32] != 0);

  // far-bank ALU and writeback
  logic alu_in, alu_out; vreg_t alu_res;
  logic [WARP_W-1:0] wb_warp; instr_t wb_i; mask_t wb_m;
  assign alu_in = oc_valid && !oc_is_mem && !oc_is_br;
  vector_alu u_alu (
    .clk, .rst_n, .in_valid(alu_in), .op(oc_i.op), .imm(oc_i.imm),
    .tid_base(32'(((CORE_ID * NUM_SUBCORES + SUBCORE_ID) * W + 32'(oc_warp)) * LANES)),
    .mask(oc_m), .a(oc_a), .b(oc_b), .c(oc_c), .out_valid(alu_out), .result(alu_res));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin wb_warp <= '0; wb_i <= '0; wb_m <= '0; end
    else if (alu_in) begin wb_warp <= oc_warp; wb_i <= oc_i; wb_m <= oc_m; end
  assign rf_we[0]    = alu_out;
  assign rf_waddr[0] = AW'(wb_warp * FB_REGS + wb_i.dst);
  assign rf_wmask[0] = wb_m;
  assign rf_wdata[0] = alu_res;

  // LSU
  logic lsu_in_ready, lsu_done; logic [WARP_W-1:0] lsu_dw; instr_t lsu_di;
  logic l_tx_valid, l_tx_ready, l_rx_valid; tsv_msg_t l_tx_msg;
  assign oc_ready = oc_is_mem ? lsu_in_ready : 1'b1;
  lsu #(.SUBCORE_ID(SUBCORE_ID), .CORE_ID(CORE_ID)) u_lsu (
    .clk, .rst_n, .in_valid(oc_valid && oc_is_mem), .in_ready(lsu_in_ready),
    .in_warp(oc_warp), .in_instr(oc_i), .in_mask(oc_m), .in_addr_reg(oc_a),
    .tx_valid(l_tx_valid), .tx_ready(l_tx_ready), .tx_msg(l_tx_msg),
    .rx_valid(l_rx_valid), .rx_msg,
    .rem_valid, .rem_ready, .rem_store, .rem_mask, .rem_addr, .rem_wdata,
    .rem_resp_valid, .rem_resp_data,
    .done(lsu_done), .done_warp(lsu_dw), .done_instr(lsu_di),
    .st_offload(st_ldst_offload), .st_split(st_ldst_split), .st_remote);

  // ---------------- TSV down: LSU, then register moves, then offloads ----------------
  tsv_msg_t off_msg;
  always_comb begin
    off_msg = '0;
    off_msg.kind = M_OFFLOAD; off_msg.req = 3'(SUBCORE_ID); off_msg.nbu = 2'(SUBCORE_ID);
    off_msg.warp = d_warp; off_msg.instr = d_instr; off_msg.mask = d_mask; off_msg.tag = 5'd2;
  end
  always_comb begin
    tx_valid = l_tx_valid || rm_tx_valid || nb_valid;
    tx_msg   = l_tx_valid ? l_tx_msg : rm_tx_valid ? rm_tx_msg : off_msg;
  end
  assign l_tx_ready  = tx_ready && l_tx_valid;
  assign rm_tx_ready = tx_ready && !l_tx_valid && rm_tx_valid;
  assign nb_ready    = tx_ready && !l_tx_valid && !rm_tx_valid;

  // ---------------- TSV up: route replies ----------------
  logic nb_done;
  assign rm_rx_valid = rx_valid && (rx_msg.kind inside {M_REG_DATA, M_WR_ACK}) && rx_msg.tag == 5'd0;
  assign l_rx_valid  = rx_valid && ((rx_msg.kind inside {M_REG_DATA, M_WR_ACK, M_DONE} && rx_msg.tag == 5'd1) ||
                                    (rx_msg.kind inside {M_DRAM_DATA, M_DRAM_ACK}));
  assign nb_done     = rx_valid && rx_msg.kind == M_DONE && rx_msg.tag == 5'd2;
  assign st_commit_nb = nb_done;

  // ---------------- commit ----------------
  assign clr_en[0] = alu_out && writes_dst(wb_i.op);
  assign clr_w[0]  = wb_warp;  assign clr_r[0] = wb_i.dst;
  assign clr_en[1] = lsu_done && lsu_di.op == OP_LDG;
  assign clr_w[1]  = lsu_dw;   assign clr_r[1] = lsu_di.dst;
  assign clr_en[2] = nb_done && writes_dst(rx_msg.instr.op);
  assign clr_w[2]  = rx_msg.warp; assign clr_r[2] = rx_msg.instr.dst;

  // in-flight count: dispatched by the offload engine, not yet committed
  logic [7:0] inflight;
  logic disp;
  assign disp = (fb_valid && fb_ready) || (lsu_valid && lsu_ready) || (nb_valid && nb_ready);
  assign done = all_exited && inflight == 0 && ioe_in_ready && sb_empty;
  assign st_issue = issue;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ib_v <= '0; brp <= '0; fptr <= '0; inflight <= '0;
      for (int w = 0; w < W; w++) begin ib_i[w] <= '0; ib_m[w] <= '0; end
    end else begin
      inflight <= inflight + 8'(disp) - 8'(alu_out) - 8'(br_en) - 8'(lsu_done) - 8'(nb_done);
      if (launch) begin
        ib_v <= '0; brp <= '0;
      end else begin
        if (fvalid) begin
          ib_v[fw] <= 1'b1; ib_i[fw] <= fetch_instr; ib_m[fw] <= stk_mask;
          fptr <= WARP_W'((32'(fw) + 1) % W);
        end
        if (issue) begin
          ib_v[gw] <= 1'b0;
          if (gi.op == OP_BRA) brp[gw] <= 1'b1;
        end
        if (br_en) brp[br_warp] <= 1'b0;
      end
    end
endmodule
