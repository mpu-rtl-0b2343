// nbu: near-bank unit, the DRAM-die half of the hybrid pipeline (four per core, all on the
// core's DRAM die, each beside its own 4 banks).
//
// Messages from the TSVs are steered by kind:
//  - an offloaded instruction goes to the near-bank operand collector, then either to the
//    near-bank ALU or, for ld/st.shared, to the core's shared memory; the result is written
//    back into the near-bank register file and a completion message returns up the TSVs so
//    the subcore can commit (this is the paper's near-bank instruction data path);
//  - register reads/writes go to the near-bank register move engine;
//  - DRAM word transactions and offloaded coalesced ld/st.global go to the LSU-Extension,
//    which drives the near-bank memory controller.
// The memory controller's command bus and the returned read data are ports: the DRAM banks
// themselves are outside the logic. Replies leave through one TSV port, completion first,
// then LSU-Extension replies, then register moves. The register file has three read and three
// write ports, one per client, instead of the arbitration a single-ported macro would need.
// The composition is the paper's (Fig. 2 NBU); the steering and priority are this design's.
module nbu
  import mpu_pkg::*;
#(
  parameter int unsigned NUM_ROWBUF_P = mpu_pkg::NUM_ROWBUF,
  parameter int unsigned T_REFI = 3900
) (
  input  logic              clk,
  input  logic              rst_n,
  // TSV down / up
  input  logic              rx_valid,
  output logic              rx_ready,
  input  tsv_msg_t          rx_msg,
  output logic              tx_valid,
  input  logic              tx_ready,
  output tsv_msg_t          tx_msg,
  // shared memory port
  output logic              sm_valid,
  input  logic              sm_ready,
  output logic              sm_write,
  output mask_t             sm_mask,
  output logic [LANES-1:0][31:0] sm_addr,
  output vreg_t             sm_wdata,
  input  logic              sm_rsp_valid,
  input  vreg_t             sm_rsp_data,
  // DRAM banks
  output dram_cmd_e         cmd,
  output logic [1:0]        cmd_bank,
  output logic [1:0]        cmd_sa,
  output logic [13:0]       cmd_row,
  output logic [4:0]        cmd_col,
  output logic [BANK_IO_W-1:0]   cmd_wdata,
  output logic [BANK_IO_W/8-1:0] cmd_wstrb,
  input  logic              rd_valid,
  input  logic [BANK_IO_W-1:0]   rd_data,
  // statistics
  output logic              st_rb_hit,
  output logic              st_rb_act,
  output logic              st_refresh,
  output logic              st_smem
);
  localparam int unsigned AW = $clog2(NUM_WARPS * NB_REGS);

  // ---------------- near-bank register file ----------------
  logic [2:0][AW-1:0] rf_raddr; vreg_t [2:0] rf_rdata;
  logic [2:0] rf_we; logic [2:0][AW-1:0] rf_waddr; mask_t [2:0] rf_wmask; vreg_t [2:0] rf_wdata;
  register_file #(.WARPS(NUM_WARPS), .REGS(NB_REGS), .LANES(LANES), .NRD(3), .NWR(3)) u_nbrf (
    .clk, .rd_addr(rf_raddr), .rd_data(rf_rdata),
    .wr_en(rf_we), .wr_addr(rf_waddr), .wr_mask(rf_wmask), .wr_data(rf_wdata));

  // ---------------- steering ----------------
  logic to_oc, to_rm, to_lx;
  assign to_oc = rx_msg.kind == M_OFFLOAD;
  assign to_rm = rx_msg.kind inside {M_REG_RD, M_REG_WR};
  assign to_lx = !to_oc && !to_rm;
  logic oc_in_ready, rm_rx_ready, lx_rx_ready;
  assign rx_ready = to_oc ? oc_in_ready : to_rm ? rm_rx_ready : lx_rx_ready;

  // ---------------- near-bank instruction path ----------------
  logic oc_valid, oc_ready; logic [WARP_W-1:0] oc_warp; instr_t oc_i; mask_t oc_m;
  vreg_t oc_a, oc_b, oc_c;
  logic [2:0] oc_req;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) oc_req <= '0;
    else if (rx_valid && to_oc && oc_in_ready) oc_req <= rx_msg.req;
  operand_collector #(.REGS(NB_REGS)) u_oc (
    .clk, .rst_n, .in_valid(rx_valid && to_oc), .in_ready(oc_in_ready),
    .in_warp(rx_msg.warp), .in_instr(rx_msg.instr), .in_mask(rx_msg.mask),
    .rf_raddr(rf_raddr[0]), .rf_rdata(rf_rdata[0]),
    .out_valid(oc_valid), .out_ready(oc_ready), .out_warp(oc_warp), .out_instr(oc_i),
    .out_mask(oc_m), .a(oc_a), .b(oc_b), .c(oc_c));

  typedef enum logic [2:0] { E_IDLE, E_ALU, E_SMEM, E_SWAIT, E_WB, E_DONE } estate_e;
  estate_e es;
  logic [WARP_W-1:0] e_warp; instr_t e_i; mask_t e_m; logic [2:0] e_req;
  vreg_t e_res, e_b;
  logic [LANES-1:0][31:0] e_addr;
  logic alu_out; vreg_t alu_res;
  assign oc_ready = (es == E_IDLE);

  vector_alu u_alu (
    .clk, .rst_n, .in_valid(oc_valid && es == E_IDLE && !is_smem_op(oc_i.op)),
    .op(oc_i.op), .imm(oc_i.imm), .tid_base(32'd0), .mask(oc_m), .a(oc_a), .b(oc_b), .c(oc_c),
    .out_valid(alu_out), .result(alu_res));

  assign sm_valid = (es == E_SMEM);
  assign sm_write = (e_i.op == OP_STS);
  assign sm_mask  = e_m;
  assign sm_addr  = e_addr;
  assign sm_wdata = e_b;
  assign st_smem  = sm_valid && sm_ready;

  assign rf_we[0]    = (es == E_WB) && writes_dst(e_i.op);
  assign rf_waddr[0] = AW'(e_warp * NB_REGS + (32'(e_i.dst) % NB_REGS));
  assign rf_wmask[0] = e_m;
  assign rf_wdata[0] = e_res;

  tsv_msg_t done_msg;
  always_comb begin
    done_msg = '0;
    done_msg.kind = M_DONE; done_msg.req = e_req; done_msg.warp = e_warp; done_msg.instr = e_i;
    done_msg.mask = e_m; done_msg.tag = 5'd2; done_msg.reg_id = e_i.dst;
  end

  logic ex_tx_valid, ex_tx_ready;
  assign ex_tx_valid = (es == E_DONE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      es <= E_IDLE; e_warp <= '0; e_i <= '0; e_m <= '0; e_req <= '0; e_res <= '0; e_b <= '0;
      e_addr <= '0;
    end else unique case (es)
      E_IDLE: if (oc_valid) begin
        e_warp <= oc_warp; e_i <= oc_i; e_m <= oc_m; e_req <= oc_req; e_b <= oc_b;
        for (int l = 0; l < LANES; l++) e_addr[l] <= oc_a[32*l +: 32] + oc_i.imm;
        es <= is_smem_op(oc_i.op) ? E_SMEM : E_ALU;
      end
      E_ALU:   if (alu_out) begin e_res <= alu_res; es <= E_WB; end
      E_SMEM:  if (sm_ready) es <= E_SWAIT;
      E_SWAIT: if (sm_rsp_valid) begin e_res <= sm_rsp_data; es <= E_WB; end
      E_WB:    es <= E_DONE;
      E_DONE:  if (ex_tx_ready) es <= E_IDLE;
      default: es <= E_IDLE;
    endcase

  // ---------------- register move engine ----------------
  logic rm_tx_valid, rm_tx_ready; tsv_msg_t rm_tx_msg; logic rm_re;
  regmov_engine_nb u_rmnb (
    .clk, .rst_n, .rx_valid(rx_valid && to_rm), .rx_ready(rm_rx_ready), .rx_msg,
    .rf_re(rm_re), .rf_raddr(rf_raddr[1]), .rf_rdata(rf_rdata[1]),
    .rf_we(rf_we[1]), .rf_waddr(rf_waddr[1]), .rf_wmask(rf_wmask[1]), .rf_wdata(rf_wdata[1]),
    .tx_valid(rm_tx_valid), .tx_ready(rm_tx_ready), .tx_msg(rm_tx_msg));

  // ---------------- LSU-Extension and memory controller ----------------
  logic lx_tx_valid, lx_tx_ready; tsv_msg_t lx_tx_msg; logic lx_re;
  logic mc_valid, mc_ready; mc_req_t mc_req;
  logic mc_rsp_valid, mc_rsp_ready, mc_rsp_write; logic [8:0] mc_rsp_tag;
  logic [BANK_IO_W-1:0] mc_rsp_data;
  lsu_extension u_lx (
    .clk, .rst_n, .rx_valid(rx_valid && to_lx), .rx_ready(lx_rx_ready), .rx_msg,
    .mc_valid, .mc_ready, .mc_req, .mc_rsp_valid, .mc_rsp_ready, .mc_rsp_write, .mc_rsp_tag,
    .mc_rsp_data,
    .rf_re(lx_re), .rf_raddr(rf_raddr[2]), .rf_rdata(rf_rdata[2]),
    .rf_we(rf_we[2]), .rf_waddr(rf_waddr[2]), .rf_wdata(rf_wdata[2]),
    .tx_valid(lx_tx_valid), .tx_ready(lx_tx_ready), .tx_msg(lx_tx_msg));
  assign rf_wmask[2] = '1;

  mem_ctrl #(.NUM_ROWBUF_P(NUM_ROWBUF_P), .T_REFI(T_REFI)) u_mc (
    .clk, .rst_n, .req_valid(mc_valid), .req_ready(mc_ready), .req(mc_req),
    .rsp_valid(mc_rsp_valid), .rsp_ready(mc_rsp_ready), .rsp_write(mc_rsp_write),
    .rsp_tag(mc_rsp_tag), .rsp_data(mc_rsp_data),
    .cmd, .cmd_bank, .cmd_sa, .cmd_row, .cmd_col, .cmd_wdata, .cmd_wstrb, .rd_valid, .rd_data,
    .st_hit(st_rb_hit), .st_act(st_rb_act), .st_ref(st_refresh));

  // ---------------- TSV up ----------------
  always_comb begin
    tx_valid = ex_tx_valid || lx_tx_valid || rm_tx_valid;
    tx_msg   = ex_tx_valid ? done_msg : lx_tx_valid ? lx_tx_msg : rm_tx_msg;
  end
  assign ex_tx_ready = tx_ready && ex_tx_valid;
  assign lx_tx_ready = tx_ready && !ex_tx_valid && lx_tx_valid;
  assign rm_tx_ready = tx_ready && !ex_tx_valid && !lx_tx_valid && rm_tx_valid;
endmodule
