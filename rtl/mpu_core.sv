// mpu_core: one MPU core, the unit the paper's hybrid pipeline is built around.
//
// On the base logic die: four subcores (front end, far-bank register file and ALU, offload
// engine, register track table and move engine, LSU), the shared instruction cache and the
// LSU-Remote that serves other cores' requests. On the DRAM die, all on the same die so the
// shared memory needs no TSV: four NBUs (near-bank register file, operand collector, ALU,
// LSU-Extension, memory controller with multiple activated row buffers) and the shared
// memory. Between them: the core's 64-bit TSV bus, modelled as one arbitrated channel in each
// direction (subcores and LSU-Remote down, NBUs up), each moving 128 bits per core cycle.
// Down messages go to the NBU they name; up messages go to the subcore that asked, or to the
// LSU-Remote.
// Ports: kernel load (instruction write port) and launch; one DRAM command bus and read
// return per NBU, for the DRAM banks; the network side of each subcore's LSU (remote lanes)
// and of the LSU-Remote, for the network interface unit and router; event counters.
// A launch starts launch_n warps in every subcore at start_pc; done rises when all have
// exited and nothing is in flight. CORE_ID is the core's place in the processor: addresses
// whose top 4 bits differ from it are remote.
module mpu_core
  import mpu_pkg::*;
#(
  parameter int unsigned CORE_ID      = 0,
  parameter int unsigned NUM_ROWBUF_P = mpu_pkg::NUM_ROWBUF,
  parameter int unsigned T_REFI       = 3900
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel load and launch
  input  logic              prog_we,
  input  logic [13:0]       prog_addr,
  input  instr_t            prog_data,
  input  logic              launch,
  input  logic [WARP_W:0]   launch_n,
  input  logic [15:0]       start_pc,
  output logic              done,
  // DRAM banks, one command bus per NBU
  output dram_cmd_e [NUM_NBU-1:0]          dram_cmd,
  output logic [NUM_NBU-1:0][1:0]          dram_bank,
  output logic [NUM_NBU-1:0][1:0]          dram_sa,
  output logic [NUM_NBU-1:0][13:0]         dram_row,
  output logic [NUM_NBU-1:0][4:0]          dram_col,
  output logic [NUM_NBU-1:0][BANK_IO_W-1:0]   dram_wdata,
  output logic [NUM_NBU-1:0][BANK_IO_W/8-1:0] dram_wstrb,
  input  logic [NUM_NBU-1:0]               dram_rd_valid,
  input  logic [NUM_NBU-1:0][BANK_IO_W-1:0]   dram_rd_data,
  // network: remote lanes of each subcore's LSU
  output logic [NUM_SUBCORES-1:0]          rem_valid,
  input  logic [NUM_SUBCORES-1:0]          rem_ready,
  output logic [NUM_SUBCORES-1:0]          rem_store,
  output mask_t [NUM_SUBCORES-1:0]         rem_mask,
  output logic [NUM_SUBCORES-1:0][LANES-1:0][31:0] rem_addr,
  output vreg_t [NUM_SUBCORES-1:0]         rem_wdata,
  input  logic [NUM_SUBCORES-1:0]          rem_resp_valid,
  input  vreg_t [NUM_SUBCORES-1:0]         rem_resp_data,
  // network: requests from other cores, served by LSU-Remote
  input  logic              lr_req_valid,
  output logic              lr_req_ready,
  input  logic              lr_req_store,
  input  mask_t             lr_req_mask,
  input  logic [LANES-1:0][31:0] lr_req_addr,
  input  vreg_t             lr_req_wdata,
  input  logic [7:0]        lr_req_src,
  output logic              lr_rsp_valid,
  input  logic              lr_rsp_ready,
  output logic [7:0]        lr_rsp_src,
  output vreg_t             lr_rsp_data,
  // event counters
  output core_stats_t       stats
);
  localparam int unsigned NS = NUM_SUBCORES;
  localparam int unsigned NN = NUM_NBU;

  // ---------------- instruction cache ----------------
  logic [NS-1:0][15:0] fetch_pc; instr_t [NS-1:0] fetch_instr;
  icache u_icache (.clk, .wr_en(prog_we), .wr_addr(prog_addr), .wr_data(prog_data),
                   .rd_pc(fetch_pc), .rd_instr(fetch_instr));

  // ---------------- TSV arbitration ----------------
  logic [NS:0] dn_valid, dn_ready; tsv_msg_t [NS:0] dn_msg;
  logic dn_out_valid, dn_out_ready; tsv_msg_t dn_out;
  logic [NN-1:0] up_valid, up_ready; tsv_msg_t [NN-1:0] up_msg;
  logic up_out_valid; tsv_msg_t up_out;
  logic [31:0] dn_busy, up_busy;

  tsv_arbiter #(.N(NS + 1)) u_tsv_dn (
    .clk, .rst_n, .in_valid(dn_valid), .in_ready(dn_ready), .in_msg(dn_msg),
    .out_valid(dn_out_valid), .out_ready(dn_out_ready), .out_msg(dn_out), .st_busy_cycles(dn_busy));
  tsv_arbiter #(.N(NN)) u_tsv_up (
    .clk, .rst_n, .in_valid(up_valid), .in_ready(up_ready), .in_msg(up_msg),
    .out_valid(up_out_valid), .out_ready(1'b1), .out_msg(up_out), .st_busy_cycles(up_busy));

  logic [NN-1:0] nbu_rx_ready;
  assign dn_out_ready = nbu_rx_ready[dn_out.nbu];

  // ---------------- subcores ----------------
  logic [NS-1:0] sc_done, s_issue, s_off, s_mv, s_lo, s_ls, s_rem, s_div, s_cnb;
  for (genvar i = 0; i < NS; i++) begin : g_sc
    subcore #(.SUBCORE_ID(i), .CORE_ID(CORE_ID)) u_sc (
      .clk, .rst_n, .launch, .launch_n, .start_pc, .done(sc_done[i]),
      .fetch_pc(fetch_pc[i]), .fetch_instr(fetch_instr[i]),
      .tx_valid(dn_valid[i]), .tx_ready(dn_ready[i]), .tx_msg(dn_msg[i]),
      .rx_valid(up_out_valid && up_out.req == 3'(i)), .rx_msg(up_out),
      .rem_valid(rem_valid[i]), .rem_ready(rem_ready[i]), .rem_store(rem_store[i]),
      .rem_mask(rem_mask[i]), .rem_addr(rem_addr[i]), .rem_wdata(rem_wdata[i]),
      .rem_resp_valid(rem_resp_valid[i]), .rem_resp_data(rem_resp_data[i]),
      .st_issue(s_issue[i]), .st_nb_offload(s_off[i]), .st_reg_move(s_mv[i]),
      .st_ldst_offload(s_lo[i]), .st_ldst_split(s_ls[i]), .st_remote(s_rem[i]),
      .st_diverge(s_div[i]), .st_commit_nb(s_cnb[i]));
  end

  // ---------------- LSU-Remote ----------------
  lsu_remote u_lsur (
    .clk, .rst_n, .req_valid(lr_req_valid), .req_ready(lr_req_ready), .req_store(lr_req_store),
    .req_mask(lr_req_mask), .req_addr(lr_req_addr), .req_wdata(lr_req_wdata), .req_src(lr_req_src),
    .rsp_valid(lr_rsp_valid), .rsp_ready(lr_rsp_ready), .rsp_src(lr_rsp_src), .rsp_data(lr_rsp_data),
    .tx_valid(dn_valid[NS]), .tx_ready(dn_ready[NS]), .tx_msg(dn_msg[NS]),
    .rx_valid(up_out_valid && up_out.req == 3'(REQ_LSUR)), .rx_msg(up_out));

  // ---------------- NBUs and shared memory ----------------
  logic [NN-1:0] sm_valid, sm_ready, sm_write, sm_rsp_valid; mask_t [NN-1:0] sm_mask;
  logic [NN-1:0][LANES-1:0][31:0] sm_addr; vreg_t [NN-1:0] sm_wdata; vreg_t sm_rsp_data;
  logic [NN-1:0] n_hit, n_act, n_ref, n_sm;
  logic sm_conf;

  for (genvar j = 0; j < NN; j++) begin : g_nbu
    nbu #(.NUM_ROWBUF_P(NUM_ROWBUF_P), .T_REFI(T_REFI)) u_nbu (
      .clk, .rst_n,
      .rx_valid(dn_out_valid && dn_out.nbu == 2'(j)), .rx_ready(nbu_rx_ready[j]), .rx_msg(dn_out),
      .tx_valid(up_valid[j]), .tx_ready(up_ready[j]), .tx_msg(up_msg[j]),
      .sm_valid(sm_valid[j]), .sm_ready(sm_ready[j]), .sm_write(sm_write[j]), .sm_mask(sm_mask[j]),
      .sm_addr(sm_addr[j]), .sm_wdata(sm_wdata[j]), .sm_rsp_valid(sm_rsp_valid[j]),
      .sm_rsp_data(sm_rsp_data),
      .cmd(dram_cmd[j]), .cmd_bank(dram_bank[j]), .cmd_sa(dram_sa[j]), .cmd_row(dram_row[j]),
      .cmd_col(dram_col[j]), .cmd_wdata(dram_wdata[j]), .cmd_wstrb(dram_wstrb[j]),
      .rd_valid(dram_rd_valid[j]), .rd_data(dram_rd_data[j]),
      .st_rb_hit(n_hit[j]), .st_rb_act(n_act[j]), .st_refresh(n_ref[j]), .st_smem(n_sm[j]));
  end

  shared_memory u_smem (
    .clk, .rst_n, .req_valid(sm_valid), .req_ready(sm_ready), .req_write(sm_write),
    .req_mask(sm_mask), .req_addr(sm_addr), .req_wdata(sm_wdata),
    .rsp_valid(sm_rsp_valid), .rsp_data(sm_rsp_data), .st_conflict(sm_conf));

  assign done = &sc_done;

  // ---------------- event counters ----------------
  function automatic logic [31:0] cnt4(logic [3:0] v);
    return 32'(v[0]) + 32'(v[1]) + 32'(v[2]) + 32'(v[3]);
  endfunction
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) stats <= '0;
    else begin
      stats.issued         <= stats.issued + cnt4(s_issue);
      stats.nb_offloads    <= stats.nb_offloads + cnt4(s_off);
      stats.reg_moves      <= stats.reg_moves + cnt4(s_mv);
      stats.ldst_offloads  <= stats.ldst_offloads + cnt4(s_lo);
      stats.ldst_splits    <= stats.ldst_splits + cnt4(s_ls);
      stats.remote_reqs    <= stats.remote_reqs + cnt4(s_rem);
      stats.diverges       <= stats.diverges + cnt4(s_div);
      stats.rb_hits        <= stats.rb_hits + cnt4(n_hit);
      stats.rb_acts        <= stats.rb_acts + cnt4(n_act);
      stats.refreshes      <= stats.refreshes + cnt4(n_ref);
      stats.smem_reqs      <= stats.smem_reqs + cnt4(n_sm);
      stats.smem_conflicts <= stats.smem_conflicts + 32'(sm_conf);
      stats.tsv_down_busy  <= dn_busy;
      stats.tsv_up_busy    <= up_busy;
    end
endmodule
