// mem_ctrl: near-bank DRAM memory controller of one NBU (4 banks), with multiple
// activated row buffers per bank.
//
// Requests (one 256-bit column, read or strobed write, with a tag) enter an 8-entry queue.
// Each cycle at most one DRAM command is issued, chosen first-ready first-come-first-served:
// the oldest request that hits an open row and meets its column timing gets a RD or WR;
// otherwise the oldest request whose row command is allowed gets an ACT (its subarray is
// closed) or a PRE (its subarray holds another row that no queued request wants). Open-page
// policy: rows stay open until a conflict or a refresh.
// Multiple activated row buffers: consecutive row numbers map to interleaved subarrays
// (subarray = row mod NUM_ROWBUF), and each subarray keeps its own latched row address, so up
// to NUM_ROWBUF rows per bank are open at once. NUM_ROWBUF = 1 gives a conventional bank.
// Timing (core cycles): ACT->column tRCD, column->column in a bank tCCD, RD/WR->PRE tRTP,
// PRE->ACT tRP, ACT->PRE tRAS; every tREFI cycles all subarrays are precharged and a REF
// blocks the banks for tRFC.
// Read data comes back from the banks a fixed time after RD, in order; responses (read data or
// write acknowledge, with the tag) leave through a valid/ready port from an 8-entry FIFO, and a
// column command is issued only when the FIFO has room for its response.
// The paper gives the open-page FR-FCFS policy, the MASA-style multiple row buffers and the
// timing values; the queue depth, the single command per cycle and using tRTP for
// write-to-precharge are this design's choices.
module mem_ctrl
  import mpu_pkg::*;
#(
  parameter int unsigned NUM_ROWBUF_P = mpu_pkg::NUM_ROWBUF,
  parameter int unsigned QDEPTH = 8,
  parameter int unsigned T_RCD  = 14,
  parameter int unsigned T_CCD  = 2,
  parameter int unsigned T_RTP  = 4,
  parameter int unsigned T_RP   = 14,
  parameter int unsigned T_RAS  = 33,
  parameter int unsigned T_RFC  = 350,
  parameter int unsigned T_REFI = 3900
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  mc_req_t       req,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic          rsp_write,
  output logic [8:0]    rsp_tag,
  output logic [BANK_IO_W-1:0] rsp_data,
  // DRAM bank command bus
  output dram_cmd_e     cmd,
  output logic [1:0]    cmd_bank,
  output logic [1:0]    cmd_sa,
  output logic [13:0]   cmd_row,
  output logic [4:0]    cmd_col,
  output logic [BANK_IO_W-1:0]   cmd_wdata,
  output logic [BANK_IO_W/8-1:0] cmd_wstrb,
  input  logic          rd_valid,
  input  logic [BANK_IO_W-1:0]   rd_data,
  // statistics
  output logic          st_hit,       // column command to an already open row
  output logic          st_act,       // row activation (a row-buffer miss)
  output logic          st_ref        // refresh
);
  localparam int unsigned NB = NUM_BANKS;
  localparam int unsigned NS = NUM_ROWBUF_P;
  localparam int unsigned FD = 8;       // response FIFO depth

  mc_req_t q [QDEPTH];
  logic [$clog2(QDEPTH+1)-1:0] qn;
  logic [31:0] now;

  logic        opn   [NB][NS];
  logic [13:0] orow  [NB][NS];
  logic [31:0] t_act [NB][NS];
  logic [31:0] t_col [NB][NS];
  logic [31:0] t_pre [NB][NS];
  logic [31:0] t_bcol[NB];
  logic [31:0] t_ref_done, ref_cnt;
  logic        ref_pend;

  // read tags in flight (in order) and response FIFO
  logic [8:0]  rtag [FD];
  logic [$clog2(FD)-1:0] rt_wp, rt_rp;
  logic [$clog2(FD+1)-1:0] rt_n;
  logic        f_w  [FD];
  logic [8:0]  f_t  [FD];
  logic [BANK_IO_W-1:0] f_d [FD];
  logic [$clog2(FD)-1:0] f_wp, f_rp;
  logic [$clog2(FD+1)-1:0] f_n;

  function automatic int unsigned sa_of(logic [13:0] row);
    return 32'(row) % NS;
  endfunction

  // ---------------- scheduler (combinational) ----------------
  logic        do_col, do_act, do_pre, do_ref;
  int unsigned sel;
  logic [1:0]  pb; int unsigned ps; logic [13:0] prow;
  logic        space;
  assign space = (32'(rt_n) + 32'(f_n)) < FD - 1;

  always_comb begin
    logic found;
    logic want [NB][NS];
    logic [1:0] b; logic [13:0] r; int unsigned s;
    logic all_closed, rp_ok;
    b = '0; r = '0; s = 0; all_closed = 1'b1; rp_ok = 1'b1;
    do_col = 1'b0; do_act = 1'b0; do_pre = 1'b0; do_ref = 1'b0; sel = 0;
    pb = '0; ps = 0; prow = '0; found = 1'b0;
    for (int bb = 0; bb < NB; bb++) for (int ss = 0; ss < NS; ss++) want[bb][ss] = 1'b0;
    for (int i = 0; i < QDEPTH; i++)
      if (i < 32'(qn)) begin
        b = addr_bank(q[i].addr); r = addr_row(q[i].addr); s = sa_of(r);
        if (opn[b][s] && orow[b][s] == r) want[b][s] = 1'b1;
      end
    if (ref_pend) begin
      // close every open subarray, then refresh
      for (int bb = 0; bb < NB; bb++) for (int ss = 0; ss < NS; ss++)
        if (!found && opn[bb][ss] && now >= t_act[bb][ss] + T_RAS && now >= t_col[bb][ss] + T_RTP) begin
          found = 1'b1; do_pre = 1'b1; pb = 2'(bb); ps = ss;
        end
      if (!found) begin
        for (int bb = 0; bb < NB; bb++) for (int ss = 0; ss < NS; ss++) begin
          if (opn[bb][ss]) all_closed = 1'b0;
          if (now < t_pre[bb][ss] + T_RP) rp_ok = 1'b0;
        end
        do_ref = all_closed && rp_ok;
      end
    end else if (now >= t_ref_done) begin
      // first ready: oldest row hit whose column timing is met
      for (int i = 0; i < QDEPTH; i++)
        if (!found && i < 32'(qn)) begin
          b = addr_bank(q[i].addr); r = addr_row(q[i].addr); s = sa_of(r);
          if (opn[b][s] && orow[b][s] == r && now >= t_act[b][s] + T_RCD &&
              now >= t_bcol[b] + T_CCD && space) begin
            found = 1'b1; do_col = 1'b1; sel = i;
          end
        end
      // otherwise: oldest request whose row command may issue
      for (int i = 0; i < QDEPTH; i++)
        if (!found && i < 32'(qn)) begin
          b = addr_bank(q[i].addr); r = addr_row(q[i].addr); s = sa_of(r);
          if (!opn[b][s] && now >= t_pre[b][s] + T_RP) begin
            found = 1'b1; do_act = 1'b1; pb = b; ps = s; prow = r;
          end else if (opn[b][s] && orow[b][s] != r && !want[b][s] &&
                       now >= t_act[b][s] + T_RAS && now >= t_col[b][s] + T_RTP) begin
            found = 1'b1; do_pre = 1'b1; pb = b; ps = s;
          end
        end
    end
  end

  // ---------------- command bus ----------------
  always_comb begin
    cmd = CMD_NOP; cmd_bank = pb; cmd_sa = 2'(ps); cmd_row = prow; cmd_col = '0;
    cmd_wdata = '0; cmd_wstrb = '0;
    if (do_ref) cmd = CMD_REF;
    else if (do_act) cmd = CMD_ACT;
    else if (do_pre) cmd = CMD_PRE;
    else if (do_col) begin
      cmd       = q[sel].write ? CMD_WR : CMD_RD;
      cmd_bank  = addr_bank(q[sel].addr);
      cmd_row   = addr_row(q[sel].addr);
      cmd_sa    = 2'(sa_of(cmd_row));
      cmd_col   = addr_col(q[sel].addr);
      cmd_wdata = q[sel].wdata;
      cmd_wstrb = q[sel].wstrb;
    end
  end

  assign req_ready = (32'(qn) < QDEPTH);
  assign rsp_valid = (f_n != 0);
  assign rsp_write = f_w[f_rp];
  assign rsp_tag   = f_t[f_rp];
  assign rsp_data  = f_d[f_rp];
  assign st_hit = do_col;
  assign st_act = do_act;
  assign st_ref = do_ref;

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      qn <= '0; now <= '0; ref_cnt <= '0; ref_pend <= 1'b0; t_ref_done <= '0;
      rt_wp <= '0; rt_rp <= '0; rt_n <= '0; f_wp <= '0; f_rp <= '0; f_n <= '0;
      for (int b = 0; b < NB; b++) begin
        t_bcol[b] <= '0;
        for (int s = 0; s < NS; s++) begin
          opn[b][s] <= 1'b0; orow[b][s] <= '0; t_act[b][s] <= '0; t_col[b][s] <= '0; t_pre[b][s] <= '0;
        end
      end
      for (int i = 0; i < QDEPTH; i++) q[i] <= '0;
      for (int i = 0; i < FD; i++) begin rtag[i] <= '0; f_w[i] <= 1'b0; f_t[i] <= '0; f_d[i] <= '0; end
    end else begin
      logic [$clog2(QDEPTH+1)-1:0] n;
      logic [$clog2(FD+1)-1:0] fn;
      logic [$clog2(FD)-1:0] wp;
      now <= now + 1;
      // refresh timer
      if (do_ref) begin
        ref_pend <= 1'b0; ref_cnt <= '0; t_ref_done <= now + T_RFC;
      end else begin
        ref_cnt <= ref_cnt + 1;
        if (ref_cnt + 1 >= T_REFI) ref_pend <= 1'b1;
      end
      // queue: remove issued, append new
      n = qn;
      if (do_col) begin
        for (int i = 0; i < QDEPTH - 1; i++) if (i >= 32'(sel)) q[i] <= q[i+1];
        n = n - 1'b1;
      end
      if (req_valid && req_ready) begin
        q[n] <= req;
        n = n + 1'b1;
      end
      qn <= n;
      // row state
      if (do_act) begin
        opn[pb][ps] <= 1'b1; orow[pb][ps] <= prow; t_act[pb][ps] <= now;
      end
      if (do_pre) begin
        opn[pb][ps] <= 1'b0; t_pre[pb][ps] <= now;
      end
      if (do_col) begin
        t_bcol[cmd_bank] <= now; t_col[cmd_bank][sa_of(cmd_row)] <= now;
      end
      // read tags in flight
      if (do_col && !q[sel].write) begin
        rtag[rt_wp] <= q[sel].tag; rt_wp <= rt_wp + 1'b1;
      end
      // response FIFO: up to two pushes (returned read, write ack) and one pop per cycle
      fn = f_n; wp = f_wp;
      if (rd_valid) begin
        f_w[wp] <= 1'b0; f_t[wp] <= rtag[rt_rp]; f_d[wp] <= rd_data;
        wp = wp + 1'b1; fn = fn + 1'b1; rt_rp <= rt_rp + 1'b1;
      end
      if (do_col && q[sel].write) begin
        f_w[wp] <= 1'b1; f_t[wp] <= q[sel].tag; f_d[wp] <= '0;
        wp = wp + 1'b1; fn = fn + 1'b1;
      end
      if (rsp_valid && rsp_ready) begin
        f_rp <= f_rp + 1'b1; fn = fn - 1'b1;
      end
      f_wp <= wp; f_n <= fn;
      rt_n <= rt_n + ((do_col && !q[sel].write) ? 1'b1 : 1'b0) - (rd_valid ? 1'b1 : 1'b0);
    end

  // a column command only goes to an open row of its subarray
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd == CMD_RD || cmd == CMD_WR) |-> opn[cmd_bank][sa_of(cmd_row)] &&
                   orow[cmd_bank][sa_of(cmd_row)] == cmd_row);
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> rt_n != 0);
endmodule
