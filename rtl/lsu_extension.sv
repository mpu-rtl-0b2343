// lsu_extension: the near-bank part of the load-store unit, one per NBU.
//
// Path (3-a): a word read or write transaction that arrives over the TSVs (from a subcore's
// LSU or from the core's LSU-Remote) becomes one column request to the memory controller,
// with a byte strobe selecting the word on a write; when the controller answers, the word is
// returned up the TSVs to the requester. Up to 160 such transactions may be outstanding (5 requesters x 32 lanes):
// the controller tag {requester, lane} indexes a small table of word offsets.
// Path (3-b): an offloaded, perfectly coalesced ld/st.global carries only the leading address
// and a register number. The full address list is restored (lane l at leading + 4*l), which
// covers 4 or 5 consecutive 256-bit columns; one request per column goes to the controller.
// For a load, each returned column fills the lanes whose addresses fall in it; when all have
// returned the register is written into the near-bank register file and a completion message
// is sent for commit. For a store the data register is first read from the register file and
// each column is written with the strobes of the lanes it holds.
// Both paths follow the paper; the column split, tags and table are this design's choices.
// Timing: requests enter the controller one per cycle; completion follows the last column.
module lsu_extension
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
  // memory controller
  output logic        mc_valid,
  input  logic        mc_ready,
  output mc_req_t     mc_req,
  input  logic        mc_rsp_valid,     // read data or write acknowledge
  output logic        mc_rsp_ready,
  input  logic        mc_rsp_write,
  input  logic [8:0]  mc_rsp_tag,
  input  logic [BANK_IO_W-1:0] mc_rsp_data,
  // near-bank register file
  output logic        rf_re,
  output logic [AW-1:0] rf_raddr,
  input  vreg_t       rf_rdata,
  output logic        rf_we,
  output logic [AW-1:0] rf_waddr,
  output vreg_t       rf_wdata,
  // replies up the TSVs
  output logic        tx_valid,
  input  logic        tx_ready,
  output tsv_msg_t    tx_msg
);
  localparam int unsigned WPC = BANK_IO_W / 32;   // words per column (8)

  // ---------------- (3-b) offloaded access ----------------
  typedef enum logic [2:0] { B_IDLE, B_READ, B_CAP, B_ISSUE, B_WAIT, B_WB, B_DONE } bstate_e;
  bstate_e bs;
  tsv_msg_t bm;
  vreg_t    bdata;
  logic [2:0] ncol, icol;      // number of columns, next column to issue
  logic [4:0] pcol;            // columns still outstanding (bit per column)
  logic [31:0] base_col;       // leading address >> 5

  function automatic logic [2:0] col_of_lane(logic [31:0] lead, int l);
    return 3'(((lead + 32'(4 * l)) >> 5) - (lead >> 5));
  endfunction

  // ---------------- (3-a) transaction table ----------------
  logic [255:0][2:0] woff;           // word offset of outstanding transaction per tag
  tsv_msg_t am;                       // transaction waiting to enter the controller
  logic     a_full;

  // reply queue (single register: reply must leave before next reply is produced)
  tsv_msg_t rq;
  logic     rq_full;

  // which source owns the controller port this cycle: (3-b) has priority
  logic b_req;
  assign b_req = (bs == B_ISSUE);
  always_comb begin
    logic [2:0] w;
    w = '0;
    mc_req = '0;
    mc_valid = 1'b0;
    if (b_req) begin
      mc_valid     = 1'b1;
      mc_req.write = (bm.kind == M_STG_OFF);
      mc_req.addr  = (base_col + 32'(icol)) << 5;
      mc_req.tag   = {1'b1, 5'd0, icol};
      for (int l = 0; l < LANES; l++)
 if (col_of_lane(bm.addr, l) == icol) begin
          w = 3'((bm.addr + 32'(4 * l)) >> 2);
          mc_req.wdata[32*w +: 32] = bdata[32*l +: 32];
          mc_req.wstrb[4*w +: 4]   = 4'hf;
        end
    end else if (a_full) begin
      mc_valid     = 1'b1;
      mc_req.write = (am.kind == M_DRAM_WR);
      mc_req.addr  = {am.addr[31:5], 5'd0};
      mc_req.tag   = {1'b0, am.req, am.tag};
      mc_req.wdata[32*am.addr[4:2] +: 32] = am.data[31:0];
      mc_req.wstrb[4*am.addr[4:2] +: 4]   = 4'hf;
    end
  end

  // controller tag: bit 8 set for (3-b) with the column number below it; clear for (3-a)
  // with {requester, lane} below it. (3-a) answers wait while the reply register is busy.
  assign mc_rsp_ready = mc_rsp_tag[8] || ((!rq_full || tx_ready) && bs != B_DONE);

  assign rx_ready = (rx_msg.kind inside {M_LDG_OFF, M_STG_OFF}) ? (bs == B_IDLE) : !a_full;

  assign rf_re    = (bs == B_READ);
  assign rf_raddr = AW'(bm.warp * NBR + bm.reg_id);
  assign rf_we    = (bs == B_WB);
  assign rf_waddr = rf_raddr;
  assign rf_wdata = bdata;

  assign tx_valid = rq_full;
  assign tx_msg   = rq;

  logic a_take;
  assign a_take = !b_req && a_full && mc_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bs <= B_IDLE; bm <= '0; bdata <= '0; ncol <= '0; icol <= '0; pcol <= '0; base_col <= '0;
      am <= '0; a_full <= 1'b0; rq <= '0; rq_full <= 1'b0; woff <= '0;
    end else begin
      if (rq_full && tx_ready) rq_full <= 1'b0;

      // ---- 3-a intake ----
      if (a_take) begin
        a_full <= 1'b0;
        woff[mc_req.tag[7:0]] <= am.addr[4:2];
      end
      if (rx_valid && rx_ready && rx_msg.kind inside {M_DRAM_RD, M_DRAM_WR}) begin
        am <= rx_msg; a_full <= 1'b1;
      end

      // ---- 3-b ----
      unique case (bs)
        B_IDLE: if (rx_valid && rx_ready && rx_msg.kind inside {M_LDG_OFF, M_STG_OFF}) begin
          bm <= rx_msg; base_col <= rx_msg.addr >> 5; icol <= '0;
          ncol <= 3'(((rx_msg.addr + 32'd124) >> 5) - (rx_msg.addr >> 5)) + 3'd1;
          bs <= (rx_msg.kind == M_STG_OFF) ? B_READ : B_ISSUE;
          pcol <= '0;
        end
        B_READ: bs <= B_CAP;
        B_CAP:  begin bdata <= rf_rdata; bs <= B_ISSUE; end
        B_ISSUE: if (mc_ready) begin
          pcol[icol] <= 1'b1;
          if (icol + 3'd1 == ncol) bs <= B_WAIT;
          icol <= icol + 3'd1;
        end
        B_WAIT: if (pcol == '0) bs <= (bm.kind == M_LDG_OFF) ? B_WB : B_DONE;
        B_WB:   bs <= B_DONE;
        B_DONE: if (!rq_full || tx_ready) bs <= B_IDLE;
        default: bs <= B_IDLE;
      endcase

      // ---- returns from the controller ----
      if (mc_rsp_valid && mc_rsp_tag[8]) begin
        pcol[mc_rsp_tag[2:0]] <= 1'b0;
        if (!mc_rsp_write)
          for (int l = 0; l < LANES; l++)
            if (col_of_lane(bm.addr, l) == mc_rsp_tag[2:0])
              bdata[32*l +: 32] <= mc_rsp_data[32*(3'((bm.addr + 32'(4 * l)) >> 2)) +: 32];
      end

      // reply producer: 3-b completion first, then 3-a data / write acknowledge
      if (!rq_full || tx_ready) begin
        if (bs == B_DONE) begin
          rq <= '0; rq.kind <= M_DONE; rq.tag <= 5'd1; rq.req <= bm.req; rq.warp <= bm.warp;
          rq.reg_id <= bm.reg_id; rq.nbu <= bm.nbu; rq_full <= 1'b1;
        end else if (mc_rsp_valid && !mc_rsp_tag[8]) begin
          rq <= '0;
          rq.kind <= mc_rsp_write ? M_DRAM_ACK : M_DRAM_DATA;
          rq.req <= mc_rsp_tag[7:5]; rq.tag <= mc_rsp_tag[4:0];
          rq.data <= REG_W'(mc_rsp_data[32*woff[mc_rsp_tag[7:0]] +: 32]); rq_full <= 1'b1;
        end
      end
    end

endmodule
