// shared_memory: the near-bank shared memory of a core, on the DRAM die beside its 4 NBUs.
//
// 64 KB organised as 32 word-interleaved banks (bank = address[6:2]), 512 words each. A
// request is one warp-wide ld.shared or st.shared: 32 byte addresses, an active-lane mask and,
// for a store, 32 data words. The NBU ports are served round-robin, one request at a time.
// Each cycle every bank serves one word; all pending lanes that read the same word are served
// together, other lanes that map to a busy bank wait (bank conflict). A request therefore
// takes 1 + (largest number of distinct words in one bank) cycles; a conflict-free request
// finishes in 2 cycles. rsp_valid pulses on the requesting port with the load data.
// The paper places the shared memory near-bank, shared by all NBUs of a core without TSVs,
// and gives its size; banking, conflict handling and the round-robin port choice are this
// design's own (conventional GPU) choices.
module shared_memory
  import mpu_pkg::*;
#(
  parameter int unsigned BYTES = 65536,
  parameter int unsigned PORTS = mpu_pkg::NUM_NBU,
  localparam int unsigned WPB  = BYTES / 4 / LANES      // words per bank
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [PORTS-1:0]            req_valid,
  output logic [PORTS-1:0]            req_ready,
  input  logic [PORTS-1:0]            req_write,
  input  mask_t [PORTS-1:0]           req_mask,
  input  logic [PORTS-1:0][LANES-1:0][31:0] req_addr,
  input  vreg_t [PORTS-1:0]           req_wdata,
  output logic [PORTS-1:0]            rsp_valid,
  output vreg_t                       rsp_data,
  output logic                        st_conflict   // a cycle in which some lane waited
);
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1;
  logic [31:0] mem [LANES][WPB];

  logic busy;
  logic [PW-1:0] port, rr;
  logic write;
  mask_t pend;
  logic [LANES-1:0][31:0] addr;
  vreg_t wdata;

  function automatic logic [4:0] bank_of(logic [31:0] a); return a[6:2]; endfunction
  function automatic logic [$clog2(WPB)-1:0] row_of(logic [31:0] a);
    return a[7 +: $clog2(WPB)];
  endfunction

  // grant
  logic [PW-1:0] gnt; logic any;
  always_comb begin
    gnt = rr; any = 1'b0;
    for (int k = PORTS - 1; k >= 0; k--) begin
      logic [PW-1:0] p;
      p = PW'((32'(rr) + 32'(k)) % PORTS);
      if (req_valid[p]) begin gnt = p; any = 1'b1; end
    end
  end
  always_comb begin
    req_ready = '0;
    if (!busy && any) req_ready[gnt] = 1'b1;
  end

  // lanes served this cycle: the lowest pending lane of each bank, plus lanes reading its word
  mask_t serve;
  always_comb begin
    logic [LANES-1:0] taken;
    logic [LANES-1:0][31:0] first;
    logic [4:0] b;
    serve = '0; taken = '0; first = '0; b = '0;
    for (int l = 0; l < LANES; l++)
      if (pend[l]) begin
        b = bank_of(addr[l]);
        if (!taken[b]) begin
          taken[b] = 1'b1; first[b] = addr[l]; serve[l] = 1'b1;
        end else if (!write && addr[l][31:2] == first[b][31:2]) serve[l] = 1'b1;
      end
  end

  assign st_conflict = busy && ((pend & ~serve) != '0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; port <= '0; rr <= '0; write <= 1'b0; pend <= '0; addr <= '0; wdata <= '0;
      rsp_valid <= '0; rsp_data <= '0;
    end else begin
      rsp_valid <= '0;
      if (!busy && any) begin
        busy <= 1'b1; port <= gnt; rr <= PW'((32'(gnt) + 1) % PORTS);
        write <= req_write[gnt]; pend <= req_mask[gnt]; addr <= req_addr[gnt];
        wdata <= req_wdata[gnt];
      end else if (busy) begin
        for (int l = 0; l < LANES; l++)
          if (serve[l] && !write) rsp_data[32*l +: 32] <= mem[bank_of(addr[l])][row_of(addr[l])];
        pend <= pend & ~serve;
        if ((pend & ~serve) == '0) begin
          busy <= 1'b0;
          rsp_valid[port] <= 1'b1;
        end
      end
    end

  // the array: one write per bank per cycle
  always_ff @(posedge clk)
    if (busy && write)
      for (int l = 0; l < LANES; l++)
        if (serve[l]) mem[bank_of(addr[l])][row_of(addr[l])] <= wdata[32*l +: 32];
endmodule
