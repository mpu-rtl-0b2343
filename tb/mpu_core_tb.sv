// mpu_core_tb: end-to-end test of one MPU core at its default parameters.
//
// Loads a 42-instruction kernel, launches 8 warps on each of the 4 subcores (1024 threads),
// and runs it against four behavioural DRAM models. Each thread (sc = subcore, l = thread
// index inside the subcore, base = sc<<26 + 4*l, so the data sit in the NBU under its own
// subcore) computes, with x = mem[base], y = mem[base+0x10400]:
//   z  = 3*x + y                    -> base+0x20800  (loads offloaded to the NBU, MAD near-bank)
//   s  = z via shared memory, +7 on odd lanes, +100 on even lanes (SIMT divergence)
//                                   -> base+0x30C00
//   t  = mem[sc<<26 + 8*l + 0x40000] (uncoalesced: split into DRAM transactions)
//                                   -> base+0x50000
//   u  = x + tid (far-bank add: moves x near->far, then u far->near for the store)
//                                   -> base+0x60000
//   v  = mem[base + 0x10000000 + 0x80000] (core 1 address: goes out on the network port;
//        this testbench loops it back into the core's own LSU-Remote)
//                                   -> base+0x70000
//   w  = x through a 2-way bank-conflicting shared-memory round trip -> base+0x90000
// Expected values come from the models' initial-content formula, computed here.
// After the kernel the test keeps the core idle until a refresh has happened, then checks
// every event counter is non-zero (each mechanism happened) and no DRAM protocol error.
module mpu_core_tb;
  import mpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we = 0; logic [13:0] prog_addr = 0; instr_t prog_data = '0;
  logic launch = 0; logic [WARP_W:0] launch_n = 4'd8; logic [15:0] start_pc = 0;
  logic done;
  dram_cmd_e [NUM_NBU-1:0]          dram_cmd;
  logic [NUM_NBU-1:0][1:0]          dram_bank, dram_sa;
  logic [NUM_NBU-1:0][13:0]         dram_row;
  logic [NUM_NBU-1:0][4:0]          dram_col;
  logic [NUM_NBU-1:0][BANK_IO_W-1:0]   dram_wdata;
  logic [NUM_NBU-1:0][BANK_IO_W/8-1:0] dram_wstrb;
  logic [NUM_NBU-1:0]               dram_rd_valid;
  logic [NUM_NBU-1:0][BANK_IO_W-1:0]   dram_rd_data;
  logic [NUM_SUBCORES-1:0] rem_valid, rem_ready, rem_store, rem_resp_valid;
  mask_t [NUM_SUBCORES-1:0] rem_mask;
  logic [NUM_SUBCORES-1:0][LANES-1:0][31:0] rem_addr;
  vreg_t [NUM_SUBCORES-1:0] rem_wdata, rem_resp_data;
  logic lr_req_valid, lr_req_ready, lr_req_store, lr_rsp_valid, lr_rsp_ready;
  mask_t lr_req_mask; logic [LANES-1:0][31:0] lr_req_addr; vreg_t lr_req_wdata, lr_rsp_data;
  logic [7:0] lr_req_src, lr_rsp_src;
  core_stats_t stats;
  int derr [NUM_NBU];

  mpu_core dut (.*);

  for (genvar j = 0; j < NUM_NBU; j++) begin : g_m
    dram_bank_model #(.NBU_ID(j)) m (.clk, .rst_n, .cmd(dram_cmd[j]), .bank(dram_bank[j]), .sa(dram_sa[j]),
      .row(dram_row[j]), .col(dram_col[j]), .wdata(dram_wdata[j]), .wstrb(dram_wstrb[j]),
      .rd_valid(dram_rd_valid[j]), .rd_data(dram_rd_data[j]), .errors(derr[j]));
  end

  function automatic logic [31:0] peek(logic [31:0] a);
    case (a[27:26])
      2'd0: return g_m[0].m.peek(a);
      2'd1: return g_m[1].m.peek(a);
      2'd2: return g_m[2].m.peek(a);
      default: return g_m[3].m.peek(a);
    endcase
  endfunction
  function automatic logic [31:0] f(logic [31:0] a);  // model's initial content
    return {a[15:0], a[31:16]} ^ 32'h0bad_f00d;
  endfunction

  // ---- network loop-back: subcore remote lanes -> LSU-Remote -> response ----
  logic busy; logic [1:0] who; vreg_t rsp_hold;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; who <= 0; lr_req_valid <= 0; lr_req_store <= 0; lr_req_mask <= '0;
      lr_req_addr <= '0; lr_req_wdata <= '0; lr_req_src <= '0; rem_resp_valid <= '0; rsp_hold <= '0;
    end else begin
      rem_resp_valid <= '0;
      if (lr_req_valid && lr_req_ready) lr_req_valid <= 1'b0;
      if (!busy) begin
        for (int i = NUM_SUBCORES - 1; i >= 0; i--) if (rem_valid[i]) begin
          busy <= 1; who <= 2'(i); lr_req_valid <= 1; lr_req_store <= rem_store[i];
          lr_req_mask <= rem_mask[i]; lr_req_addr <= rem_addr[i]; lr_req_wdata <= rem_wdata[i];
          lr_req_src <= 8'(i);
        end
      end else if (lr_rsp_valid) begin
        busy <= 0; rem_resp_valid[lr_rsp_src[1:0]] <= 1'b1; rsp_hold <= lr_rsp_data;
      end
    end
  end
  always_comb begin
    rem_ready = '0;
    if (!busy) for (int i = NUM_SUBCORES - 1; i >= 0; i--) if (rem_valid[i]) rem_ready = NUM_SUBCORES'(1) << i;
  end
  assign lr_rsp_ready = 1'b1;
  for (genvar i = 0; i < NUM_SUBCORES; i++) begin : g_rr
    assign rem_resp_data[i] = rsp_hold;
  end

  // ---- kernel ----
  function automatic instr_t I(opcode_e op, int d, int s0, int s1, loc_e h, logic [31:0] imm);
    instr_t x; x = '0;
    x.op = op; x.dst = 5'(d); x.src0 = 5'(s0); x.src1 = 5'(s1); x.hint = h; x.imm = imm;
    return x;
  endfunction
  instr_t prog [$];
  initial begin
    prog = '{
      I(OP_TID, 16, 0, 0, LOC_FAR, 0),
      I(OP_MOVI, 17, 0, 0, LOC_FAR, 8),
      I(OP_SHR, 18, 16, 17, LOC_FAR, 0),
      I(OP_MOVI, 17, 0, 0, LOC_FAR, 26),
      I(OP_SHL, 18, 18, 17, LOC_FAR, 0),           // r18 = sc << 26
      I(OP_MOVI, 19, 0, 0, LOC_FAR, 255),
      I(OP_AND, 20, 16, 19, LOC_FAR, 0),
      I(OP_MOVI, 17, 0, 0, LOC_FAR, 2),
      I(OP_SHL, 20, 20, 17, LOC_FAR, 0),           // r20 = 4*l
      I(OP_ADD, 21, 18, 20, LOC_FAR, 0),           // r21 = base
      I(OP_LDG, 1, 21, 0, LOC_NONE, 0),            // 10 x
      I(OP_LDG, 2, 21, 0, LOC_NONE, 32'h10400),    // y
      I(OP_MOVI, 3, 0, 0, LOC_NEAR, 3),
      I(OP_MAD, 2, 1, 3, LOC_NONE, 0),             // z = 3x + y, near-bank
      I(OP_STG, 0, 21, 2, LOC_NONE, 32'h20800),
      I(OP_MOVI, 17, 0, 0, LOC_FAR, 16),
      I(OP_SHR, 22, 18, 17, LOC_FAR, 0),           // sc*1024
      I(OP_ADD, 5, 20, 22, LOC_FAR, 0),            // r5 = smem address (far-bank)
      I(OP_STS, 0, 5, 2, LOC_NONE, 0),             // r5 moved far->near
      I(OP_LDS, 6, 5, 0, LOC_NONE, 0),
      I(OP_ADD, 10, 5, 5, LOC_NONE, 0),            // 20 r10 = 2*r5 (stride 8: bank conflicts)
      I(OP_STS, 0, 10, 1, LOC_NONE, 32'h8000),
      I(OP_LDS, 11, 10, 0, LOC_NONE, 32'h8000),
      I(OP_STG, 0, 21, 11, LOC_NONE, 32'h90000),
      I(OP_MOVI, 28, 0, 0, LOC_FAR, 1),
      I(OP_AND, 23, 16, 28, LOC_FAR, 0),           // odd lane
      I(OP_BRA, 0, 23, 0, LOC_NONE, {16'd30, 16'd29}),
      I(OP_ADDI, 6, 6, 0, LOC_NONE, 100),          // even lanes
      I(OP_BRA, 0, 28, 0, LOC_NONE, {16'd30, 16'd30}),
      I(OP_ADDI, 6, 6, 0, LOC_NONE, 7),            // 29 odd lanes
      I(OP_STG, 0, 21, 6, LOC_NONE, 32'h30C00),    // 30 reconverged
      I(OP_SHL, 25, 20, 28, LOC_FAR, 0),           // 8*l
      I(OP_ADD, 24, 18, 25, LOC_FAR, 0),
      I(OP_LDG, 7, 24, 0, LOC_NONE, 32'h40000),    // uncoalesced
      I(OP_STG, 0, 21, 7, LOC_NONE, 32'h50000),
      I(OP_ADD, 9, 1, 16, LOC_FAR, 0),             // x moved near->far
      I(OP_STG, 0, 21, 9, LOC_NONE, 32'h60000),    // r9 moved far->near
      I(OP_MOVI, 17, 0, 0, LOC_FAR, 32'h1000_0000),
      I(OP_ADD, 26, 21, 17, LOC_FAR, 0),
      I(OP_LDG, 8, 26, 0, LOC_NONE, 32'h80000),    // remote core
      I(OP_STG, 0, 21, 8, LOC_NONE, 32'h70000),    // 40
      I(OP_EXIT, 0, 0, 0, LOC_NONE, 0)
    };
  end

  int checks = 0, failures = 0;
  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;
  initial begin : watchdog
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] base, x, y, z, s, e;
    int tid;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(posedge clk);
    foreach (prog[i]) begin
      prog_we <= 1; prog_addr <= 14'(i); prog_data <= prog[i];
      @(posedge clk);
    end
    prog_we <= 0;
    @(posedge clk);
    launch <= 1; @(posedge clk); launch <= 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    $display("kernel done at cycle %0d", cyc);
    while (stats.refreshes == 0 && cyc < 20000) @(posedge clk);
    repeat (20) @(posedge clk);

    for (int sc = 0; sc < 4; sc++)
      for (int l = 0; l < 256; l++) begin
        tid = sc * 256 + l;
        base = (32'(sc) << 26) + 32'(4 * l);
        x = f(base); y = f(base + 32'h10400); z = 3 * x + y;
        chk(peek(base + 32'h20800) == z, $sformatf("z tid %0d got %h exp %h", tid, peek(base + 32'h20800), z));
        s = z + ((l % 2) ? 32'd7 : 32'd100);
        chk(peek(base + 32'h30C00) == s, $sformatf("s tid %0d got %h exp %h", tid, peek(base + 32'h30C00), s));
        e = f((32'(sc) << 26) + 32'(8 * l) + 32'h40000);
        chk(peek(base + 32'h50000) == e, $sformatf("t tid %0d got %h exp %h", tid, peek(base + 32'h50000), e));
        chk(peek(base + 32'h60000) == x + 32'(tid), $sformatf("u tid %0d", tid));
        e = f(base + 32'h80000);
        chk(peek(base + 32'h70000) == e, $sformatf("v tid %0d got %h exp %h", tid, peek(base + 32'h70000), e));
        chk(peek(base + 32'h90000) == x, $sformatf("w tid %0d", tid));
      end

    for (int j = 0; j < NUM_NBU; j++) chk(derr[j] == 0, $sformatf("DRAM protocol errors nbu %0d: %0d", j, derr[j]));
    $display("issued=%0d nb_offloads=%0d reg_moves=%0d ldst_offloads=%0d ldst_splits=%0d remote=%0d",
             stats.issued, stats.nb_offloads, stats.reg_moves, stats.ldst_offloads, stats.ldst_splits, stats.remote_reqs);
    $display("diverges=%0d rb_hits=%0d rb_acts=%0d refreshes=%0d smem=%0d smem_conf=%0d tsv_down=%0d tsv_up=%0d",
             stats.diverges, stats.rb_hits, stats.rb_acts, stats.refreshes, stats.smem_reqs,
             stats.smem_conflicts, stats.tsv_down_busy, stats.tsv_up_busy);
    chk(stats.issued > 0,         "mechanism: instruction issue");
    chk(stats.nb_offloads > 0,    "mechanism: near-bank instruction offload");
    chk(stats.reg_moves > 0,      "mechanism: register move");
    chk(stats.ldst_offloads > 0,  "mechanism: coalesced ld/st offload");
    chk(stats.ldst_splits > 0,    "mechanism: uncoalesced ld/st split");
    chk(stats.remote_reqs > 0,    "mechanism: remote access");
    chk(stats.diverges > 0,       "mechanism: SIMT divergence");
    chk(stats.rb_hits > 0,        "mechanism: row-buffer hit");
    chk(stats.rb_acts > 0,        "mechanism: row activation");
    chk(stats.refreshes > 0,      "mechanism: refresh");
    chk(stats.smem_reqs > 0,      "mechanism: shared memory");
    chk(stats.smem_conflicts > 0, "mechanism: shared-memory bank conflict");
    chk(stats.tsv_down_busy > 0,  "mechanism: TSV down");
    chk(stats.tsv_up_busy > 0,    "mechanism: TSV up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
