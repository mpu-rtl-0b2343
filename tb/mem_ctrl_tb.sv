// mem_ctrl_tb: runs the near-bank memory controller (default parameters: 4 row buffers per
// bank, Table-2 timings, refresh every 3900 cycles) against the behavioural bank model.
// Three rounds: write random strobed data to 40 fresh random columns spread over 4 banks and
// 12 rows (so rows share subarrays and conflict), wait for every write acknowledge, then read
// 60 random columns (written and never written) and compare with a shadow copy kept here.
// Responses are matched by tag; the receiver applies random back-pressure. The run lasts past
// one refresh interval. Checks: data, one response per request, no DRAM protocol error
// (model), and that row hits, activations and a refresh all happened.
module mem_ctrl_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rsp_valid, rsp_ready, rsp_write, rd_valid, st_hit, st_act, st_ref;
  mc_req_t req; logic [8:0] rsp_tag; logic [255:0] rsp_data, cmd_wdata, rd_data;
  dram_cmd_e cmd; logic [1:0] cmd_bank, cmd_sa; logic [13:0] cmd_row; logic [4:0] cmd_col;
  logic [31:0] cmd_wstrb;
  int merr;
  mem_ctrl dut (.*);
  dram_bank_model #(.NBU_ID(0)) m (.clk, .rst_n, .cmd, .bank(cmd_bank), .sa(cmd_sa), .row(cmd_row), .col(cmd_col),
    .wdata(cmd_wdata), .wstrb(cmd_wstrb), .rd_valid, .rd_data, .errors(merr));

  logic [255:0] shadow [int];
  logic [255:0] expd [512];
  logic         isw  [512];
  int outstanding = 0, nhit = 0, nact = 0, nref = 0, cyc = 0;
  int checks = 0, failures = 0;
  initial begin
    #3_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic logic [255:0] initcol(logic [31:0] a);
    logic [255:0] v;
    for (int w = 0; w < 8; w++) begin
      logic [31:0] x; x = {a[31:5], 3'(w), 2'd0};
      v[32*w +: 32] = {x[15:0], x[31:16]} ^ 32'h0bad_f00d;
    end
    return v;
  endfunction
  function automatic logic [255:0] cur(logic [31:0] a);
    return shadow.exists(a) ? shadow[a] : initcol(a);
  endfunction
  function automatic logic [31:0] rnd_addr();
    int b, r, c;
    b = $urandom_range(3); r = $urandom_range(11) * 3; c = $urandom_range(31);
    return {4'd0, 2'd0, 2'(b), 14'(r), 5'(c), 5'd0};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (st_hit) nhit++;
    if (st_act) nact++;
    if (st_ref) nref++;
  end
  always @(negedge clk) rsp_ready <= 1'($urandom_range(3) != 0);
  // response checker, sampled just before the edge
  always begin
    @(negedge clk); #4;
    if (rst_n && rsp_valid && rsp_ready) begin
      chk(isw[rsp_tag] == rsp_write, $sformatf("response kind tag %0d", rsp_tag));
      if (!rsp_write) chk(rsp_data == expd[rsp_tag], $sformatf("read data tag %0d", rsp_tag));
      outstanding--;
    end
  end

  task automatic send(logic w, logic [31:0] a, logic [255:0] d, logic [31:0] s, int tag);
    @(negedge clk);
    req_valid = 1; req.write = w; req.addr = a; req.wdata = d; req.wstrb = s; req.tag = 9'(tag);
    isw[tag] = w;
    if (w) begin
      logic [255:0] v; v = cur(a);
      for (int i = 0; i < 32; i++) if (s[i]) v[8*i +: 8] = d[8*i +: 8];
      shadow[a] = v;
    end else expd[tag] = cur(a);
    #4; while (!req_ready) begin @(negedge clk); #4; end
    outstanding++;
    @(posedge clk); #1; req_valid = 0;
  endtask

  initial begin
    int tag;
    logic [31:0] written [$];
    req_valid = 0; req = '0; rsp_ready = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    tag = 0;
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < 40; n++) begin
        logic [31:0] a; logic [255:0] d;
        a = rnd_addr();
        for (int i = 0; i < 8; i++) d[32*i +: 32] = $urandom;
        send(1, a, d, $urandom, tag); tag = (tag + 1) % 512;
        written.push_back(a);
      end
      while (outstanding != 0) @(posedge clk);
      for (int n = 0; n < 60; n++) begin
        send(0, (n % 2) ? written[$urandom_range(written.size() - 1)] : rnd_addr(), '0, 0, tag);
        tag = (tag + 1) % 512;
      end
      while (outstanding != 0) @(posedge clk);
    end
    while (nref < 2) @(posedge clk);
    // after the refresh, rows are closed again: one more read must still work
    send(0, written[0], '0, 0, tag);
    while (outstanding != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    chk(merr == 0, $sformatf("DRAM protocol errors %0d", merr));
    chk(nhit > 0 && nact > 0 && nref > 0, $sformatf("hits %0d acts %0d refs %0d", nhit, nact, nref));
    chk(nhit > nact, "row buffers give more hits than activations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
