// shared_memory_tb: the four NBU ports issue random warp-wide loads and stores to the
// banked shared memory. Each port works in its own 4 KB region so the result of every access
// is defined, while lane addresses inside a region are random (lanes often hit the same bank:
// conflicts) or contiguous (conflict-free). A shadow copy here predicts load data.
// Checks: load data of every active lane; one response per request; a contiguous request
// alone on the bus completes in exactly 2 cycles; with stride-2 words (2-way conflicts) in 3;
// the conflict indicator fires.
module shared_memory_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] req_valid, req_ready, req_write, rsp_valid;
  mask_t [3:0] req_mask; logic [3:0][31:0][31:0] req_addr; vreg_t [3:0] req_wdata;
  vreg_t rsp_data; logic st_conflict;
  shared_memory dut (.*);

  logic [31:0] sh [int];
  int checks = 0, failures = 0, nconf = 0, cyc = 0;
  initial begin
    #3_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) begin cyc <= cyc + 1; if (rst_n && st_conflict) nconf++; end

  // one port's request; returns completion cycles (accept edge to response edge)
  task automatic access(int p, logic w, int mode, output int lat);
    mask_t m; logic [31:0][31:0] a; vreg_t d; vreg_t e; int t0;
    m = (mode == 0) ? mask_t'($urandom) : '1;
    for (int l = 0; l < 32; l++) begin
      case (mode)
        0: a[l] = 32'(p * 4096 + 4 * $urandom_range(1023));
        1: a[l] = 32'(p * 4096 + 4 * l);
        default: a[l] = 32'(p * 4096 + 8 * l);
      endcase
      d[32*l +: 32] = $urandom;
    end
    for (int l = 0; l < 32; l++) begin
      e[32*l +: 32] = sh.exists(a[l]) ? sh[a[l]] : 32'd0;
      if (w && m[l]) sh[a[l]] = d[32*l +: 32];   // highest lane wins on equal addresses
    end
    @(negedge clk);
    req_valid[p] = 1; req_write[p] = w; req_mask[p] = m; req_addr[p] = a; req_wdata[p] = d;
    #4; while (!req_ready[p]) begin @(negedge clk); #4; end
    t0 = cyc;
    @(posedge clk); #1; req_valid[p] = 0;
    while (!rsp_valid[p]) begin @(negedge clk); #4; end
    lat = cyc - t0;
    if (!w) for (int l = 0; l < 32; l++) if (m[l])
      chk(rsp_data[32*l +: 32] == e[32*l +: 32], $sformatf("port %0d lane %0d load", p, l));
    @(posedge clk); #1;
  endtask

  initial begin
    int lat;
    req_valid = 0; req_write = 0; req_mask = '0; req_addr = '0; req_wdata = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // zero the four regions so every later load is defined
    for (int p = 0; p < 4; p++) for (int k = 0; k < 32; k++) begin
      mask_t m; logic [31:0][31:0] a;
      for (int l = 0; l < 32; l++) a[l] = 32'(p * 4096 + 128 * k + 4 * l);
      @(negedge clk); req_valid[p] = 1; req_write[p] = 1; req_mask[p] = '1; req_addr[p] = a; req_wdata[p] = '0;
      #4; while (!req_ready[p]) begin @(negedge clk); #4; end
      @(posedge clk); #1; req_valid[p] = 0;
      while (!rsp_valid[p]) @(posedge clk);
      for (int l = 0; l < 32; l++) sh[a[l]] = 0;
    end
    access(0, 1, 1, lat); chk(lat == 2, $sformatf("contiguous store latency %0d", lat));
    access(0, 0, 1, lat); chk(lat == 2, $sformatf("contiguous load latency %0d", lat));
    access(1, 0, 2, lat); chk(lat == 3, $sformatf("stride-2 load latency %0d", lat));
    fork
      for (int n = 0; n < 150; n++) access(0, 1'($urandom), $urandom_range(2), lat);
      for (int n = 0; n < 150; n++) access(1, 1'($urandom), $urandom_range(2), lat);
      for (int n = 0; n < 150; n++) access(2, 1'($urandom), $urandom_range(2), lat);
      for (int n = 0; n < 150; n++) access(3, 1'($urandom), $urandom_range(2), lat);
    join
    chk(nconf > 0, "bank conflicts seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
