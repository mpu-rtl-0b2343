// tsv_arbiter_tb: five sources each send a stream of 60 random messages of random kinds
// through the TSV arbiter while the receiver takes them with a random out_ready. Checks:
//  - every message arrives exactly once, in order per source, with its contents intact;
//  - a message granted in cycle t is offered in cycle t + k + 1, k = ceil(bits/128)
//    from this testbench's own size table (header 64 bits + payload);
//  - no new grant while a message is on the bus or waiting at the far end;
//  - with all five sources busy, consecutive grants rotate (round robin);
//  - the busy-cycle counter equals the sum of k.
module tsv_arbiter_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] in_valid, in_ready; tsv_msg_t [4:0] in_msg;
  logic out_valid, out_ready; tsv_msg_t out_msg; logic [31:0] st_busy_cycles;
  tsv_arbiter #(.N(5)) dut (.*);

  tsv_msg_t src [5][$];
  int sent [5], rcvd [5];
  int checks = 0, failures = 0, cyc = 0, sum_k = 0, last_src = -1, rot_ok = 0;
  int inflight = 0, gnt_cyc = 0, gnt_src = 0, k_exp = 0, offered = 0;
  tsv_msg_t gmsg;

  initial begin
    #3_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic int kcyc(msg_e k);
    int bits;
    case (k)
      M_OFFLOAD: bits = 64 + 64 + 32;
      M_LDG_OFF, M_STG_OFF, M_DRAM_RD: bits = 64 + 32;
      M_REG_WR, M_REG_DATA: bits = 64 + 32 + 1024;
      M_DRAM_WR: bits = 64 + 64;
      M_DRAM_DATA: bits = 64 + 32;
      default: bits = 64;
    endcase
    return (bits + 127) / 128;
  endfunction

  initial begin
    msg_e kinds [8] = '{M_OFFLOAD, M_LDG_OFF, M_REG_WR, M_DRAM_RD, M_DRAM_WR, M_DONE, M_REG_DATA, M_DRAM_DATA};
    for (int s = 0; s < 5; s++) for (int n = 0; n < 60; n++) begin
      tsv_msg_t m; m = '0;
      m.kind = kinds[$urandom_range(7)]; m.req = 3'(s); m.tag = 5'(n % 32); m.addr = $urandom;
      m.data[31:0] = $urandom; m.data[1023:992] = $urandom;
      src[s].push_back(m);
    end
  end

  // sources
  always @(negedge clk) begin
    for (int s = 0; s < 5; s++) begin
      if (cyc < 2000) in_valid[s] <= (src[s].size() > 0) && ($urandom_range(3) != 0);
      else            in_valid[s] <= (src[s].size() > 0);
      if (src[s].size() > 0) in_msg[s] <= src[s][0];
    end
    out_ready <= (cyc > 4000) ? 1'b1 : 1'($urandom_range(1));
  end

  // monitor: samples one time unit before each rising edge, when all inputs are settled
  always begin
    @(negedge clk); #4;
    if (rst_n) begin
    cyc = cyc + 1;
    if (out_valid) begin
      if (!offered) begin
        chk(cyc == gnt_cyc + k_exp + 1, $sformatf("latency src %0d kind %s: %0d vs %0d", gnt_src, gmsg.kind.name(), cyc - gnt_cyc, k_exp));
        offered = 1;
      end
      if (out_ready) begin
        chk(out_msg == gmsg, "message contents");
        rcvd[gnt_src]++;
        inflight = 0; offered = 0;
      end
    end
    if (in_ready != 0) begin
      int s;
      chk($onehot(in_ready), "one grant");
      chk(!inflight, "grant while busy");
      s = $clog2(in_ready);
      chk(in_valid[s], "grant to a valid source");
      if (in_valid == 5'b11111 && last_src >= 0) begin
        chk(s == (last_src + 1) % 5, "round robin");
        rot_ok++;
      end
      gmsg = in_msg[s]; gnt_src = s; gnt_cyc = cyc; k_exp = kcyc(in_msg[s].kind); sum_k += k_exp;
      inflight = 1; last_src = s;
      void'(src[s].pop_front());
      sent[s]++;
    end
    end
  end

  initial begin
    in_valid = 0; in_msg = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    wait (rcvd[0] + rcvd[1] + rcvd[2] + rcvd[3] + rcvd[4] == 300);
    repeat (3) @(posedge clk);
    for (int s = 0; s < 5; s++) chk(rcvd[s] == 60, $sformatf("source %0d delivered %0d", s, rcvd[s]));
    chk(st_busy_cycles == 32'(sum_k), $sformatf("busy %0d vs %0d", st_busy_cycles, sum_k));
    chk(rot_ok > 10, "round robin observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
