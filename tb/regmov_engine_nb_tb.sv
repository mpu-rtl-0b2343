// regmov_engine_nb_tb: the near-bank register move engine in front of a near-bank register
// file (8 warps x 16 registers). 600 random register-write and register-read requests arrive
// with random gaps, and the reply side applies random back-pressure. A shadow register file
// here predicts every read. Checks: a write is acknowledged (M_WR_ACK, same warp, register
// and tag) in the cycle after it is accepted; a read returns M_REG_DATA with the shadow value
// 3 cycles after it is accepted; only one request is taken at a time.
module regmov_engine_nb_tb;
  import mpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rx_valid, rx_ready, rf_re, rf_we, tx_valid, tx_ready;
  tsv_msg_t rx_msg, tx_msg;
  logic [6:0] rf_raddr, rf_waddr;
  vreg_t rf_rdata, rf_wdata; mask_t rf_wmask;
  regmov_engine_nb dut (.*);
  register_file #(.WARPS(8), .REGS(16), .LANES(32), .NRD(1), .NWR(1)) rf (.clk,
    .rd_addr(rf_raddr), .rd_data(rf_rdata), .wr_en(rf_we), .wr_addr(rf_waddr),
    .wr_mask(rf_wmask), .wr_data(rf_wdata));

  vreg_t sh [128];
  int checks = 0, failures = 0, cyc = 0, acc_cyc = 0, pending = 0, seen = 0, nrd = 0, nwr = 0;
  tsv_msg_t cur;
  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always @(negedge clk) tx_ready <= 1'($urandom_range(2) != 0);
  // monitor, one time unit before each rising edge
  always begin
    @(negedge clk); #4;
    cyc++;
    if (rst_n) begin
      if (tx_valid) begin
        if (!seen) begin
          chk(cyc == acc_cyc + ((cur.kind == M_REG_RD) ? 3 : 1), $sformatf("latency %0d", cyc - acc_cyc));
          seen = 1;
        end
        if (tx_ready) begin
          chk(tx_msg.warp == cur.warp && tx_msg.reg_id == cur.reg_id && tx_msg.tag == cur.tag, "reply header");
          if (cur.kind == M_REG_RD)
            chk(tx_msg.kind == M_REG_DATA && tx_msg.data == sh[{cur.warp, cur.reg_id[3:0]}], "read data");
          else chk(tx_msg.kind == M_WR_ACK, "write ack");
          pending = 0;
        end
      end
      if (rx_valid && rx_ready) begin
        chk(!pending, "request taken while busy");
        cur = rx_msg; acc_cyc = cyc; pending = 1; seen = 0;
        if (rx_msg.kind == M_REG_WR)
          for (int l = 0; l < 32; l++) if (rx_msg.mask[l])
            sh[{rx_msg.warp, rx_msg.reg_id[3:0]}][32*l +: 32] = rx_msg.data[32*l +: 32];
      end
    end
  end

  task automatic send(msg_e k, int w, int r, mask_t m);
    @(negedge clk);
    rx_msg = '0; rx_msg.kind = k; rx_msg.warp = 3'(w); rx_msg.reg_id = 5'(r); rx_msg.mask = m;
    rx_msg.tag = 5'($urandom);
    for (int l = 0; l < 32; l++) rx_msg.data[32*l +: 32] = $urandom;
    rx_valid = 1;
    #4; while (!rx_ready) begin @(negedge clk); #4; end
    @(posedge clk); #1; rx_valid = 0;
    repeat ($urandom_range(2)) @(posedge clk);
  endtask

  initial begin
    rx_valid = 0; rx_msg = '0; tx_ready = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int a = 0; a < 128; a++) begin send(M_REG_WR, a / 16, a % 16, '1); nwr++; end
    for (int n = 0; n < 600; n++) begin
      if ($urandom_range(1)) begin send(M_REG_RD, $urandom_range(7), $urandom_range(15), '0); nrd++; end
      else begin send(M_REG_WR, $urandom_range(7), $urandom_range(15), $urandom); nwr++; end
    end
    while (pending) @(posedge clk);
    chk(nrd > 200 && nwr > 300, "both kinds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
