// register_file_tb: checks the banked warp register file (default 8 warps x 32 registers,
// 2 read and 2 write ports) against a shadow array kept here.
// Phase 1 writes every entry on both ports (full mask) so nothing read is uninitialised.
// Phase 2 runs 3000 random cycles: lane-masked writes on both ports (same address on both
// ports: the higher port wins), and reads on both ports whose data must appear exactly one
// cycle after the address and must not see a write made in the same cycle.
module register_file_tb;
  localparam int WARPS = 8, REGS = 32, LANES = 32, AW = $clog2(WARPS * REGS);
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0][AW-1:0] rd_addr, wr_addr;
  logic [1:0][LANES*32-1:0] rd_data, wr_data;
  logic [1:0] wr_en;
  logic [1:0][LANES-1:0] wr_mask;
  register_file #(.WARPS(WARPS), .REGS(REGS), .LANES(LANES), .NRD(2), .NWR(2)) dut (.*);

  logic [LANES*32-1:0] shadow [WARPS*REGS];
  logic [1:0][LANES*32-1:0] expq;
  int checks = 0, failures = 0;

  initial begin
    #1_000_000; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1); $finish;
  end

  function automatic logic [LANES*32-1:0] rnd();
    logic [LANES*32-1:0] v;
    for (int i = 0; i < LANES; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    rd_addr = '0; wr_addr = '0; wr_data = '0; wr_en = '0; wr_mask = '0;
    for (int a = 0; a < WARPS * REGS; a += 2) begin
      @(negedge clk);
      wr_en = 2'b11; wr_mask = '1;
      wr_addr[0] = AW'(a); wr_addr[1] = AW'(a + 1);
      wr_data[0] = rnd(); wr_data[1] = rnd();
      shadow[a] = wr_data[0]; shadow[a+1] = wr_data[1];
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        rd_addr[p] = AW'($urandom_range(WARPS * REGS - 1));
        expq[p] = shadow[rd_addr[p]];          // value before this cycle's writes
      end
      for (int p = 0; p < 2; p++) begin
        wr_en[p] = 1'($urandom_range(1));
        wr_addr[p] = ($urandom_range(3) == 0) ? rd_addr[p] : AW'($urandom_range(WARPS * REGS - 1));
        wr_mask[p] = $urandom;
        wr_data[p] = rnd();
      end
      if ($urandom_range(4) == 0) wr_addr[1] = wr_addr[0];
      for (int p = 0; p < 2; p++)
        if (wr_en[p])
          for (int l = 0; l < LANES; l++)
            if (wr_mask[p][l]) shadow[wr_addr[p]][32*l +: 32] = wr_data[p][32*l +: 32];
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_data[p] !== expq[p]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d port %0d addr %0d", t, p, rd_addr[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
