// dram_bank_model: behavioural model (not synthesizable) of the four DRAM banks behind one
// NBU's memory controller, for simulation only.
//
// It follows the controller's command bus: ACT latches a row into the named subarray's row
// buffer, PRE closes it, RD returns the 256-bit column RL cycles later, WR writes the strobed
// bytes, REF requires every row buffer closed. A column command to a subarray whose row
// buffer does not hold that row counts a protocol error. Storage is sparse; a column never
// written reads as init_word() of each word's byte address, so a testbench can predict it.
module dram_bank_model
  import mpu_pkg::*;
#(
  parameter int unsigned NBU_ID = 0,
  parameter int unsigned RL     = 14
) (
  input  logic                   clk,
  input  logic                   rst_n,   // commands are ignored while the controller is in reset
  input  dram_cmd_e              cmd,
  input  logic [1:0]             bank,
  input  logic [1:0]             sa,
  input  logic [13:0]            row,
  input  logic [4:0]             col,
  input  logic [BANK_IO_W-1:0]   wdata,
  input  logic [BANK_IO_W/8-1:0] wstrb,
  output logic                   rd_valid,
  output logic [BANK_IO_W-1:0]   rd_data,
  output int                     errors
);
  logic [BANK_IO_W-1:0] mem [int];
  logic        opn  [4][4];
  logic [13:0] orow [4][4];
  logic [RL-1:0] vpipe;
  logic [BANK_IO_W-1:0] dpipe [RL];

  function automatic logic [31:0] init_word(logic [31:0] a);
    return {a[15:0], a[31:16]} ^ 32'h0bad_f00d;
  endfunction

  function automatic logic [BANK_IO_W-1:0] column(logic [1:0] b, logic [13:0] r, logic [4:0] c);
    int key;
    logic [BANK_IO_W-1:0] v;
    key = {b, r, c};
    if (mem.exists(key)) return mem[key];
    for (int w = 0; w < BANK_IO_W / 32; w++)
      v[32*w +: 32] = init_word({4'd0, 2'(NBU_ID), b, r, c, 3'(w), 2'd0});
    return v;
  endfunction

  initial begin
    errors = 0; vpipe = '0;
    for (int b = 0; b < 4; b++) for (int s = 0; s < 4; s++) begin opn[b][s] = 0; orow[b][s] = 0; end
  end

  assign rd_valid = vpipe[RL-1];
  assign rd_data  = dpipe[RL-1];

  always @(posedge clk) begin
    vpipe <= {vpipe[RL-2:0], 1'b0};
    for (int i = RL - 1; i > 0; i--) dpipe[i] <= dpipe[i-1];
    dpipe[0] <= '0;
    if (rst_n) case (cmd)
      CMD_ACT: begin
        if (opn[bank][sa]) errors <= errors + 1;
        opn[bank][sa] <= 1'b1; orow[bank][sa] <= row;
      end
      CMD_PRE: opn[bank][sa] <= 1'b0;
      CMD_REF: for (int b = 0; b < 4; b++) for (int s = 0; s < 4; s++)
                 if (opn[b][s]) errors <= errors + 1;
      CMD_RD: begin
        if (!opn[bank][sa] || orow[bank][sa] != row) errors <= errors + 1;
        vpipe[0] <= 1'b1; dpipe[0] <= column(bank, row, col);
      end
      CMD_WR: begin
        logic [BANK_IO_W-1:0] v;
        if (!opn[bank][sa] || orow[bank][sa] != row) errors <= errors + 1;
        v = column(bank, row, col);
        for (int i = 0; i < BANK_IO_W / 8; i++) if (wstrb[i]) v[8*i +: 8] = wdata[8*i +: 8];
        mem[{bank, row, col}] = v;
      end
      default: ;
    endcase
  end

  // word read-back for testbench checks
  function automatic logic [31:0] peek(logic [31:0] a);
    logic [BANK_IO_W-1:0] v;
    v = column(addr_bank(a), addr_row(a), addr_col(a));
    return v[32*a[4:2] +: 32];
  endfunction
endmodule
