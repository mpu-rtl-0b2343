// icache: the instruction store of a core, shared by its 4 subcores.
//
// 128 KB of 64-bit instructions (16384 entries). Each subcore has its own read port with a
// combinational read, so a fetch returns the instruction in the same cycle; a write port lets
// the host load the kernel before launch. The paper gives only the name and the size; since
// the design has no external instruction memory below it, it is modelled as a single-level
// instruction memory that always hits, with per-subcore ports: this design's choices.
module icache
  import mpu_pkg::*;
#(
  parameter int unsigned BYTES = 131072,
  parameter int unsigned PORTS = mpu_pkg::NUM_SUBCORES,
  localparam int unsigned N    = BYTES / 8,
  localparam int unsigned AW   = $clog2(N)
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  instr_t                 wr_data,
  input  logic [PORTS-1:0][15:0] rd_pc,
  output instr_t [PORTS-1:0]     rd_instr
);
  instr_t mem [N];

  always_comb
    for (int p = 0; p < PORTS; p++) rd_instr[p] = mem[AW'(rd_pc[p])];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;
endmodule
