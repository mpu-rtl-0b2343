// register_file: banked SIMT register file, used as the far-bank RF in each subcore
// (32 KB) and as the near-bank RF in each NBU (16 KB).
//
// Each entry is one warp register: 32 lanes of 32 bits, addressed by {warp, register}.
// NRD read ports return data one cycle after the address (registered read, like an SRAM
// macro); NWR write ports each write the lanes selected by a lane mask, so a masked SIMT write
// leaves the other lanes unchanged. A read and a write of the same entry in one cycle returns
// the old value; if two write ports hit the same lane of the same entry, the higher port wins. The paper gives the capacity; the port count, read latency
// and lane-masked writes are this design's choices (several ports stand for the
// collector units and writeback arbitration a real RF would have). The contents are cleared by no reset
// (like an SRAM); software writes a register before reading it.
module register_file #(
  parameter int unsigned WARPS = 8,
  parameter int unsigned REGS  = 32,
  parameter int unsigned LANES = 32,
  parameter int unsigned NRD   = 2,
  parameter int unsigned NWR   = 2,
  localparam int unsigned AW   = $clog2(WARPS * REGS)
) (
  input  logic                    clk,
  input  logic [NRD-1:0][AW-1:0]  rd_addr,
  output logic [NRD-1:0][LANES*32-1:0] rd_data,
  input  logic [NWR-1:0]                wr_en,
  input  logic [NWR-1:0][AW-1:0]        wr_addr,
  input  logic [NWR-1:0][LANES-1:0]     wr_mask,
  input  logic [NWR-1:0][LANES*32-1:0]  wr_data
);
  logic [LANES*32-1:0] mem [WARPS*REGS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++) rd_data[p] <= mem[rd_addr[p]];
    for (int p = 0; p < NWR; p++)
      if (wr_en[p])
        for (int l = 0; l < LANES; l++)
          if (wr_mask[p][l]) mem[wr_addr[p]][32*l +: 32] <= wr_data[p][32*l +: 32];
  end
endmodule
