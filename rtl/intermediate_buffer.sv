// intermediate_buffer: on-chip store between the Non-Conv units and the PWC
// engine, which keeps the DWC results of a tile out of external memory.
//
// One entry per 2x2 output block of the tile (DEPTH = 16 for an 8x8 tile),
// each holding the quantized 2x2xTD PWC ifmap block. The Non-Conv stage
// writes a block once; the PWC side reads it once per kernel group. Read is
// registered (rd_data valid the cycle after rd_en); a write in one cycle is
// seen by a read issued in the next.
module intermediate_buffer
  import edea_pkg::*;
#(
  parameter int unsigned TD    = edea_pkg::N_TD,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  act_t          wr_data [NPIX][TD],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output act_t          rd_data [NPIX][TD]
);
  act_t mem [DEPTH][NPIX][TD];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
