// dwc_ifmap_buffer: DWC ifmap buffer, one padded ifmap tile of TD channels.
//
// The tile is SIDE x SIDE pixels (SIDE = 17 for an 8x8 output tile at
// stride 2); each entry holds one pixel for all TD channels. The loader
// writes the tile, padding zeros included, one pixel per cycle. The engine
// then reads, each cycle, the 5x5 window of one 2x2 output block: block
// (blk_row, blk_col) starts at pixel (2*blk_row, 2*blk_col) at stride 1 and
// (4*blk_row, 4*blk_col) at stride 2. Window pixels outside the tile read 0.
// The window is registered: win is valid the cycle after rd_en.
// The buffer size is this design's choice; the paper only states that
// layers larger than the buffer are split into tiles.
module dwc_ifmap_buffer
  import edea_pkg::*;
#(
  parameter int unsigned TD       = edea_pkg::N_TD,
  parameter int unsigned TILE_OUT = 8,
  parameter int unsigned SIDE     = (TILE_OUT - 1) * 2 + 3,
  parameter int unsigned AW       = $clog2(SIDE),
  parameter int unsigned BW       = $clog2(TILE_OUT / 2)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_row,
  input  logic [AW-1:0] wr_col,
  input  act_t          wr_data [TD],
  input  logic          rd_en,
  input  logic [BW-1:0] blk_row,
  input  logic [BW-1:0] blk_col,
  input  logic          stride2,
  output act_t          win [WIN][WIN][TD]
);
  act_t mem [SIDE][SIDE][TD];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < SIDE && int'(wr_col) < SIDE) mem[wr_row][wr_col] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int r = 0; r < WIN; r++) begin
        for (int c = 0; c < WIN; c++) begin
          int pr, pc;
          pr = int'(blk_row) * (stride2 ? 4 : 2) + r;
          pc = int'(blk_col) * (stride2 ? 4 : 2) + c;
          for (int d = 0; d < TD; d++)
            win[r][c][d] <= (pr < SIDE && pc < SIDE) ? mem[pr][pc][d] : '0;
        end
      end
    end
  end
endmodule
