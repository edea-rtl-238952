// dwc_weight_buffer: DWC weight buffer, the 3x3 kernels of one channel group.
//
// Nine entries, one per kernel tap (row-major 0..8), each holding that tap
// for all TD channels. The loader writes one tap per cycle; the engine reads
// all nine taps at once. The read is registered: ker is valid the cycle
// after rd_en. Its capacity (one channel group) is this design's choice.
module dwc_weight_buffer
  import edea_pkg::*;
#(
  parameter int unsigned TD = edea_pkg::N_TD
) (
  input  logic       clk,
  input  logic       wr_en,
  input  logic [3:0] wr_addr,
  input  wgt_t       wr_data [TD],
  input  logic       rd_en,
  output wgt_t       ker [KTAPS][TD]
);
  wgt_t mem [KTAPS][TD];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < KTAPS) mem[wr_addr] <= wr_data;
    if (rd_en) ker <= mem;
  end
endmodule
