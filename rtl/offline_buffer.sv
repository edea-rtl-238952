// offline_buffer: the Non-Conv parameters of one channel group.
//
// For every channel of the group it holds k and b, the offline-computed
// scale and offset (signed Q8.16, 24 bits) that fold dequantization, batch
// normalization and requantization into one multiply-add. The loader writes
// one channel per cycle; the Non-Conv units read all channels at once. The
// read is registered: k and b are valid the cycle after rd_en. The capacity
// of one channel group is this design's choice.
module offline_buffer
  import edea_pkg::*;
#(
  parameter int unsigned TD = edea_pkg::N_TD,
  parameter int unsigned CW = $clog2(TD)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_ch,
  input  kb_t           wr_k,
  input  kb_t           wr_b,
  input  logic          rd_en,
  output kb_t           k [TD],
  output kb_t           b [TD]
);
  kb_t mem_k [TD];
  kb_t mem_b [TD];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mem_k[wr_ch] <= wr_k;
      mem_b[wr_ch] <= wr_b;
    end
    if (rd_en) begin
      k <= mem_k;
      b <= mem_b;
    end
  end
endmodule
