// pwc_weight_buffer: PWC weight buffer, the 1x1 kernels of one channel group.
//
// Row kg holds kernel group kg: TK kernels of TD weights each, so one read
// feeds the whole PWC engine. MAX_KG = 64 rows cover K = 1024 kernels, the
// widest pointwise layer of MobileNetV1 (sizing is this design's choice).
// The loader writes the TD weights of one kernel per cycle. The read is
// registered: w is valid the cycle after rd_en.
module pwc_weight_buffer
  import edea_pkg::*;
#(
  parameter int unsigned TD     = edea_pkg::N_TD,
  parameter int unsigned TK     = edea_pkg::N_TK,
  parameter int unsigned MAX_KG = 64,
  parameter int unsigned GW     = $clog2(MAX_KG),
  parameter int unsigned KW     = $clog2(TK)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [GW-1:0] wr_kg,
  input  logic [KW-1:0] wr_kern,
  input  wgt_t          wr_data [TD],
  input  logic          rd_en,
  input  logic [GW-1:0] rd_kg,
  output wgt_t          w [TK][TD]
);
  wgt_t mem [MAX_KG][TK][TD];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_kg][wr_kern] <= wr_data;
    if (rd_en) w <= mem[rd_kg];
  end
endmodule
