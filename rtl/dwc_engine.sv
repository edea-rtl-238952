// dwc_engine: the depthwise convolution engine, TD PEs working in parallel.
//
// Each step takes a window of the ifmap covering one 2x2 output block for
// TD channels: 4x4 pixels at stride 1, 5x5 at stride 2 (the window port is
// always 5x5; row/column 4 is ignored at stride 1). Output pixel (r,c) of the
// block uses window rows s*r..s*r+2 and columns s*c..s*c+2, s the stride.
// Channel d goes to PE d with kernel ker[*][d]. With TD=8 the engine holds
// 8 x 36 = 288 multipliers, as in the paper.
//
// Timing: the result is registered; out_valid/out follow in_valid by one
// clock. Reset clears out_valid only. out[j][d] is the 24-bit signed sum of
// pixel j (row-major) of channel d.
// Window sizes and PE count are the paper's; the pixel-to-window mapping and
// the output register are this design's choices.
module dwc_engine
  import edea_pkg::*;
#(
  parameter int unsigned TD = edea_pkg::N_TD
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic stride2,
  input  act_t win [WIN][WIN][TD],
  input  wgt_t ker [KTAPS][TD],
  output logic out_valid,
  output acc_t out [NPIX][TD]
);
  acc_t sums [NPIX][TD];

  for (genvar d = 0; d < TD; d++) begin : g_pe
    act_t pe_win [NPIX][KTAPS];
    wgt_t pe_ker [KTAPS];
    acc_t pe_sum [NPIX];

    always_comb begin
      for (int j = 0; j < NPIX; j++) begin
        for (int t = 0; t < KTAPS; t++) begin
          int r, c;
          r = (stride2 ? 2 : 1) * (j / 2) + t / 3;
          c = (stride2 ? 2 : 1) * (j % 2) + t % 3;
          pe_win[j][t] = win[r][c][d];
        end
      end
      for (int t = 0; t < KTAPS; t++) pe_ker[t] = ker[t][d];
    end

    dwc_pe u_pe (.win(pe_win), .ker(pe_ker), .psum(pe_sum));

    for (genvar j = 0; j < NPIX; j++) begin : g_pix
      assign sums[j][d] = pe_sum[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) out <= sums;
  end
endmodule
