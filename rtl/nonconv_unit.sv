// nonconv_unit: the non-convolutional unit between the DWC and PWC engines.
//
// Dequantization, batch normalization, ReLU and requantization of a DWC
// output are folded offline into one fixed-point multiply-add
//     y = Round(Clip(k*x + b, 0, 2^OUT_BITS - 1))
// with k and b signed Q8.16 numbers (8 integer, 16 fraction bits), as the
// paper specifies; the lower clip bound is the ReLU. Rounding is half-up
// (add 2^(FRAC-1), then drop the fraction), a choice of this design.
// One unit serves one channel; it processes the LANES (=4) pixels of the
// channel's 2x2 block in parallel with the channel's k and b. Eight units
// serve the eight channels of a step.
//
// Timing: one register stage; out_valid/y follow in_valid by one clock.
module nonconv_unit
  import edea_pkg::*;
#(
  parameter int unsigned LANES    = 4,
  parameter int unsigned X_W      = edea_pkg::ACC_W,
  parameter int unsigned K_W     = edea_pkg::KB_W,
  parameter int unsigned FRAC     = edea_pkg::KB_FRAC,
  parameter int unsigned OUT_BITS = edea_pkg::ACT_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [X_W-1:0]  x [LANES],
  input  logic signed [K_W-1:0] k,
  input  logic signed [K_W-1:0] b,
  output logic out_valid,
  output logic [OUT_BITS-1:0]    y [LANES]
);
  localparam int unsigned P_W = X_W + K_W + 1;   // product plus offset
  localparam logic signed [P_W-1:0] HALF = P_W'(1) <<< (FRAC - 1);
  localparam logic signed [P_W-1:0] QMAX = P_W'((1 << OUT_BITS) - 1);

  logic [OUT_BITS-1:0] y_c [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [P_W-1:0] acc, q;
      acc = P_W'(x[i]) * P_W'(k) + P_W'(b) + HALF;  // k*x + b + 0.5, Q.16
      q   = acc >>> FRAC;                           // floor -> round half up
      if (q < 0)          y_c[i] = '0;               // ReLU / clip low
      else if (q > QMAX)  y_c[i] = '1;               // clip high
      else                y_c[i] = q[OUT_BITS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) y <= y_c;
  end
endmodule
