// dwc_pe: one channel of the depthwise (DWC) engine.
//
// Following the paper's PE drawing, the PE holds 36 multipliers in four
// columns of nine. Column j multiplies the 3x3 activation window of output
// pixel j (pixels numbered 0..3 row-major in the 2x2 block) by the channel's
// 3x3 kernel, and an adder tree reduces the nine products to one sum. The
// four sums are the channel's 2x2 DWC output. Window extraction (stride) is
// done by the engine around it.
//
// Interface: win[j][t] is tap t (row-major 0..8) of pixel j's window,
// unsigned 8-bit; ker[t] is the signed 8-bit kernel tap; psum[j] is the
// signed 24-bit sum. Purely combinational.
module dwc_pe
  import edea_pkg::*;
(
  input  act_t win  [NPIX][KTAPS],
  input  wgt_t ker  [KTAPS],
  output acc_t psum [NPIX]
);
  for (genvar j = 0; j < NPIX; j++) begin : g_col
    prod_t prod [KTAPS];
    for (genvar t = 0; t < KTAPS; t++) begin : g_mul
      // unsigned activation times signed weight: the activation is widened
      // with a zero sign bit so the product is a signed 16-bit number
      assign prod[t] = PROD_W'($signed({1'b0, win[j][t]}) * ker[t]);
    end
    adder_tree #(.N(KTAPS), .IN_W(PROD_W), .OUT_W(ACC_W)) u_tree (
      .in_vals(prod), .sum(psum[j])
    );
  end
endmodule
