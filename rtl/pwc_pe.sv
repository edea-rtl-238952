// pwc_pe: one processing element of the pointwise (PWC) engine.
//
// A PE holds four multipliers, one per pixel of the 2x2 PWC ifmap block,
// and serves one (input channel, kernel) pair: it multiplies the channel's
// four unsigned 8-bit activations by the kernel's signed 8-bit weight for
// that channel. TD x TK = 8 x 16 = 128 PEs make the 512 multipliers of the
// engine. Purely combinational.
module pwc_pe
  import edea_pkg::*;
(
  input  act_t  act  [NPIX],
  input  wgt_t  w,
  output prod_t prod [NPIX]
);
  for (genvar j = 0; j < NPIX; j++) begin : g_mul
    assign prod[j] = PROD_W'($signed({1'b0, act[j]}) * w);
  end
endmodule
