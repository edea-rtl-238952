// pwc_engine: the pointwise convolution engine with partial-sum accumulation.
//
// One step computes a 2x2xTK output block from a 2x2xTD ifmap block and TK
// 1x1xTD kernels: PE (k,d) multiplies channel d of the four pixels by weight
// w[k][d]; for every kernel k and pixel j an adder tree sums the TD products.
// The result is then added to a partial sum of the earlier channel groups
// (acc_en=1) or taken as is (first channel group, acc_en=0).
//
// Timing, two register stages:
//   cycle 0  in_valid, act, w, acc_en presented
//   edge 1   products summed into the stage-1 register
//   cycle 1  psum_in must be presented (one-cycle read from outside)
//   edge 2   out = stage-1 sum (+ psum_in), out_valid high in cycle 2
// Sums are 24-bit signed and wrap on overflow. Reset clears the valids.
// The PE and adder-tree arrangement follows the paper; the 24-bit accumulate
// after the trees is from its Non-Conv data-path figure, while taking the
// partial sum from outside and the two-stage timing are this design's choices.
module pwc_engine
  import edea_pkg::*;
#(
  parameter int unsigned TD = edea_pkg::N_TD,
  parameter int unsigned TK = edea_pkg::N_TK
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t act [NPIX][TD],
  input  wgt_t w   [TK][TD],
  input  logic acc_en,
  input  acc_t psum_in [NPIX][TK],
  output logic out_valid,
  output acc_t out [NPIX][TK]
);
  acc_t sums [NPIX][TK];
  acc_t s1_sum [NPIX][TK];
  logic s1_valid, s1_acc;

  for (genvar k = 0; k < TK; k++) begin : g_kern
    prod_t prods [TD][NPIX];
    for (genvar d = 0; d < TD; d++) begin : g_ch
      act_t pe_act [NPIX];
      for (genvar j = 0; j < NPIX; j++) begin : g_a
        assign pe_act[j] = act[j][d];
      end
      pwc_pe u_pe (.act(pe_act), .w(w[k][d]), .prod(prods[d]));
    end
    for (genvar j = 0; j < NPIX; j++) begin : g_tree
      prod_t tree_in [TD];
      for (genvar d = 0; d < TD; d++) begin : g_in
        assign tree_in[d] = prods[d][j];
      end
      adder_tree #(.N(TD), .IN_W(PROD_W), .OUT_W(ACC_W)) u_tree (
        .in_vals(tree_in), .sum(sums[j][k])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_sum <= sums;
      s1_acc <= acc_en;
    end
    if (s1_valid) begin
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TK; k++)
          out[j][k] <= s1_acc ? s1_sum[j][k] + psum_in[j][k] : s1_sum[j][k];
    end
  end
endmodule
