// adder_tree: sums N signed inputs into one OUT_W-bit signed result.
//
// The DWC engine uses one per output pixel (N=9, the taps of a 3x3 window)
// and the PWC engine one per output pixel and kernel (N=8, the channels of a
// step). The paper names the adder tree but does not give its structure; this
// one is a combinational balanced binary tree: each level adds neighbouring
// pairs and passes an odd element up unchanged. Inputs are sign-extended to
// OUT_W first, so no level can overflow as long as the true sum fits OUT_W.
// No clock, no latency.
module adder_tree #(
  parameter int unsigned N     = 9,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 24
) (
  input  logic signed [IN_W-1:0]  in_vals [N],
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned LEVELS = (N <= 1) ? 1 : $clog2(N) + 1;

  logic signed [OUT_W-1:0] lvl [LEVELS][N];

  always_comb begin
    int unsigned cnt;
    for (int l = 0; l < LEVELS; l++)
      for (int i = 0; i < N; i++)
        lvl[l][i] = '0;
    for (int i = 0; i < N; i++)
      lvl[0][i] = OUT_W'(in_vals[i]);
    cnt = N;
    for (int l = 1; l < LEVELS; l++) begin
      for (int i = 0; i < N; i++) begin
        if (2*i+1 < cnt)      lvl[l][i] = lvl[l-1][2*i] + lvl[l-1][2*i+1];
        else if (2*i < cnt)   lvl[l][i] = lvl[l-1][2*i];
      end
      cnt = (cnt + 1) / 2;
    end
    sum = lvl[LEVELS-1][0];
  end
endmodule
