// tb_dwc_engine: drives random 5x5x8 windows and 3x3x8 kernels at stride 1
// and stride 2, back to back, and checks each 2x2x8 output against a
// reference depthwise convolution, and that results come one cycle later.
module tb_dwc_engine;
  import edea_pkg::*;
  localparam int TDN = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, stride2, out_valid;
  act_t win [WIN][WIN][TDN];
  wgt_t ker [KTAPS][TDN];
  acc_t out [NPIX][TDN];
  typedef struct { int v [NPIX][TDN]; } res_t;
  res_t expq [$];
  res_t e;

  dwc_engine #(.TD(TDN)) dut (.clk, .rst_n, .in_valid, .stride2, .win, .ker, .out_valid, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: out_valid must follow in_valid by exactly one cycle
  logic prev_in;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid != prev_in) begin failures++; $display("latency: out_valid=%0b", out_valid); end
      if (out_valid) begin
        e = expq.pop_front();
        for (int j = 0; j < NPIX; j++)
          for (int d = 0; d < TDN; d++) begin
            checks++;
            if (int'(out[j][d]) != e.v[j][d]) begin
              failures++;
              $display("pix %0d ch %0d got %0d exp %0d", j, d, out[j][d], e.v[j][d]);
            end
          end
      end
    end
    prev_in = in_valid;
  end

  initial begin
    in_valid = 0; stride2 = 0; prev_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int s;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      stride2  = it[0];
      s = stride2 ? 2 : 1;
      for (int r = 0; r < WIN; r++)
        for (int c = 0; c < WIN; c++)
          for (int d = 0; d < TDN; d++) win[r][c][d] = act_t'($urandom);
      for (int t = 0; t < KTAPS; t++)
        for (int d = 0; d < TDN; d++) ker[t][d] = wgt_t'($urandom);
      if (in_valid) begin
        for (int j = 0; j < NPIX; j++)
          for (int d = 0; d < TDN; d++) begin
            e.v[j][d] = 0;
            for (int kr = 0; kr < 3; kr++)
              for (int kc = 0; kc < 3; kc++)
                e.v[j][d] += int'(win[s*(j/2)+kr][s*(j%2)+kc][d]) * int'(ker[kr*3+kc][d]);
          end
        expq.push_back(e);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
