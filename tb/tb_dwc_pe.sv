// tb_dwc_pe: random 3x3 windows and kernels (plus the all-extreme case)
// for the four columns of a DWC PE, compared with a direct dot product.
module tb_dwc_pe;
  import edea_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  act_t win [NPIX][KTAPS];
  wgt_t ker [KTAPS];
  acc_t psum [NPIX];

  dwc_pe dut (.win, .ker, .psum);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int t = 0; t < KTAPS; t++) begin
        ker[t] = (it == 0) ? -8'sd128 : (it == 1) ? 8'sd127 : wgt_t'($urandom);
        for (int j = 0; j < NPIX; j++) win[j][t] = (it < 2) ? 8'hff : act_t'($urandom);
      end
      @(posedge clk);
      for (int j = 0; j < NPIX; j++) begin
        int ref_s;
        ref_s = 0;
        for (int t = 0; t < KTAPS; t++) ref_s += int'(win[j][t]) * int'(ker[t]);
        checks++;
        if (int'(psum[j]) != ref_s) begin
          failures++;
          $display("pixel %0d: got %0d expected %0d", j, psum[j], ref_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
