// tb_pwc_pe: four unsigned activations times one signed weight, checked
// against integer products, including the extreme values.
module tb_pwc_pe;
  import edea_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  act_t  act [NPIX];
  wgt_t  w;
  prod_t prod [NPIX];

  pwc_pe dut (.act, .w, .prod);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      w = (it == 0) ? -8'sd128 : (it == 1) ? 8'sd127 : wgt_t'($urandom);
      for (int j = 0; j < NPIX; j++) act[j] = (it < 2) ? 8'hff : act_t'($urandom);
      @(posedge clk);
      for (int j = 0; j < NPIX; j++) begin
        checks++;
        if (int'(prod[j]) != int'(act[j]) * int'(w)) begin
          failures++;
          $display("got %0d exp %0d", prod[j], int'(act[j]) * int'(w));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
