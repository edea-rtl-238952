// tb_dwc_weight_buffer: writes the nine taps of a random 3x3x8 kernel in a
// random order, reads them back and checks all 72 weights; repeats with a
// new kernel, and checks that an out-of-range tap address writes nothing.
module tb_dwc_weight_buffer;
  import edea_pkg::*;
  localparam int TDN = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, rd_en;
  logic [3:0] wr_addr;
  wgt_t       wr_data [TDN];
  wgt_t       ker [KTAPS][TDN];
  wgt_t       model [KTAPS][TDN];

  dwc_weight_buffer #(.TD(TDN)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .ker);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0;
    for (int rep = 0; rep < 20; rep++) begin
      int order [KTAPS];
      for (int t = 0; t < KTAPS; t++) order[t] = t;
      order.shuffle();
      for (int t = 0; t < KTAPS; t++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 4'(order[t]);
        for (int d = 0; d < TDN; d++) begin
          wr_data[d] = wgt_t'($urandom);
          model[order[t]][d] = wr_data[d];
        end
      end
      @(negedge clk);
      wr_addr = 4'(9 + rep % 7);            // out of range: ignored
      for (int d = 0; d < TDN; d++) wr_data[d] = wgt_t'($urandom);
      @(negedge clk);
      wr_en = 0; rd_en = 1;
      @(posedge clk) #1;
      rd_en = 0;
      for (int t = 0; t < KTAPS; t++)
        for (int d = 0; d < TDN; d++) begin
          checks++;
          if (ker[t][d] !== model[t][d]) begin
            failures++;
            $display("tap %0d ch %0d got %0d exp %0d", t, d, ker[t][d], model[t][d]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
