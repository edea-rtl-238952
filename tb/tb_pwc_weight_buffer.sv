// tb_pwc_weight_buffer: loads all 64 kernel groups x 16 kernels x 8
// weights with random values (kernels in random order), then reads every
// group in random order and compares the 128 weights with a model.
module tb_pwc_weight_buffer;
  import edea_pkg::*;
  localparam int TDN = 8, TKN = 16, KG = 64;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, rd_en;
  logic [5:0] wr_kg, rd_kg;
  logic [3:0] wr_kern;
  wgt_t       wr_data [TDN];
  wgt_t       w [TKN][TDN];
  wgt_t       model [KG][TKN][TDN];

  pwc_weight_buffer #(.TD(TDN), .TK(TKN), .MAX_KG(KG)) dut (.clk, .wr_en, .wr_kg, .wr_kern,
    .wr_data, .rd_en, .rd_kg, .w);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [KG];
    wr_en = 0; rd_en = 0;
    for (int g = 0; g < KG; g++) begin
      int ko [TKN];
      for (int k = 0; k < TKN; k++) ko[k] = k;
      ko.shuffle();
      for (int k = 0; k < TKN; k++) begin
        @(negedge clk);
        wr_en = 1; wr_kg = 6'(g); wr_kern = 4'(ko[k]);
        for (int d = 0; d < TDN; d++) begin
          wr_data[d] = wgt_t'($urandom);
          model[g][ko[k]][d] = wr_data[d];
        end
      end
    end
    @(negedge clk) wr_en = 0;
    for (int g = 0; g < KG; g++) order[g] = g;
    order.shuffle();
    for (int i = 0; i < KG; i++) begin
      @(negedge clk);
      rd_en = 1; rd_kg = 6'(order[i]);
      @(posedge clk) #1;
      for (int k = 0; k < TKN; k++)
        for (int d = 0; d < TDN; d++) begin
          checks++;
          if (w[k][d] !== model[order[i]][k][d]) begin
            failures++;
            $display("kg %0d k %0d d %0d got %0d exp %0d", order[i], k, d, w[k][d], model[order[i]][k][d]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
