// tb_offline_buffer: loads random k and b for the eight channels, reads them
// back, and checks that the read output holds while rd_en is low.
module tb_offline_buffer;
  import edea_pkg::*;
  localparam int TDN = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, rd_en;
  logic [2:0] wr_ch;
  kb_t        wr_k, wr_b;
  kb_t        k [TDN];
  kb_t        b [TDN];
  kb_t        mk [TDN];
  kb_t        mb [TDN];

  offline_buffer #(.TD(TDN)) dut (.clk, .wr_en, .wr_ch, .wr_k, .wr_b, .rd_en, .k, .b);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int d = 0; d < TDN; d++) begin
      checks += 2;
      if (k[d] !== mk[d]) begin failures++; $display("k[%0d] got %0d exp %0d", d, k[d], mk[d]); end
      if (b[d] !== mb[d]) begin failures++; $display("b[%0d] got %0d exp %0d", d, b[d], mb[d]); end
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0;
    for (int rep = 0; rep < 30; rep++) begin
      for (int d = 0; d < TDN; d++) begin
        @(negedge clk);
        wr_en = 1; wr_ch = 3'(d);
        wr_k = kb_t'($urandom); wr_b = kb_t'($urandom);
        mk[d] = wr_k; mb[d] = wr_b;
      end
      @(negedge clk);
      wr_en = 0; rd_en = 1;
      @(posedge clk) #1;
      rd_en = 0;
      compare();
      // overwrite one channel without reading: output must not change
      @(negedge clk);
      wr_en = 1; wr_ch = 3'(rep % TDN); wr_k = kb_t'($urandom); wr_b = kb_t'($urandom);
      @(posedge clk) #1;
      wr_en = 0;
      @(posedge clk) #1;
      compare();
      mk[rep % TDN] = wr_k; mb[rep % TDN] = wr_b;
      @(negedge clk) rd_en = 1;
      @(posedge clk) #1;
      rd_en = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
