// tb_intermediate_buffer: random interleaved writes and reads of the 16
// block entries (2x2x8 bytes each), including a read of an entry in the
// cycle right after its write, checked against a model memory.
module tb_intermediate_buffer;
  import edea_pkg::*;
  localparam int TDN = 8, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  typedef struct { act_t v [NPIX][TDN]; } blk_t;

  logic       wr_en, rd_en;
  logic [3:0] wr_addr, rd_addr;
  act_t       wr_data [NPIX][TDN];
  act_t       rd_data [NPIX][TDN];
  blk_t       model [DEPTH];
  logic       written [DEPTH];

  intermediate_buffer #(.TD(TDN), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data,
    .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_wr;
    wr_en = 0; rd_en = 0; last_wr = -1;
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    for (int it = 0; it < 2000; it++) begin
      blk_t e;
      logic do_rd;
      @(negedge clk);
      // read: prefer the entry written in the previous cycle
      do_rd = 0;
      if (last_wr >= 0 && it % 2 == 1) begin rd_addr = 4'(last_wr); do_rd = 1; end
      else begin
        rd_addr = 4'($urandom);
        do_rd = written[rd_addr];
      end
      rd_en = do_rd;
      if (do_rd) e = model[rd_addr];
      wr_en = ($urandom % 2) == 0;
      wr_addr = 4'($urandom);
      if (wr_en && wr_addr == rd_addr) wr_addr = wr_addr + 1;   // no same-cycle read/write of one entry
      for (int j = 0; j < NPIX; j++) for (int d = 0; d < TDN; d++) wr_data[j][d] = act_t'($urandom);
      last_wr = -1;
      if (wr_en) begin
        for (int j = 0; j < NPIX; j++) for (int d = 0; d < TDN; d++) model[wr_addr].v[j][d] = wr_data[j][d];
        written[wr_addr] = 1;
        last_wr = int'(wr_addr);
      end
      @(posedge clk) #1;
      if (do_rd)
        for (int j = 0; j < NPIX; j++)
          for (int d = 0; d < TDN; d++) begin
            checks++;
            if (rd_data[j][d] !== e.v[j][d]) begin
              failures++;
              $display("addr %0d got %0d exp %0d", rd_addr, rd_data[j][d], e.v[j][d]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
