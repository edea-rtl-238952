// tb_dwc_ifmap_buffer: fills a 17x17x8 tile with random pixels, then reads
// every 2x2-block window at stride 1 and stride 2 and compares the 5x5x8
// window (zeros outside the tile) with a copy of the tile kept here.
module tb_dwc_ifmap_buffer;
  import edea_pkg::*;
  localparam int TDN = 8, SIDE = 17;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, rd_en, stride2;
  logic [4:0] wr_row, wr_col;
  act_t       wr_data [TDN];
  logic [1:0] blk_row, blk_col;
  act_t       win [WIN][WIN][TDN];
  act_t       model [SIDE][SIDE][TDN];

  dwc_ifmap_buffer #(.TD(TDN), .TILE_OUT(8)) dut (.clk, .wr_en, .wr_row, .wr_col, .wr_data,
    .rd_en, .blk_row, .blk_col, .stride2, .win);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; stride2 = 0; blk_row = 0; blk_col = 0;
    for (int r = 0; r < SIDE; r++)
      for (int c = 0; c < SIDE; c++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 5'(r); wr_col = 5'(c);
        for (int d = 0; d < TDN; d++) begin
          wr_data[d] = act_t'($urandom);
          model[r][c][d] = wr_data[d];
        end
      end
    @(negedge clk) wr_en = 0;
    for (int s = 1; s <= 2; s++)
      for (int br = 0; br < 4; br++)
        for (int bc = 0; bc < 4; bc++) begin
          @(negedge clk);
          rd_en = 1; stride2 = (s == 2); blk_row = 2'(br); blk_col = 2'(bc);
          @(posedge clk) #1;
          rd_en = 0;
          for (int r = 0; r < WIN; r++)
            for (int c = 0; c < WIN; c++)
              for (int d = 0; d < TDN; d++) begin
                int pr, pc;
                act_t e;
                pr = 2 * s * br + r; pc = 2 * s * bc + c;
                e = (pr < SIDE && pc < SIDE) ? model[pr][pc][d] : '0;
                checks++;
                if (win[r][c][d] !== e) begin
                  failures++;
                  $display("s%0d blk(%0d,%0d) w(%0d,%0d) ch%0d got %0d exp %0d", s, br, bc, r, c, d, win[r][c][d], e);
                end
              end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
