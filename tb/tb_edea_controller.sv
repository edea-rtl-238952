// tb_edea_controller: for random tile shapes (1..4 x 1..4 blocks, 1..64
// kernel groups) checks the issued step sequence (kernel group innermost,
// blocks row-major, DWC issued only with group 0, last flag), that done
// comes exactly 9 + blocks*groups - 1 cycles after the start cycle as the
// paper's tile latency requires, busy over that span, and that a start
// while busy is ignored.
module tb_edea_controller;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start, iss_valid, iss_dwc, iss_last, busy, done;
  logic [2:0] n_rows, n_cols;
  logic [6:0] n_kg;
  logic [1:0] iss_row, iss_col;
  logic [3:0] iss_blk;
  logic [5:0] iss_kg;

  edea_controller #(.TILE_OUT(8), .MAX_KG(64)) dut (.clk, .rst_n, .start, .n_rows, .n_cols, .n_kg,
    .iss_valid, .iss_dwc, .iss_row, .iss_col, .iss_blk, .iss_kg, .iss_last, .busy, .done);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    start = 0; n_rows = 1; n_cols = 1; n_kg = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int R, C, G, steps, lat;
      R = 1 + $urandom % 4; C = 1 + $urandom % 4; G = (t == 0) ? 64 : 1 + $urandom % 16;
      steps = R * C * G;
      lat = 9 + steps;
      @(negedge clk);
      start = 1; n_rows = 3'(R); n_cols = 3'(C); n_kg = 7'(G);
      @(negedge clk);                       // cycle 1 after the start cycle
      start = 0;
      for (int c = 1; c < lat + 2; c++) begin
        int s, r, cc, g;
        s = c - 1;
        if (c == 3) start = 1;              // ignored while busy
        if (c == 4) start = 0;
        if (c == 3) begin n_rows = 1; n_cols = 1; n_kg = 1; end
        chk(busy == (c <= lat - 1), $sformatf("busy at cycle %0d", c));
        chk(done == (c == lat - 1), $sformatf("done at cycle %0d (lat %0d)", c, lat));
        chk(iss_valid == (s < steps), $sformatf("iss_valid at cycle %0d", c));
        if (s < steps) begin
          g = s % G; cc = (s / G) % C; r = s / (G * C);
          chk(int'(iss_kg) == g && int'(iss_col) == cc && int'(iss_row) == r && int'(iss_blk) == r * C + cc,
              $sformatf("step %0d: got r%0d c%0d b%0d g%0d", s, iss_row, iss_col, iss_blk, iss_kg));
          chk(iss_dwc == (g == 0), "iss_dwc");
          chk(iss_last == (s == steps - 1), "iss_last");
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
