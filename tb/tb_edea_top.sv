// tb_edea_top: end-to-end test of the accelerator at its default size.
//
// The testbench plays the external memory. For each depthwise separable
// layer it splits the output into 8x8 spatial tiles and the input channels
// into groups of 8; for every (tile, group) it loads the padded ifmap tile,
// the 3x3 kernels, the Non-Conv k/b and the 1x1 kernels of all kernel
// groups, starts the tile, serves the partial-sum reads and stores the
// results. At the end every output of the layer is compared with a
// reference DSC computed here: zero-padded 3x3 depthwise convolution,
// y = Round(Clip(k*x + b, 0, 255)) in floating point, and a pointwise
// convolution summed over all channels (wrapped to 24 bits).
// Each tile must take exactly 9 + blocks * kernel groups cycles from the
// start cycle to the last result (the paper's tile latency).
// Mechanisms counted (each must occur): stride 1 and stride 2 tiles,
// partial-sum accumulation, intermediate-buffer reuse over several kernel
// groups, partial (edge) tiles, ReLU clipping to 0 and saturation at 255.
module tb_edea_top;
  import edea_pkg::*;
  localparam int TDN = 8, TKN = 16, SIDE = 17;
  localparam int MAXH = 32, MAXD = 16, MAXK = 48, MAXO = 16;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---- DUT ports ----
  logic       ifm_wr_en, dwcw_wr_en, off_wr_en, pwcw_wr_en;
  logic [4:0] ifm_wr_row, ifm_wr_col;
  act_t       ifm_wr_data [TDN];
  logic [3:0] dwcw_wr_addr;
  wgt_t       dwcw_wr_data [TDN];
  logic [2:0] off_wr_ch;
  kb_t        off_wr_k, off_wr_b;
  logic [5:0] pwcw_wr_kg;
  logic [3:0] pwcw_wr_kern;
  wgt_t       pwcw_wr_data [TDN];
  logic       cfg_stride2, cfg_acc, start, busy, done;
  logic [2:0] cfg_n_rows, cfg_n_cols;
  logic [6:0] cfg_n_kg;
  logic       psum_rd_en, out_valid;
  logic [3:0] psum_rd_blk, out_blk;
  logic [5:0] psum_rd_kg, out_kg;
  acc_t       psum_in [NPIX][TKN];
  acc_t       out_data [NPIX][TKN];

  edea_top dut (.*);

  // ---- layer data ----
  act_t ifm [MAXH][MAXH][MAXD];
  wgt_t dww [9][MAXD];
  wgt_t pww [MAXK][MAXD];
  kb_t  kk [MAXD], bb [MAXD];
  int   qref [MAXO][MAXO][MAXD];
  acc_t omem [MAXO][MAXO][MAXK];        // external result / partial-sum memory

  // current tile, used by the memory model
  int tile_oy, tile_ox, tile_ncols;

  // ---- counters ----
  int n_s1 = 0, n_s2 = 0, n_acc = 0, n_reuse = 0, n_edge = 0, n_relu = 0, n_sat = 0, n_out = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // partial-sum reads (one cycle latency) and result writes
  always @(posedge clk) begin
    if (psum_rd_en) begin
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TKN; k++)
          psum_in[j][k] <= omem[tile_oy + 2 * (int'(psum_rd_blk) / tile_ncols) + j / 2]
                               [tile_ox + 2 * (int'(psum_rd_blk) % tile_ncols) + j % 2]
                               [int'(psum_rd_kg) * TKN + k];
      n_acc++;
    end
    if (out_valid) begin
      n_out++;
      if (out_kg != 0) n_reuse++;
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TKN; k++)
          omem[tile_oy + 2 * (int'(out_blk) / tile_ncols) + j / 2]
              [tile_ox + 2 * (int'(out_blk) % tile_ncols) + j % 2]
              [int'(out_kg) * TKN + k] = out_data[j][k];
    end
  end

  function automatic int ref_q(int xv, int kv, int bv);
    real v;
    v = $floor((real'(xv) * real'(kv) + real'(bv)) / 65536.0 + 0.5);
    if (v < 0.0) return 0;
    if (v > 255.0) return 255;
    return int'(v);
  endfunction

  task automatic run_layer(input int H, input int D, input int K, input int S);
    int O, G, KG;
    O = H / S; G = (D + TDN - 1) / TDN; KG = (K + TKN - 1) / TKN;
    // random layer
    for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) for (int d = 0; d < D; d++)
      ifm[y][x][d] = ($urandom % 4 == 0) ? 8'd0 : act_t'($urandom);
    for (int d = 0; d < D; d++) begin
      for (int t = 0; t < 9; t++) dww[t][d] = wgt_t'($urandom);
      kk[d] = kb_t'(100 + $urandom % 900);
      bb[d] = kb_t'(($signed(8'($urandom))) * 65536);
    end
    for (int k = 0; k < K; k++) for (int d = 0; d < D; d++) pww[k][d] = wgt_t'($urandom);
    // reference DWC + Non-Conv
    for (int oy = 0; oy < O; oy++) for (int ox = 0; ox < O; ox++) for (int d = 0; d < D; d++) begin
      int acc;
      acc = 0;
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        int iy, ix;
        iy = S * oy + ky - 1; ix = S * ox + kx - 1;
        if (iy >= 0 && iy < H && ix >= 0 && ix < H) acc += int'(ifm[iy][ix][d]) * int'(dww[ky*3+kx][d]);
      end
      qref[oy][ox][d] = ref_q(acc, int'(kk[d]), int'(bb[d]));
      if (qref[oy][ox][d] == 0) n_relu++;
      if (qref[oy][ox][d] == 255) n_sat++;
    end
    // tiles
    for (int ty = 0; ty < O; ty += 8) for (int tx = 0; tx < O; tx += 8) begin
      int nr, nc;
      nr = ((O - ty < 8 ? O - ty : 8) + 1) / 2;
      nc = ((O - tx < 8 ? O - tx : 8) + 1) / 2;
      if (nr < 4 || nc < 4) n_edge++;
      for (int g = 0; g < G; g++) begin
        int t0, lat;
        // load ifmap tile with zero padding
        for (int r = 0; r < SIDE; r++) for (int c = 0; c < SIDE; c++) begin
          int iy, ix;
          iy = S * ty - 1 + r; ix = S * tx - 1 + c;
          @(negedge clk);
          ifm_wr_en = 1; ifm_wr_row = 5'(r); ifm_wr_col = 5'(c);
          for (int d = 0; d < TDN; d++)
            ifm_wr_data[d] = (iy >= 0 && iy < H && ix >= 0 && ix < H && g*TDN+d < D) ? ifm[iy][ix][g*TDN+d] : 8'd0;
        end
        @(negedge clk) ifm_wr_en = 0;
        for (int t = 0; t < 9; t++) begin
          dwcw_wr_en = 1; dwcw_wr_addr = 4'(t);
          for (int d = 0; d < TDN; d++) dwcw_wr_data[d] = (g*TDN+d < D) ? dww[t][g*TDN+d] : 8'sd0;
          @(negedge clk);
        end
        dwcw_wr_en = 0;
        for (int d = 0; d < TDN; d++) begin
          off_wr_en = 1; off_wr_ch = 3'(d);
          off_wr_k = (g*TDN+d < D) ? kk[g*TDN+d] : '0;
          off_wr_b = (g*TDN+d < D) ? bb[g*TDN+d] : '0;
          @(negedge clk);
        end
        off_wr_en = 0;
        for (int q = 0; q < KG; q++) for (int k = 0; k < TKN; k++) begin
          pwcw_wr_en = 1; pwcw_wr_kg = 6'(q); pwcw_wr_kern = 4'(k);
          for (int d = 0; d < TDN; d++)
            pwcw_wr_data[d] = (q*TKN+k < K && g*TDN+d < D) ? pww[q*TKN+k][g*TDN+d] : 8'sd0;
          @(negedge clk);
        end
        pwcw_wr_en = 0;
        // start the tile
        tile_oy = ty; tile_ox = tx; tile_ncols = nc;
        cfg_stride2 = (S == 2); cfg_acc = (g != 0);
        cfg_n_rows = 3'(nr); cfg_n_cols = 3'(nc); cfg_n_kg = 7'(KG);
        start = 1;
        @(posedge clk);
        t0 = 0;
        #1 start = 0;
        if (S == 2) n_s2++; else n_s1++;
        lat = 0;
        while (!done) begin @(posedge clk); #1; lat++; end
        checks++;
        if (lat + 2 != 9 + nr * nc * KG) begin
          failures++;
          $display("tile latency %0d cycles, expected %0d", lat + 2, 9 + nr * nc * KG);
        end
        @(posedge clk);                     // memory model takes the last result
        @(negedge clk);
      end
    end
    // compare
    for (int oy = 0; oy < O; oy++) for (int ox = 0; ox < O; ox++) for (int k = 0; k < K; k++) begin
      int e;
      e = 0;
      for (int d = 0; d < D; d++) e += qref[oy][ox][d] * int'(pww[k][d]);
      checks++;
      if (omem[oy][ox][k] != acc_t'(e)) begin
        failures++;
        if (failures < 20) $display("H%0d S%0d out(%0d,%0d,%0d) got %0d exp %0d", H, S, oy, ox, k, omem[oy][ox][k], e);
      end
    end
  endtask

  initial begin
    ifm_wr_en = 0; dwcw_wr_en = 0; off_wr_en = 0; pwcw_wr_en = 0; start = 0;
    cfg_stride2 = 0; cfg_acc = 0; cfg_n_rows = 1; cfg_n_cols = 1; cfg_n_kg = 1;
    tile_oy = 0; tile_ox = 0; tile_ncols = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(12, 16, 48, 1);   // 12x12x16 -> 12x12x48: edge tiles, 2 channel groups, 3 kernel groups
    run_layer(16, 8, 16, 2);    // 16x16x8, stride 2 -> 8x8x16
    run_layer(4, 16, 32, 1);    // small late-layer shape
    checks++;
    if (n_s1 == 0 || n_s2 == 0 || n_acc == 0 || n_reuse == 0 || n_edge == 0 || n_relu == 0 || n_sat == 0) begin
      failures++;
      $display("mechanism not exercised");
    end
    $display("mechanisms: stride1 tiles=%0d stride2 tiles=%0d psum reads=%0d ib reuse=%0d edge tiles=%0d relu=%0d sat=%0d results=%0d",
             n_s1, n_s2, n_acc, n_reuse, n_edge, n_relu, n_sat, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
