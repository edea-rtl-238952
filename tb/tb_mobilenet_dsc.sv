// tb_mobilenet_dsc: runs the thirteen depthwise separable layers of
// MobileNetV1 for 32x32 (CIFAR-10) inputs through the accelerator at its
// default size, with random 8-bit data, and checks every output against a
// reference computed here (same reference as tb_edea_top).
//
// Layer shapes (input side, channels in, kernels out, stride):
//   0: 32,32,64,1   1: 32,64,128,2   2: 16,128,128,1   3: 16,128,256,2
//   4: 8,256,256,1  5: 8,256,512,2   6-10: 4,512,512,1
//   11: 4,512,1024,2  12: 2,1024,1024,1
// For each layer the compute cycles (start cycle to last result, summed
// over all tiles) must equal the paper's latency model
//   Lat_total = (9 + ceil(N/2)*ceil(M/2)*ceil(K/16)) * tiles * ceil(D/8)
// with tiles = number of 8x8 output tiles. The plusarg +layers=<mask>
// selects layers (default: all).
module tb_mobilenet_dsc;
  import edea_pkg::*;
  localparam int TDN = 8, TKN = 16, SIDE = 17;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

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

  // layer data, flattened: ifm[(y*H + x)*D + d], pww[k*D + d], omem[(y*O + x)*K + k]
  int   H, D, K, S, O;
  act_t ifm [];
  wgt_t dww [];          // [t*D + d]
  wgt_t pww [];
  kb_t  kk [], bb [];
  int   qref [];         // [(y*O + x)*D + d]
  acc_t omem [];
  int   tile_oy, tile_ox, tile_ncols;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int oaddr(int blk, int j, int kg, int k);
    int y, x;
    y = tile_oy + 2 * (blk / tile_ncols) + j / 2;
    x = tile_ox + 2 * (blk % tile_ncols) + j % 2;
    return (y * O + x) * K + kg * TKN + k;
  endfunction

  always @(posedge clk) begin
    if (psum_rd_en)
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TKN; k++)
          psum_in[j][k] <= omem[oaddr(int'(psum_rd_blk), j, int'(psum_rd_kg), k)];
    if (out_valid)
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TKN; k++)
          omem[oaddr(int'(out_blk), j, int'(out_kg), k)] = out_data[j][k];
  end

  function automatic int ref_q(int xv, int kv, int bv);
    real v;
    v = $floor((real'(xv) * real'(kv) + real'(bv)) / 65536.0 + 0.5);
    if (v < 0.0) return 0;
    if (v > 255.0) return 255;
    return int'(v);
  endfunction

  task automatic run_layer(input int li, input int h, input int dd, input int kk_n, input int s);
    int G, KG, cycles, model, ntiles, bad;
    H = h; D = dd; K = kk_n; S = s; O = H / S;
    G = (D + TDN - 1) / TDN; KG = (K + TKN - 1) / TKN;
    ifm = new[H * H * D]; dww = new[9 * D]; pww = new[K * D];
    kk = new[D]; bb = new[D]; qref = new[O * O * D]; omem = new[O * O * K];
    foreach (ifm[i]) ifm[i] = ($urandom % 3 == 0) ? 8'd0 : act_t'($urandom);
    foreach (dww[i]) dww[i] = wgt_t'($urandom);
    foreach (pww[i]) pww[i] = wgt_t'($urandom);
    for (int d = 0; d < D; d++) begin
      kk[d] = kb_t'(100 + $urandom % 900);
      bb[d] = kb_t'(($signed(8'($urandom))) * 65536);
    end
    for (int oy = 0; oy < O; oy++) for (int ox = 0; ox < O; ox++) for (int d = 0; d < D; d++) begin
      int acc;
      acc = 0;
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        int iy, ix;
        iy = S * oy + ky - 1; ix = S * ox + kx - 1;
        if (iy >= 0 && iy < H && ix >= 0 && ix < H)
          acc += int'(ifm[(iy * H + ix) * D + d]) * int'(dww[(ky * 3 + kx) * D + d]);
      end
      qref[(oy * O + ox) * D + d] = ref_q(acc, int'(kk[d]), int'(bb[d]));
    end
    cycles = 0; ntiles = 0;
    for (int ty = 0; ty < O; ty += 8) for (int tx = 0; tx < O; tx += 8) begin
      int nr, nc;
      nr = ((O - ty < 8 ? O - ty : 8) + 1) / 2;
      nc = ((O - tx < 8 ? O - tx : 8) + 1) / 2;
      ntiles++;
      for (int g = 0; g < G; g++) begin
        int lat;
        for (int r = 0; r < SIDE; r++) for (int c = 0; c < SIDE; c++) begin
          int iy, ix;
          iy = S * ty - 1 + r; ix = S * tx - 1 + c;
          @(negedge clk);
          ifm_wr_en = 1; ifm_wr_row = 5'(r); ifm_wr_col = 5'(c);
          for (int d = 0; d < TDN; d++)
            ifm_wr_data[d] = (iy >= 0 && iy < H && ix >= 0 && ix < H) ? ifm[(iy * H + ix) * D + g * TDN + d] : 8'd0;
        end
        @(negedge clk) ifm_wr_en = 0;
        for (int t = 0; t < 9; t++) begin
          dwcw_wr_en = 1; dwcw_wr_addr = 4'(t);
          for (int d = 0; d < TDN; d++) dwcw_wr_data[d] = dww[t * D + g * TDN + d];
          @(negedge clk);
        end
        dwcw_wr_en = 0;
        for (int d = 0; d < TDN; d++) begin
          off_wr_en = 1; off_wr_ch = 3'(d);
          off_wr_k = kk[g * TDN + d]; off_wr_b = bb[g * TDN + d];
          @(negedge clk);
        end
        off_wr_en = 0;
        for (int q = 0; q < KG; q++) for (int k = 0; k < TKN; k++) begin
          pwcw_wr_en = 1; pwcw_wr_kg = 6'(q); pwcw_wr_kern = 4'(k);
          for (int d = 0; d < TDN; d++) pwcw_wr_data[d] = pww[(q * TKN + k) * D + g * TDN + d];
          @(negedge clk);
        end
        pwcw_wr_en = 0;
        tile_oy = ty; tile_ox = tx; tile_ncols = nc;
        cfg_stride2 = (S == 2); cfg_acc = (g != 0);
        cfg_n_rows = 3'(nr); cfg_n_cols = 3'(nc); cfg_n_kg = 7'(KG);
        start = 1;
        @(posedge clk);
        #1 start = 0;
        lat = 0;
        while (!done) begin @(posedge clk); #1; lat++; end
        cycles += lat + 2;
        @(posedge clk);
        @(negedge clk);
      end
    end
    model = (9 + ((O + 1) / 2 < 4 ? (O + 1) / 2 : 4) * ((O + 1) / 2 < 4 ? (O + 1) / 2 : 4) * KG) * ntiles * G;
    checks++;
    if (cycles != model) begin failures++; $display("layer %0d: %0d cycles, model %0d", li, cycles, model); end
    bad = 0;
    for (int oy = 0; oy < O; oy++) for (int ox = 0; ox < O; ox++) for (int k = 0; k < K; k++) begin
      int e;
      e = 0;
      for (int d = 0; d < D; d++) e += qref[(oy * O + ox) * D + d] * int'(pww[k * D + d]);
      checks++;
      if (omem[(oy * O + ox) * K + k] != acc_t'(e)) begin
        failures++; bad++;
        if (bad < 5) $display("layer %0d out(%0d,%0d,%0d) got %0d exp %0d", li, oy, ox, k, omem[(oy * O + ox) * K + k], e);
      end
    end
    $display("layer %0d: %0dx%0dx%0d -> %0dx%0dx%0d stride %0d, %0d tiles x %0d groups, %0d compute cycles (%0.2f us at 1 GHz), %0d mismatches",
             li, H, H, D, O, O, K, S, ntiles, G, cycles, real'(cycles) / 1000.0, bad);
  endtask

  initial begin
    int mask;
    int lh [13] = '{32, 32, 16, 16, 8, 8, 4, 4, 4, 4, 4, 4, 2};
    int ld [13] = '{32, 64, 128, 128, 256, 256, 512, 512, 512, 512, 512, 512, 1024};
    int lk [13] = '{64, 128, 128, 256, 256, 512, 512, 512, 512, 512, 512, 1024, 1024};
    int ls [13] = '{1, 2, 1, 2, 1, 2, 1, 1, 1, 1, 1, 2, 1};
    if (!$value$plusargs("layers=%d", mask)) mask = 'h1fff;
    ifm_wr_en = 0; dwcw_wr_en = 0; off_wr_en = 0; pwcw_wr_en = 0; start = 0;
    cfg_stride2 = 0; cfg_acc = 0; cfg_n_rows = 1; cfg_n_cols = 1; cfg_n_kg = 1;
    tile_oy = 0; tile_ox = 0; tile_ncols = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int li = 0; li < 13; li++)
      if (mask[li]) run_layer(li, lh[li], ld[li], lk[li], ls[li]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
