// edea_top: dual-engine accelerator for depthwise separable convolution.
//
// A depthwise (DWC) engine and a pointwise (PWC) engine run at the same
// time on one tile: the DWC engine makes a 2x2x8 output block, eight
// Non-Conv units turn it into 8-bit PWC activations with one multiply-add
// per value (batch norm, ReLU and requantization folded into k and b), the
// result goes into the on-chip intermediate buffer, and the PWC engine
// multiplies it with 16 kernels per cycle. DWC activations never go to
// external memory.
//
// Blocks: DWC input buffer = DWC ifmap buffer + DWC weight buffer + offline
// (Non-Conv parameter) buffer; PWC input buffer = intermediate buffer + PWC
// weight buffer; controller. External memory is outside: it loads the
// buffers through the *_wr_* ports before a tile, supplies partial sums of
// earlier channel groups on psum_in and takes the results from out_*.
//
// One tile = one group of TD channels of a spatial tile of up to
// TILE_OUT x TILE_OUT outputs. Pipeline, counted from the cycle T0 in which
// start is sampled (step n issued in cycle T(n+1)):
//   T1 ifmap window + DWC weights read   T5 PWC ifmap + weights read
//   T2 DWC engine                        T6 PWC engine (psum_rd_* issued)
//   T3 offline k,b read                  T7 accumulate with psum_in
//   T4 Non-Conv, written to intermediate T8 -> out_valid in T9
// so the first result appears 9 cycles after start and a tile takes
// 9 + blocks * kernel groups cycles, as in the paper. psum_in must carry,
// in the cycle after psum_rd_en, the partial sum of block psum_rd_blk and
// kernel group psum_rd_kg (out_data layout); it is ignored when cfg_acc=0
// (first channel group). Configuration is sampled with start.
// The stage order follows the paper's pipeline figure; the register
// placement and the external-memory handshake are this design's choices.
module edea_top
  import edea_pkg::*;
#(
  parameter int unsigned TD       = edea_pkg::N_TD,
  parameter int unsigned TK       = edea_pkg::N_TK,
  parameter int unsigned TILE_OUT = 8,
  parameter int unsigned MAX_KG   = 64,
  parameter int unsigned SIDE     = (TILE_OUT - 1) * 2 + 3,
  parameter int unsigned AW       = $clog2(SIDE),
  parameter int unsigned BW       = $clog2(TILE_OUT / 2),
  parameter int unsigned IW       = 2 * BW,
  parameter int unsigned GW       = $clog2(MAX_KG),
  parameter int unsigned CW       = $clog2(TD),
  parameter int unsigned KW       = $clog2(TK)
) (
  input  logic          clk,
  input  logic          rst_n,
  // DWC ifmap buffer load
  input  logic          ifm_wr_en,
  input  logic [AW-1:0] ifm_wr_row,
  input  logic [AW-1:0] ifm_wr_col,
  input  act_t          ifm_wr_data [TD],
  // DWC weight buffer load (tap 0..8)
  input  logic          dwcw_wr_en,
  input  logic [3:0]    dwcw_wr_addr,
  input  wgt_t          dwcw_wr_data [TD],
  // offline buffer load (Non-Conv k, b of one channel)
  input  logic          off_wr_en,
  input  logic [CW-1:0] off_wr_ch,
  input  kb_t           off_wr_k,
  input  kb_t           off_wr_b,
  // PWC weight buffer load (one kernel of one kernel group)
  input  logic          pwcw_wr_en,
  input  logic [GW-1:0] pwcw_wr_kg,
  input  logic [KW-1:0] pwcw_wr_kern,
  input  wgt_t          pwcw_wr_data [TD],
  // tile configuration and control
  input  logic          cfg_stride2,
  input  logic          cfg_acc,
  input  logic [BW:0]   cfg_n_rows,
  input  logic [BW:0]   cfg_n_cols,
  input  logic [GW:0]   cfg_n_kg,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // partial sums from external memory
  output logic          psum_rd_en,
  output logic [IW-1:0] psum_rd_blk,
  output logic [GW-1:0] psum_rd_kg,
  input  acc_t          psum_in [NPIX][TK],
  // results to external memory
  output logic          out_valid,
  output logic [IW-1:0] out_blk,
  output logic [GW-1:0] out_kg,
  output acc_t          out_data [NPIX][TK]
);
  typedef struct packed {
    logic          valid;
    logic          dwc;
    logic [IW-1:0] blk;
    logic [GW-1:0] kg;
    logic          last;
  } step_t;

  localparam int unsigned PIPE = 8;

  // ---------------- controller ----------------
  logic          iss_valid, iss_dwc, iss_last;
  logic [BW-1:0] iss_row, iss_col;
  logic [IW-1:0] iss_blk;
  logic [GW-1:0] iss_kg;
  logic          stride2_q, acc_q;

  edea_controller #(.TILE_OUT(TILE_OUT), .MAX_KG(MAX_KG), .PIPE(PIPE)) u_ctrl (
    .clk, .rst_n, .start,
    .n_rows(cfg_n_rows), .n_cols(cfg_n_cols), .n_kg(cfg_n_kg),
    .iss_valid, .iss_dwc, .iss_row, .iss_col, .iss_blk, .iss_kg, .iss_last,
    .busy, .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stride2_q <= 1'b0;
      acc_q     <= 1'b0;
    end else if (start && !busy) begin
      stride2_q <= cfg_stride2;
      acc_q     <= cfg_acc;
    end
  end

  // step descriptor travelling with the data, st[i] valid in T(n+1+i)
  step_t st [PIPE+1];
  assign st[0] = '{valid: iss_valid, dwc: iss_dwc, blk: iss_blk, kg: iss_kg, last: iss_last};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= PIPE; i++) st[i] <= '0;
    end else begin
      for (int i = 1; i <= PIPE; i++) st[i] <= st[i-1];
    end
  end

  // ---------------- stage 0: DWC input ifmap & weights ----------------
  act_t win [WIN][WIN][TD];
  wgt_t ker [KTAPS][TD];

  dwc_ifmap_buffer #(.TD(TD), .TILE_OUT(TILE_OUT)) u_ifm (
    .clk, .wr_en(ifm_wr_en), .wr_row(ifm_wr_row), .wr_col(ifm_wr_col), .wr_data(ifm_wr_data),
    .rd_en(iss_dwc), .blk_row(iss_row), .blk_col(iss_col), .stride2(stride2_q), .win
  );

  dwc_weight_buffer #(.TD(TD)) u_dwcw (
    .clk, .wr_en(dwcw_wr_en), .wr_addr(dwcw_wr_addr), .wr_data(dwcw_wr_data),
    .rd_en(iss_dwc), .ker
  );

  // ---------------- stage 1: DWC engine ----------------
  logic dwc_valid;
  acc_t dwc_out [NPIX][TD];

  dwc_engine #(.TD(TD)) u_dwc (
    .clk, .rst_n, .in_valid(st[1].valid && st[1].dwc), .stride2(stride2_q),
    .win, .ker, .out_valid(dwc_valid), .out(dwc_out)
  );

  // ---------------- stage 2: offline data read, DWC result held ----------------
  kb_t  nc_k [TD];
  kb_t  nc_b [TD];
  acc_t dwc_q [NPIX][TD];

  offline_buffer #(.TD(TD)) u_off (
    .clk, .wr_en(off_wr_en), .wr_ch(off_wr_ch), .wr_k(off_wr_k), .wr_b(off_wr_b),
    .rd_en(st[2].valid && st[2].dwc), .k(nc_k), .b(nc_b)
  );

  always_ff @(posedge clk) begin
    if (dwc_valid) dwc_q <= dwc_out;
  end

  // ---------------- stage 3: Non-Conv units, one per channel ----------------
  act_t nc_y [NPIX][TD];
  logic [TD-1:0] nc_valid;  // all equal; unit 0's drives the buffer write

  for (genvar d = 0; d < TD; d++) begin : g_nc
    acc_t x_d [NPIX];
    act_t y_d [NPIX];
    for (genvar j = 0; j < NPIX; j++) begin : g_px
      assign x_d[j]     = dwc_q[j][d];
      assign nc_y[j][d] = y_d[j];
    end
    nonconv_unit #(.LANES(NPIX)) u_nc (
      .clk, .rst_n, .in_valid(st[3].valid && st[3].dwc),
      .x(x_d), .k(nc_k[d]), .b(nc_b[d]), .out_valid(nc_valid[d]), .y(y_d)
    );
  end

  // ---------------- stage 4: write intermediate buffer ----------------
  // ---------------- stage 5: PWC ifmap and weights read ----------------
  act_t pwc_act [NPIX][TD];
  wgt_t pwc_w   [TK][TD];

  intermediate_buffer #(.TD(TD), .DEPTH((TILE_OUT / 2) * (TILE_OUT / 2))) u_ib (
    .clk, .wr_en(nc_valid[0]), .wr_addr(st[4].blk), .wr_data(nc_y),
    .rd_en(st[5].valid), .rd_addr(st[5].blk), .rd_data(pwc_act)
  );

  pwc_weight_buffer #(.TD(TD), .TK(TK), .MAX_KG(MAX_KG)) u_pwcw (
    .clk, .wr_en(pwcw_wr_en), .wr_kg(pwcw_wr_kg), .wr_kern(pwcw_wr_kern), .wr_data(pwcw_wr_data),
    .rd_en(st[5].valid), .rd_kg(st[5].kg), .w(pwc_w)
  );

  // ---------------- stages 6-7: PWC engine and accumulation ----------------
  assign psum_rd_en  = st[6].valid && acc_q;
  assign psum_rd_blk = st[6].blk;
  assign psum_rd_kg  = st[6].kg;

  pwc_engine #(.TD(TD), .TK(TK)) u_pwc (
    .clk, .rst_n, .in_valid(st[6].valid), .act(pwc_act), .w(pwc_w),
    .acc_en(acc_q), .psum_in, .out_valid, .out(out_data)
  );

  assign out_blk = st[8].blk;
  assign out_kg  = st[8].kg;

  // the data path and the step descriptor must stay in lock step
  assert property (@(posedge clk) disable iff (!rst_n) out_valid == st[PIPE].valid);
  assert property (@(posedge clk) disable iff (!rst_n) nc_valid[0] == (st[4].valid && st[4].dwc));
  // the eight Non-Conv units run in lock step
  assert property (@(posedge clk) disable iff (!rst_n) nc_valid == '0 || nc_valid == '1);
  // done comes with the last result of the tile
  assert property (@(posedge clk) disable iff (!rst_n) done == (out_valid && st[PIPE].last));
endmodule
