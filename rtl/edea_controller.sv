// edea_controller: sequencer of one tile (one channel group of one spatial
// tile) of a depthwise separable layer.
//
// After a start pulse it issues one step per clock. A step names a 2x2
// output block (iss_row, iss_col; iss_blk = row*n_cols + col) and a PWC
// kernel group (iss_kg). Kernel groups are the inner loop, so the DWC work
// of a block is issued only with its first kernel group (iss_dwc) and the
// quantized DWC result is reused from the intermediate buffer for the other
// groups. The datapath behind it is a fixed pipeline of PIPE = 8 stages, so
// the first result leaves 9 cycles after the start cycle and a tile takes
//     9 + n_rows * n_cols * n_kg   cycles,
// the tile latency of the paper. done is high for one cycle together with
// the last result; busy covers issuing and draining. A start while busy is
// ignored. The loop order inside a tile is this design's reading of the
// paper's latency equation.
module edea_controller #(
  parameter int unsigned TILE_OUT = 8,
  parameter int unsigned MAX_KG   = 64,
  parameter int unsigned PIPE     = 8,
  parameter int unsigned BW       = $clog2(TILE_OUT / 2),
  parameter int unsigned GW       = $clog2(MAX_KG),
  parameter int unsigned IW       = 2 * BW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [BW:0]   n_rows,   // 2x2 blocks per tile column, 1..TILE_OUT/2
  input  logic [BW:0]   n_cols,   // 2x2 blocks per tile row,    1..TILE_OUT/2
  input  logic [GW:0]   n_kg,     // kernel groups ceil(K/TK),   1..MAX_KG
  output logic          iss_valid,
  output logic          iss_dwc,
  output logic [BW-1:0] iss_row,
  output logic [BW-1:0] iss_col,
  output logic [IW-1:0] iss_blk,
  output logic [GW-1:0] iss_kg,
  output logic          iss_last,
  output logic          busy,
  output logic          done
);
  logic          issuing;
  logic [BW-1:0] row, col;
  logic [IW-1:0] blk;
  logic [GW-1:0] kg;
  logic [BW:0]   rows_q, cols_q;
  logic [GW:0]   kgs_q;
  logic [$clog2(PIPE+1)-1:0] drain;

  logic last_kg, last_col, last_row;
  assign last_kg  = ({1'b0, kg}  == kgs_q - 1'b1);
  assign last_col = ({1'b0, col} == cols_q - 1'b1);
  assign last_row = ({1'b0, row} == rows_q - 1'b1);

  assign iss_valid = issuing;
  assign iss_dwc   = issuing && kg == '0;
  assign iss_row   = row;
  assign iss_col   = col;
  assign iss_blk   = blk;
  assign iss_kg    = kg;
  assign iss_last  = issuing && last_kg && last_col && last_row;
  assign busy      = issuing || drain != '0;
  assign done      = drain == ($clog2(PIPE+1))'(PIPE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      drain   <= '0;
      row     <= '0;
      col     <= '0;
      blk     <= '0;
      kg      <= '0;
      rows_q  <= '0;
      cols_q  <= '0;
      kgs_q   <= '0;
    end else if (!busy) begin
      if (start) begin
        issuing <= 1'b1;
        row     <= '0;
        col     <= '0;
        blk     <= '0;
        kg      <= '0;
        rows_q  <= n_rows;
        cols_q  <= n_cols;
        kgs_q   <= n_kg;
      end
    end else if (issuing) begin
      if (!last_kg) begin
        kg <= kg + 1'b1;
      end else begin
        kg <= '0;
        if (!last_col) begin
          col <= col + 1'b1;
          blk <= blk + 1'b1;
        end else begin
          col <= '0;
          if (!last_row) begin
            row <= row + 1'b1;
            blk <= blk + 1'b1;
          end else begin
            issuing <= 1'b0;
            drain   <= 1;
          end
        end
      end
    end else begin
      drain <= (drain == ($clog2(PIPE+1))'(PIPE)) ? '0 : drain + 1'b1;
    end
  end

  // configuration must be non-zero and within the tile
  assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (n_rows != 0 && n_cols != 0 && n_kg != 0 &&
                          int'(n_rows) <= TILE_OUT / 2 && int'(n_cols) <= TILE_OUT / 2 && int'(n_kg) <= MAX_KG));
endmodule
