// tb_pwc_engine: random 2x2x8 activations and 16x8 weights, one step per
// cycle with gaps, with and without accumulation; psum_in is presented one
// cycle after the step as the engine expects. Checks every output against a
// reference pointwise convolution (wrapped to 24 bits) and the two-cycle
// latency.
module tb_pwc_engine;
  import edea_pkg::*;
  localparam int TDN = 8, TKN = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  typedef struct { int v [NPIX][TKN]; } res_t;

  logic in_valid, acc_en, out_valid;
  act_t act [NPIX][TDN];
  wgt_t w [TKN][TDN];
  acc_t psum_in [NPIX][TKN];
  acc_t out [NPIX][TKN];
  res_t expq [$];
  res_t pend [$];        // sums waiting for their psum in the next cycle
  logic pend_acc [$];
  logic v1, v2;

  pwc_engine #(.TD(TDN), .TK(TKN)) dut (.clk, .rst_n, .in_valid, .act, .w, .acc_en, .psum_in, .out_valid, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid != v2) begin failures++; $display("latency mismatch"); end
      if (out_valid) begin
        res_t e;
        e = expq.pop_front();
        for (int j = 0; j < NPIX; j++)
          for (int k = 0; k < TKN; k++) begin
            checks++;
            if (out[j][k] != acc_t'(e.v[j][k])) begin
              failures++;
              $display("pix %0d k %0d got %0d exp %0d", j, k, out[j][k], e.v[j][k]);
            end
          end
      end
    end
    v2 = v1;
    v1 = in_valid;
  end

  initial begin
    in_valid = 0; acc_en = 0; v1 = 0; v2 = 0;
    for (int j = 0; j < NPIX; j++) for (int k = 0; k < TKN; k++) psum_in[j][k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      // psum for the step issued in the previous cycle
      if (pend.size() != 0) begin
        res_t s;
        logic a;
        s = pend.pop_front();
        a = pend_acc.pop_front();
        for (int j = 0; j < NPIX; j++)
          for (int k = 0; k < TKN; k++) begin
            psum_in[j][k] = acc_t'($signed(22'($urandom)));
            if (a) s.v[j][k] += int'(psum_in[j][k]);
          end
        expq.push_back(s);
      end
      in_valid = ($urandom % 5) != 0;
      acc_en   = it[1];
      for (int j = 0; j < NPIX; j++)
        for (int d = 0; d < TDN; d++) act[j][d] = act_t'($urandom);
      for (int k = 0; k < TKN; k++)
        for (int d = 0; d < TDN; d++) w[k][d] = wgt_t'($urandom);
      if (in_valid) begin
        res_t s;
        for (int j = 0; j < NPIX; j++)
          for (int k = 0; k < TKN; k++) begin
            s.v[j][k] = 0;
            for (int d = 0; d < TDN; d++) s.v[j][k] += int'(act[j][d]) * int'(w[k][d]);
          end
        pend.push_back(s);
        pend_acc.push_back(acc_en);
      end
    end
    @(negedge clk);
    in_valid = 0;
    if (pend.size() != 0) begin
      res_t s;
      logic a;
      s = pend.pop_front();
      a = pend_acc.pop_front();
      for (int j = 0; j < NPIX; j++)
        for (int k = 0; k < TKN; k++) begin
          psum_in[j][k] = acc_t'($signed(22'($urandom)));
          if (a) s.v[j][k] += int'(psum_in[j][k]);
        end
      expq.push_back(s);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
