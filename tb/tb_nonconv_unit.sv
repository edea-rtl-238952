// tb_nonconv_unit: checks y = Round(Clip(k*x + b, 0, 255)) with k, b in
// Q8.16, against a reference computed in floating point (k/2^16, b/2^16,
// round half up via floor(v + 0.5)). Covers negative results (ReLU),
// saturation at 255, exact halves, and the one-cycle latency.
module tb_nonconv_unit;
  import edea_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  acc_t x [4];
  kb_t  k, b;
  act_t y [4];
  int   exp_y [4];

  nonconv_unit dut (.clk, .rst_n, .in_valid, .x, .k, .b, .out_valid, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(int xv, int kv, int bv);
    real v;
    v = (real'(xv) * real'(kv) + real'(bv)) / 65536.0;
    v = $floor(v + 0.5);
    if (v < 0.0) return 0;
    if (v > 255.0) return 255;
    return int'(v);
  endfunction

  int n_relu = 0, n_sat = 0;
  initial begin
    in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      in_valid = 1;
      case (it % 3)
        0: begin k = kb_t'($urandom); b = kb_t'($urandom); end            // full range
        1: begin k = kb_t'($signed(17'($urandom))); b = kb_t'($signed(20'($urandom))); end
        default: begin k = 24'sd32768; b = kb_t'(($urandom % 64) * 32768); end // halves
      endcase
      for (int i = 0; i < 4; i++) begin
        x[i] = (it % 3 == 2) ? acc_t'($signed(10'($urandom))) : acc_t'($signed(18'($urandom)));
        exp_y[i] = ref_q(int'(x[i]), int'(k), int'(b));
        if (exp_y[i] == 0) n_relu++;
        if (exp_y[i] == 255) n_sat++;
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (int'(y[i]) != exp_y[i]) begin
          failures++;
          $display("x=%0d k=%0d b=%0d got %0d exp %0d", x[i], k, b, y[i], exp_y[i]);
        end
      end
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk) #1;
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    checks++;
    if (n_relu == 0 || n_sat == 0) begin failures++; $display("coverage relu=%0d sat=%0d", n_relu, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
