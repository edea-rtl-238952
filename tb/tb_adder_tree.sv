// tb_adder_tree: checks the adder tree for the two sizes the engines use
// (9 and 8 inputs) against a plain loop sum, on random and extreme inputs.
module tb_adder_tree;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] in9 [9];
  logic signed [15:0] in8 [8];
  logic signed [23:0] s9, s8;

  adder_tree #(.N(9), .IN_W(16), .OUT_W(24)) dut9 (.in_vals(in9), .sum(s9));
  adder_tree #(.N(8), .IN_W(16), .OUT_W(24)) dut8 (.in_vals(in8), .sum(s8));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int r9, r8;
      r9 = 0; r8 = 0;
      for (int i = 0; i < 9; i++) begin
        case (it)
          0: in9[i] = 16'sh7fff;
          1: in9[i] = -16'sh8000;
          default: in9[i] = 16'($urandom);
        endcase
        r9 += int'(in9[i]);
      end
      for (int i = 0; i < 8; i++) begin
        in8[i] = (it == 0) ? -16'sh8000 : 16'($urandom);
        r8 += int'(in8[i]);
      end
      @(posedge clk);
      checks += 2;
      if (int'(s9) != r9) begin failures++; $display("N=9 mismatch %0d vs %0d", s9, r9); end
      if (int'(s8) != r8) begin failures++; $display("N=8 mismatch %0d vs %0d", s8, r8); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
