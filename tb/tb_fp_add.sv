// tb_fp_add -- checks the single-precision adder against real-valued sums.
// For exponent differences up to 24 the double sum is exact; the adder
// truncates after keeping three guard bits, so its result may lie one unit
// in the last place above the truncated exact sum in magnitude when the
// operands have opposite signs, and must match exactly otherwise.  Also
// checks cancellation, zero operands and the one-cycle latency.
module tb_fp_add;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fp_add dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .a_i(a), .b_i(b), .valid_o(vo), .s_o(s));

  task automatic run(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp_s, input int tol);
    int diff;
    @(negedge clk); a = x; b = y; vi = 1;
    @(negedge clk); vi = 0;
    checks++;
    diff = int'(s[30:0]) - int'(exp_s[30:0]);
    if (!vo || s[31] !== exp_s[31] && exp_s[30:0] != 0 || diff < 0 || diff > tol) begin
      failures++;
      $display("FAIL add %h + %h = %h (valid %0b), expected %h", x, y, s, vo, exp_s);
    end
  endtask

  initial begin
    a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, y;
      x = rand_float(100, 150);
      y = {1'($urandom), 8'(int'(x[30:23]) - int'($urandom_range(0, 24))), 23'($urandom)};
      if ($urandom_range(0, 1) == 1) {x, y} = {y, x};
      run(x, y, r2f_trunc(f2r(x) + f2r(y)), (x[31] != y[31]) ? 1 : 0);
    end
    run(32'h3F800000, 32'h3F800000, 32'h40000000, 0);  // 1 + 1 = 2
    run(32'h40400000, 32'hC0400000, 32'h00000000, 0);  // 3 - 3 = 0
    run(32'h00000000, 32'h40400000, 32'h40400000, 0);  // 0 + 3 = 3
    run(32'hC0A00000, 32'h40400000, 32'hC0000000, 0);  // -5 + 3 = -2
    run(32'h3F800000, 32'h33800000, 32'h3F800000, 0);  // 1 + 2^-24 -> 1 (truncated)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
