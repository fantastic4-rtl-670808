// tb_float2int -- checks rounding of single-precision values to the 16-bit
// PSum: round to nearest with ties away from zero, saturation at -32768 and
// 32767, small values to 0, and the one-cycle latency.  The reference is
// computed with $floor on reals.
module tb_float2int;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [31:0] x;
  logic signed [15:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  float2int dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .x_i(x), .valid_o(vo), .y_o(y));

  task automatic run(input logic [31:0] v);
    real r, q;
    int  e;
    r = f2r(v);
    q = (r >= 0.0) ? $floor(r + 0.5) : -$floor(-r + 0.5);
    if (q > 32767.0) q = 32767.0;
    if (q < -32768.0) q = -32768.0;
    e = int'(q);
    @(negedge clk); x = v; vi = 1;
    @(negedge clk); vi = 0;
    checks++;
    if (!vo || int'(y) != e) begin
      failures++;
      $display("FAIL float2int %h (%f) -> %0d, expected %0d", v, r, y, e);
    end
  endtask

  initial begin
    x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) run(rand_float(110, 150));
    run(32'h3F000000);  //  0.5 -> 1
    run(32'hBF000000);  // -0.5 -> -1
    run(32'h3FC00000);  //  1.5 -> 2
    run(32'h40200000);  //  2.5 -> 3
    run(32'h3EFFFFFF);  // just below 0.5 -> 0
    run(32'h47000000);  //  32768 -> 32767
    run(32'hC7000000);  // -32768 -> -32768
    run(32'h00000000);
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
