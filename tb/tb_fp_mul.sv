// tb_fp_mul -- checks the single-precision multiplier against real-valued
// products.  Two 24-bit significands multiply exactly in double precision,
// so the truncated double product must equal the multiplier's result bit
// for bit.  Also checks zero, underflow and overflow and the one-cycle
// latency.
module tb_fp_mul;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [31:0] a, b, p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fp_mul dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .a_i(a), .b_i(b), .valid_o(vo), .p_o(p));

  task automatic run(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp_p);
    @(negedge clk); a = x; b = y; vi = 1;
    @(negedge clk); vi = 0;
    checks++;
    if (!vo || p !== exp_p) begin
      failures++;
      $display("FAIL mul %h * %h = %h (valid %0b), expected %h", x, y, p, vo, exp_p);
    end
  endtask

  initial begin
    a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] x, y;
      x = rand_float(70, 180);
      y = rand_float(70, 180);
      run(x, y, r2f_trunc(f2r(x) * f2r(y)));
    end
    run(32'h3FC00000, 32'h40000000, 32'h40400000);   // 1.5 * 2 = 3
    run(32'hBF800000, 32'h3F800000, 32'hBF800000);   // -1 * 1 = -1
    run(32'h00000000, 32'h40400000, 32'h00000000);   // 0 * 3 = 0
    run(32'h80000000, 32'h40400000, 32'h80000000);   // -0 * 3 = -0
    run(32'h0C800000, 32'h0C800000, 32'h00000000);   // underflow -> 0
    run(32'h7E800000, 32'h7E800000, 32'h7F800000);   // overflow -> inf
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
