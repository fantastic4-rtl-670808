// tb_fix2float -- checks the fixed-to-float converter against the double
// value of the integer truncated to single precision (exact reference),
// for random 32-bit values of all magnitudes, zero, -1 and -2^31, and the
// one-cycle latency.
module tb_fix2float;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic signed [31:0] x;
  logic [31:0] f;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fix2float dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .fixed_i(x), .valid_o(vo), .float_o(f));

  task automatic run(input logic signed [31:0] v);
    logic [31:0] e;
    e = r2f_trunc(real'(v));
    @(negedge clk); x = v; vi = 1;
    @(negedge clk); vi = 0;
    checks++;
    if (!vo || f !== e) begin
      failures++;
      $display("FAIL fix2float %0d -> %h, expected %h", v, f, e);
    end
  endtask

  initial begin
    x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic signed [31:0] v;
      v = 32'($urandom) >>> $urandom_range(0, 31);
      run(v);
    end
    run(0); run(1); run(-1); run(32'sh80000000); run(32'sh7FFFFFFF); run(16777217);
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
