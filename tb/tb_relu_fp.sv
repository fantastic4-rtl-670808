// tb_relu_fp -- checks ReLU on single-precision values: negative values
// and -0 give +0, positive values pass unchanged.
module tb_relu_fp;
  import tb_fp_pkg::*;
  logic [31:0] x, y;
  int checks = 0, failures = 0;

  relu_fp dut (.x_i(x), .y_o(y));

  initial begin
    for (int i = 0; i < 1000; i++) begin
      real r;
      x = (i == 0) ? 32'h80000000 : rand_float(1, 254);
      #1;
      r = f2r(x);
      checks++;
      if (f2r(y) != ((r > 0.0) ? r : 0.0) || y[31]) begin
        failures++;
        $display("FAIL relu %h -> %h", x, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
