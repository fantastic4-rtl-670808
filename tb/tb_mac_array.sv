// tb_mac_array -- checks the four-multiplier MAC array against integer
// arithmetic for random signed 16-bit sums and basis weights (including
// the extreme values), and the one-cycle latency.
module tb_mac_array;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic signed [15:0] s [4];
  logic signed [15:0] w [4];
  logic signed [31:0] m;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mac_array dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .sums_i(s), .basis_i(w), .valid_o(vo), .mac_o(m));

  initial begin
    for (int i = 0; i < 4; i++) begin s[i] = 0; w[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      longint e;
      e = 0;
      for (int i = 0; i < 4; i++) begin
        s[i] = (t < 4) ? -16'sd32768 : 16'($urandom);
        w[i] = (t < 2) ? -16'sd32768 : (t < 4) ? 16'sd32767 : 16'($urandom);
        e += longint'(s[i]) * longint'(w[i]);
      end
      vi = 1;
      @(negedge clk);
      vi = 0;
      checks++;
      if (!vo || m !== 32'(e)) begin failures++; $display("FAIL mac %0d expected %0d", m, 32'(e)); end
    end
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
