// tb_csr_to_bitmask -- checks the CSR-to-bitmask conversion and the
// Select-Bits mux at the full width (256 bits, 32 positions of 8 bits).
// Includes the worked example of chunk 0 = 241 and chunk 31 = 51, random
// CSR words (with repeated positions), random bitmask words, and the
// one-cycle latency.  The reference sets bits from the positions directly.
module tb_csr_to_bitmask;
  localparam int N = 256;
  logic clk = 0, rst_n = 0, vi = 0, csr = 0, vo;
  logic [N-1:0] word, bm;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csr_to_bitmask #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .word_i(word),
                               .csr_mode_i(csr), .valid_o(vo), .bitmask_o(bm));

  task automatic run(input logic [N-1:0] w, input logic mode);
    logic [N-1:0] e;
    e = '0;
    if (mode) for (int k = 0; k < 32; k++) e[w[8*k +: 8]] = 1'b1;
    else e = w;
    @(negedge clk); word = w; csr = mode; vi = 1;
    @(negedge clk); vi = 0;
    checks++;
    if (!vo || bm !== e) begin
      failures++;
      $display("FAIL mode %0b word %h -> %h expected %h", mode, w, bm, e);
    end
  endtask

  initial begin
    logic [N-1:0] w;
    word = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // worked example: chunk 0 = 241, chunk 31 = 51, all others repeat 241
    w = '0;
    for (int k = 0; k < 32; k++) w[8*k +: 8] = 8'd241;
    w[8*31 +: 8] = 8'd51;
    run(w, 1'b1);
    checks++;
    if (!(bm[241] && bm[51] && $countones(bm) == 2)) begin
      failures++;
      $display("FAIL worked example");
    end
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k < N / 32; k++) w[32*k +: 32] = $urandom;
      run(w, 1'($urandom));
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
