// tb_nz_pos_mem -- fills the 8 KB non-zero-positions memory (256 rows of
// 256 bits) with random words and reads them back, checking the
// one-cycle registered read.
module tb_nz_pos_mem;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] wa, ra;
  logic [255:0] wd, rd;
  logic [255:0] model [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  nz_pos_mem dut (.clk_i(clk), .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd), .rd_en_i(re), .rd_addr_i(ra), .rd_data_o(rd));

  initial begin
    wa = 0; ra = 0; wd = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; wa = 8'(i);
      for (int k = 0; k < 8; k++) wd[32*k +: 32] = $urandom;
      model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1000; i++) begin
      re = 1; ra = 8'($urandom);
      @(negedge clk);
      checks++;
      if (rd !== model[ra]) begin failures++; $display("FAIL read %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
