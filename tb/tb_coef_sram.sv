// tb_coef_sram -- writes all 256 words of a 1 KB coefficient memory with
// random values, reads them back in random order, and checks the
// registered read (data valid the cycle after rd_en, held otherwise).
module tb_coef_sram;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] wa, ra;
  logic [31:0] wd, rd;
  logic [31:0] model [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  coef_sram dut (.clk_i(clk), .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd), .rd_en_i(re), .rd_addr_i(ra), .rd_data_o(rd));

  initial begin
    logic [31:0] last;
    wa = 0; ra = 0; wd = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; wa = 8'(i); wd = $urandom; model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1000; i++) begin
      re = 1; ra = 8'($urandom);
      @(negedge clk);
      checks++;
      if (rd !== model[ra]) begin failures++; $display("FAIL read %0d: %h expected %h", ra, rd, model[ra]); end
      last = rd;
      re = 0; ra = 8'($urandom);
      @(negedge clk);
      checks++;
      if (rd !== last) begin failures++; $display("FAIL hold"); end
      // overwrite a word now and then
      we = 1; wa = 8'($urandom); wd = $urandom; model[wa] = wd;
      @(negedge clk); we = 0;
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
