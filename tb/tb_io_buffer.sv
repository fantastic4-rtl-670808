// tb_io_buffer -- checks the ping-pong buffer: host writes land in the
// input bank, PSum writes in the output bank, and after a swap the former
// output bank is read as input (and the former input bank is the new
// output bank); the host reads the input bank.  Runs several swaps against a two-bank model.
module tb_io_buffer;
  logic clk = 0, rst_n = 0, swap = 0, iwe = 0, re = 0, owe = 0, bank;
  logic [7:0] ia, ra, oa, ha;
  logic [15:0] id, rd, od, hd;
  logic [15:0] m [2][256];
  logic sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  io_buffer dut (.clk_i(clk), .rst_ni(rst_n), .swap_i(swap), .bank_o(bank),
    .in_we_i(iwe), .in_addr_i(ia), .in_data_i(id), .rd_en_i(re), .rd_addr_i(ra), .rd_data_o(rd),
    .out_we_i(owe), .out_addr_i(oa), .out_data_i(od), .host_rd_addr_i(ha), .host_rd_data_o(hd));

  initial begin
    ia = 0; ra = 0; oa = 0; ha = 0; id = 0; od = 0; sel = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      // host fills the input bank in even rounds only; odd rounds use the swapped PSums
      if (round % 2 == 0) for (int i = 0; i < 256; i++) begin
        iwe = 1; ia = 8'(i); id = 16'($urandom); m[sel][i] = id;
        @(negedge clk);
      end
      iwe = 0;
      for (int i = 0; i < 256; i++) begin
        re = 1; ra = 8'(i);
        owe = 1; oa = 8'(255 - i); od = 16'($urandom); m[!sel][255 - i] = od;
        @(negedge clk);
        checks++;
        if (rd !== m[sel][i]) begin failures++; $display("FAIL round %0d input word %0d", round, i); end
      end
      re = 0; owe = 0;
      for (int i = 0; i < 256; i += 7) begin
        ha = 8'(i);
        @(negedge clk);
        checks++;
        if (hd !== m[sel][i]) begin failures++; $display("FAIL round %0d host read word %0d", round, i); end
      end
      checks++;
      if (bank !== sel) begin failures++; $display("FAIL bank"); end
      swap = 1;
      @(negedge clk);
      swap = 0;
      sel = !sel;
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
