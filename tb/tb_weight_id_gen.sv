// tb_weight_id_gen -- checks the weight ID generator (16 columns here):
// pops only where the bitmask is 1 and only while valid, IDs of masked
// columns are 0, others equal the FIFO heads, one-cycle latency.
module tb_weight_id_gen;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [N-1:0] bm, pop;
  logic [3:0] head [N];
  logic [3:0] ids [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  weight_id_gen #(.N(N), .ID_W(4)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .bitmask_i(bm),
    .fifo_head_i(head), .fifo_pop_o(pop), .valid_o(vo), .ids_o(ids));

  initial begin
    logic [3:0] exp_ids [N];
    bm = '0;
    for (int j = 0; j < N; j++) head[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      vi = 1'($urandom_range(0, 3) != 0);
      bm = N'($urandom);
      for (int j = 0; j < N; j++) head[j] = 4'($urandom);
      for (int j = 0; j < N; j++) exp_ids[j] = bm[j] ? head[j] : 4'd0;
      #1;
      checks++;
      if (pop !== (vi ? bm : '0)) begin failures++; $display("FAIL pop %h bm %h vi %0b", pop, bm, vi); end
      @(negedge clk);
      checks++;
      if (vo !== vi) begin failures++; $display("FAIL valid"); end
      if (vi) for (int j = 0; j < N; j++) begin
        checks++;
        if (ids[j] !== exp_ids[j]) begin failures++; $display("FAIL id %0d = %h expected %h", j, ids[j], exp_ids[j]); end
      end
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
