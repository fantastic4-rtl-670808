// tb_fifo_module -- checks the weight-ID FIFO module (16 FIFOs of depth 8
// here) against per-FIFO queues: random pushes and random pop vectors,
// heads, empty and full flags, filling one FIFO completely, and clear.
module tb_fifo_module;
  localparam int N = 16, D = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  logic [3:0] idx;
  logic [3:0] pdata;
  logic [N-1:0] pop = '0, empty, full;
  logic [3:0] head [N];
  logic [3:0] q [N][$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fifo_module #(.N(N), .DEPTH(D), .ID_W(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .push_idx_i(idx),
    .push_data_i(pdata), .pop_i(pop), .head_o(head), .empty_o(empty), .full_o(full));

  task automatic compare();
    for (int j = 0; j < N; j++) begin
      checks++;
      if (empty[j] !== (q[j].size() == 0) || full[j] !== (q[j].size() == D) ||
          (q[j].size() != 0 && head[j] !== q[j][0])) begin
        failures++;
        $display("FAIL fifo %0d: empty %0b full %0b head %h, model size %0d", j, empty[j], full[j], head[j], q[j].size());
      end
    end
  endtask

  initial begin
    idx = 0; pdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int i = 0; i < 3000; i++) begin
      int j;
      j = $urandom_range(0, N - 1);
      push = (q[j].size() < D) && ($urandom_range(0, 2) != 0);
      idx = 4'(j); pdata = 4'($urandom);
      for (int k = 0; k < N; k++) pop[k] = (q[k].size() > 0) && ($urandom_range(0, 3) == 0) && !(push && k == j);
      @(negedge clk);
      if (push) q[j].push_back(pdata);
      for (int k = 0; k < N; k++) if (pop[k]) void'(q[k].pop_front());
      push = 0; pop = '0;
      compare();
    end
    // fill FIFO 3 to the top
    while (q[3].size() < D) begin
      push = 1; idx = 3; pdata = 4'($urandom);
      @(negedge clk);
      q[3].push_back(pdata);
    end
    push = 0;
    #1 compare();
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int k = 0; k < N; k++) q[k].delete();
    compare();
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
