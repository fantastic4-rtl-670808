// tb_adder_tree -- checks the adder tree at full size (256 activations):
// loads random 16-bit activations, then streams random weight-ID rows with
// every combination of Act_SW (lower/upper byte) and sign mode, one row per
// cycle, and compares the four bit-plane sums (16-bit wrap) with a direct
// sum over the activations.  Also checks the two-cycle latency.
module tb_adder_tree;
  localparam int N = 256;
  logic clk = 0, rst_n = 0, we = 0, sw = 0, sg = 0, vi = 0, vo;
  logic [7:0] addr;
  logic [15:0] wdata;
  logic [3:0] ids [N];
  logic signed [15:0] sums [4];
  logic [15:0] act [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  adder_tree #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .act_we_i(we), .act_addr_i(addr), .act_wdata_i(wdata),
    .act_sw_i(sw), .sign_mode_i(sg), .valid_i(vi), .ids_i(ids), .valid_o(vo), .sums_o(sums));

  // expected results of rows in flight
  logic [63:0] expq [$];

  function automatic int byte_val(input logic [15:0] a, input logic s, input logic g);
    logic [7:0] b;
    b = s ? a[15:8] : a[7:0];
    return g ? int'(signed'(b)) : int'(b);
  endfunction

  initial begin
    addr = 0; wdata = 0;
    for (int j = 0; j < N; j++) ids[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      act[j] = 16'($urandom);
      we = 1; addr = 8'(j); wdata = act[j];
      @(negedge clk);
    end
    we = 0;
    for (int m = 0; m < 4; m++) begin
      sw = m[0]; sg = m[1];
      for (int r = 0; r < 50; r++) begin
        logic [63:0] e;
        vi = 1;
        for (int j = 0; j < N; j++) ids[j] = ($urandom_range(0, 2) == 0) ? 4'd0 : 4'($urandom);
        for (int i = 0; i < 4; i++) begin
          int s;
          s = 0;
          for (int j = 0; j < N; j++) if (ids[j][i]) s += byte_val(act[j], sw, sg);
          e[16*i +: 16] = 16'(s);
        end
        expq.push_back(e);
        @(negedge clk);
        if (vo) begin
          logic [63:0] x;
          x = expq.pop_front();
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (sums[i] !== x[16*i +: 16]) begin failures++; $display("FAIL plane %0d: %0d expected %0d", i, sums[i], signed'(x[16*i +: 16])); end
          end
        end
      end
      vi = 0;
      // drain; latency check: the row issued last is still in flight (two-cycle latency)
      checks++;
      if (expq.size() != 1) begin failures++; $display("FAIL latency: %0d rows in flight", expq.size()); end
      while (expq.size() > 0) begin
        @(negedge clk);
        if (vo) begin
          logic [63:0] x;
          x = expq.pop_front();
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (sums[i] !== x[16*i +: 16]) begin failures++; $display("FAIL drain plane %0d: %0d exp %0d", i, sums[i], signed'(x[16*i +: 16])); end
          end
        end
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
