// tb_control_unit -- checks the layer sequencing of the control unit
// (N = 16, pipeline latency 11): State1 reads every activation address once
// and writes each one the cycle after it is read, rows 0..R-1 are issued
// on consecutive cycles starting N+2 cycles after start, done pulses once,
// PIPE_LAT+1 cycles after the last row, and start is ignored while busy.
// Also covers a layer of zero rows.
module tb_control_unit;
  import fc4_pkg::*;
  localparam int N = 16, LAT = 11;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_rows;
  ctrl_state_e st;
  logic busy, done, rde, we, rv;
  logic [3:0] rda, wa;
  logic [15:0] ri;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  control_unit #(.N(N), .PIPE_LAT(LAT)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .n_rows_i(n_rows),
    .state_o(st), .busy_o(busy), .done_o(done), .act_rd_en_o(rde), .act_rd_addr_o(rda),
    .act_we_o(we), .act_waddr_o(wa), .row_valid_o(rv), .row_idx_o(ri));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic layer(input int rows);
    int cyc, nrd, nwe, nrow, ndone, last_rd, first_row, last_row, done_cyc;
    nrd = 0; nwe = 0; nrow = 0; ndone = 0; last_rd = -1; first_row = -1; last_row = -1; done_cyc = -1;
    @(negedge clk); n_rows = 16'(rows); start = 1;
    @(negedge clk); start = 0;
    check(st == ST_STATE1, "State1 after start");
    cyc = 1;
    while (done_cyc < 0 && cyc < 1000) begin
      if (cyc == 5) start = 1;  // ignored while busy
      if (rde) begin check(int'(rda) == nrd, "read order"); nrd++; last_rd = int'(rda); end
      if (we)  begin check(int'(wa) == nwe, "write order"); nwe++; end
      if (rv)  begin
        check(int'(ri) == nrow, "row order");
        if (first_row < 0) first_row = cyc;
        last_row = cyc; nrow++;
      end
      if (done) done_cyc = cyc;
      @(negedge clk);
      start = 0;
      cyc++;
    end
    check(nrd == N && nwe == N, "all activations moved");
    check(nrow == rows, "all rows issued");
    if (rows > 0) begin
      check(first_row == N + 2, $sformatf("first row in cycle %0d", first_row));
      check(last_row == first_row + rows - 1, "one row per cycle");
      check(done_cyc == last_row + LAT + 1, $sformatf("done at %0d, last row %0d", done_cyc, last_row));
    end
    @(negedge clk);
    check(!busy && st == ST_START, "back to Start");
  endtask

  initial begin
    n_rows = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!busy && st == ST_START, "idle after reset");
    layer(5);
    layer(1);
    layer(40);
    layer(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
