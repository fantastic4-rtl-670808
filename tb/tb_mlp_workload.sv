// tb_mlp_workload -- runs the single-pass part of the speech-command and
// hand-gesture MLPs on the full-size engine (default parameters).
//
// The speech-command MLP has hidden/output widths 512-512-256-256-128-128-12,
// the hand-gesture MLP 512-256-128-12.  A layer runs in one pass when it
// has at most 256 inputs and 256 output rows, so the chain this test runs
// is 256->256->128->128->12; its last two layers also have the shapes of
// the gesture MLP's 256->128->12 tail.  Weights are random sparse 4-bit IDs
// (40 % non-zero, CSR for the sparse 12-row output layer), activations are
// unsigned bytes in the low half of each 16-bit word, and each layer's
// output scale alpha2 is a power of two calibrated on the reference so that
// the next layer's inputs use the byte range without exceeding it.  Each
// layer's input is the previous layer's output bank after the ping-pong
// swap; nothing is reloaded between layers except weights and coefficients.
//
// The reference model keeps both I/O buffer banks.  Coefficients are powers
// of two and multiples of 1/16, so every float step is exact and the model
// can use reals.  Checks: every PSum, one per cycle, the start-to-done time
// N + 2 + R + 11 of every layer, and the final 12 outputs read back through
// the host port.  The model and the timing rule are this testbench's own.
module tb_mlp_workload;
  import fc4_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 256, LAT = 11, NL = 4;
  localparam int IN_DIM  [NL] = '{256, 256, 128, 128};
  localparam int OUT_DIM [NL] = '{256, 128, 128, 12};

  logic clk = 0, rst_n = 0;
  logic ld_valid = 0;
  ld_target_e ld_target;
  logic [15:0] ld_addr;
  logic [N-1:0] ld_data;
  layer_cfg_t cfg;
  logic start = 0, busy, done, psum_valid, bank;
  ctrl_state_e state;
  logic [9:2] stage_busy;
  logic [15:0] psum_row;
  logic signed [15:0] psum;
  logic [7:0] host_addr;
  logic [15:0] host_data;

  int checks = 0, failures = 0;
  longint total_cycles = 0, total_weights = 0;

  always #5 clk = ~clk;

  fantastic4_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .ld_valid_i(ld_valid), .ld_target_i(ld_target), .ld_addr_i(ld_addr), .ld_data_i(ld_data),
    .cfg_i(cfg), .start_i(start), .busy_o(busy), .done_o(done), .state_o(state), .stage_busy_o(stage_busy),
    .psum_valid_o(psum_valid), .psum_row_o(psum_row), .psum_o(psum),
    .host_rd_addr_i(host_addr), .host_rd_data_o(host_data), .bank_o(bank));

  // model of the two I/O buffer banks; in_sel is the input bank
  logic [15:0] bank_m [2][N];
  int          in_sel = 0;
  logic [3:0]  ids [N][N];
  logic signed [15:0] w [4];
  logic [31:0] alpha1 [N], bias [N], alpha2;
  real         pre [N];
  int          exp_psum [N];

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic ld_burst(input ld_target_e t, input int addr, input logic [N-1:0] data);
    ld_valid = 1; ld_target = t; ld_addr = 16'(addr); ld_data = data;
    @(negedge clk);
  endtask

  task automatic make_layer(input int nin, input int rows);
    for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) ids[r][j] = 0;
    for (int r = 0; r < rows; r++) begin
      int nz;
      nz = 0;
      for (int j = 0; j < nin; j++)
        if ($urandom_range(0, 99) < 40) begin ids[r][j] = 4'($urandom_range(1, 15)); nz++; end
      if (nz == 0) ids[r][$urandom_range(0, nin - 1)] = 4'($urandom_range(1, 15));
      alpha1[r] = r2f_trunc(1.0 / real'(1 << $urandom_range(0, 3)));
    end
    for (int i = 0; i < 4; i++) w[i] = 16'(int'($urandom_range(0, 8)) - 4);
  endtask

  // Scaled MACs, then per-row biases around the layer's mean, then alpha2 = 2^-k with the smallest k that keeps the
  // largest output at or below 255, then the rounded PSums.
  task automatic reference(input int rows);
    real mx, mu;
    int  k, spread;
    mx = 0.0;
    for (int r = 0; r < rows; r++) begin
      int s [4];
      longint mac;
      for (int i = 0; i < 4; i++) begin
        s[i] = 0;
        for (int j = 0; j < N; j++) if (ids[r][j][i]) s[i] += int'(bank_m[in_sel][j][7:0]);
        s[i] = int'(signed'(16'(s[i])));
      end
      mac = 0;
      for (int i = 0; i < 4; i++) mac += longint'(w[i]) * longint'(s[i]);
      pre[r] = real'(mac) * f2r(alpha1[r]);
    end
    // biases centred on the layer's mean, so that ReLU keeps about half
    mu = 0.0;
    for (int r = 0; r < rows; r++) mu += pre[r] / real'(rows);
    spread = 1;
    for (int r = 0; r < rows; r++) begin
      int d;
      d = $rtoi(pre[r] - mu);
      if (d < 0) d = -d;
      if (d > spread) spread = d;
    end
    for (int r = 0; r < rows; r++) begin
      bias[r] = r2f_trunc(real'(-$rtoi(mu) + int'($urandom_range(0, spread)) - spread / 2)
                          + real'($urandom_range(0, 15)) / 16.0);
      pre[r] = pre[r] + f2r(bias[r]);
      if (pre[r] < 0.0) pre[r] = 0.0;
      if (pre[r] > mx) mx = pre[r];
    end
    k = 0;
    while (mx * (2.0 ** (-k)) > 255.0) k++;
    alpha2 = r2f_trunc(2.0 ** (-k));
    for (int r = 0; r < rows; r++) exp_psum[r] = int'($floor(pre[r] * (2.0 ** (-k)) + 0.5));
  endtask

  task automatic load_layer(input int rows, input logic csr);
    ld_burst(LD_CLEAR, 0, '0);
    for (int r = 0; r < rows; r++)
      for (int j = 0; j < N; j++)
        if (ids[r][j] != 0) begin ld_burst(LD_FIFO, j, N'(ids[r][j])); total_weights++; end
    for (int r = 0; r < rows; r++) begin
      logic [N-1:0] word;
      word = '0;
      if (csr) begin
        int k, first;
        k = 0; first = -1;
        for (int j = 0; j < N; j++) if (ids[r][j] != 0) begin
          word[8*k +: 8] = 8'(j);
          if (first < 0) first = j;
          k++;
        end
        for (; k < 32; k++) word[8*k +: 8] = 8'(first);
      end else begin
        for (int j = 0; j < N; j++) word[j] = (ids[r][j] != 0);
      end
      ld_burst(LD_NZ, r, word);
      ld_burst(LD_ALPHA1, r, N'(alpha1[r]));
      ld_burst(LD_BIAS, r, N'(bias[r]));
    end
    for (int i = 0; i < 4; i++) ld_burst(LD_BASIS, i, N'(w[i]));
    ld_burst(LD_ALPHA2, 0, N'(alpha2));
    ld_valid = 0;
    @(negedge clk);
  endtask

  task automatic run_layer(input int l, input logic csr);
    int cyc, got, done_cyc, last_psum;
    int rows;
    rows = OUT_DIM[l];
    cfg.csr_mode = csr; cfg.act_sw = 1'b0; cfg.sign_mode = 1'b0; cfg.n_rows = 16'(rows);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; got = 0; done_cyc = -1; last_psum = -1;
    while (done_cyc < 0 && cyc < 5000) begin
      if (psum_valid) begin
        if (got < rows)
          check(int'(psum_row) == got && int'(psum) == exp_psum[got],
                $sformatf("layer %0d row %0d: psum %0d (row %0d) expected %0d", l, got, psum, psum_row, exp_psum[got]));
        if (last_psum >= 0) check(cyc == last_psum + 1, $sformatf("layer %0d one PSum per cycle", l));
        last_psum = cyc;
        got++;
      end
      if (done) done_cyc = cyc;
      @(negedge clk);
      cyc++;
    end
    check(got == rows, $sformatf("layer %0d got %0d of %0d PSums", l, got, rows));
    check(done_cyc == N + 2 + rows + LAT, $sformatf("layer %0d done in cycle %0d", l, done_cyc));
    total_cycles += longint'(done_cyc);
    begin
      int nzo;
      nzo = 0;
      for (int r = 0; r < rows; r++) if (exp_psum[r] != 0) nzo++;
      check(nzo > rows / 4, $sformatf("layer %0d has only %0d non-zero outputs", l, nzo));
    end
    // model: outputs written into the output bank, then the banks swap
    for (int r = 0; r < rows; r++) bank_m[1 - in_sel][r] = 16'(exp_psum[r]);
    in_sel = 1 - in_sel;
    $display("layer %0d: %0d x %0d done in %0d cycles, alpha2 %g", l, IN_DIM[l], rows, done_cyc, f2r(alpha2));
  endtask

  initial begin
    ld_target = LD_ACT; ld_addr = 0; ld_data = '0; cfg = '0; host_addr = 0;
    for (int b = 0; b < 2; b++) for (int j = 0; j < N; j++) bank_m[b][j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // input activations of the first layer
    for (int j = 0; j < N; j++) begin
      bank_m[in_sel][j] = 16'($urandom_range(0, 255));
      ld_burst(LD_ACT, j, N'(bank_m[in_sel][j]));
    end
    ld_valid = 0;
    @(negedge clk);

    for (int l = 0; l < NL; l++) begin
      logic csr;
      csr = (l == NL - 1);
      make_layer(IN_DIM[l], OUT_DIM[l]);
      if (csr)   // output layer: at most 32 non-zeros per row for CSR
        for (int r = 0; r < OUT_DIM[l]; r++) begin
          int nz;
          nz = 0;
          for (int j = 0; j < N; j++) if (ids[r][j] != 0) begin
            nz++;
            if (nz > 32) ids[r][j] = 0;
          end
        end
      reference(OUT_DIM[l]);
      load_layer(OUT_DIM[l], csr);
      run_layer(l, csr);
    end

    for (int r = 0; r < OUT_DIM[NL-1]; r++) begin
      host_addr = 8'(r);
      @(negedge clk);
      check(host_data == bank_m[in_sel][r], $sformatf("output %0d read back %0d expected %0d", r, host_data, bank_m[in_sel][r]));
    end
    $display("chain: %0d non-zero weights, %0d compute cycles", total_weights, total_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
