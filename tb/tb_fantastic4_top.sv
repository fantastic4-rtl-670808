// tb_fantastic4_top -- end-to-end test of the accelerator at its full size
// (256 lanes, 256-deep FIFOs, 256-row memories; no parameter overrides).
//
// Runs three chained layers through the load port, the control unit and
// the whole datapath, and compares every PSum with a reference computed
// here from the weight IDs, activations and coefficients:
//   layer A  256 rows, bitmask positions, lower activation byte, unsigned,
//            activations written by the host;
//   layer B   64 rows, CSR positions (<= 32 per row), signed bytes, its
//            inputs are layer A's PSums taken over by the ping-pong swap;
//   layer C   32 rows, bitmask positions, upper activation byte, a large
//            alpha2 that drives the float-to-int rounder into saturation.
// Coefficients are powers of two and small multiples of 1/16, so every
// floating-point step is exact and the reference can use reals.  Checks:
// each PSum value and row, one PSum per cycle, the latency from the first
// row issue to its PSum (11 cycles), the start-to-done time, the results
// read back from the I/O buffer, and that each mechanism occurred: CSR and
// bitmask rows, both Act_SW settings, negative bytes in sign mode, ReLU
// clamping, saturation, skipped zero weights, a bank swap feeding the next
// layer, and all eight schedule stages busy at once.
module tb_fantastic4_top;
  import fc4_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 256, LAT = 11;

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
  int n_csr_rows = 0, n_bm_rows = 0, n_sw_hi = 0, n_sw_lo = 0, n_neg_bytes = 0, n_relu = 0,
      n_sat = 0, n_skipped = 0, n_swap_layers = 0, n_all_busy = 0;

  always #5 clk = ~clk;

  fantastic4_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .ld_valid_i(ld_valid), .ld_target_i(ld_target), .ld_addr_i(ld_addr), .ld_data_i(ld_data),
    .cfg_i(cfg), .start_i(start), .busy_o(busy), .done_o(done), .state_o(state), .stage_busy_o(stage_busy),
    .psum_valid_o(psum_valid), .psum_row_o(psum_row), .psum_o(psum),
    .host_rd_addr_i(host_addr), .host_rd_data_o(host_data), .bank_o(bank));

  // layer description
  logic [15:0] act [N];          // current input-bank contents (model)
  logic [3:0]  ids [N][N];       // ids[row][col], 0 = zero weight
  logic signed [15:0] w [4];
  logic [31:0] alpha1 [N], bias [N], alpha2;
  int          exp_psum [N];

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic ld(input ld_target_e t, input int addr, input logic [N-1:0] data);
    @(negedge clk);
    ld_valid = 1; ld_target = t; ld_addr = 16'(addr); ld_data = data;
    @(negedge clk);
    ld_valid = 0;
  endtask

  // Fast variant without the idle cycle between writes.
  task automatic ld_burst(input ld_target_e t, input int addr, input logic [N-1:0] data);
    ld_valid = 1; ld_target = t; ld_addr = 16'(addr); ld_data = data;
    @(negedge clk);
  endtask

  function automatic int byte_val(input logic [15:0] a, input logic hi, input logic sg);
    logic [7:0] b;
    b = hi ? a[15:8] : a[7:0];
    return sg ? int'(signed'(b)) : int'(b);
  endfunction

  // Build a random layer: R rows, at most maxnz non-zeros per row.
  task automatic make_layer(input int rows, input int density_pct, input int maxnz, input int a1_shift, input real a2);
    for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) ids[r][j] = 0;
    for (int r = 0; r < rows; r++) begin
      int nz;
      nz = 0;
      for (int j = 0; j < N; j++) begin
        if (nz < maxnz && $urandom_range(0, 99) < density_pct) begin
          ids[r][j] = 4'($urandom_range(1, 15));
          nz++;
        end
      end
      if (nz == 0) ids[r][$urandom_range(0, N - 1)] = 4'($urandom_range(1, 15));
      alpha1[r] = r2f_trunc(2.0 ** (-a1_shift));
      bias[r]   = r2f_trunc(real'($urandom_range(0, 4095) - 2048) / 16.0);
    end
    for (int i = 0; i < 4; i++) w[i] = 16'(int'($urandom_range(0, 6)) - 3);
    alpha2 = r2f_trunc(a2);
  endtask

  // Load FIFOs, positions and coefficients of the current layer.
  task automatic load_layer(input int rows, input logic csr);
    ld(LD_CLEAR, 0, '0);
    for (int r = 0; r < rows; r++)
      for (int j = 0; j < N; j++)
        if (ids[r][j] != 0) ld_burst(LD_FIFO, j, N'(ids[r][j]));
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
        for (; k < 32; k++) word[8*k +: 8] = 8'(first);   // pad with a repeat
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

  // Reference PSums of the current layer.
  task automatic reference(input int rows, input logic hi, input logic sg);
    for (int r = 0; r < rows; r++) begin
      int s [4];
      longint mac;
      real x, q;
      for (int i = 0; i < 4; i++) begin
        s[i] = 0;
        for (int j = 0; j < N; j++) if (ids[r][j][i]) s[i] += byte_val(act[j], hi, sg);
        s[i] = int'(signed'(16'(s[i])));   // 16-bit adder tree
      end
      for (int j = 0; j < N; j++) begin
        if (ids[r][j] == 0) n_skipped++;
        else if (sg && byte_val(act[j], hi, 1'b1) < 0) n_neg_bytes++;
      end
      mac = 0;
      for (int i = 0; i < 4; i++) mac += longint'(w[i]) * longint'(s[i]);
      x = real'(mac) * f2r(alpha1[r]) + f2r(bias[r]);
      if (x < 0.0) begin x = 0.0; n_relu++; end
      x = x * f2r(alpha2);
      q = $floor(x + 0.5);
      if (q > 32767.0) begin q = 32767.0; n_sat++; end
      exp_psum[r] = int'(q);
    end
  endtask

  // Start the layer and check the stream of PSums and the timing.
  task automatic run_layer(input int rows, input logic csr, input logic hi, input logic sg, input string name);
    int cyc, got, first_psum, compute_cyc, done_cyc, last_psum;
    reference(rows, hi, sg);
    cfg.csr_mode = csr; cfg.act_sw = hi; cfg.sign_mode = sg; cfg.n_rows = 16'(rows);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; got = 0; first_psum = -1; compute_cyc = -1; done_cyc = -1; last_psum = -1;
    while (done_cyc < 0 && cyc < 5000) begin
      if (state == ST_COMPUTE && compute_cyc < 0) compute_cyc = cyc;
      if (&stage_busy) n_all_busy++;
      if (psum_valid) begin
        check(int'(psum_row) == got, $sformatf("%s row order %0d vs %0d", name, psum_row, got));
        check(int'(psum) == exp_psum[got], $sformatf("%s row %0d psum %0d expected %0d", name, got, psum, exp_psum[got]));
        if (first_psum < 0) first_psum = cyc;
        else check(cyc == last_psum + 1, $sformatf("%s one PSum per cycle", name));
        last_psum = cyc;
        got++;
      end
      if (done) done_cyc = cyc;
      @(negedge clk);
      cyc++;
    end
    check(got == rows, $sformatf("%s got %0d of %0d PSums", name, got, rows));
    check(compute_cyc == N + 2, $sformatf("%s compute starts in cycle %0d", name, compute_cyc));
    check(first_psum - compute_cyc == LAT, $sformatf("%s latency %0d", name, first_psum - compute_cyc));
    check(done_cyc == N + 2 + rows + LAT, $sformatf("%s done in cycle %0d", name, done_cyc));
    if (csr) n_csr_rows += rows; else n_bm_rows += rows;
    if (hi) n_sw_hi += rows; else n_sw_lo += rows;
    // results are now in the input bank: read a few back
    for (int r = 0; r < rows; r += 5) begin
      host_addr = 8'(r);
      @(negedge clk);
      check(int'(signed'(host_data)) == exp_psum[r], $sformatf("%s host read %0d", name, r));
    end
    for (int r = 0; r < rows; r++) act[r] = 16'(exp_psum[r]);
  endtask

  initial begin
    ld_target = LD_ACT; ld_addr = 0; ld_data = '0; cfg = '0; host_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- layer A: host activations, bitmask, lower byte, unsigned
    for (int j = 0; j < N; j++) begin
      act[j] = 16'($urandom);
      ld_burst(LD_ACT, j, N'(act[j]));
    end
    ld_valid = 0;
    make_layer(256, 50, N, 2, 0.0625);
    load_layer(256, 1'b0);
    run_layer(256, 1'b0, 1'b0, 1'b0, "A");

    // ---- layer B: inputs are layer A's PSums, CSR, signed bytes
    // (act[] already holds A's PSums for rows 0..255 = all lanes)
    n_swap_layers++;
    make_layer(64, 8, 32, 0, 0.25);
    load_layer(64, 1'b1);
    run_layer(64, 1'b1, 1'b0, 1'b1, "B");

    // ---- layer C: fresh host activations, upper byte, saturating alpha2
    for (int j = 0; j < N; j++) begin
      act[j] = 16'($urandom);
      ld_burst(LD_ACT, j, N'(act[j]));
    end
    ld_valid = 0;
    make_layer(32, 40, N, 0, 16.0);
    load_layer(32, 1'b0);
    run_layer(32, 1'b0, 1'b1, 1'b0, "C");

    $display("mechanisms: csr_rows=%0d bitmask_rows=%0d act_sw_hi=%0d act_sw_lo=%0d neg_bytes=%0d relu=%0d sat=%0d skipped=%0d swaps=%0d all_stages_busy=%0d",
             n_csr_rows, n_bm_rows, n_sw_hi, n_sw_lo, n_neg_bytes, n_relu, n_sat, n_skipped, n_swap_layers, n_all_busy);
    check(n_csr_rows > 0, "CSR rows occurred");
    check(n_bm_rows > 0, "bitmask rows occurred");
    check(n_sw_hi > 0 && n_sw_lo > 0, "both Act_SW settings occurred");
    check(n_neg_bytes > 0, "negative bytes in sign mode occurred");
    check(n_relu > 0, "ReLU clamping occurred");
    check(n_sat > 0, "saturation occurred");
    check(n_skipped > 0, "zero weights skipped");
    check(n_swap_layers > 0, "ping-pong swap fed a layer");
    check(n_all_busy > 0, "all schedule stages busy at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
