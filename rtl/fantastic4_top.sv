// fantastic4_top -- 4-bit accumulate-then-multiply accelerator for
// fully-connected layers.
//
// A layer y = f(W.A) with 4-bit weight IDs is computed one output row per
// clock.  Each weight is W = sum_i w_i * B_i, with four basis weights w_i and
// binary masks B_i (the four ID bits), so a row's dot product is
// sum_i w_i * (B_i . A): first the adder tree accumulates activations per
// bit plane, then four multipliers apply the basis weights.  The row's
// non-zero positions come from the NZ memory, either as a 256-bit bitmask
// or as 32 CSR positions decoded to one; only columns with a 1 pop a weight
// ID from their FIFO.  The 32-bit MAC result is converted to float, scaled
// by the row's alpha1, offset by its bias, passed through ReLU, scaled by
// alpha2 and rounded to the 16-bit PSum that the next layer uses as input.
//
// Pipeline (cycle of a row issued in cycle t):
//   t+0 NZ memory read      t+1 CSR/bitmask select   t+2 weight ID gen
//   t+3 adder stage 1       t+4 adder stage 2        t+5 MAC array
//   t+6 fixed-to-float      t+7 Multiplier1 (alpha1) t+8 bias adder
//   t+9 ReLU + Multiplier2  t+10 float-to-int        t+11 PSum out/written
// One row enters per cycle with no stalls; a layer of R rows takes
// N + 2 + R + PIPE_LAT cycles from start to done.
//
// Interface: the ld_* port stands in for the external memory controller
// and writes input activations, NZ words, FIFO IDs, alpha1, bias, alpha2
// and the basis weights (targets in fc4_pkg).  Load while not busy.  cfg_i
// is sampled at start_i.  PSums stream out on psum_* and are also written
// into the I/O buffer's output bank, which becomes the input bank when the
// layer is done.  stage_busy_o[k] shows which of the schedule's State2..9
// currently hold a row.  The block structure follows the published
// architecture; the load port, pipeline registers and stage timing are
// this design's.
module fantastic4_top
  import fc4_pkg::*;
#(
  parameter int unsigned N          = 256,
  parameter int unsigned FIFO_DEPTH = 256,
  parameter int unsigned NZ_DEPTH   = 256,
  parameter int unsigned COEF_DEPTH = 256,
  localparam int unsigned NW        = $clog2(N)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // load port (memory-controller side)
  input  logic               ld_valid_i,
  input  ld_target_e         ld_target_i,
  input  logic [15:0]        ld_addr_i,
  input  logic [N-1:0]       ld_data_i,
  // layer control
  input  layer_cfg_t         cfg_i,
  input  logic               start_i,
  output logic               busy_o,
  output logic               done_o,
  output ctrl_state_e        state_o,
  output logic [9:2]         stage_busy_o,
  // results
  output logic               psum_valid_o,
  output logic [15:0]        psum_row_o,
  output logic signed [PSUM_W-1:0] psum_o,
  input  logic [NW-1:0]      host_rd_addr_i,
  output logic [PSUM_W-1:0]  host_rd_data_o,
  output logic               bank_o
);

  localparam int unsigned PIPE_LAT = 11;
  localparam int unsigned NZW = $clog2(NZ_DEPTH);
  localparam int unsigned CW  = $clog2(COEF_DEPTH);

  // ---------------------------------------------------------------- config
  layer_cfg_t cfg_q;
  logic [31:0] alpha2_q;
  logic signed [BASIS_W-1:0] basis_q [ID_W];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q    <= '0;
      alpha2_q <= '0;
      for (int unsigned i = 0; i < ID_W; i++) basis_q[i] <= '0;
    end else begin
      if (start_i && !busy_o) cfg_q <= cfg_i;
      if (ld_valid_i && ld_target_i == LD_ALPHA2) alpha2_q <= ld_data_i[31:0];
      if (ld_valid_i && ld_target_i == LD_BASIS) basis_q[ld_addr_i[1:0]] <= ld_data_i[BASIS_W-1:0];
    end
  end

  // --------------------------------------------------------------- control
  logic          act_rd_en, act_we, row_valid;
  logic [NW-1:0] act_rd_addr, act_waddr;
  logic [15:0]   row_idx;

  control_unit #(.N(N), .PIPE_LAT(PIPE_LAT)) u_ctrl (
    .clk_i, .rst_ni,
    .start_i,
    .n_rows_i      (cfg_i.n_rows),
    .state_o,
    .busy_o,
    .done_o,
    .act_rd_en_o   (act_rd_en),
    .act_rd_addr_o (act_rd_addr),
    .act_we_o      (act_we),
    .act_waddr_o   (act_waddr),
    .row_valid_o   (row_valid),
    .row_idx_o     (row_idx)
  );

  // Row index and valid delay line: vld[k]/row_d[k] belong to cycle t+k.
  logic        vld   [PIPE_LAT+1];
  logic [15:0] row_d [PIPE_LAT+1];
  assign vld[0]   = row_valid;
  assign row_d[0] = row_idx;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned k = 1; k <= PIPE_LAT; k++) begin
        vld[k]   <= 1'b0;
        row_d[k] <= '0;
      end
    end else begin
      for (int unsigned k = 1; k <= PIPE_LAT; k++) begin
        vld[k]   <= vld[k-1];
        row_d[k] <= row_d[k-1];
      end
    end
  end

  // ------------------------------------------------------------ I/O buffer
  logic [ACT_W-1:0] act_rd_data;
  logic             psum_valid;
  logic signed [PSUM_W-1:0] psum;

  io_buffer #(.DEPTH(N), .W(PSUM_W)) u_iobuf (
    .clk_i, .rst_ni,
    .swap_i         (done_o),
    .bank_o,
    .in_we_i        (ld_valid_i && ld_target_i == LD_ACT),
    .in_addr_i      (NW'(ld_addr_i)),
    .in_data_i      (ld_data_i[PSUM_W-1:0]),
    .rd_en_i        (act_rd_en),
    .rd_addr_i      (act_rd_addr),
    .rd_data_o      (act_rd_data),
    .out_we_i       (psum_valid),
    .out_addr_i     (NW'(row_d[PIPE_LAT])),
    .out_data_i     (psum),
    .host_rd_addr_i,
    .host_rd_data_o
  );

  // ------------------------------------------- non-zero positions -> bitmask
  logic [N-1:0] nz_word, bitmask;
  logic         bm_valid;

  nz_pos_mem #(.WIDTH(N), .DEPTH(NZ_DEPTH)) u_nzmem (
    .clk_i,
    .wr_en_i   (ld_valid_i && ld_target_i == LD_NZ),
    .wr_addr_i (NZW'(ld_addr_i)),
    .wr_data_i (ld_data_i),
    .rd_en_i   (row_valid),
    .rd_addr_i (NZW'(row_idx)),
    .rd_data_o (nz_word)
  );

  csr_to_bitmask #(.N(N)) u_csr2bm (
    .clk_i, .rst_ni,
    .valid_i    (vld[1]),
    .word_i     (nz_word),
    .csr_mode_i (cfg_q.csr_mode),
    .valid_o    (bm_valid),
    .bitmask_o  (bitmask)
  );

  // ------------------------------------------------ FIFOs and ID generator
  logic [ID_W-1:0] fifo_head [N];
  logic [ID_W-1:0] ids [N];
  logic [N-1:0]    fifo_pop, fifo_empty, fifo_full;
  logic            ids_valid;

  fifo_module #(.N(N), .DEPTH(FIFO_DEPTH), .ID_W(ID_W)) u_fifos (
    .clk_i, .rst_ni,
    .clear_i     (ld_valid_i && ld_target_i == LD_CLEAR),
    .push_i      (ld_valid_i && ld_target_i == LD_FIFO),
    .push_idx_i  (NW'(ld_addr_i)),
    .push_data_i (ld_data_i[ID_W-1:0]),
    .pop_i       (fifo_pop),
    .head_o      (fifo_head),
    .empty_o     (fifo_empty),
    .full_o      (fifo_full)
  );

  weight_id_gen #(.N(N), .ID_W(ID_W)) u_idgen (
    .clk_i, .rst_ni,
    .valid_i     (bm_valid),
    .bitmask_i   (bitmask),
    .fifo_head_i (fifo_head),
    .fifo_pop_o  (fifo_pop),
    .valid_o     (ids_valid),
    .ids_o       (ids)
  );

  // --------------------------------------------------- adder tree and MAC
  logic signed [SUM_W-1:0] sums [ID_W];
  logic                    sums_valid, mac_valid;
  logic signed [MAC_W-1:0] mac;

  adder_tree #(.N(N), .ACT_W(ACT_W), .SUM_W(SUM_W), .ID_W(ID_W)) u_tree (
    .clk_i, .rst_ni,
    .act_we_i    (act_we),
    .act_addr_i  (act_waddr),
    .act_wdata_i (act_rd_data),
    .act_sw_i    (cfg_q.act_sw),
    .sign_mode_i (cfg_q.sign_mode),
    .valid_i     (ids_valid),
    .ids_i       (ids),
    .valid_o     (sums_valid),
    .sums_o      (sums)
  );

  mac_array #(.SUM_W(SUM_W), .W_W(BASIS_W), .OUT_W(MAC_W), .NB(ID_W)) u_mac (
    .clk_i, .rst_ni,
    .valid_i (sums_valid),
    .sums_i  (sums),
    .basis_i (basis_q),
    .valid_o (mac_valid),
    .mac_o   (mac)
  );

  // ------------------------------------------------ floating-point chain
  logic        flt_valid, mul1_valid, add_valid, mul2_valid;
  logic [31:0] flt, mul1, add, relu, mul2, alpha1, bias;

  fix2float #(.IN_W(MAC_W)) u_fix2flt (
    .clk_i, .rst_ni,
    .valid_i (mac_valid),
    .fixed_i (mac),
    .valid_o (flt_valid),
    .float_o (flt)
  );

  coef_sram #(.DEPTH(COEF_DEPTH), .W(FP_W)) u_alpha1 (
    .clk_i,
    .wr_en_i   (ld_valid_i && ld_target_i == LD_ALPHA1),
    .wr_addr_i (CW'(ld_addr_i)),
    .wr_data_i (ld_data_i[FP_W-1:0]),
    .rd_en_i   (vld[6]),
    .rd_addr_i (CW'(row_d[6])),
    .rd_data_o (alpha1)
  );

  fp_mul u_mul1 (
    .clk_i, .rst_ni,
    .valid_i (flt_valid),
    .a_i     (flt),
    .b_i     (alpha1),
    .valid_o (mul1_valid),
    .p_o     (mul1)
  );

  coef_sram #(.DEPTH(COEF_DEPTH), .W(FP_W)) u_bias (
    .clk_i,
    .wr_en_i   (ld_valid_i && ld_target_i == LD_BIAS),
    .wr_addr_i (CW'(ld_addr_i)),
    .wr_data_i (ld_data_i[FP_W-1:0]),
    .rd_en_i   (vld[7]),
    .rd_addr_i (CW'(row_d[7])),
    .rd_data_o (bias)
  );

  fp_add u_add (
    .clk_i, .rst_ni,
    .valid_i (mul1_valid),
    .a_i     (mul1),
    .b_i     (bias),
    .valid_o (add_valid),
    .s_o     (add)
  );

  relu_fp u_relu (
    .x_i (add),
    .y_o (relu)
  );

  fp_mul u_mul2 (
    .clk_i, .rst_ni,
    .valid_i (add_valid),
    .a_i     (relu),
    .b_i     (alpha2_q),
    .valid_o (mul2_valid),
    .p_o     (mul2)
  );

  float2int #(.OUT_W(PSUM_W)) u_flt2int (
    .clk_i, .rst_ni,
    .valid_i (mul2_valid),
    .x_i     (mul2),
    .valid_o (psum_valid),
    .y_o     (psum)
  );

  assign psum_valid_o = psum_valid;
  assign psum_row_o   = row_d[PIPE_LAT];
  assign psum_o       = psum;

  // Schedule states State2..State9 that hold a row this cycle.
  assign stage_busy_o[2] = vld[1];
  assign stage_busy_o[3] = vld[2];
  assign stage_busy_o[4] = vld[3] || vld[4] || vld[5];
  assign stage_busy_o[5] = vld[6];
  assign stage_busy_o[6] = vld[7];
  assign stage_busy_o[7] = vld[8];
  assign stage_busy_o[8] = vld[9];
  assign stage_busy_o[9] = vld[10];

  // The valid chain of the blocks must match the row delay line.
  a_psum_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni) psum_valid == vld[PIPE_LAT]);
  a_no_load_while_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
      !(ld_valid_i && busy_o && ld_target_i inside {LD_FIFO, LD_NZ, LD_CLEAR, LD_ACT}));

endmodule
