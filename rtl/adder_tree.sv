// adder_tree -- static activations, stage-1 and stage-2 adders.
//
// Computes, for one weight row, the four bit-plane sums S_i = B_i . A of the
// accumulate-then-multiply scheme: S_i adds every activation whose weight ID
// has bit i set.  The N activations are held in registers inside the tree
// for a whole layer ("activation stationary"), written once per layer.
//
// Stage 1 is N/2 acm_adder instances; adder k takes activations 2k and 2k+1
// with their IDs.  Stage 2 is a binary reduction of the N/2 four-lane
// results (64+32+...+1 adders for N = 256), in two's complement, 16 bits
// wide as in the published schematic: sums wrap at 16 bits.
//
// Interface: act_we/act_addr/act_wdata load an activation; act_sw and
// sign_mode are layer settings; valid_i/ids_i carry one row of IDs.
// Timing: two register stages (after stage 1 and after stage 2); sums_o is
// valid two cycles after valid_i, and a new row is accepted every cycle.
module adder_tree #(
  parameter int unsigned N     = 256,
  parameter int unsigned ACT_W = 16,
  parameter int unsigned SUM_W = 16,
  parameter int unsigned ID_W  = 4,
  localparam int unsigned NW   = $clog2(N)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    act_we_i,
  input  logic [NW-1:0]           act_addr_i,
  input  logic [ACT_W-1:0]        act_wdata_i,
  input  logic                    act_sw_i,
  input  logic                    sign_mode_i,
  input  logic                    valid_i,
  input  logic [ID_W-1:0]         ids_i [N],
  output logic                    valid_o,
  output logic signed [SUM_W-1:0] sums_o [ID_W]
);

  localparam int unsigned NS1 = N / 2;

  logic [ACT_W-1:0] act_q [N];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned j = 0; j < N; j++) act_q[j] <= '0;
    end else if (act_we_i) begin
      act_q[act_addr_i] <= act_wdata_i;
    end
  end

  // Stage 1
  logic signed [SUM_W-1:0] s1_d [NS1][ID_W];
  logic signed [SUM_W-1:0] s1_q [NS1][ID_W];
  logic                    s1_valid_q;

  for (genvar k = 0; k < NS1; k++) begin : g_s1
    acm_adder #(.ACT_W(ACT_W), .ID_W(ID_W), .SUM_W(SUM_W)) u_add (
      .act_a_i     (act_q[2*k]),
      .act_b_i     (act_q[2*k+1]),
      .id_a_i      (ids_i[2*k]),
      .id_b_i      (ids_i[2*k+1]),
      .act_sw_i,
      .sign_mode_i,
      .sum_o       (s1_d[k])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid_q <= 1'b0;
      for (int unsigned k = 0; k < NS1; k++)
        for (int unsigned i = 0; i < ID_W; i++) s1_q[k][i] <= '0;
    end else begin
      s1_valid_q <= valid_i;
      if (valid_i) s1_q <= s1_d;
    end
  end

  // Stage 2: logarithmic reduction, node layout of a heap (node 1 = root,
  // nodes NS1..2*NS1-1 = stage-1 results).
  logic signed [SUM_W-1:0] node [2*NS1][ID_W];

  always_comb begin
    for (int unsigned k = 0; k < NS1; k++) node[NS1+k] = s1_q[k];
    for (int unsigned n = NS1 - 1; n >= 1; n--) begin
      for (int unsigned i = 0; i < ID_W; i++) node[n][i] = node[2*n][i] + node[2*n+1][i];
    end
    for (int unsigned i = 0; i < ID_W; i++) node[0][i] = '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      for (int unsigned i = 0; i < ID_W; i++) sums_o[i] <= '0;
    end else begin
      valid_o <= s1_valid_q;
      if (s1_valid_q) sums_o <= node[1];
    end
  end

endmodule
