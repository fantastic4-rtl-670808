// mac_array -- the four multipliers of the accumulate-then-multiply scheme.
//
// Multiplies each bit-plane sum S_i from the adder tree by its 16-bit basis
// weight w_i and adds the four 32-bit products with three adders
// ((p0+p1) + (p2+p3)), giving the row's dot product  sum_i w_i * S_i.
// These four multipliers are the only fixed-point multipliers of the
// accelerator.  Basis weights are signed integers; any fractional scaling is
// folded into the per-row alpha1 factor (this design's choice).
// Timing: one register stage; mac_o is valid one cycle after valid_i.
module mac_array #(
  parameter int unsigned SUM_W = 16,
  parameter int unsigned W_W   = 16,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned NB    = 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    valid_i,
  input  logic signed [SUM_W-1:0] sums_i  [NB],
  input  logic signed [W_W-1:0]   basis_i [NB],
  output logic                    valid_o,
  output logic signed [OUT_W-1:0] mac_o
);

  logic signed [OUT_W-1:0] prod [NB];
  logic signed [OUT_W-1:0] acc;

  always_comb begin
    for (int unsigned i = 0; i < NB; i++) prod[i] = OUT_W'(sums_i[i]) * OUT_W'(basis_i[i]);
    acc = '0;
    for (int unsigned i = 0; i < NB; i += 2) acc = acc + (prod[i] + prod[i+1]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      mac_o   <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) mac_o <= acc;
    end
  end

endmodule
