// fix2float -- 32-bit fixed point to IEEE-754 single precision.
//
// Converts the signed integer MAC result with a leading-one detector: the
// position k of the highest 1 of the magnitude gives the exponent k + 127,
// and the magnitude shifted so that bit k lands on the hidden-one position
// gives the 23-bit mantissa (bits below it are truncated).  The sign is the
// MAC sign bit.  This is the published conversion algorithm, except that a
// negative input is converted through its magnitude so that the value is
// right, and the leading (not the last found) one is used.  Zero gives +0.
// Timing: one register stage.
module fix2float #(
  parameter int unsigned IN_W = 32
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   valid_i,
  input  logic signed [IN_W-1:0] fixed_i,
  output logic                   valid_o,
  output logic [31:0]            float_o
);

  localparam int unsigned LW = $clog2(IN_W);

  logic [IN_W-1:0] mag;
  logic [LW-1:0]   lod;
  logic            nz;
  logic [IN_W+22:0] shifted;
  logic [31:0]     conv;

  always_comb begin
    mag = fixed_i[IN_W-1] ? IN_W'(-fixed_i) : IN_W'(fixed_i);
    lod = '0;
    nz  = 1'b0;
    for (int unsigned k = 0; k < IN_W; k++) begin
      if (mag[k]) begin
        lod = LW'(k);
        nz  = 1'b1;
      end
    end
    // Place bit 'lod' at position IN_W+22-... : shift left by 23, then right
    // by lod, so the leading one sits at bit 23 of 'shifted'.
    shifted = ({23'd0, mag} << 23) >> lod;
    if (nz) conv = {fixed_i[IN_W-1], 8'(lod + 127), shifted[22:0]};
    else    conv = 32'd0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      float_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) float_o <= conv;
    end
  end

endmodule
