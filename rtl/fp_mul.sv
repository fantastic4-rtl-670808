// fp_mul -- IEEE-754 single-precision multiplier (Multiplier1 and 2).
//
// The operands are split into sign, exponent and mantissa.  The result sign
// is the XOR of the signs; the 24-bit significands (hidden one included)
// are multiplied into a 48-bit product.  Product bit 47 selects the result
// mantissa, bits [46:24] if set and [45:23] if not, and whether the exponent
// e1 + e2 - 127 is incremented.  Sign, exponent and mantissa are then
// concatenated.  This is the published multiplier; the handling of special
// values is this design's: the mantissa is truncated, zero and subnormal
// operands give a signed zero, exponent underflow gives zero and overflow
// gives infinity.  NaN and infinity operands are not treated specially.
// Timing: one register stage.
module fp_mul (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic        valid_o,
  output logic [31:0] p_o
);

  logic        s;
  logic [7:0]  ea, eb;
  logic [47:0] m;
  logic [22:0] mant;
  logic signed [9:0] e;
  logic [31:0] res;

  always_comb begin
    s  = a_i[31] ^ b_i[31];
    ea = a_i[30:23];
    eb = b_i[30:23];
    m  = {1'b1, a_i[22:0]} * {1'b1, b_i[22:0]};
    if (m[47]) begin
      mant = m[46:24];
      e    = 10'(ea) + 10'(eb) - 10'sd126;
    end else begin
      mant = m[45:23];
      e    = 10'(ea) + 10'(eb) - 10'sd127;
    end
    if (ea == 8'd0 || eb == 8'd0 || e <= 0) res = {s, 31'd0};
    else if (e >= 255)                      res = {s, 8'hFF, 23'd0};
    else                                    res = {s, e[7:0], mant};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      p_o     <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) p_o <= res;
    end
  end

endmodule
