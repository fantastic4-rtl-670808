// fp_add -- IEEE-754 single-precision adder (adds the per-row bias).
//
// Subnormal operands are flushed to zero.  The operand with the larger
// magnitude is kept, the other's significand is shifted right by the
// exponent difference into a 27-bit field (three guard bits), and the two
// are added or subtracted according to the signs.  The sum is
// renormalised with a leading-zero count and truncated to 23 mantissa bits.
// Exact cancellation gives +0; exponent overflow gives infinity and
// underflow zero.  The published design states only that this adder
// normalises like the multiplier; these insides are this design's.
// Timing: one register stage.
module fp_add (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic        valid_o,
  output logic [31:0] s_o
);

  logic [31:0] x, y;          // |x| >= |y|
  logic [7:0]  ex, ey, d;
  logic [26:0] mx, my;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [9:0] e;
  logic [27:0] norm;
  logic [31:0] res;

  always_comb begin
    x = a_i;
    y = b_i;
    if (a_i[30:23] == 8'd0) x = {a_i[31], 31'd0};
    if (b_i[30:23] == 8'd0) y = {b_i[31], 31'd0};
    if (y[30:0] > x[30:0]) begin
      {x, y} = {y, x};
    end
    ex = x[30:23];
    ey = y[30:23];
    mx = (ex == 0) ? 27'd0 : {1'b1, x[22:0], 3'b000};
    my = (ey == 0) ? 27'd0 : {1'b1, y[22:0], 3'b000};
    d  = ex - ey;
    my = (d > 8'd26) ? 27'd0 : (my >> d);
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    // leading-zero count of sum[27:0]; bit 27 set means a carry out
    lz = 5'd28;
    for (int k = 0; k <= 27; k++) begin
      if (sum[k]) lz = 5'(27 - k);
    end
    norm = sum << lz;                 // leading one at bit 27
    e    = 10'(ex) + 10'sd1 - 10'(lz);
    if (sum == 28'd0)               res = 32'd0;
    else if (e <= 0)                res = {x[31], 31'd0};
    else if (e >= 255)              res = {x[31], 8'hFF, 23'd0};
    else                            res = {x[31], e[7:0], norm[26:4]};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      s_o     <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) s_o <= res;
    end
  end

endmodule
