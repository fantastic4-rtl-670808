// relu_fp -- ReLU, f(x) = max(0, x), on an IEEE-754 single value.
//
// Any value with the sign bit set (negative numbers and -0) becomes +0;
// others pass unchanged.  It sits between the bias adder and Multiplier2
// and is combinational, since the published schedule gives it no state of
// its own.
module relu_fp (
  input  logic [31:0] x_i,
  output logic [31:0] y_o
);

  assign y_o = x_i[31] ? 32'd0 : x_i;

endmodule
