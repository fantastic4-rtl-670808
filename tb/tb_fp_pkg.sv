// tb_fp_pkg -- reference helpers for the testbenches.
//
// Converts between IEEE-754 single-precision bit patterns and SystemVerilog
// reals without using any design code: f2r() evaluates (-1)^s * 1.m * 2^(e-127),
// r2f_trunc() takes the double encoding from $realtobits and truncates its
// mantissa to 23 bits (the rounding the datapath uses).  Subnormal results
// flush to zero.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f_trunc(input real r);
    logic [63:0] d;
    int          e;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  // random normal float with exponent in [lo, hi]
  function automatic logic [31:0] rand_float(input int lo, input int hi);
    logic [7:0] e;
    e = 8'(lo + int'($urandom_range(0, hi - lo)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

endpackage
