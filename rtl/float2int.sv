// float2int -- rounds an IEEE-754 single value to the 16-bit integer PSum.
//
// With x = sig * 2^(e-150), sig the 24-bit significand, the value is shifted
// into an integer with one extra fraction bit, and half an LSB is added
// before dropping it: round to nearest, ties away from zero.  Results
// outside the 16-bit two's complement range saturate to -32768 / 32767;
// subnormals and zero give 0.  The rounding mode and saturation are this
// design's choices; the published design states only a final rounding to a
// 16-bit integer.
// Timing: one register stage.
module float2int #(
  parameter int unsigned OUT_W = 16
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    valid_i,
  input  logic [31:0]             x_i,
  output logic                    valid_o,
  output logic signed [OUT_W-1:0] y_o
);

  localparam logic [OUT_W:0] POS_MAX = {2'b00, {(OUT_W-1){1'b1}}};  // 2^(W-1)-1
  localparam logic [OUT_W:0] NEG_MAX = {2'b01, {(OUT_W-1){1'b0}}};  // 2^(W-1)

  logic [7:0]       e;
  logic [23:0]      sig;
  logic [24:0]      half;      // integer with one fraction bit
  logic [OUT_W:0]   mag;
  logic             big;
  logic signed [OUT_W-1:0] res;

  always_comb begin
    e    = x_i[30:23];
    sig  = {1'b1, x_i[22:0]};
    half = '0;
    big  = 1'b0;
    mag  = '0;
    if (e == 8'd0 || e < 8'd125) begin
      mag = '0;                              // |x| < 0.25 (or subnormal)
    end else if (e >= 8'(127 + OUT_W)) begin
      big = 1'b1;                            // |x| >= 2^OUT_W
    end else if (e >= 8'd150) begin
      mag = (OUT_W+1)'({sig, 8'd0} >> (8'd158 - e));   // exact integer
    end else begin
      half = {1'b0, sig} >> (8'd149 - e);    // value * 2, truncated
      mag  = (OUT_W+1)'((half + 25'd1) >> 1);
    end
    if (x_i[31]) res = (big || mag > NEG_MAX) ? OUT_W'(NEG_MAX) : OUT_W'(-mag);
    else         res = (big || mag > POS_MAX) ? OUT_W'(POS_MAX) : OUT_W'(mag);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      y_o     <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) y_o <= res;
    end
  end

endmodule
