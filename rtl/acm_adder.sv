// acm_adder -- one stage-1 adder of the adder tree (helper).
//
// Takes two activations and their two 4-bit weight IDs and produces four
// 16-bit results, one per basis-weight bit plane i:
//   level 1: ID bit i passes the 16-bit activation or a zero (one channel
//            per ID bit, eight channels for the two activations);
//   level 2: Act_SW picks the lower (0) or upper (1) byte of each channel,
//            so one 16-bit register can hold two 8-bit activations;
//   level 3: the two bytes of plane i are added.  In sign mode the bytes
//            are two's complement and a negative one is subtracted by its
//            magnitude (sign extension); otherwise they are unsigned.
// The three levels follow the published adder schematic; the mapping of
// output i to ID bit i and the reading of the sign mode are this design's.
// Purely combinational.
module acm_adder #(
  parameter int unsigned ACT_W = 16,
  parameter int unsigned ID_W  = 4,
  parameter int unsigned SUM_W = 16,
  localparam int unsigned HW   = ACT_W / 2
) (
  input  logic [ACT_W-1:0]        act_a_i,
  input  logic [ACT_W-1:0]        act_b_i,
  input  logic [ID_W-1:0]         id_a_i,
  input  logic [ID_W-1:0]         id_b_i,
  input  logic                    act_sw_i,
  input  logic                    sign_mode_i,
  output logic signed [SUM_W-1:0] sum_o [ID_W]
);

  function automatic logic signed [SUM_W-1:0] extend(input logic [HW-1:0] b, input logic sgn);
    return sgn ? SUM_W'(signed'(b)) : SUM_W'(b);
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < ID_W; i++) begin
      logic [ACT_W-1:0] ga, gb;   // level 1
      logic [HW-1:0]    ba, bb;   // level 2
      ga = id_a_i[i] ? act_a_i : '0;
      gb = id_b_i[i] ? act_b_i : '0;
      ba = act_sw_i ? ga[ACT_W-1:HW] : ga[HW-1:0];
      bb = act_sw_i ? gb[ACT_W-1:HW] : gb[HW-1:0];
      sum_o[i] = extend(ba, sign_mode_i) + extend(bb, sign_mode_i);  // level 3
    end
  end

endmodule
