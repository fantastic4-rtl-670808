// weight_id_gen -- the weight ID generator (256 ID registers).
//
// For each column j: if bitmask bit j is 1 the head of FIFO j is popped and
// stored in ID register j; otherwise the FIFO pointer stays where it is and
// ID register j is loaded with 0, so activation j contributes nothing to
// any bit plane.  This is the selection logic of the published design.
//
// Interface: valid_i/bitmask_i from the CSR-to-bitmask stage, FIFO heads in,
// pop vector out (combinational, active in the cycle valid_i is high).
// Timing: ids_o and valid_o are registered, one cycle after valid_i.
module weight_id_gen #(
  parameter int unsigned N    = 256,
  parameter int unsigned ID_W = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            valid_i,
  input  logic [N-1:0]    bitmask_i,
  input  logic [ID_W-1:0] fifo_head_i [N],
  output logic [N-1:0]    fifo_pop_o,
  output logic            valid_o,
  output logic [ID_W-1:0] ids_o [N]
);

  assign fifo_pop_o = valid_i ? bitmask_i : '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      for (int unsigned j = 0; j < N; j++) ids_o[j] <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        for (int unsigned j = 0; j < N; j++) ids_o[j] <= bitmask_i[j] ? fifo_head_i[j] : '0;
      end
    end
  end

endmodule
