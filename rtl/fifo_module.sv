// fifo_module -- the 256 weight-ID FIFOs.
//
// FIFO j holds, in row order, the 4-bit weight IDs of the non-zero weights
// of column j of the layer's weight matrix, i.e. of every weight that
// multiplies activation j.  When a row is processed, every FIFO whose
// bitmask bit is set gives up its head; the others keep their pointer, so
// zero weights cost neither storage nor a read.  N = 256 FIFOs, 4 bits
// wide and 256 deep, held in register arrays, follow the published design.
//
// Interface: one 4-bit write per cycle into FIFO push_idx (the block
// diagram shows a 4-bit FIFO data input); a pop vector with one bit per
// FIFO; heads, empty and full flags per FIFO.  clear_i empties all FIFOs.
// Timing: heads are combinational from the registers, pops act at the edge.
module fifo_module #(
  parameter int unsigned N     = 256,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned ID_W  = 4,
  localparam int unsigned NW   = $clog2(N)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                push_i,
  input  logic [NW-1:0]       push_idx_i,
  input  logic [ID_W-1:0]     push_data_i,
  input  logic [N-1:0]        pop_i,
  output logic [ID_W-1:0]     head_o [N],
  output logic [N-1:0]        empty_o,
  output logic [N-1:0]        full_o
);

  for (genvar j = 0; j < N; j++) begin : g_fifo
    id_fifo #(.W(ID_W), .DEPTH(DEPTH)) u_fifo (
      .clk_i,
      .rst_ni,
      .clear_i,
      .push_i  (push_i && (push_idx_i == NW'(j))),
      .data_i  (push_data_i),
      .pop_i   (pop_i[j]),
      .head_o  (head_o[j]),
      .empty_o (empty_o[j]),
      .full_o  (full_o[j])
    );
  end

endmodule
