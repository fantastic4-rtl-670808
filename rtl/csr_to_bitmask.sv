// csr_to_bitmask -- CSR-to-bitmask logic and the Select-Bits 2x1 mux.
//
// A row's non-zero positions arrive as one N-bit word.  In bitmask mode the
// word already is the bitmask.  In CSR mode it is split into N/AW chunks of
// AW = log2(N) bits (32 chunks of 8 bits for N = 256); each chunk is the
// index of a non-zero weight and sets that bit of the bitmask, all other
// bits being 0.  E.g. chunk 0 = 241 and chunk 31 = 51 set bits 241 and 51.
// The Select-Bits input chooses which of the two words leaves the block.
//
// Chunk k is word[AW*k +: AW] (this design's bit order).  A CSR word always
// carries N/AW positions: a row with fewer non-zeros repeats one of its
// positions in the unused chunks, and a row with none must be sent in
// bitmask mode.
//
// Timing: one register stage; bitmask_o is valid the cycle after valid_i.
module csr_to_bitmask #(
  parameter int unsigned N  = 256,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned NCHUNK = N / AW
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         valid_i,
  input  logic [N-1:0] word_i,
  input  logic         csr_mode_i,   // Select Bits
  output logic         valid_o,
  output logic [N-1:0] bitmask_o
);

  logic [N-1:0] decoded;

  always_comb begin
    decoded = '0;
    for (int unsigned k = 0; k < NCHUNK; k++) begin
      decoded[word_i[AW*k +: AW]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o   <= 1'b0;
      bitmask_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) bitmask_o <= csr_mode_i ? decoded : word_i;
    end
  end

endmodule
