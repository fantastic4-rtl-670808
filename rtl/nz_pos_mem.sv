// nz_pos_mem -- the compressed non-zero-positions memory (8 KB).
//
// Holds one WIDTH-bit word per row of a layer's weight matrix.  The word is
// either a plain bitmask of the row's non-zero positions or, for layers
// stored in CSR form, WIDTH/8 packed 8-bit positions (see csr_to_bitmask).
// The 8 KB size and the 256-bit word follow the published block diagram;
// 8 KB / 32 B gives the 256-row depth.
//
// Interface: one write port, one read port.  Timing: rd_data is registered
// and valid the cycle after rd_en.  Contents are not reset.
module nz_pos_mem #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             wr_en_i,
  input  logic [AW-1:0]    wr_addr_i,
  input  logic [WIDTH-1:0] wr_data_i,
  input  logic             rd_en_i,
  input  logic [AW-1:0]    rd_addr_i,
  output logic [WIDTH-1:0] rd_data_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

endmodule
