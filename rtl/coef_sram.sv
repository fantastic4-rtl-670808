// coef_sram -- 1 KB coefficient memory (256 x 32 bit).
//
// The accelerator keeps two of these: one holds the per-row alpha1 scale
// factors (de-quantisation and batch-norm scale) and one the per-row biases,
// both IEEE single precision.  The 1 KB size of each follows the published
// design; the register-array form with a registered read is this design's
// stand-in for an SRAM macro.
//
// Interface: one write port, one read port.  Timing: rd_data is valid the
// cycle after rd_en.  Contents are not reset.
module coef_sram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  logic [W-1:0]  wr_data_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output logic [W-1:0]  rd_data_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

endmodule
