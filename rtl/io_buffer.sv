// io_buffer -- ping-pong input/output buffer.
//
// Two banks of DEPTH x W words.  At any time one bank is the input bank,
// from which a layer's activations are read, and the other the output bank,
// into which the layer's PSums are written.  A swap pulse exchanges the
// roles, so the PSums of one layer become the inputs of the next without
// being copied.  The host can write the input bank (first layer) and read
// it (after a layer's swap it holds that layer's results).  Dual buffering in a ping-pong manner follows
// the published design; bank size and ports are this design's.
//
// Timing: rd_data_o and host_rd_data_o are registered (valid one cycle after
// the address); writes take effect at the clock edge; swap_i takes effect
// at the edge, after which bank_o shows the new input bank.
module io_buffer #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          swap_i,
  output logic          bank_o,        // index of the current input bank
  // host writes into the input bank
  input  logic          in_we_i,
  input  logic [AW-1:0] in_addr_i,
  input  logic [W-1:0]  in_data_i,
  // accelerator reads the input bank
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output logic [W-1:0]  rd_data_o,
  // accelerator writes PSums into the output bank
  input  logic          out_we_i,
  input  logic [AW-1:0] out_addr_i,
  input  logic [W-1:0]  out_data_i,
  // host reads the input bank (after a layer: its results)
  input  logic [AW-1:0] host_rd_addr_i,
  output logic [W-1:0]  host_rd_data_o
);

  logic [W-1:0] bank0 [DEPTH];
  logic [W-1:0] bank1 [DEPTH];
  logic         sel_q;

  assign bank_o = sel_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     sel_q <= 1'b0;
    else if (swap_i) sel_q <= ~sel_q;
  end

  always_ff @(posedge clk_i) begin
    // bank sel_q is the input bank, bank ~sel_q the output bank
    if (in_we_i  && !sel_q) bank0[in_addr_i]  <= in_data_i;
    if (in_we_i  &&  sel_q) bank1[in_addr_i]  <= in_data_i;
    if (out_we_i &&  sel_q) bank0[out_addr_i] <= out_data_i;
    if (out_we_i && !sel_q) bank1[out_addr_i] <= out_data_i;
    if (rd_en_i) rd_data_o <= sel_q ? bank1[rd_addr_i] : bank0[rd_addr_i];
    host_rd_data_o <= sel_q ? bank1[host_rd_addr_i] : bank0[host_rd_addr_i];
  end

endmodule
