// fc4_pkg -- shared constants and types of the 4-bit ACM accelerator.
//
// The sizes are those of the published design: a 256-wide row datapath
// (256 weight-ID FIFOs, 256 static activations, a 256-bit non-zero-position
// word), 4-bit weight IDs selecting one of four basis weights per bit plane,
// 16-bit activations and PSums, 16-bit basis weights, 32-bit MAC results and
// IEEE-754 single-precision post-processing.  The load-port target encoding
// and the layer configuration record are this design's own choices.
package fc4_pkg;

  localparam int unsigned N_LANES    = 256;  // bitmask width, FIFOs, activations
  localparam int unsigned ID_W       = 4;    // weight ID: one bit per basis weight
  localparam int unsigned ACT_W      = 16;   // activation register width
  localparam int unsigned SUM_W      = 16;   // adder-tree output width
  localparam int unsigned BASIS_W    = 16;   // basis weight width
  localparam int unsigned MAC_W      = 32;   // MAC array output width
  localparam int unsigned FP_W       = 32;   // IEEE single
  localparam int unsigned PSUM_W     = 16;   // final PSum width

  // Targets of the load port that stands in for the memory controller.
  typedef enum logic [2:0] {
    LD_ACT    = 3'd0,  // input activation -> input bank of the I/O buffer
    LD_NZ     = 3'd1,  // non-zero-position word (bitmask or CSR) -> NZ memory
    LD_FIFO   = 3'd2,  // 4-bit weight ID -> FIFO[addr]
    LD_ALPHA1 = 3'd3,  // per-row scale -> alpha1 SRAM
    LD_BIAS   = 3'd4,  // per-row bias  -> bias SRAM
    LD_ALPHA2 = 3'd5,  // single output scale
    LD_BASIS  = 3'd6,  // basis weight w_addr (addr 0..3)
    LD_CLEAR  = 3'd7   // empty all weight-ID FIFOs
  } ld_target_e;

  // Per-layer configuration, sampled when a layer starts.
  typedef struct packed {
    logic        csr_mode;   // Select Bits: 1 = NZ words hold CSR positions
    logic        act_sw;     // Act_SW: 0 = lower activation byte, 1 = upper
    logic        sign_mode;  // 1 = activation bytes are two's complement
    logic [15:0] n_rows;     // rows (output features) of this layer
  } layer_cfg_t;

  // Control-unit states.  State2..State9 of the schedule are pipeline stages
  // that run concurrently, so only Start and State1 are FSM states; COMPUTE
  // issues rows and DRAIN waits for the last one to leave the pipeline.
  typedef enum logic [1:0] {
    ST_START   = 2'd0,
    ST_STATE1  = 2'd1,
    ST_COMPUTE = 2'd2,
    ST_DRAIN   = 2'd3
  } ctrl_state_e;

endpackage
