// control_unit -- two-level control of one layer.
//
// Level 1 (Start, State1) moves data: after start_i the unit copies the N
// activations of the I/O buffer's input bank into the adder tree's static
// activation registers, one per cycle.  Level 2 computes: the unit issues
// one weight row per cycle (row_valid_o/row_idx_o) into the datapath, whose
// stages - CSR-to-bitmask, weight-ID generation, adder tree and MAC,
// fixed-to-float, Multiplier1, bias adder, Multiplier2, float-to-int (the
// schedule's State2..State9) - all work at once on successive rows.  After
// the last row the unit waits PIPE_LAT cycles for it to leave the pipeline,
// then pulses done_o, which also swaps the I/O buffer banks.
//
// The two-level structure and the state names follow the published control
// table.  Weights, positions and coefficients, which that table also moves
// in State1, are written beforehand through the top's load port here.
//
// Timing: the activation copy takes N+1 cycles (registered buffer read);
// row r is issued in cycle N+2+r after start; done_o comes PIPE_LAT+1
// cycles after the last row was issued.  start_i is ignored while busy.
module control_unit
  import fc4_pkg::*;
#(
  parameter int unsigned N        = 256,
  parameter int unsigned PIPE_LAT = 11,
  localparam int unsigned NW      = $clog2(N)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          start_i,
  input  logic [15:0]   n_rows_i,
  output ctrl_state_e   state_o,
  output logic          busy_o,
  output logic          done_o,
  // activation copy: input bank -> adder tree
  output logic          act_rd_en_o,
  output logic [NW-1:0] act_rd_addr_o,
  output logic          act_we_o,
  output logic [NW-1:0] act_waddr_o,
  // row issue
  output logic          row_valid_o,
  output logic [15:0]   row_idx_o
);

  ctrl_state_e state_q;
  logic [15:0] cnt_q, n_rows_q;

  assign state_o = state_q;
  assign busy_o  = (state_q != ST_START);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= ST_START;
      cnt_q    <= '0;
      n_rows_q <= '0;
      done_o   <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        ST_START: begin
          if (start_i) begin
            state_q  <= ST_STATE1;
            cnt_q    <= '0;
            n_rows_q <= n_rows_i;
          end
        end
        ST_STATE1: begin
          if (cnt_q == 16'(N)) begin
            cnt_q   <= '0;
            state_q <= (n_rows_q == '0) ? ST_DRAIN : ST_COMPUTE;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        ST_COMPUTE: begin
          if (cnt_q == n_rows_q - 1'b1) begin
            cnt_q   <= '0;
            state_q <= ST_DRAIN;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        ST_DRAIN: begin
          if (cnt_q == 16'(PIPE_LAT - 1)) begin
            cnt_q   <= '0;
            state_q <= ST_START;
            done_o  <= 1'b1;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        default: state_q <= ST_START;
      endcase
    end
  end

  always_comb begin
    act_rd_en_o   = (state_q == ST_STATE1) && (cnt_q < 16'(N));
    act_rd_addr_o = NW'(cnt_q);
    act_we_o      = (state_q == ST_STATE1) && (cnt_q != '0);
    act_waddr_o   = NW'(cnt_q - 1'b1);
    row_valid_o   = (state_q == ST_COMPUTE);
    row_idx_o     = cnt_q;
  end

endmodule
