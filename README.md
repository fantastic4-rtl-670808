# FantastIC4: a 4-bit accumulate-then-multiply engine for fully-connected layers

## The idea

A fully-connected layer computes `y = f(W·a)`: every output is a dot product of a
weight row with the input vector. In this engine each weight is one of at most
sixteen values, given by a 4-bit **weight ID**. The values are not arbitrary. Each one
is a sum of up to four **basis weights** `w0..w3`, and the four ID bits say which of
them are included:

    W[r][c] = sum_i  w_i * B_i[r][c]        with  B_i[r][c] = bit i of ID[r][c]

The dot product of a row with the activations `a` then splits into four bit planes:

    sum_c W[r][c] * a[c] = sum_i  w_i * ( sum_c B_i[r][c] * a[c] )

The inner sums need only additions. Each one adds the activations whose ID has bit
`i` set. Only the four outer products need a multiplier. The engine is built
around this: an adder tree forms the four masked sums for one row per clock, and a
MAC array of just four multipliers applies the basis weights. This "accumulate, then
multiply" order (ACM) replaces 256 multipliers with four.

Weights that are zero (ID 0) are never stored. Each row carries a 256-bit map of
its non-zero positions. The IDs themselves sit in 256 per-column FIFOs, which are
popped only where that map has a 1.

After the MAC, a single-precision float chain applies the per-row scale, the
per-row bias, ReLU and a global output scale. It then rounds the result to the
16-bit activation that the next layer uses.

## Datapath at a glance

```
 NZ memory ──► CSR→bitmask ──► weight-ID gen ◄── 256 ID FIFOs
 (256 x 256b)   (Select Bits)        │ 256 x 4-bit IDs
                                     ▼
 I/O buffer ──(State1 copy)──► adder tree: 256 static activations
 (ping-pong)                   stage 1: 128 three-level adders
      ▲                        stage 2: log reduction, 4 lanes x 16 bit
      │                              │ 4 x 16 bit
      │                         MAC array: 4 mults, 3 adds ► 32 bit
      │                              ▼
      │        fixed→float ► ×alpha1[row] ► +bias[row] ► ReLU ► ×alpha2 ► float→int16
      └──────────────────────────────────────────────────────────────────── PSum
```

Default sizes: the row datapath is 256 wide. There are 256 FIFOs, each 4 bits wide
and 256 deep. Activations are 16 bits, basis weights are signed 16-bit integers,
the MAC result is 32 bits and the float chain is IEEE-754 single precision. The
NZ memory, the alpha1 SRAM and the bias SRAM each hold 256 rows.

## Loading a layer

All data enters through one load port on `fantastic4_top`: `ld_valid_i`,
`ld_target_i`, `ld_addr_i` and a 256-bit `ld_data_i`. In a full system this port is
driven by the memory controller that moves data from DRAM. The targets are
listed in `fc4_pkg::ld_target_e`.

| target      | addr                  | data                           |
|-------------|-----------------------|--------------------------------|
| `LD_ACT`    | input index 0..255    | 16-bit activation (input bank) |
| `LD_NZ`     | row                   | 256-bit position word          |
| `LD_FIFO`   | column                | 4-bit weight ID, pushed        |
| `LD_ALPHA1` | row                   | float32 row scale              |
| `LD_BIAS`   | row                   | float32 row bias               |
| `LD_ALPHA2` | –                     | float32 output scale           |
| `LD_BASIS`  | 0..3                  | signed 16-bit basis weight w_i |
| `LD_CLEAR`  | –                     | empties all FIFOs              |

Loads are only allowed while the engine is idle (an assertion checks this).

**Position word of a row.** It has one of two formats, and `cfg_i.csr_mode` (the
"Select Bits" of the mux) chooses between them for the whole layer:

* *Bitmask* (`csr_mode = 0`): bit `c` is 1 when column `c` has a non-zero weight.
* *CSR* (`csr_mode = 1`): 32 chunks of 8 bits. Chunk `k` is `word[8k+7:8k]`, and
  each chunk holds the column number of one non-zero weight. The decoder sets those
  32 bits in a 256-bit mask. A row with fewer than 32 non-zeros must fill the
  spare chunks by repeating one of its own positions. A row with no non-zero
  weight cannot be written in CSR, and its layer must use bitmask mode. A row
  with more than 32 non-zeros also needs bitmask mode.

**FIFO contents.** FIFO `c` holds the non-zero IDs of column `c`, in increasing
row order. When row `r` is processed, every FIFO whose mask bit is 1 gives up its
head. Every other column yields ID 0 and keeps its head for a later row. So the
number of IDs pushed into FIFO `c` must equal the number of 1s in column `c` of
the position words. FIFOs are not rewound; reload them (after `LD_CLEAR`) to run
a layer again.

**Configuration** (`cfg_i`, sampled at `start_i`):

* `n_rows`: number of output rows.
* `act_sw`: which byte of each 16-bit activation is used.
* `sign_mode`: whether that byte is signed.

## The adder tree

The 256 activations are copied into registers inside the tree at the start of a
layer. They stay there ("static activations") while every row of the layer is
processed. Only the 4-bit IDs change from row to row.

**Stage 1** has 128 adders. Adder `k` takes activations `2k` and `2k+1` and their
IDs, and works in three levels:

1. *Gate.* Each ID bit `i` passes its activation into lane `i` or puts a zero there.
   Two activations times four lanes give eight groups.
2. *Byte select (Act_SW).* Each group keeps the low byte (`act_sw = 0`) or the high
   byte (`act_sw = 1`) of its 16-bit activation. The switch is set once per layer, so a
   register can hold two 8-bit inputs that are used in different passes.
3. *Add.* With `sign_mode = 1` the byte is a two's-complement number. A negative
   byte is subtracted by its magnitude, which is the same as adding it
   sign-extended. With `sign_mode = 0` the byte is unsigned and is added. Each
   lane produces one 16-bit sum.

**Stage 2** reduces the 128 four-lane results with a binary tree of 64+32+…+1 =
127 adders. Each of these adds two 16-bit two's-complement lane values. The
result is four 16-bit sums `S_i = Σ_c B_i[r][c]·a[c]`.

All sums wrap at 16 bits. With 256 unsigned bytes a lane can reach 65,280, which
does not fit a signed 16-bit value. Data must be scaled so that the true sums stay
in range. The testbenches take the wrap into account.

**MAC array.** It computes `Σ_i w_i · S_i` as four 16×16 signed products and three
additions (two pair adders, then a final adder), giving a 32-bit result.

## Float post-processing

* **Fixed to float.** A leading-one detector finds the top set bit of the 32-bit
  MAC magnitude. The exponent is `127 + position`. The bits below the leading one,
  shifted into place, form the mantissa. Bits beyond 24 significant ones are
  truncated. Negative inputs are converted through their magnitude and the sign
  bit is set.
* **Multiplier (×alpha1, ×alpha2).** The design splits each operand into sign,
  exponent and mantissa and multiplies the 24-bit significands (hidden 1 included)
  into 48 bits. Bit 47 selects between the slices `[46:24]` and `[45:23]` and adds
  one to the exponent when set. The result exponent is `e1 + e2 − 127` (plus that
  one). Zero and subnormal inputs give a signed zero. Underflow flushes to zero
  and overflow gives infinity. The result is truncated.
* **Bias adder.** The smaller operand is aligned with three guard bits. The
  significands are added or subtracted by sign, the result is renormalised with a
  leading-zero count, and it is truncated. Exact cancellation gives +0.
* **ReLU.** Any negative value, including −0, becomes +0.
* **Float to int.** Rounds to nearest with ties away from zero, then saturates to
  −32768…32767.

alpha1 and the bias are read from their SRAMs by row number. The reads are
timed so that each value meets its row at its stage. alpha1 and the bias can
hold dequantisation and batch-norm factors. alpha2 is a single value per layer
that prepares the output for the next layer's quantisation.

## Pipeline, control and timing

One row is issued per clock and one PSum leaves per clock. Nothing stalls.

| cycle after issue | stage                                            |
|-------------------|--------------------------------------------------|
| 0                 | NZ memory read                                   |
| 1                 | CSR/bitmask select (schedule State2)             |
| 2                 | weight-ID generation, FIFO pop (State3)          |
| 3, 4              | adder stage 1, adder stage 2 (State4)            |
| 5                 | MAC array (State4)                               |
| 6                 | fixed to float (State5)                          |
| 7                 | ×alpha1 (State6)                                 |
| 8                 | +bias (State7)                                   |
| 9                 | ReLU and ×alpha2 (State8)                        |
| 10                | float to int (State9)                            |
| 11                | PSum valid on `psum_o`, written to the buffer    |

The control unit has two levels:

* **Start and State1** move data. State1 copies the 256 activations from the I/O
  buffer's input bank into the adder tree. This takes N+1 cycles because the
  buffer read is registered.
* **Compute and Drain.** Compute issues rows 0…R−1. Drain waits for the last row
  to leave the pipeline, then pulses `done_o`.

Each schedule stage (State2…State9) is a pipeline stage, and all of them run at
once on successive rows. `stage_busy_o[k]` shows which stages hold a row.

A layer of `R` rows takes **N + 2 + R + 11** cycles from `start_i` to `done_o`:
row `r` is issued in cycle `N+2+r` and `done_o` comes 12 cycles after the last
issue.

**Ping-pong buffer.** The I/O buffer has two 256×16 banks. The layer reads from
the input bank and writes PSums by row number into the output bank. `done_o`
swaps the banks, so the results become the input of the next layer. The host
port (`host_rd_addr_i`/`host_rd_data_o`) reads the input bank, which after a
swap holds the results just computed. `bank_o` says which physical bank is the
input bank.

## What one pass can hold

One pass handles a layer with at most 256 inputs and at most 256 output rows.
Each column can hold at most 256 non-zero weights. Larger layers have to be
split by the host:

* **More output rows.** Split them into passes. Reload the FIFOs, positions and
  coefficients for each pass, and reload the inputs with `LD_ACT`.
* **More than 256 inputs.** This cannot be split here. The engine outputs
  activated, rounded values, not partial sums, so partial dot products cannot be
  combined.

The published design runs layers with up to 512 input and output features. Its
byte switch (Act_SW) suggests two 8-bit inputs per 16-bit register. It is not
described how the results of the two halves are combined, or how more than 256
rows fit the position memory. So this RTL stops at 256 × 256 per pass.

Example: the hand-gesture MLP with 512-256-128-12 outputs, and the speech-command
MLP with 512-512-256-256-128-128-12 outputs. The layers with 256 or fewer inputs
and rows run in one pass each. The 512-input layers do not fit.

## Where this RTL departs from the published design, or fills gaps

* **Load port.** The memory controller, DRAM and host CPU are not part of the RTL.
  The generic load port replaces them, and weights, positions and coefficients are
  written before `start_i`. In the published design they move during State1.
* **Schedule times.** The published control schedule lists stage times that span
  several clocks (e.g. 50 ns for a float multiply at 150 MHz). Here every stage
  is one clock, so the times are not reproduced.
* **Fixed-to-float width.** The paper speaks of both a 16-bit and a 32-bit MAC
  output. 32 bits is used, which is what four 16×16 products need.
* **Leading one.** The published conversion algorithm, as printed, would keep the
  *lowest* set bit and does not treat negative numbers. This design uses the
  leading (highest) one and converts negative numbers through their magnitude.
* **Multiplier constants.** The multiplier's exponent logic uses the standard
  IEEE bias. The published figure's constants are not copied literally.
* **Rounding.** No rounding inside the float units (truncation). Round-half-away
  and saturation are used in the final conversion; the rounding mode is not
  specified in the paper.
* **Stage 2 size.** Stage 2 has 127 adders, which is what a binary reduction of
  128 values needs. The paper counts 128.
* **Pairing and lanes.** Activations `2k, 2k+1` pair up in stage-1 adder `k`, and
  ID bit `i` belongs to basis weight `w_i`. Both are this design's choices.
* **Act_SW use.** Act_SW is one switch per layer. How two byte passes over wider
  inputs would be combined is not described, so it is not built.
* **SRAM sizes.** The SRAMs are plain register arrays. The 10 KB on-chip SRAM is
  read as 8 KB of positions (256×256 bits), 1 KB of alpha1 and 1 KB of bias
  (256×32 bits each).

## Files

| file | contents |
|------|----------|
| `rtl/fc4_pkg.sv` | widths, load targets, layer config, control states |
| `rtl/fantastic4_top.sv` | full engine, load port, pipeline alignment |
| `rtl/control_unit.sv` | Start/State1/Compute/Drain FSM |
| `rtl/nz_pos_mem.sv` | non-zero position memory |
| `rtl/csr_to_bitmask.sv` | CSR decoder and Select Bits mux |
| `rtl/fifo_module.sv`, `rtl/id_fifo.sv` | 256 weight-ID FIFOs |
| `rtl/weight_id_gen.sv` | mask-driven pop and ID registers |
| `rtl/adder_tree.sv`, `rtl/acm_adder.sv` | static activations, stage 1 and 2 |
| `rtl/mac_array.sv` | four multipliers, three adders |
| `rtl/fix2float.sv`, `rtl/fp_mul.sv`, `rtl/fp_add.sv`, `rtl/relu_fp.sv`, `rtl/float2int.sv` | float chain |
| `rtl/coef_sram.sv` | alpha1 / bias memory |
| `rtl/io_buffer.sv` | ping-pong activation/PSum buffer |

Each `tb/tb_<block>.sv` drives one block with random stimulus and compares every
output with a model written independently in the testbench. It checks cycle
latencies where the block has one. Each testbench ends by printing
`TB_RESULT checks=<n> failures=<m>`, and a watchdog stops it if it hangs.
`tb/tb_fp_pkg.sv` holds shared float helpers for the testbenches.

`tb/tb_fantastic4_top.sv` runs the full-size engine (all defaults) end to end.
It runs three chained layers:

* 256 rows with bitmask positions, using unsigned low bytes.
* 64 rows with CSR positions and signed bytes. Its inputs are the first layer's
  PSums, handed over by the ping-pong swap.
* 32 rows using high bytes. Its alpha2 is large enough to make the rounder
  saturate.

The coefficients are powers of two or small multiples of 1/16. This keeps every
float step exact, so the reference model can use plain reals. The testbench
checks every PSum and its row number, one PSum per cycle, the 11-cycle latency,
the start-to-done cycle count and the buffer read-back. It counts how often each
mechanism occurred and fails if any never did.

`tb/tb_mlp_workload.sv` runs the part of the speech-command MLP that fits in
single passes: the layer chain 256→256→128→128→12. The last two layers have the
shapes of the hand-gesture MLP's tail. The weights are random sparse 4-bit IDs.
Each layer's input is the previous layer's output, handed over by the bank swap.
Each layer's alpha2 is a power of two chosen so that the outputs fill the byte
range of the next layer's inputs. Every PSum is checked against a model that keeps
both buffer banks. The four layers take 525 + 397 + 397 + 281 = 1600 cycles from
start to done, not counting the loads.

## Simulating

With Verilator 5, for example the top-level test:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/fc4_pkg.sv tb/tb_fp_pkg.sv tb/tb_fantastic4_top.sv \
        --top-module tb_fantastic4_top -o sim
    ./obj_dir/sim

It builds and runs in well under a minute. The block testbenches are built the
same way with their own top module. `tb_fp_pkg.sv` is only needed by the
float-related ones.
