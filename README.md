# Systolic sparse tensor slices: a sparse/dense GEMM accelerator in SystemVerilog

Structured sparsity removes a fixed fraction of weights in every small group:
2 of every 4 (2:4), 2 of every 3 (1:3) or 3 of every 4 (1:4). If the hardware
keeps only the non-zero weights plus a small index per weight, it can skip the
zeros instead of multiplying by them. This design applies that idea to an
FPGA hard block. The block is a 4x4 output-stationary systolic array. Its
processing elements each receive four activations from above. A 2-bit index
carried with every weight picks the activation the weight belongs to, so a
K-long dot product finishes in K/2, K/3 or K/4 steps. The same block still runs
ordinary dense matrices.

The block is the *systolic sparse tensor slice* (SST). Many of them are tiled
into a larger systolic array. On an FPGA, a column of SSTs passes the
activations down over dedicated wires between neighbouring slices, not over
the general routing. Weights (A) flow left to right, activations (B) top to
bottom, and each processing element keeps its own output element of C until
the tile is finished.

The RTL here covers the following, down to the number formats:
- the processing element;
- the slice, with its input skew registers and output buffer;
- a Y x X array of slices;
- a complete GEMM engine around the array: operand and result buffers, the B
  bank multiplexers, and the control/tiling sequencer.

The default size is 10 x 10 slices, which is a 40 x 40 array of multipliers.

## 1. Operating modes

| `sparsity_level` | pattern | A stored per row | B lanes used | A stages per PE | B register load | steps per K |
|---|---|---|---|---|---|---|
| 0 | dense | K values | 1 (lane 0) | 1 | every step | K |
| 1 | 2:4 | K/2 values + 2-bit indices | 4 | 2 | every 2nd cycle | K/2 |
| 2 | 1:3 | K/3 values + indices (0..2) | 3 | 1 | every cycle | K/3 |
| 3 | 1:4 | K/4 values + indices (0..3) | 4 | 1 | every cycle | K/4 |

`d_type` chooses the precision:
- 0: int8 operands with int32 accumulation (wrap-around).
- 1: bfloat16 operands with IEEE fp32 accumulation.

Every multiplier does one useful MAC per cycle in every mode.

**2:4 mode.** Each group of four activations serves two weights, so the four
activation registers of a PE hold their value for two cycles. The A operand
passes through two registers per PE, which keeps A in step with the slower B
wavefront. In this mode one *operand step* takes two cycles for B but each
cycle still performs a MAC. The accumulator gets K/2 MACs in K/2 cycles.

**1:3 mode.** It uses the 1:4 hardware. Only three B lanes carry data and the
indices never select the fourth lane.

## 2. The sparse processing element (`spe`)

Each SPE holds the following:
- a 16-bit A value and its 2-bit index, in one register, or two in 2:4 mode;
- an accumulate flag that travels with the A value;
- four 16-bit B registers;
- a 32-bit accumulator.

A 4:1 multiplexer driven by the index chooses the B lane; dense mode always
uses lane 0. In int8 mode only the low byte of each 16-bit lane is used.

**Tile boundaries.** The accumulate flag marks where a new tile starts.
- The flag is 0 only on the first operand of a tile. On that step the
  accumulator *loads* the new product instead of adding it.
- On that same step the PE raises `done` for one step, because its
  accumulator still holds the previous tile's finished result.
- No cycle is lost between tiles. A tile's results are reported exactly when
  the next tile's first operand arrives.
- After the last tile, the controller sends one extra *flush* step with
  flag 0 to push the last results out.

The floating-point path is `bf16_mul` followed by `fp32_add`.
- `bf16_mul` is exact. An 8x8-bit significand product always fits in fp32.
- `fp32_add` rounds to nearest even.
- Both flush subnormal inputs and outputs to zero.
- Overflow gives infinity. A NaN input, or infinity times zero, gives the
  quiet NaN `0x7FC00000`.

## 3. The slice (`sst_slice`)

```
         b_data (4 cols x 4 lanes)        b_ded_in (from the slice above)
               |                                 |
          [B skew triangle]                      |
               +------------ mux (cfg_b_ded) ----+
                                |
  a_data --[A skew]--mux--> 4 x 4 SPE grid ---> a_data_out (to the right)
           (cfg_a_setup)        |          \--> b_ded_out (to the slice below)
                                v
                 six-register output buffer ---> c_data (one column), valid_out
```

**Skew ("systolic setup") triangles.**
- A slice on the edge of an array gets its operands straight from memory,
  with all rows aligned. The triangle delays row i (or column j) by i (or j)
  operand stages.
- One stage matches one SPE stage: two registers on the A side in 2:4 mode,
  and B registers that load only on advance cycles.
- `cfg_a_setup` and `cfg_b_ded` are static settings. They stand for
  configuration bits loaded with the bitstream. The array ties them to
  constants by position: the left column uses the A triangle, and only the
  top row takes B from `b_data`.

**Output buffer.**
- SPE (i,j) finishes KS + i + j steps after the first operand reaches SPE
  (0,0), so results appear along anti-diagonals.
- The slice hands them out column by column, four 32-bit values per step:
  column j leaves on step `KS + 1 + 3 + j` of its tile.
- Rows 0, 1 and 2 must wait 3, 2 and 1 steps. The buffer is therefore three
  small shift registers of depths 3, 2 and 1: six registers in total.
- Row 3 goes straight to the output.
- `valid_out` is high on the four steps on which a column leaves.
- In 2:4 mode a step is two cycles, so a column leaves every second cycle.

**Control inputs.**
- `enable`: 0 stalls every register in the slice.
- `accumulate`: the flag described in section 2.
- `d_type` and `sparsity_level`: the mode.
- `accumulate_out`: the flag as it leaves SPE (0,3), for the slice to the
  right.
- A one-bit phase register, cleared by reset, provides the "every second
  cycle" B advance in 2:4 mode. A reset therefore starts every slice in the
  same phase.

**Port count.** Counting only the signals that would reach the general
routing:
- Inputs: A 4 x 18 = 72, B 4 x 4 x 16 = 256, plus 5 control bits, for 333
  in total.
- Outputs: `a_data_out` 72 + `c_data` 128 + `accumulate_out` + `valid_out`,
  for 202 in total.

Clock, reset, the dedicated B wires and the two static settings are not in
either count.

## 4. Chaining slices (`sst_array`)

Slice (y,x) has the following connections:
- It takes A from slice (y,x-1).
- It takes B from slice (y-1,x) over `b_ded_in`.
- It takes the accumulate flag from its left neighbour. Slices in column 0
  take it from the slice above, so it reaches every slice exactly with the A
  data.

Only slice (0,0) receives a flag from outside. Each slice passes data on four
operand stages after receiving it. Bank A_y and bank group B_x therefore start
their streams 4*y and 4*x stages late. Slice (y,x) then sees a 4(x+y)-stage
delayed copy of slice (0,0)'s schedule, and its columns leave at step:

    (tile+1)*KS + 1 + 3 + j + 4*(x+y)        (steps; x2 cycles in 2:4 mode)

## 5. The GEMM engine (`gemm_sst_top`)

| part | count | word | content |
|---|---|---|---|
| A bank (`buf_bank`) | Y | 72 bits | four (value, index) entries, one per SPE row |
| B bank | 4X (four per column) | 64 bits | four 16-bit activations, one per SPE column |
| C bank | X*Y (one per slice) | 128 bits | one output column of a slice |
| `b_bank_mux` | X | | maps the 4 banks of a column to the 4 B lanes |
| `gemm_ctrl` | 1 | | job sequencing, tiling, staggered addresses |

All banks are 512 words deep.

### Data layout

A job computes an output of (MT*4Y) x (NT*4X) elements. It is MT x NT *tiles*
of the native array size, each tile reducing over KS operand steps. Write the
indices as m = mt*4Y + 4y + i and n = nt*4X + 4x + c.

**A.** Bank y, address `mt*KS + k`, entry i holds the k-th stored element of
row m:
- dense: `A[m][k]`;
- sparse: the k-th kept value of the row, with its position inside its group
  of 4 (or 3 for 1:3).

**B, sparse modes.** Bank (x,r), address `nt*KSB + g`, entry c holds
`B[R*g + r][n]`:
- R = 4, or 3 for 1:3;
- KSB = KS/2 in 2:4 mode, else KSB = KS.

Lane r of every PE therefore sees activation row R*g + r of the current group.

**B, dense mode.** One lane is needed, so the four banks of a column act as
one 2048-word buffer. Linear address `nt*KS + k` selects bank `j/512` and
address `j%512`, holding `B[k][n]`. The bank multiplexer routes the chosen
bank to lane 0. In 1:3 mode bank 3 is idle.

**C.** Bank (x,y), address `4*(mt*NT + nt) + c` holds output column c of that
slice's 4x4 block in tile (mt,nt), rows i = 0..3 in the four 32-bit fields.

### Job interface

1. Write the banks through the `a_*` and `b_*` write ports.
2. Set `cfg_dtype`, `cfg_sparsity`, `cfg_mt`, `cfg_nt` and `cfg_ks`, and
   pulse `start`.
3. `busy` rises. `done` pulses for one cycle once every result is in buffer C.
4. Read C through `c_rd`, `c_rx`, `c_ry` and `c_raddr`. The data arrives on
   `c_rdata` one cycle later.

`hold` freezes the whole datapath at any time during a job.

A job fits the buffers when all of these hold (the controller asserts them):
- A: MT*KS <= 512;
- C: 4*MT*NT <= 512;
- B: NT*KS <= 2048 in dense mode, NT*KSB <= 512 in sparse modes;
- KS >= 4, or KS >= 8 in 2:4 mode, so that a slice's four columns have left
  before the next tile's columns arrive.

Larger problems are split into jobs by whoever drives the engine. Partial sums
are not carried between jobs. K must therefore fit in one job. Pad M and N to
multiples of 4Y and 4X, and pad K to a multiple of the sparsity group.

### Timing

With L = MT*NT*KS operand steps and s = 2 in 2:4 mode (else 1), a job takes:

    L + 7 + s*(4*(X+Y-2) + 6)   cycles from start to done, plus any hold cycles.

That is one cycle per operand step once the pipeline is full, so every
multiplier is busy while tiles follow each other. For the default 40x40
array, the fill and drain overhead is 85 cycles (163 in 2:4 mode).

### Sequencer

`gemm_ctrl` has these states:
- IDLE: `start` latches the configuration.
- CLEAR: resets the slices, so accumulators, flags and phase bits start clean.
- RUN: issues one read command per cycle. It walks k within a tile, then nt,
  then mt, and then issues the flush step.
- DRAIN: counts the columns leaving slice (Y-1,X-1), the last to finish.
- DONE.

The command stream passes through a shift register. Bank A_y and bank
group B_x tap it 4*y and 4*x stages late (8*y and 8*x cycles in 2:4 mode),
which produces the skew between slices described in section 4. The
accumulate flag is generated with the command for bank A_0 and is registered
alongside the read data.

## 6. What follows the source architecture and what is this design's own

These parts follow the architecture:
- the 4x4 output-stationary slice and its ports;
- the per-mode SPE register structure and index multiplexer;
- the triangular skew registers with static multiplexers;
- the six-register, column-per-cycle output buffer;
- the enable, accumulate, `accumulate_out` and `valid_out` semantics;
- the dedicated vertical B wires;
- the array with Y A-banks, 4X B-banks, X*Y C-banks and a bank multiplexer
  per column;
- the accumulate flag set only at the first slice and passed along
  systolically;
- the 512-deep banks and the 40x40 size;
- the int32 and fp32 accumulation.

These are this design's own choices:
- The exact timing convention. The flag travels with A, `done` is raised when
  the next tile starts, and a flush step follows the last tile.
- The shift-register form of the output buffer.
- The phase bit for 2:4 mode.
- Operand lanes are 16 bits wide in both precisions. A bank words are 72 bits
  and B bank words 64 bits, where int8 alone would need 40 and 32. An int8-only
  build could narrow them.
- Rounding and special values in floating point: round to nearest even,
  subnormals flushed to zero.
- The whole job interface, the buffer data layout, the sequencer, the `hold`
  input and the CLEAR reset.
- The dense-mode use of all four B banks as one deeper buffer.

These are not built:
- the FPGA itself: general routing, switch and connection boxes, CLB, DSP and
  BRAM tiles;
- loading the buffers from off-chip memory;
- the reuse of the idle fourth B bank in 1:3 mode;
- accumulation across jobs.

## 7. Files

`rtl/`:
- `sst_pkg.sv`: sizes, the mode enums, the A element struct.
- `bf16_mul.sv`, `fp32_add.sv`: the floating-point datapath.
- `spe.sv`, `sst_setup.sv`, `sst_out_buffer.sv`: the slice parts.
- `sst_slice.sv`, `sst_array.sv`.
- `buf_bank.sv`: a simple dual-port memory with a registered read.
- `b_bank_mux.sv`, `gemm_ctrl.sv`, `gemm_sst_top.sv`.

`tb/`: one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.
- `tb_fp_pkg.sv` holds the reference floating-point helpers. They use double
  precision and round to fp32 by hand.
- `gemm_tb_body.svh` is shared by the two engine testbenches. It generates
  random sparse matrices, packs them into the banks, computes C
  independently, and checks every result and the cycle count of each job.
- `tb_gemm_sst_top` runs a 2x2-slice engine (8x8 array). It covers all modes,
  both precisions, multi-tile jobs, dense jobs whose B stream crosses into
  another bank, and random `hold` stalls. It counts how often each of these
  happened.
- `tb_gemm_workloads` runs jobs of realistic size on the default engine:
  single tiles with 384- to 512-step reductions in all four modes (K up to 1536),
  and a 40 x 200 x 384 slice of a transformer projection layer. It takes
  under a minute to run after the build.
- `tb_gemm_full` runs the default 10x10-slice (40x40) engine on four jobs.
  Building the model takes about a minute and a half; it runs in seconds.

Simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/sst_pkg.sv tb/tb_fp_pkg.sv \
        rtl/bf16_mul.sv rtl/fp32_add.sv rtl/spe.sv rtl/sst_setup.sv rtl/sst_out_buffer.sv \
        rtl/sst_slice.sv rtl/sst_array.sv rtl/buf_bank.sv rtl/b_bank_mux.sv rtl/gemm_ctrl.sv \
        rtl/gemm_sst_top.sv tb/tb_gemm_sst_top.sv --top-module tb_gemm_sst_top -o sim
    ./obj_dir/sim

To run another testbench, replace the last file and the top module name. The
simulator has only two states, so the testbenches reset or initialise
everything they read.
