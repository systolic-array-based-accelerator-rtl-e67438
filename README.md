# EpochCore: a systolic array for structured state-space models

Structured state-space models (S4 and its input-dependent variant Liquid-S4)
replace attention with a linear recurrence per state element:

    x_j(t) = A_j * x_j(t-1) + B_j * u(t)                       (S4)
    x_j(t) = (A_j + B_j*u(t)) * x_j(t-1) + B_j * u(t)          (Liquid-S4)
    y(t)   = sum_j C_j * x_j(t)

With a diagonal state matrix, each of the N state elements is an independent
scalar recurrence. A plain systolic array runs such a recurrence poorly. Its
processing elements (PEs) only accumulate `psum + w*x`. Also, the sequence is
long (thousands to millions of steps), which rules out tiling it in an
input- or output-stationary way.

EpochCore solves this with two things:

- **LIMA-PE.** Each PE can keep a *recurrent* value in its accumulator, so
  one PE holds one state element `x_j` for the whole sequence.
- **A fixed dataflow.** The same grid computes `B_j*u`, the recurrence and
  the `C`-weighted sum. Each input word enters the top of the array once, and
  one output leaves the bottom every cycle.

The same PEs also run ordinary matrix multiplication. A network that mixes
SSM layers with dense layers therefore needs no second accelerator.

This repository holds synthesizable SystemVerilog for that core, which
includes:

- the LIMA-PE;
- the array;
- the weight and I/O memories;
- a controller;
- the output activation unit;
- a layer-normalisation unit;
- a self-checking testbench for each of these, plus end-to-end tests of the
  whole core.

## The LIMA-PE

A PE has three pairs of ports:

| Direction | Input / output | What travels on it |
|---|---|---|
| west to east | Stationary In/Out, Control In/Out | the stationary operand and a 3-bit mode word; a shift chain during preload |
| north to south | Result In/Out | partial results |
| north-east to south-west | Data In/Out | a diagonal data path |

The mode word selects what the single multiply-add computes each cycle. The
PE keeps these registers:

- the stationary register `Bs`;
- the control register;
- the accumulator `psum`;
- two one-cycle forwarding registers, one on the data path and one on the
  result path.

| code | mode | update | Data Out | Result Out |
|---|---|---|---|---|
| 000 | pass | none | Data In, delayed 1 cycle | Result In, delayed 1 cycle |
| 001 | BWS (banded weight stationary) | `psum <= ResIn + Bs*DataIn` | Data In, delayed | `psum` |
| 010 | FRI (fixed recurrent integration) | `psum <= ResIn + Bs*psum` | `psum` | Result In, delayed |
| 011 | TRI (time-varying recurrent integration) | `psum <= ResIn + (Bs+ResIn)*psum` | `psum` | Result In, delayed |
| 100 | TOS (traditional output stationary) | `psum <= psum + StatIn*ResIn` | Data In, delayed | Result In, delayed (`psum` during readout) |
| 101, 110 | reserved | act as pass | | |
| 111 | sleep | nothing | 0 | 0 |

The seven multiplexers M1–M7 in `lima_compute.sv` pick these operands:

- M1 and M2 pick the multiplier's first operand.
- M3 and M7 pick the second operand. In TRI, M7 adds `ResIn` to `Bs`.
- M4 picks the addend.
- M5 drives Data Out.
- M6 drives Result Out.

In TOS the stationary register also captures Stationary In every compute
cycle, so the west operand of a GEMM moves east one PE per cycle.

**Clocks.** The PE has two mutually exclusive clocks, Load and Compute. Here
they are implemented as clock enables on the one array clock:

- `load_en` is high during preload.
- `comp_en` is high otherwise, unless the PE sleeps.

A sleeping PE stops its Compute clock but keeps its Load clock. Otherwise a
sleep word passing along the preload chain would stop the chain.

**Numbers.** A word is 32 bits, in one of two formats selected by the
array-wide `cplx` bit:

- **real:** Q15.16;
- **complex:** the real part in the upper 16 bits and the imaginary part in
  the lower 16, each Q7.8.

`lima_mul` builds both products from the same four 17-bit signed partial
products:

- a real product uses all four as the limbs of a 32×32 product;
- a complex product uses them as `ar*br`, `ai*bi`, `ar*bi` and `ai*br`.

Results are rescaled by an arithmetic shift, which truncates. Sums wrap.
Complex addition adds the two halves separately. Nothing saturates.

## Mapping an SSM layer onto the array (ProDF)

The array is `ROWS × COLS` (default 64 × 64). For a state size N, the layout
below is written into the PEs during preload. Here N = 3:

```
            col 0      col 1      col 2      col 3
  row 0     sleep      BWS B1     BWS B2     BWS B3     <- u(t) broadcast on Data In
  row 1     sleep      FRI A1     FRI A2     FRI A3     (TRI for Liquid-S4)
  row 2     BWS C1     pass       pass       sleep
  row 3     BWS C2     pass       sleep      sleep
  row 4     BWS C3     sleep      sleep      sleep
  row 5..   pass       sleep ...                      -> y(t) leaves row ROWS-1, col 0
```

Each input word goes through the layout as follows:

1. The word `u(t)` is driven onto the Data In of every top-row PE.
2. Row 0 forms `B_j*u(t)` and sends it south.
3. In row 1, PE `j` updates its state, `x_j <= B_j*u + A_j*x_j`. In TRI it
   updates `x_j <= B_j*u + (A_j + B_j*u)*x_j`.
4. Row 1 sends `x_j` down the south-west diagonal. The pass PEs carry it to
   column 0, where it arrives in row `j+1`.
5. Column 0 multiplies `x_j` by `C_j` and adds it to the running sum coming
   from above.

Every PE-to-PE hop is one register. The diagonal delay of `x_j` (j hops)
therefore equals the extra distance the sum has travelled down column 0.

**Timing.** All terms of `y(t)` meet in the same cycle. The first output is
ready N+2 cycles after its input, and then one output follows each cycle.
Rows below N+1 are pass PEs, so at the south edge `y(t)` appears ROWS cycles
after `u(t)` entered.

**Size limit.** The layout needs an (N+2) × (N+1) block. A 64 × 64 array
therefore holds N ≤ 62 in one pass. A larger state, such as the N = 64 used
in the published evaluation, would have to be split over two passes with
partial sums added. The controller here does not do that.

**Between sequences** the controller pulses `clear_state`. This clears the
states and partial sums but keeps the preloaded weights. A new command
begins with `clear_all`.

## Matrix multiplication on the same array

With every PE in TOS mode, the array is output stationary:

- `A[r][k]` enters the west edge of row `r` at step `k+r`.
- `B[k][c]` enters the north edge of column `c` at step `k+c`.
- PE `(r,c)` accumulates `C[r][c]`.

The controller runs `K + ROWS + COLS - 2` compute steps. The host supplies
the skewed operands on `gemm_a` and `gemm_b` in each cycle where `gemm_step`
is high; in any other cycle the core forces them to zero.

**Readout.** The controller then raises `readout` for ROWS cycles. Each TOS
PE sends its sum south and takes the sum from the PE above, so the result
rows leave the bottom edge last row first.

**Layer normalisation.** If the command sets `cmd_ln`, each result row first
goes through `layer_norm`. While that unit works on a row, the controller
holds the readout back (`ro_ready` low). The held array changes nothing,
because its operands are zero. With `cmd_ln`, a row takes about
`2*COLS + 100` cycles; without it, one cycle.

## The core

`epochcore_top` connects the following units:

- **`epoch_controller`** accepts one command. The command selects GEMM or
  SSM and complex or real. It also gives:
  - the weight base address;
  - the input and output base addresses;
  - the length (T, or K for GEMM);
  - the number of sequences.

  It steps through the phases *clear → preload → compute → drain*, once per
  sequence. For GEMM the phases are *clear → preload → compute → readout*.
- **`weight_sram`** holds one preload column per word: ROWS fields of
  {3-bit mode, 32-bit operand}, 2240 bits in all. Preload reads COLS words
  and shifts them in from the west. The word read at cycle k ends in column
  `COLS-1-k`. A weight area is about 16 MB (59918 words).
- **`io_sram`** is a 4M × 32-bit (16 MB) memory. It has one read port, for
  inputs into the array, and one write port, for activated outputs. Both
  memories have a one-cycle read latency and are written as arrays.
- **`nonlinear_act`** applies none, ReLU, hard sigmoid `clamp(x/4 + 1/2)`,
  hard tanh or `x * hardsigmoid(x)` (a SiLU approximation) to the SSM output
  before it is written back. It adds one register.
- **`layer_norm`** computes `(x - mean) / sqrt(var + 1 LSB)` over a vector
  of COLS words. It has no learned scale or shift. It works sequentially:
  - an adder-tree mean;
  - one multiplier for the variance;
  - a bit-serial square root;
  - a restoring division for `1/std`;
  - one scaling pass.

  A vector takes `1 + COLS + 33 + 65 + COLS + 1` cycles.

The host interface is reduced to plain ports, which work only while the core
is idle:

- a command strobe;
- SRAM write ports;
- an I/O SRAM read port.

**SSM latency.** In SSM mode the first result reaches the I/O SRAM ROWS+2
cycles after its input was read: one cycle for the SRAM read, ROWS for the
array and one for the activation register. A sequence of T words then takes
about `T + ROWS + 2` cycles after its COLS-cycle preload.

## Parameters

| parameter | default | where |
|---|---|---|
| `ROWS`, `COLS` | 64, 64 | array size |
| `W`, `FRAC` | 32, 16 | word width, real fraction bits |
| `IO_DEPTH` | 4194304 | I/O memory words (16 MB) |
| `WW`, `W_DEPTH` | `ROWS*(W+3)`, `134217728/WW` | weight memory word and depth (16 MB) |
| `LEN` (layer_norm) | `COLS` | vector length |

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each
has a watchdog. Files are read relative to the repository root; the only
include is `tb/epochcore_tb_body.svh`. Example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/epoch_pkg.sv \
    tb/tb_epochcore_top.sv --top tb_epochcore_top -y rtl -o sim
./obj_dir/sim
```

The testbenches are:

- **`tb_lima_mul`, `tb_lima_clk_ctrl`, `tb_lima_stat_buf`, `tb_lima_compute`,
  `tb_lima_pe`** compare each PE part with a reference model in the
  testbench. This covers random operands in both number formats, every mode
  and the clock enables.
- **`tb_systolic_array`** uses a 5 × 4 array, the N = 3 layout above. It runs
  S4 in real and complex modes, Liquid-S4 and a GEMM with readout, and checks
  the N+2 latency.
- **`tb_io_sram`, `tb_weight_sram`, `tb_nonlinear_act`, `tb_layer_norm`,
  `tb_epoch_controller`** check one unit each. The controller test stalls the
  readout at random.
- **`tb_epochcore_top`** (5 × 4 array, small memories) and
  **`tb_epochcore_full`** (all defaults: 64 × 64, 16 MB memories, N = 62)
  share one test body, which runs these steps:
  1. An S4 layer with ReLU over two sequences.
  2. A complex Liquid-S4 layer.
  3. A GEMM.
  4. The same GEMM with layer normalisation.

  Every output is checked against a reference model. The body counts each
  mechanism and fails if one never occurred: preload, sleep and pass PEs, FRI,
  TRI, complex mode, `clear_state` between sequences, ReLU clipping, readout,
  layer normalisation and readout stalls.

At full size, verilator needs about 7 minutes and 1.7 GB to build the
testbench, and a few seconds to run it.

## Departures from the published design, and what is missing

- **Array size.** The text sizes the array for a given N as
  (N+2) × (N+1). The evaluation uses a fixed 64 × 64 array. This design
  follows the 64 × 64 array, so one pass holds N ≤ 62.
- **Mode encoding.** The 3-bit mode codes above are this design's own. The
  published design gives only the number of bits.
- **Complex select.** The complex/real select is a separate array-wide bit,
  set per command. It is not a fourth control bit in each PE.
- **Missing modes.** The classic weight-stationary and input-stationary
  multiply-accumulate modes, in which an operand moves horizontally, are not
  built. Their codes are reserved.
- **Timing choices.** Pass-through and forwarding are registered, one cycle
  per hop. Sleeping PEs output zeros. These are choices made here; they give
  the N+2 latency.
- **Rounding.** Truncation and wrap-around are used everywhere. The number of
  fraction bits is chosen here.
- **Activation and layer-norm algorithms** are the simplest ones that do the
  job. They are not the published circuits, which are not described.
- **Memory.** One I/O memory with separate read and write ports stands for
  the input and output buffers.
- **Outside the core.** The host CPU, DRAM and PCIe link are not part of
  this RTL.
- **GEMM operands and results.** During GEMM the operands come from the
  top-level ports `gemm_a` and `gemm_b`, not from the memories. The result
  rows leave on `gemm_res`; they are not written to the output memory. A row
  is COLS words wide, while the I/O memory port is one word wide.
- **Other GEMM dataflows.** Only the output-stationary GEMM dataflow is
  built. The weight-stationary and input-stationary GEMM dataflows are not.
