# Mambalaya in SystemVerilog

A Mamba layer is a cascade of about two dozen Einsums (tensor-algebra
steps). Only a few of them are GEMMs. The rest are elementwise or nonlinear
steps: SiLU, softplus, exponentials, RMS normalisation, the selective-scan
recurrence over the hidden state `H`. On an ordinary GEMM accelerator,
every one of those cheap steps sends its whole intermediate tensor to memory
and reads it back. A layer then spends most of its time bandwidth-bound.

Mambalaya is an accelerator built to run *fused* groups of Einsums, so that
intermediates stay on chip. It has hardware for each fusion pattern:

* **2D mode.** A GEMM runs on the big array. Elementwise work that consumes
  the GEMM's output runs on the same PEs, from the accumulators. No data
  moves between the two steps.
* **1D mode.** A fusion group made only of elementwise and nonlinear Einsums
  runs on the first 32 rows (8192 PEs). Those rows are rewired into one long
  chain, and each row has a direct bus to the global buffer.
* **1D array.** A separate row of 256 PEs computes the elementwise producer
  of a GEMM (for example a SiLU before a projection). Its results are
  broadcast straight into the first row of the 2D array, and the 2D array
  consumes them as a GEMM operand. The 1D array can also post-process rows
  as they leave the bottom of the 2D array.

This repository gives RTL for that datapath:

* the PEs and their six-stage functional unit;
* the reconfigurable 2D array and the separate 1D array;
* the 32 MB global buffer;
* a command sequencer that chooses the mode and drives the arrays.

The sequencer is not described in the original design; it is this
design's own.

## Block map

```
                  ext_* (DRAM side line port)
                          |
              +-----------------------+
              |   global_buffer       |  65536 lines x 256 Q8.8 words (32 MiB)
              |   R0 R1 R2 R3 W0 W1 W2|
              +--+--+--+-----+--+--+--+
          west R0|  |R1 north / row buses    R2 -> 1D array in, W1 <- 1D array out
                 v  v
   +-------------------------------+        R3 / W2: external port
   | pe_array_2d  ROWS x COLS      |        W0 <- drain (2D) or rf_line (1D)
   |  2D: systolic, skewed edges   |
   |  1D: rows 0..31 as one snake  |
   +---------------+---------------+
                   | south_line (drained rows)
                   v
   +-------------------------------+
   | pe_array_1d   COLS lanes      | --res--> north edge of the 2D array (fused GEMM)
   +-------------------------------+          or buffer W1
        all driven by mambalaya_ctrl (one command at a time)
```

| File | Contents |
|---|---|
| `rtl/mambalaya_pkg.sv` | Q8.8 type, saturating add and multiply, operation codes, PE control word, command format |
| `rtl/nlfu.sv` | exp, sigmoid, SiLU (combinational) |
| `rtl/log_unit.sv` | natural log (combinational) |
| `rtl/pe_fu.sv` | six-stage pipelined functional unit |
| `rtl/pe.sv` | PE: functional unit, accumulator, 32-word register file, network links |
| `rtl/skew_line.sv` | diagonal delay line for the systolic edges |
| `rtl/pe_array_2d.sv` | reconfigurable 2D array (2D and 1D modes) |
| `rtl/pe_array_1d.sv` | separate 256-lane 1D array |
| `rtl/global_buffer.sv` | line-organised on-chip buffer |
| `rtl/mambalaya_ctrl.sv` | command sequencer |
| `rtl/mambalaya_top.sv` | top level |

## Numbers

All data are 16-bit signed fixed point, **Q8.8**: 8 integer bits and 8
fraction bits. The range is [-128, 127.996] and the step is 1/256.

* Addition and multiplication saturate instead of wrapping.
* A product keeps bits [23:8] of the 32-bit result, rounding toward minus
  infinity.
* The accumulator of a GEMM is also Q8.8 and saturating.

The original design does not state a number format. Q8.8 is a choice made
here to keep the PE small. Swapping it for another format touches only the
package (`DATA_W`, `FRAC_W`, `fx_add`, `fx_mul`) and the two function units.

## The processing element

Every PE, in both arrays, is the same module (`pe`). It contains:

* **Functional unit (`pe_fu`).** It takes one operation per cycle, and the
  result comes out exactly 6 cycles later. The operations are PASS, ADD,
  MUL, MAX, MACC, EXP, SILU, SIGMOID and LOG. The depth of six stages is
  from the original design. How the work is spread over the stages is a
  choice made here:
  * stage 1 registers the operands;
  * stage 2 registers the computed value;
  * stages 3 to 6 carry it to the output.

  An operation's destination travels with it as a tag.
* **Accumulator.** It holds the output-stationary GEMM partial sum.
  * `WB_ACCUM` adds a result into it. MACC uses this, with the multiply done
    in the unit.
  * `WB_ACC` overwrites it.
  * `acc_clr` clears it.
* **Register file.** It holds 32 words and keeps the intermediates of a
  fused elementwise group on the PE. The original design gives only the
  total register capacity (4.25 MB over all PEs), not the split per PE.
  32 words (64 B, 4.2 MB over all 65,792 PEs) is a choice made here to
  match that total.
* **Links.**
  * 2D mode: `east_out` and `south_out` are the west and north inputs
    delayed by one register (store and forward). `drain_load` puts the
    accumulator into the south register.
  * 1D mode: `chain_out` passes a register-file word to the next PE of the
    chain. `bus_in` with `bus_we` writes the row bus into the register file.

Each operand is picked by a source code:

* WEST or NORTH: the neighbour links;
* ACC;
* RF_A or RF_B: `rf[ra]` or `rf[rb]`;
* CHAIN: the predecessor's chain register;
* IMM: the immediate in the control word;
* BUS.

So one control word can express, for example:

* `rf[3] = silu(rf[1])`
* `acc = max(acc, 0)`
* `rf[2] = rf[2] + chain_in`

### Nonlinear functions

The original design takes its SiLU and exp unit and its log unit from
earlier accelerators and gives no circuits. The units here are built as
follows.

| Function | How it is computed | Error |
|---|---|---|
| exp(x) | 2^(x·log2 e). The integer part of the exponent is a shift; the fraction uses the quadratic 1 + 0.6565f + 0.3435f². Saturates above about 4.85; gives 0 far below. | relative error under 0.2 % before Q8.8 rounding |
| sigmoid | four-segment piecewise-linear fit (PLAN), mirrored for x < 0 | under 0.02 |
| SiLU | x · sigmoid(x) | |
| ln(x) | leading-one position plus a mantissa, with a quadratic correction to Mitchell's log2 estimate, then × ln 2. An operand ≤ 0 gives the most negative value, which acts as −∞ (exp of it is 0). | under 0.01 |

With exp and log, the PE can build the remaining nonlinear Einsums of the
cascade. For example:

* softplus(x) = log(1 + exp(x)): EXP, ADD with an immediate of 1.0, LOG;
* 1/sqrt(mean) in RMSNorm: EXP of −0.5·LOG.

## The 2D array and its two modes

`pe_array_2d` broadcasts one control word to every PE. The mode only
decides which PEs are enabled and which links are in use.

### 2D mode: output-stationary GEMM

Row r of the west edge and column c of the north edge each enter through a
`skew_line`, which delays lane i by i cycles. Operand k for PE (r, c)
therefore arrives from the west and from the north in the same cycle.

With MACC into the accumulator, after K + R + C − 1 issue cycles each PE
holds

    acc[r][c] = Σ_k west_k[r] · north_k[c]

**Drain.** `drain_load` copies every accumulator into its south register.
The columns then shift down one row per cycle. The bottom row delivers
rows ROWS−1, ROWS−2, ... on `south_line`, one per cycle. The sequencer
writes them to the buffer at descending addresses, so the tile lands in
natural order.

**Fusion after a GEMM (RI / RSb).** Elementwise Einsums that follow a GEMM
stay in 2D mode and work on the accumulators in place. For example, an
`EW2D` command with `MAX(acc, imm 0) → acc` is a ReLU. Nothing leaves the
array between the GEMM and its consumers.

### 1D mode: long chain with row buses

Only rows 0 to ROWS_1D−1 (32 × 256 = 8192 PEs) are enabled. They are joined
into one chain that snakes through the array:

* row 0 runs left to right;
* row 1 runs right to left;
* and so on.

The order is read off the original design's figure. Each enabled row has a
bus from the buffer:

* `LOAD1D` writes buffer line k into `rf[rd]` of row `row + k`;
* `STORE1D` writes `rf[ra]` of row `row + k` to buffer line `addr_b + k`.

`CHAIN1D` latches `rf[ra]` of every PE into its chain register. In the next
operation, each PE can use its predecessor's value as an operand (source
CHAIN). This is how values that depend along the chain, such as the scan's
running state, move without going to the buffer.

## The separate 1D array and the fused broadcast

`pe_array_1d` is one row of 256 PEs with the same control word.

**Fused GEMM (RSp).** A GEMM command with `via_1d` set is a fused GEMM. The
north operand is read from the buffer into the 1D array. The 1D array
applies one operation to it (for example SiLU or a scale), and the results
enter the 2D array's first row as the GEMM operand. The producer's tensor
never exists in the buffer.

The 1D array takes FU_STAGES + 1 cycles, so the west operand is held back
by the same amount. The west stream then meets the broadcast stream in
step.

**Drain through the 1D array.** A drain with `via_1d` set passes every row
leaving the 2D array through one 1D-array operation before it is stored.
This covers an elementwise consumer that must see a finished GEMM row.

**STREAM1A.** This command pushes buffer lines through the 1D array by
themselves, in either 2D or 1D mode:

* with a compute operation, the results are written back to the buffer;
* with `OP_NOP`, the lines are loaded into the 1D array's register file
  (line k into `rf[rd + k]`), ready as operands for later operations.

## Commands and timing

`mambalaya_top` takes one `cmd_t` at a time over `cmd_valid`/`cmd_ready`.
`done` pulses when the command's results are written. The mode is set by
the command kind:

* GEMM, EW2D and DRAIN select 2D mode;
* LOAD1D, EW1D, STORE1D and CHAIN1D select 1D mode;
* STREAM1A keeps the current mode.

`mode_switch` pulses on a change.

The table gives the cycles from the edge that accepts a command to the edge
at which `done` is high. R = ROWS, C = COLS, S = 6 (functional-unit
stages), and K = `len`, the GEMM's reduction length.

| Command | What it does | Cycles |
|---|---|---|
| GEMM | K line pairs from `addr_a` (west) and `addr_b` (north); MACC into the accumulators, cleared first | K + R + C + S + 1 (fused: + S + 1) |
| EW2D | one elementwise op on every PE of the 2D array | S + 3 |
| DRAIN | accumulators to lines `addr_b .. addr_b+R−1` (row r at `addr_b + r`) | R + 2 (through the 1D array: R + S + 3) |
| LOAD1D / STORE1D | `len` lines over the row buses | len + 2 |
| EW1D | one elementwise op on the 8192 1D-mode PEs | S + 3 |
| CHAIN1D | latch the chain registers | 3 |
| STREAM1A | `len` lines through the 1D array | len + S + 3 |

Operation fields are `op`, `src_a`, `src_b`, `ra`, `rb`, `rd`, `wb` and
`imm`. They are copied into the broadcast control word.

The sequencer issues commands strictly one after another. It does not
overlap the next command's operand fetch with the current drain, and it
does not run the 1D array and a 1D-mode command at the same time. The
original design's "parallel pipelining" of fusion groups therefore has no
hardware support here. Commands follow each other only with the latencies
above.

### Global-buffer ports

| Port | Use |
|---|---|
| R0 | west edge |
| R1 | north edge, or the row buses in 1D mode |
| R2 | 1D-array input |
| R3 | external read |
| W0 | drain, or 1D-mode row store |
| W1 | 1D-array results |
| W2 | external write |

Each port moves one 256-word line per cycle with one cycle of read latency.
If several write ports hit the same line in one cycle, the highest port
wins.

## Sizes, and where this RTL departs from the original design

| Quantity | Original design | Default here |
|---|---|---|
| 2D array | 256 × 256 | **48** × 256 (`ROWS` parameter) |
| 1D-mode rows | 32 (8192 PEs) | 32 |
| separate 1D array | 256 PEs | 256 |
| FU pipeline | 6 stages | 6 |
| global buffer | 32 MB | 65536 × 256 × 2 B = 32 MiB |
| clock / DRAM | 1.75 GHz, 2039 GB/s HBM | not modelled (no DRAM; external line port instead) |
| total registers | 4.25 MB | 32-word register file per PE: 64 B × 65,792 PEs = 4.2 MB at 256 × 256 |

**Why ROWS defaults to 48.** Every PE is its own instance. Both the lint
and the synthesis front ends elaborate each one:

| Tool | Memory per PE instance |
|---|---|
| Verilator | about 0.8 MB |
| Yosys with the slang front end | about 0.15 MB |

The full 256 × 256 array plus the 1D array is 65,792 PEs. Verilator alone
would need more than 50 GB for it. The default keeps the paper's column
width, the whole 1D mode and the 1D array, and cuts only the number of
rows. `ROWS = 256` is a legal parameter value and gives the original
array. The GEMM tile is ROWS × COLS, so a smaller ROWS only means more
tiles.

**Other departures and choices:**

* Number format: Q8.8 throughout. The original design does not state its
  format.
* Nonlinear units: approximations chosen here, with the accuracy in the
  table above.
* The original block diagram ties the east end of every row of the 2D array
  to a return bus towards the global buffer. That path is not built here.
  Results leave the 2D array only through the bottom-row drain, which
  shifts a whole tile out in ROWS cycles. The 1D array's links (buffer,
  first-row broadcast, last-row input) are all built.
* The register file is 32 words per PE. The original design gives only the
  total of 4.25 MB, which 32 words × 2 B over 65,792 PEs matches within
  about 1 %.
* Address generation follows a fixed pattern per command. The original
  design's mappings (tiling, loop orders, which fusion group goes where)
  are for the software driving the commands, and none of that software is
  given here.
* No sparsity, no clock gating, and no DRAM controller.

## Workloads

The original design evaluates Mamba-1 models at batch 64, with prefill of
2048 tokens and decode of 1 token. The model ranks below are from the
public model configurations. N = 16 is stated in the design paper.

* **mamba-370m.** ED = 1024, D = 2048, N = 16, 48 layers.
  * One layer's weights are about 12.9 MB in Q8.8. The state H is 4.2 MB.
    Both fit in the buffer together.
  * The activations of a 2048-token prefill (268 MB) are streamed in tiles
    along the sequence.
* **mamba-2.8b.** ED = 2560, D = 5120, 64 layers.
  * One layer's weights are about 82 MB. This does not fit in the 32 MB
    buffer.
  * Weight tiles must be re-streamed from DRAM, which sits outside this
    RTL.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops. Each also has a watchdog, and
draws its stimulus from `$urandom`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/mambalaya_pkg.sv tb/tb_mambalaya_top.sv --top-module tb_mambalaya_top
./obj_dir/Vtb_mambalaya_top
```

The package has to come first on the command line. Use the same command
for `tb_pe_array_2d`, `tb_pe`, `tb_nlfu` and the others.

| Testbench | What it checks |
|---|---|
| `tb_nlfu`, `tb_log_unit` | sweep the Q8.8 range against real-valued exp, sigmoid, SiLU and ln, within the error bounds above |
| `tb_pe_fu` | six-cycle latency and random operations against a model |
| `tb_pe` | accumulate, register file, links, drain, bus priority |
| `tb_pe_array_2d` | random GEMMs and the drain order at 5 × 6, a ReLU in place, 1D-mode bus loads, snake-chain order and idle rows |
| `tb_pe_array_1d` | lanes, register file and chain |
| `tb_global_buffer` | port latency and write priority |
| `tb_mambalaya_top` | see below |

`tb_mambalaya_top` runs the whole accelerator at 4 × 4 (2 rows in 1D mode)
through this sequence:

1. a GEMM and a drain;
2. a ReLU in 2D mode;
3. a drain through the 1D array;
4. a fused GEMM fed by the 1D array;
5. 1D-mode loads, an elementwise square, a chain step and stores;
6. softplus, ln(1 + e^x), as a three-operation fused group in 1D mode
   (EXP, ADD 1.0, LOG on the register files), checked against real math;
7. a SiLU stream through the 1D array;
8. a last GEMM.

It checks the data, and checks every command's cycle count against the
table above. It also counts each mechanism: mode switches in both
directions, the fused broadcast, the drain through the 1D array, row-bus
loads and stores, chain steps, the softplus group and 1D-array streams. A
mechanism that never happened counts as a failure.

Its parameters (`ROWS`, `COLS`, `ROWS_1D`, `GB_LINES`) can be raised, for
example `-GROWS=16 -GCOLS=64 -GROWS_1D=8` on the Verilator command line.
The largest size simulated is 16 × 64 with 8 rows in 1D mode
(4315 checks, all passing). No simulation at the default 48 × 256 size is
provided: building a simulator for 12,544 PE instances takes more memory
and time than a workstation gives it.
