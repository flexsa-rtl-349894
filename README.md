# FlexSA: a reconfigurable 128x128 systolic array for pruned-network training

A large systolic array gets high reuse out of every operand it fetches. But it only
stays busy when the matrix multiplications (GEMMs) it runs are at least as large as the
array. Pruning a network during training leaves irregular, often small, layer shapes,
so a single 128x128 array idles much of the time. Four independent 64x64 arrays stay
busy more often, but they fetch every operand more often and so move more data
between the global buffer and the cores.

FlexSA keeps both properties. It is built from four 64x64 input-stationary cores that
share one global buffer. A few extra data paths and 1:2 switches let these cores work
as one 128x128 array, as two 128x64 or 64x128 arrays, or as four separate arrays,
chosen again for every *wave*. A wave is one pass of operands through the array.

This repository holds synthesizable SystemVerilog for one FlexSA with its global
buffer. It also holds self-checking testbenches for every block and an end-to-end test.
That test compiles GEMMs into FlexSA instruction streams and checks every result.

## The cores and the four modes

The cores are numbered as they sit on the die:

```
            LBUF_V0        LBUF_V1
 IN BUF 0/1 [ core 0 ]  -> [ core 1 ]
               |              |
 IN BUF 0/1 [ core 2 ]  -> [ core 3 ]
            OBUF col0 a/b  OBUF col1 a/b
```

Each core has the following buffers:

- **Stationary-input buffer (`lbuf_v`), on top of the core.** It holds two 64x64
  tiles, so the next wave's tile can load while the current wave runs.
- **Two horizontal-input buffers (`lbuf_h`), IN BUF 0 and IN BUF 1, on the left of
  each core row.** Each holds up to 128 input rows. 128 is the tile height `blk_M`.
- **Two output buffers (`obuf`), halves a and b, below each core column.** They hold
  up to 128 rows of 32-bit sums, and they add incoming sums to what they already
  hold.

Four added data paths give the modes, numbered as in the original design:

| path | what it carries |
|------|-----------------|
| 1 | IN BUF 1 of a core row straight to core 1 or 3, instead of the operands passed on by core 0 or 2 |
| 2 | outputs of cores 0 and 1 straight down to half b of the output buffers, past cores 2 and 3 |
| 3 | a stationary row loaded into core 0 (2) is also written into core 1 (3) |
| 4 | a stationary row loaded into core 0 (1) is also written into core 2 (3) |

| mode | sub-arrays | paths | partial sums 0/1 -> 2/3 | used when |
|------|------------|-------|--------------------------|-----------|
| FW  | one 128x128         | none  | yes | n > 64 and k > 64 |
| VSW | {0,2} and {1,3}, 128 deep, 64 wide | 1, 3 | yes | n <= 64, k > 64 |
| HSW | {0,1} and {2,3}, 64 deep, 128 wide | 4, 2 | no  | n > 64, k <= 64 |
| ISW | four 64x64          | 1, 3, 2 | no | n <= 64, k <= 64 |

Here `k` is the accumulation depth of a wave (its stationary rows), `n` its width
(stationary columns) and `m` the number of input rows that stream through it.

- **VSW** gives both vertical sub-arrays the same stationary tile. Each sub-array
  streams its own inputs: the left one from IN BUF 0, the right one from IN BUF 1.
  Each writes its own column of output buffers.
- **HSW** gives both horizontal sub-arrays the same tile. The lower pair's results go
  to half a. The upper pair's results go down path 2 to half b.
- **ISW** is the combination of the two: the stationary tiles are shared left to
  right, and every core has its own input stream and output buffer.

`flexsa_mode_ctrl` turns the mode into these switch settings. It also splits `k`
into the number of valid stationary rows for the upper and lower core rows.

One point of the mode table is a reading of conflicting descriptions. One account of
ISW sends the outputs of cores 1 and 2 down path 2. The block diagram and the HSW
description send those of cores 0 and 1. This design follows the diagram: cores 0 and
1 use path 2 in both HSW and ISW.

## Processing element and core

`flexsa_pe` holds one stationary operand and computes `ps_out = ps_in + a_in * W` into
a register. It passes `a_in` one PE to the right and the partial sum one PE down.
While `w_shift` is high, the stationary operands move down one row per cycle. A core
therefore loads a tile of k rows, last row first, in k cycles.

**Arithmetic.** Operands are 16-bit signed integers and sums are 32-bit integers. The
original design multiplies 16-bit floating-point numbers and accumulates in 32-bit
floating point. The widths and the data flow here are the same; the number format is
not. Replacing the PE's multiply-add with an FP16 x FP16 + FP32 fused multiply-add
would not change any timing outside the PE, provided its latency stays one cycle.

`sa_core` is a DIM x DIM grid of PEs. Its right-hand operand outputs `a_right` feed
core 1 or 3. Its bottom sums `ps_bot` feed core 2 or 3, or the output buffer.

## Skew in the buffers

A systolic array needs its inputs skewed: PE row r must see input row i at cycle
i + r. In FlexSA the skew depends on the mode:

- In FW and VSW, the lower core row holds stationary rows 64..127 of a 128-deep
  array. It must see its inputs 64 cycles after the upper row.
- In FW and HSW, core 1 and core 3 receive operands that have crossed core 0 or 2,
  which makes their outputs another 64 cycles later.

Nothing separate handles this. The buffers themselves produce and absorb the skew,
both driven by one wave counter `t` that runs during ExecGEMM.

- **`lbuf_h`** is built as DIM banks, one per PE row. PE row r reads its bank at
  index `t - base - r`, so each PE row can read a different input row in the same
  cycle. `base` is 64 for the lower core row in FW and VSW, and 0 otherwise. Rows
  r >= k, and indices outside 0..m-1, read as zero. A shorter wave therefore never
  picks up stale stationary values or stale inputs.
- **`obuf`** is built as DIM banks, one per column. Column c stores the sum it
  receives at cycle t as output row `t - delay - c`, where
  `delay = G + coloff + 1`:
  - G is the height of the sub-array: 128 in FW and VSW, 64 otherwise;
  - coloff is 64 for core column 1 in FW and HSW.

  Only columns c < n and rows < m are written. With the `acc` bit set, the value is
  added to the stored one; with it clear, the stored value is overwritten.

So an ExecGEMM lasts `m + G + coloff + 64 + 1` cycles. That is one input row per
cycle, plus the time for the last result to reach the output buffer.

## Instructions and the controller

`flexsa_ctrl` runs the FlexSA instruction set over a valid/ready handshake:

| instruction | operands | action |
|-------------|----------|--------|
| LdLBUF_V (`OP_LD_V`)  | mode, k, address, half | stationary tile from the global buffer into the `lbuf_v`s |
| LdLBUF_H (`OP_LD_H`)  | m, address, core row, IN BUF | m input rows into one `lbuf_h` |
| ShiftV (`OP_SHIFT_V`) | mode, k, half | push the stationary tiles into the PEs |
| ExecGEMM (`OP_EXEC`)  | mode, m, n, k, IN BUF, OBUF half, acc | run one wave |
| StLBUF (`OP_ST`)      | m, address, OBUF column, half | m output rows to the global buffer |
| sync (`OP_SYNC`)      | none | wait until everything has finished |

There are two engines:

- the **memory engine** runs LdLBUF_V, LdLBUF_H and StLBUF over port A of the global
  buffer, one word per cycle;
- the **compute engine** runs ShiftV and ExecGEMM.

Instructions issue in order. Each one waits only for its own engine, so a load of the
next wave's operands overlaps the current wave. This is what the double-buffered
local buffers are for. sync waits for both engines. The instruction stream must keep
to the double-buffer discipline itself: it must not load a buffer half that a running
wave still reads.

**Global-buffer layout.** A global-buffer word is 1024 bits: one row of 64 operands.

- **Stationary tile (up to 128x128) at `addr`.** Tile row j, column block b is at
  word `addr + 2*j + b`. LdLBUF_V reads only the quadrants the mode does not
  broadcast: all four in FW, cores 0 and 2 in VSW and ISW, cores 0 and 1 in HSW.
- **Input rows for one `lbuf_h`.** These are m consecutive words.
- **Output rows.** StLBUF writes each row of 64 32-bit sums as two consecutive words:
  sums 0..31 in the first word and sums 32..63 in the second, 32 bits per sum.

**Cycle counts.** ShiftV takes `max(k_top, k_bot) + 1` cycles; LdLBUF_V takes one
cycle per word read. These latencies are this design's own. The original description
gives no cycle counts.

## Global buffer and top level

`gbuf` is a two-port 81,920 x 1024-bit memory, 10 MiB. Both ports have a read latency
of one cycle.

- Port A belongs to the controller.
- Port B is brought out of `flexsa_top` as `ext_*`. This is where the off-chip memory
  system (one HBM2 stack in the original evaluation) and its DMA would connect. The
  testbenches use it to place operands and read results.

`flexsa_top` is one group with one FlexSA and its global buffer. Ports:

| port | direction | meaning |
|------|-----------|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of the controller |
| `instr`, `instr_valid`, `instr_ready` | in, in, out | instruction handshake (`flexsa_pkg::instr_t`) |
| `busy` | out | some instruction is still running |
| `ext_en`, `ext_we`, `ext_addr`, `ext_wdata`, `ext_rdata` | | global buffer port B |

Parameters (defaults are the main configuration): `DIM` = 64 (core size),
`M_MAX` = 128 (`blk_M`), `IN_W` = 16, `ACC_W` = 32, `GBUF_DEPTH` = 81920.
Smaller values of `DIM`, `M_MAX` and `GBUF_DEPTH` work unchanged and simulate much
faster.

**Not included:**

- the off-chip memory;
- the SIMD unit for the non-GEMM layers;
- signal repeaters, which are wires here;
- the compiler that tiles a network into instruction streams. A GEMM-level version of
  it lives in the end-to-end testbench.

## Compiling GEMMs onto FlexSA

The end-to-end testbench body `tb/flexsa_top_tb_body.svh` also documents how to use
the design. It tiles `C = A x B` into tiles of at most 128 x 128 x 128. For each wave,
it chooses the mode by the rule FW > HSW = VSW > ISW: *wide* means n > 64 and *tall*
means k > 64.

**Output layout per mode:**

- **FW:** output columns 0..63 go to output-buffer column 0 and 64..127 to column 1.
  Successive tiles alternate between halves a and b, so storing one tile overlaps
  computing the next.
- **HSW:** the tile's rows are split into two groups. The group run by cores 2/3 goes
  to half a, and the group run by cores 0/1 (path 2) to half b.
- **VSW and ISW:** the rows are split into four groups, stored in col0.a, col1.a,
  col0.b and col1.b.
  - A VSW pair (VSW1 into half a, VSW2 into half b) shares one stationary tile.
  - When ISW waves follow VSW waves in the same tile, cores 2, 3, 0 and 1 add onto
    exactly those four entries.

**FW fallback.** A wide tile whose last wave is shallow (k <= 64) would switch from
the FW layout to the HSW layout halfway through its accumulation. The testbench runs
such a wave in FW mode. The mode rule alone does not cover this case, and no other
output arrangement would keep both layouts.

## Testbenches

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_flexsa_pe` | random multiply-accumulate and stationary shifting against a model |
| `tb_sa_core` | a full skewed wave through a 6x6 core against a reference product |
| `tb_lbuf_v`, `tb_lbuf_h`, `tb_obuf` | buffer contents, skew and masking, accumulate/overwrite |
| `tb_flexsa_mode_ctrl` | the mode table and the k split for every mode and many sizes |
| `tb_gbuf` | both ports, read latency, collisions |
| `tb_flexsa_unit` | 4x4 cores in all four modes plus FW accumulation, driven directly |
| `tb_flexsa_ctrl` | instruction handshake, engine overlap, sync, global-buffer traffic and cycle counts |
| `tb_flexsa_top` | end to end at DIM=8: five GEMMs including edge tiles in every dimension |
| `tb_flexsa_top_full` | the same at the default size (64x64 cores, 10 MiB buffer) |
| `tb_flexsa_workload` | convolution layers of pruned ResNet50, Inception v4 and MobileNet v2 (real K and N, 20 rows of M) on 8x8 cores |

The end-to-end tests count each mechanism and fail if any never happened:

- waves per mode;
- accumulating waves;
- path 3 and path 4 broadcasts;
- loads overlapping a running wave;
- VSW followed by ISW in one tile;
- FW fallbacks;
- syncs.

They also check every ExecGEMM's length in cycles. The workload test requires only
accumulation, overlap and sync, since its layer shapes decide the modes; it prints
the mode counts (FW 426, VSW 172, ISW 4 waves, 52 FW fallbacks for its five layers).

To run one of them with plain Verilator:

```
verilator --binary --top-module tb_flexsa_top -Itb rtl/flexsa_pkg.sv \
    $(ls rtl/*.sv | grep -v flexsa_pkg) tb/tb_flexsa_top.sv
./obj_dir/Vtb_flexsa_top
```

`flexsa_pkg.sv` must come first. The testbenches include the shared end-to-end body
from `tb/`, hence `-Itb`.

**Cost of the full-size test.** It elaborates 16,384 PEs and a 10 MiB memory. It needs
about 1.5 minutes to build and under 1 GB of memory.

## Where this design departs from the original

- Integer arithmetic replaces FP16 multiply / FP32 accumulate (see above).
- Every PE has an adder on its partial-sum input. The original notes that only the
  top PE row of cores 2 and 3 needs a full FMA because of FlexSA. Its baseline PEs
  accumulate in a way it does not describe.
- Loads, cycle counts, buffer organisation, the skew generation in the buffers, the
  global-buffer word width and layout, and the instruction encoding are this design's
  own.
- In the original one LdLBUF_H loads all horizontal inputs of a wave. Here it loads
  one IN BUF, so a wave needs two or four of them.
- ISW's path-2 cores follow the block diagram rather than the ISW description (see
  the modes section).
- The FW fallback for shallow edge waves of wide tiles (see the compiling section).
