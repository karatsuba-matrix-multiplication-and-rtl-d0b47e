# Karatsuba matrix multiplication on a systolic array: RTL

Karatsuba's trick trades one of four half-width multiplications for a few
additions: with `a = a1·2^h + a0` and `b = b1·2^h + b0`,

    a·b = a1b1·2^2h + ((a1+a0)(b1+b0) − a1b1 − a0b0)·2^h + a0b0

Used one element at a time, this saves little in hardware, because every
multiplier needs its own pre-adders and post-adders. Applied to whole
matrices, the same identity holds with matrix products in place of scalar
ones:

    C = A1B1·2^2h + ((A1+A0)(B1+B0) − A1B1 − A0B0)·2^h + A0B0

The additions then sit once at the edge of a matrix multiplication unit
(MXU), X adders per input vector and Y adders per output row. They are not
repeated at each of the X·Y multipliers. The savings are:

- three narrow matrix products replace four;
- the adder overhead grows with the array's perimeter, not its area.

This repository gives synthesizable SystemVerilog for the two MXU
architectures built on this idea:

- **Fixed-precision KMM MXU** (`kmm_mxu`). Three sub-arrays work side by side
  on the digit matrices A1B1, AsBs and A0B0, where As = A1+A0 and
  Bs = B1+B0. The results are recombined at the output. The sub-arrays can
  themselves be KMM MXUs, which adds levels of recursion.
- **Precision-scalable KMM MXU** (`kmm_ps_mxu`). One array of m-bit
  multipliers runs inputs of any width up to 2m. Each set of input tiles is
  read once, three times or four times, and each read computes one of the
  digit products.

Around the precision-scalable MXU sits a small GEMM engine (`kmm_accel`). It
sequences the tile reads, accumulates the partial products and emits the
finished matrix. The engine is the top of the design.

All operands are unsigned integers.

## The baseline array (MM1)

Every architecture here has the same weight-stationary systolic array at its
core (`mm1_mxu`):

- **Layout.** The array is X multipliers wide and Y tall. A column group of
  P multipliers (`mm1_pe`, P = 4) takes P consecutive elements of the
  incoming A row.
- **Output.** Array row r holds column r of the current B tile. Partial sums
  travel right along the row, so row r produces `c[i][r] = Σk a[i][k]·b[k][r]`.
- **Reduced accumulator.** Inside a group, the P products are summed without
  registers on 2w + log2(P) bits. Only that pre-sum is added into the
  full-width (2w + wa bits) partial sum and registered. This removes three
  quarters of the wide adders and their registers. Here wa = log2(X) is the
  accumulation growth.
- **Double-buffered B.** Each multiplier has an active b register and a
  shadow b register. The shadow registers of a column form a shift chain. The
  next B tile is shifted in, one column per cycle with the bottom row first,
  while the current tile is in use. A `load` flag travels down with the first
  A row of the next tile and copies shadow to active as it passes each group.
- **Skew.** The X/P column groups are skewed by one cycle each; A data, B
  shift data and the load flag are all skewed. The interface takes unskewed
  vectors.

**Latency.** The result of an A row that enters in cycle T leaves row r in
cycle T + X/P + 3 + r. This equals the output indices printed in the paper's
array diagram. The group pipeline accounts for X/P + 1 of these cycles; two
output registers at the array edge supply the other two. Those two registers
are a choice of this design.

**Rules for the user.**

- A swap (`in_load`) may follow only a complete B load of Y shifts.
- The next B load may start Y cycles after the swap, once the swap has
  reached the bottom row.

The tile sequencer keeps both rules.

## Fixed-precision KMM_n^[w] (`kmm_mxu`, `kmm_post_adder`)

**Digits.** Each w-bit element is split into A1 = bits w−1..H and
A0 = bits H−1..0, where H = ⌈w/2⌉. The input adders form As = A1 + A0 on
H+1 bits, and likewise for B.

**Sub-arrays.** Three sub-arrays compute:

- C1 on ⌊w/2⌋-bit digits,
- Cs on (H+1)-bit digits,
- C0 on H-bit digits.

With N > 2 digits, each sub-array is itself a `kmm_mxu` with N/2 digits,
instantiated recursively. At N = 1 it is `mm1_mxu`.

**Post-adder.** Per output element it computes
`C1·2^2H + (Cs − C1 − C0)·2^H + C0`. The middle term is formed on 2H+4+wa
bits. It is never negative, but the intermediate differences need the sign
bits.

**Departure from the paper.** The paper writes the top shift as `<< w`. That
is correct only for even w. With an odd w, which recursion produces (a
65-bit Cs digit splits into 33 and 32 bits), the upper digit sits at bit 2H.
The post-adder shifts by 2H. For every even width the two are identical.

**Timing.** The input adders and post-adders are combinational and the three
sub-arrays have equal latency. The unit therefore has exactly the interface
and latency of `mm1_mxu`. The defaults are the 32-bit, 32×32 configuration
(KMM_2^[32]). W = 64 with N = 4 gives the nine-array KMM_4^[64].

## Precision-scalable KMM_2^[w,m] (`kmm_ps_mxu`, `kmm_pkg`)

One MM1 array of m-bit multipliers (m = 8 by default, 64×64) executes w-bit
inputs in one of three modes. The mode depends on w:

| mode | w range        | reads per tile set | digit split | operands fed, pass t = 0, 1, 2, 3 | pass result Cx                                   |
|------|----------------|--------------------|-------------|-----------------------------------|--------------------------------------------------|
| MM1  | w ≤ m          | 1                  | none        | (A0, B0)                          | C                                                |
| KMM2 | m < w ≤ 2m−2   | 3                  | at m−1      | (A1,B1), (As,Bs), (A0,B0)         | C1·2^2(m−1) − C1·2^(m−1), Cs·2^(m−1), C0 − C0·2^(m−1) |
| MM2  | 2m−2 < w ≤ 2m  | 4                  | at m        | (A1,B1), (A1,B0), (A0,B1), (A0,B0) | C1·2^2m, C10·2^m, C01·2^m, C0                   |

The KMM2 digits are split at m−1 so that the digit sum As still fits the m-bit
multipliers. With w up to 2m−2, both digits have at most m−1 bits. Above
2m−2 the sum would need m+1 bits, so the unit falls back to the
four-product schoolbook split, MM2.

**Pass results.** The Karatsuba middle term −C1 − C0 is distributed over the
first and last KMM2 passes. Each of those passes subtracts its product
shifted by m−1 from itself. A KMM2 C0 pass is therefore negative, and `cx_vec`
is a signed (two's complement) value of 4m + wa + 1 bits.

**Datapath.** The operands of a pass are chosen by slicing and a multiplexer
on the unskewed input vectors, with X adders per vector for As and Bs. The
pass result comes from a shifter with five choices (0, m−1, m, 2(m−1), 2m),
a fixed (m−1) shifter and a subtractor.

**Two states.** The pass is identified by a state (mode, t). This design
carries two copies:

- `b_state`, for the B tile being shifted into the shadow registers;
- `a_state`, for the A rows being streamed.

Two are needed because, with double buffering, the B tile of pass t+1 is
loaded while pass t streams. `a_state` travels through the array with each A
row, so each output row is shifted by the state of the pass it came from.
The paper draws one state signal; the split is this design's.

The sum of a tile set's passes equals the full product of the w-bit tiles.
That sum is formed outside the MXU.

## The engine: re-reading tiles (`kmm_accel`, `tile_reread_seq`, `tile_accumulator`)

A job multiplies:

- an A block of `num_rows` rows (up to 128) and K = 64·`num_ktiles` columns
  (up to 128 K tiles);
- by a 64-column B block.

The element width is `in_width` (1..16). The engine reads tiles from an
external tile memory, one A row or one B column per request, with the data
returned on the next cycle.

**Sequencer.** `tile_reread_seq` issues, for every K tile and every re-read
t of that tile set, one pass:

1. a B load of Y column reads, column Y−1 first;
2. an A stream of `num_rows` row reads, the first carrying the swap flag.

The state t is reset at each new K tile and counts the re-reads.

B loads overlap the previous A stream:

- the B load for pass q+1 starts Y cycles after pass q began streaming;
- pass q+1 streams from the cycle after its last B column was read.

With `num_rows` ≥ 2Y, the array therefore receives one A row every cycle and
passes run back to back. The only idle time is the first B load, Y+1 cycles.
Shorter blocks wait for their B tile. These waits are counted in
`stall_cycles`, and `passes_done` counts the passes.

**Accumulator.** Every A row carries a tag {first, last, row} through the
array:

- `first` marks the first pass of the first K tile;
- `last` marks the final pass of the last K tile.

`tile_accumulator` keeps one accumulator memory of `MAX_ROWS` words per
output column. It adds each signed pass result into the row's word,
restarting from zero on `first`. On `last` it emits the finished element one
cycle later. The columns leave the array skewed, and each is handled on its
own cycle.

**Outputs.** Elements of C come out on `res_valid/res_row/res_data[j]`. Column
j lags column 0 by j cycles. `done` pulses with the final element.

**Fixed core.** Setting `FIXED_CORE = 1` replaces the precision-scalable
core with a fixed-precision KMM_2^[2m] MXU. Every tile set is then read
once, whatever the width.

**Job time.** For `num_rows` = R ≥ 2Y, a job of k K tiles takes about
Y + 1 + R·k·reads cycles to stream, plus the array latency. That gives the
3:1 and 4:1 throughput ratios between MM1 and the KMM2 and MM2 modes.

## What follows the paper and what does not

**Taken from the paper:**

- the MM1 PE group with p = 4 pre-summed products and double-buffered b;
- the array with its output latency;
- the fixed KMM MXU with input adders, three sub-arrays and post-adders,
  including recursion;
- the precision-scalable MXU: mode thresholds, digit bit ranges, read
  counts, output formulas;
- re-reading each tile set 1, 3 or 4 times, with a state t reset per tile
  set;
- accumulation of partial tile products outside the MXU;
- sizes: m = 8, 64×64, p = 4 for the engine; 32-bit 32×32 for the fixed MXU.

**This design's own choices:**

- the 2⌈w/2⌉ top shift (see above);
- the placement of the two output registers;
- B loaded through a shadow shift chain, bottom row first;
- the pass order within a tile set;
- separate A and B states;
- the sequencer's scheduling;
- the one-cycle tile memory;
- the accumulator organisation and the job sizes (128 rows, 128 K tiles);
- the tags;
- the reset scheme: asynchronous active-low;
- the fully combinational adders, multiplexers and shifters at the MXU edges.
  Their timing is not described, and a fast implementation would pipeline
  them.

**Not included:**

- the accelerator's tile memories and post-GEMM processing, which belong to
  a system the paper reuses from earlier work and does not describe;
- the constant-offset and zero-point circuits needed for signed inputs,
  which are likewise defined elsewhere;
- FPGA DSP packing;
- the two-level precision-scalable variant (w up to 32 on 8-bit multipliers),
  which the paper lists in one table but does not describe.

Lint reports that `rst_n` is used both as an asynchronous reset and as the
synchronous disable of the concurrent assertions (in the sequencer, the
fixed-precision MXU and the top). This is expected.

`kmm_mxu` instantiates itself. When it is linted as the top of a design,
Verilator does not elaborate those instances, so it reports the sub-MXU
outputs as undriven. Inside any enclosing module, and in simulation, the
recursion is elaborated and the warnings disappear. Verilator supports only
this direct self-recursion. Splitting the recursion across two modules is
not simulated.

## Files

| file                    | contents |
|-------------------------|----------|
| `rtl/kmm_pkg.sv`        | mode/state types; mode, read-count, operand-select and shift functions |
| `rtl/mm1_pe.sv`         | PE group: P multipliers, double-buffered b, pre-sum, accumulation register |
| `rtl/mm1_mxu.sv`        | baseline systolic array with skew, output registers, valid/tag line |
| `rtl/kmm_post_adder.sv` | Karatsuba recombination of one output row |
| `rtl/kmm_mxu.sv`        | fixed-precision KMM MXU, recursive |
| `rtl/kmm_ps_mxu.sv`     | precision-scalable KMM MXU |
| `rtl/tile_reread_seq.sv`| tile sequencer with re-reads and overlapped B loads |
| `rtl/tile_accumulator.sv` | partial-product accumulator |
| `rtl/kmm_accel.sv`      | top: the GEMM engine |
| `tb/tb_*.sv`            | one self-checking testbench per module, plus `tb_kmm_accel_full`, `tb_kmm_accel_resnet` and `tb_kmm_mxu_table3` |
| `tb/kmm_mxu_harness.sv` | parameterised driver/checker used by `tb_kmm_mxu` |

## Verification

Every testbench computes the expected results itself from random operands.
Each run includes the all-ones operands of the width under test. Each
testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_mm1_pe` | a PE group against a cycle-by-cycle history of its inputs |
| `tb_mm1_mxu` | an 8×4 array, back-to-back tiles with overlapped B loads; values and the X/P+3+r latency |
| `tb_kmm_post_adder` | widths 32, 13 and 9, with digit products formed from real operands |
| `tb_kmm_mxu` | KMM_2^[16], KMM_2^[13] (odd width) and KMM_4^[64]; values and latency |
| `tb_kmm_ps_mxu` | widths 5, 8, 9, 12, 14, 15 and 16 on m = 8; sums the signed passes; checks state, latency and pass counts |
| `tb_tile_reread_seq` | the exact request schedule, flags, ordering rules, no-gap streaming and the statistics |
| `tb_tile_accumulator` | interleaved rows, negative contributions, repeated rounds |
| `tb_kmm_accel` | end to end, at 8×4 with two engines (precision-scalable and fixed) |
| `tb_kmm_accel_full` | the engine at default size: a 128-row, two-K-tile, 12-bit KMM2 job; all 8192 elements checked; 6·128 A rows stream without a gap |
| `tb_kmm_mxu_table3` | KMM_2^[32] at its full 32×32 size, and KMM_4^[64] with nine sub-arrays at 8×8. KMM_4^[64] was also run once at 32×32: it passed, but Verilator needs about 11 minutes to build it |
| `tb_kmm_accel_resnet` | the engine at default size on a 128-row block of a ResNet 3×3×512 convolution (K = 4608, 72 K tiles) at 8, 12 and 16 bits; about 9.4k, 27.8k and 37.0k cycles, in a 1 : 3 : 4 ratio; all elements checked, including the largest 16-bit sums |

`tb_kmm_accel` covers all three modes, mode switches, re-reads,
multi-K-tile accumulation, a stalling short block and a hidden-B-load long
block. It counts each of these and fails if any never occurs.

To simulate one, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl \
      rtl/kmm_pkg.sv rtl/mm1_pe.sv rtl/mm1_mxu.sv rtl/kmm_post_adder.sv \
      rtl/kmm_mxu.sv rtl/kmm_ps_mxu.sv rtl/tile_reread_seq.sv \
      rtl/tile_accumulator.sv rtl/kmm_accel.sv tb/tb_kmm_accel.sv \
      --top-module tb_kmm_accel -o tb && ./obj_dir/tb

`tb_kmm_mxu` also needs `tb/kmm_mxu_harness.sv`. The full-size testbench
builds in about half a minute and runs in well under a second; the ResNet
testbench builds in about three minutes and runs in a few seconds.
