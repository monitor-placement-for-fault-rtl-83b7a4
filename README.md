# Boundary-monitored systolic array with single-fault localization

A weight-stationary systolic array passes every activation to the right and
every partial sum downward, so one faulty processing element (PE) corrupts
everything downstream of it. A checker at the array's output can tell that
something went wrong, but not where. A checker in every PE could, but costs
too much area. This design places signature monitors on the 2N-1 PEs of the
rightmost column and the bottom row only. That is the smallest set of
monitor positions that still names the faulty PE exactly. When area is
tighter, fewer monitors can be used, and the design then reports a small
rectangle of PEs that must contain the fault.

The RTL is a complete, parameterized accelerator tile:

- an N x N weight-stationary array of 8-bit multiply-accumulate PEs with
  24-bit partial sums (default N = 256, as in a TPU-class array);
- MISR-based monitors embedded in the boundary PEs (default 2N-1 = 511);
- a decoder that turns the monitors' pass/fail pattern into the location of
  the faulty PE;
- input and output skew registers, so vectors enter and leave aligned.

## Why the boundary is enough

Number rows and columns from 1 at the top-left corner. Suppose PE(r,c) is
faulty and corrupts the value it forwards. The bad activation travels right
along row r. From row r downward, it corrupts the partial sums of every
column c' >= c. The set of PEs whose outputs are wrong is therefore the
quadrant below and to the right of the fault: all PE(i,j) with i >= r and
j >= c.

Turn that around and look from a monitor. A monitor in PE(i,j) sees every
fault at or above it and at or left of it. For the boundary monitors this
becomes very simple:

- The monitor on PE(i,N) in the right column fires exactly when the faulty
  row r <= i. Read from top to bottom, the right-column monitors form a
  thermometer code: 0 0 ... 0 1 1 ... 1. The first 1 is at row r.
- The monitor on PE(N,j) in the bottom row fires exactly when the faulty
  column c <= j. The first 1 is at column c.

Both codes together give (r,c). The corner PE(N,N) belongs to both borders
and sees every fault. That makes N + N - 1 = 2N-1 monitors.

None of them can be dropped. Without the right-column monitor at row i, a
fault in PE(i,N) looks the same as one in PE(i+1,N): both are invisible to
every bottom-row monitor except the corner. The same argument applies to
the bottom row.

A 4 x 4 example. Monitors sit on PEs marked `M`; a fault at PE(3,2) is
marked `X`, and the corrupted quadrant is shown with `*`:

```
        col 1  col 2  col 3  col 4
row 1     .      .      .      M      right-column flags (top to bottom): 0 0 1 1
row 2     .      .      .      M                                   first 1 -> row 3
row 3     .      X*     *      M*
row 4     M      M*     M*     M*     bottom-row flags (left to right):   0 1 1 1
                                                                   first 1 -> col 2
```

### Fewer monitors: isolation areas

With m < 2N-1 monitors, the design still uses only the two borders. The
monitors are split between the borders and spaced evenly along each one.
A fault between two neighbouring monitors on a border cannot be placed more
precisely than that gap. The design then reports the rectangle formed by
the row gap and the column gap. Its size is the *isolation area*: the PEs
that would have to be retired to be sure the faulty one is gone.

The split is chosen when the design is elaborated. The corner monitor is
always placed, which leaves m' = m - 1 monitors. The design tries every
split of the form

    right = i + 1,   bottom = m' - i + 1,   for i = 1 .. floor(m'/2)

and evaluates each one with

    area = ceil(N / right) * ceil(N / bottom)

It keeps the split with the smallest area. Two choices go beyond that rule:

- For m = 1, only the corner is monitored. For m = 2, the corner and one
  bottom-row monitor are used.
- A split that would need more than N monitors on one border is skipped.

The k-th of c monitors on a border of length N sits at position
`ceil(k*N/c)`. So no gap is wider than ceil(N/c), and the last monitor is
always on the corner.

Some resulting worst-case areas:

| N   | m   | right / bottom | worst-case isolation area |
|-----|-----|----------------|---------------------------|
| 256 | 511 | 256 / 256      | 1 (exact)                 |
| 256 | 383 | 128 / 256      | 2                         |
| 256 | 255 | 128 / 128      | 4                         |
| 10  | 6   | 2 / 5          | 10                        |
| 8   | 7   | 4 / 4          | 4                         |
| 4   | 7   | 4 / 4          | 1                         |

Take N = 256. Exact localization costs 511 monitors. Accepting pairs of
candidate PEs brings this down to 383 monitors, and accepting 2 x 2 blocks
brings it down to 255. The heuristic does not always find the best placement.
For some (N, m) an irregular placement can do better, and the heuristic
matches the best known placement only in some cases. It is exact at m = 2N-1.

## Block structure

```
sa_fl_top
 |- skew_buffer  (input:  row r delayed r cycles)
 |- systolic_array
 |   |- pe  x N*N                      weight-stationary MAC
 |   '- pe_monitor  x M                on the chosen boundary PEs
 |       '- misr                        24-bit signature register
 |- skew_buffer  (output: column c delayed N-1-c cycles)
 '- fault_localizer                     signature -> isolation rectangle
packages: sa_pkg (widths, MISR polynomials), mpop_pkg (placement)
```

| file | role |
|------|------|
| `rtl/sa_pkg.sv` | default widths (8-bit data, 24-bit sums, 16-bit window counter), default N, MISR feedback polynomials |
| `rtl/mpop_pkg.sv` | border split and monitor positions (constant functions) |
| `rtl/pe.sv` | one PE: weight register, signed 8x8 multiply, 24-bit add, forwarding |
| `rtl/misr.sv` | Galois-form multiple-input signature register |
| `rtl/pe_monitor.sv` | MISR + window counter + golden register + comparator |
| `rtl/systolic_array.sv` | PE grid and monitor placement |
| `rtl/fault_localizer.sv` | thermometer decoding of the two borders |
| `rtl/skew_buffer.sv` | per-lane delay lines |
| `rtl/sa_fl_top.sv` | the accelerator tile |

## Datapath and timing

PE(r,c) holds weight w[r][c]. The array computes, for each input vector x,

    y[c] = sum over r of w[r][c] * x[r]        (signed, wraps at 24 bits)

that is, one output element per column. Every PE has one register stage on
its activation path and one on its partial-sum path. Row r of the input is
delayed r cycles, so that its activation meets the partial sum coming down
from row r-1. The column results leave the bottom row staggered. The output
skew buffer realigns them.

- **Weight load.** Hold `w_load` for N cycles and present one row of
  weights per cycle on `w_in`, **bottom row first**. The weights shift down
  the columns. There is a single weight buffer, so the array must be idle
  while weights load.
- **Streaming.** Present one vector per cycle on `act_in` with `act_valid`.
  Gaps are allowed. A vector sampled at clock edge t appears on `y` with
  `y_valid` after edge t + 2N - 1.

## The monitor

`pe_monitor` compresses the partial sums that leave its PE. The sum
`psum_out` is folded into a 24-bit MISR on every cycle that the PE's output
is valid:

    sig' = {sig[22:0], 0} ^ (sig[23] ? 0xC20001 : 0) ^ psum      (x^24+x^23+x^22+x^17+1)

A window works as follows:

1. `mon_start` clears every MISR and counter and latches K (`mon_k`, at
   least 1). It must come before the first vector of the window enters the
   array.
2. Each monitor absorbs exactly K valid partial sums of its own PE. Monitors
   far from the input corner start later, but they count the same K vectors.
   Valid sums that arrive after the K-th are ignored.
3. Two cycles after its K-th sum, a monitor raises `done`. Its `fail` bit then
   shows whether the signature differs from its golden value.
4. When all monitors are done, `fault_localizer` registers the result one
   cycle later. `loc_valid` rises and stays high until the next `mon_start`.

The golden values are the signatures a fault-free array would produce for
that weight matrix and those K vectors. They must be written before the
window ends, through `golden_we` / `golden_addr` / `golden_data`. Computing
them is left to the host. The testbenches compute them with a reference
model, from the expected partial sums of each monitored PE.

Monitor numbering, used for `golden_addr` and `mon_fail`:

- 0 .. R-1 are the right-column monitors, top to bottom. R-1 is the corner.
- R .. M-1 are the bottom-row monitors, left to right, without the corner.

With the default M = 2N-1, monitor k < N sits on PE(k, N-1), and monitor
k >= N sits on PE(N-1, k-N) (0-based).

## Reading the localization result

| output | meaning |
|--------|---------|
| `fault_detected` | at least one monitor failed |
| `fault_row_lo..fault_row_hi`, `fault_col_lo..fault_col_hi` | rectangle that contains the faulty PE (0-based); one PE with 2N-1 monitors |
| `fault_area` | number of PEs in that rectangle |
| `fault_consistent` | low if the pattern is impossible for a single fault: a border that is not a thermometer code, or only one border fired |
| `mon_fail` | the raw pattern, for software that wants to do its own analysis |

`fault_consistent` going low points to more than one faulty PE. It can also
mean that two errors cancelled in one MISR (aliasing). The localizer only
claims to handle one fault per window.

## Fault injection

For testing, the top can corrupt one PE. With `fi_en` high, the PE at
(`fi_row`, `fi_col`) XORs `fi_mask` into the activation it receives. The
corrupted activation enters that PE's multiplier and is also passed right,
which produces the downstream quadrant described above. The row and column
selects are decoded once and distributed as N + N wires.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N`  | 256 | array rows = columns |
| `M`  | 2N-1 | number of monitors, 1 .. 2N-1 |
| `DW` | 8   | weight/activation width |
| `AW` | 24  | partial-sum and MISR width (the MISR always matches the partial sum) |
| `CW` | 16  | window counter width, so K <= 65535 |

A 32-bit accumulator with a 32-bit MISR is a common alternative. It only
needs `AW = 32`, since a primitive polynomial is provided for 32 bits.

## Departures and design choices

The idea and its main parameters follow a published analysis of monitor
placement in systolic arrays:

- boundary placement with 2N-1 monitors;
- the border split and its area formula for fewer monitors;
- MISR monitors with a counter and a golden comparison;
- 8-bit data with 24-bit sums on a 256 x 256 array.

The following were chosen here:

- **Arithmetic and control.** Signed arithmetic, column-shift weight
  loading, skew buffers, zero partial sums entering the top row and
  asynchronous active-low reset.
- **Monitor.** The MISR polynomial and the zero seed. The counter counts
  valid partial sums rather than raw cycles. Each monitor has its own golden
  register, written over a shared bus.
- **Localizer.** The rectangle output and the consistency flag.
- **Placement details.** The m = 1 and m = 2 rules, the even spacing rule
  `ceil(k*N/c)`, and first-minimum tie breaking in the split.
- **Fault injection.** The fault-injection port is a test hook, not part of
  the functional design.

Limits:

- The fault model is a single PE whose error reaches its outputs. An error
  that a zero weight or a masked activation hides is not detected, and
  nothing here could detect it.
- Weights cannot be loaded while vectors stream.

## Simulating

Every testbench in `tb/` checks itself. At the end it prints
`TB_RESULT checks=<n> failures=<n>`, and it has a watchdog. Build one with
Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sa_pkg.sv rtl/mpop_pkg.sv tb/tb_ref_pkg.sv tb/tb_sa_fl_top.sv \
    --top-module tb_sa_fl_top -y rtl -y tb -Mdir obj -o sim
./obj/sim
```

| testbench | what it establishes |
|-----------|---------------------|
| `tb_mpop_pkg` | the placement functions reproduce published heuristic areas for N = 4, 8, 10 and the 2N-1 / 3N/2-1 / N-1 cases for N = 32..256; spacing never exceeds ceil(N/c) |
| `tb_pe` | MAC result, forwarding, valid bits, weight shift, fault injection, one-cycle latency |
| `tb_misr` | 24- and 4-bit MISR against a bit-level model written from the tap list; one flipped word changes the signature |
| `tb_pe_monitor` | window of K valid words with gaps, done exactly two cycles after the K-th, pass/fail for clean, corrupted-word and wrong-golden runs |
| `tb_systolic_array` | N = 6: matrix-vector results and their arrival cycle; for every one of the 36 fault positions, exactly the monitors below-right of it fail, with 11 and with 5 monitors |
| `tb_fault_localizer` | every single-fault signature for 4 x 4 / 7 monitors (exact), 10 x 10 / 6 monitors (area 10) and 8 x 8 / 11 monitors (area 2); impossible patterns flagged |
| `tb_sa_fl_top` | N = 8 end to end with 15 and 7 monitors: weight reloads, stalls in the input stream, output values and 2N-1 latency, clean windows, exact localization of injected faults, 2 x 2 isolation rectangles with the reduced placement |
| `tb_sa_fl_top_large` | N = 32 with all 63 boundary monitors: one clean operation with every output element checked, then a fault in PE(21,9) named exactly |
| `tb_table3_placements` | for N = 256, 128, 64 and 32 with m = 2N-1, 3N/2-1, N-1 and N/2-1, the localizer is driven with the signature of every possible faulty PE; the worst-case isolation areas are 1, 2, 4 and 16 |

### What has been simulated at which size

The default 256 x 256 tile (65,536 PEs, 511 monitors) passes lint and
elaboration. A Verilator lint of it takes about 5 minutes and 7.6 GB of
memory. It has not been simulated end to end, because a Verilator model
of it is about 1 GB of generated C++, an estimated three hours of compiling
on one core. The largest
end-to-end simulation run was a 64 x 64 tile with 127 monitors: it took about
9 minutes to build. A clean operation produced correct outputs, and the
monitors named an injected faulty PE, PE(37,22), exactly.
The kept large test uses N = 32, which builds in under two minutes. The
localizer is checked at the full 256 x 256 size for every possible faulty PE
(`tb_table3_placements`). Every module is size-generic, so the smaller runs
exercise the same RTL as the default.

### Area at the published configurations

Take m = N/2 - 1 border monitors, for example 63 monitors on a 128 x 128
array. The split rule then gives a worst-case isolation area of 16, not 4.
An area of 4 needs N - 1 monitors: 127 for N = 128, or 255 for N = 256.
