# Tiny Median Filter: an M-th-highest-value finder in SystemVerilog

This is RTL for the basic, single-channel version of the Tiny Median Filter,
a small FPGA circuit published by J. Wu. It finds the M-th highest value in
each data set of N unsigned integers. The median, the maximum (M = 1), the
minimum (M = N) and any other percentile are all the same operation with a
different M. Data points go in one per clock, and data sets follow each
other with no gap. A result comes out every N clocks, with nothing to stall
and no irregular timing. N and M are run-time inputs, so one build handles
any window shape, from 3x3 and 5x5 to rectangular and diamond windows, and
sets of up to 250 points.

The circuit never sorts, swaps or compares data points with each other.
Instead it runs a base-4 search over the value range. Each stage narrows the
range that holds the answer by a factor of four and so fixes two more bits
of the result. Four stages give 8 bits.

## The search

Take 8-bit data. At first the answer can be anywhere in 0..255. Cut that
range into four quarters at the boundaries 192, 128 and 64. While the whole
data set streams past, count how many points are >= 192, >= 128 and >= 64.
These are three counts, Q3, Q2 and Q1. The answer lies in the highest
quarter whose lower boundary is reached by at least M points:

* if Q3 >= M, the answer is >= 192, so its top bits are 11;
* otherwise, if Q2 >= M, they are 10;
* otherwise, if Q1 >= M, they are 01;
* otherwise they are 00.

Say the top bits come out as 10, so the answer is in 128..191. The next
stage cuts that range at 176, 160 and 144, counts the same data set again,
and fixes bits 5:4. After four stages all 8 bits are known. The answer found
this way is always one of the data values: it is the largest value v for
which at least M points are >= v.

Three counters per stage are enough. A fourth count, of points >= the
range's own lower end, would always be at least M.

A boundary is the bits found so far with 11, 10 or 01 appended. Stage s
(s = 1..4) only needs the top 2s bits of each data point. Its three
comparators test

    data[7 : 8-2s]  >=  {partial_median, 2'b11 / 2'b10 / 2'b01}

Both sides are zero-extended to 8 bits. Synthesis removes the constant bits.

The cost is O(N · log R) operations for a value range R. Every stage does
its comparisons and increments on every clock, so that cost is spread evenly
over the time the data take to arrive.

## The counter that compares itself

After a data set has been counted, each count must be compared with M. A
separate comparator would work only once per data set. Instead, on the first
point of each set, each counter is preset to

    PtSum0x = 128 - M        (in general 2**(CNT_W-1) - M)

From then on it counts upward. After N points it holds 128 - M + count.
Bit 7 of that is 1 exactly when count >= M. The three MSBs then drive a
small table that picks the two new bits (`ptmed_lut`):

| QC3x[7] | QC2x[7] | QC1x[7] | new bits |
|:-:|:-:|:-:|:-:|
| 0 | 0 | 0 | 00 |
| 0 | 0 | 1 | 01 |
| 0 | 1 | x | 10 |
| 1 | x | x | 11 |

The flags are thermometer coded: a higher boundary reached implies the lower
ones. The x entries therefore never differ in practice. The RTL resolves
them by priority from the top flag down.

This trick limits M and N. The preset must not be negative, so
1 <= M <= 128. The counter must not wrap, so N - M <= 127. Both hold for
every median up to N = 250, where M = 125. They also hold for max and min on
sets of up to 128 points.

## One stage: `median_finding_2b`

    d1st ──R──R──R──R──► d1st4q ─────────────┬────────────────┬───────┐
                                             │ (sel)          │ (ld)  │ (ld)
    pt_med_in[5:0] ──R──┬──R──R──R──► hold ◄─┘                │       │
                        │                     └──────────────►│ out ◄─┘
    data7n ──R──────────┴─► incgen_2b: compare─R─R─R─► 3 x qc_counter ─► ptmed_lut ─┘
                                                      (preset pt_sum0x)

*R* is a register. The register steps follow the published block diagram:

* The first-data marker `d1st` goes through four registers to become
  `d1st4q`.
* The data and the incoming partial median each get one input register.
* The comparison result is registered, then goes through two more
  registers. The published design keeps these steps in reserve for more
  complex comparison logic. Meanwhile the partial median goes through three
  more registers.
* As a result the increments of a set's first point reach the counters in
  the same cycle as `d1st4q`.
* The counters are the fifth register step.

On `d1st4q` three things happen at one clock edge:

* the counters take `pt_sum0x + inc`, which starts counting the new set;
* the output register takes {held partial median, new bits}, which is the
  result for the set that has just ended;
* the hold register takes the new set's partial median.

A set whose marker enters a stage in cycle c therefore has its result on
the stage output from cycle c + N + 5. The result stays there for N cycles,
until the next result replaces it. This only works if the next set's marker
arrives exactly N cycles after this one. That is why the data sets must
follow each other without a gap: the distance between markers is the set
size. A stage itself has no N input.

Bit numbering. Every stage has 8-bit ports:

* `data7n` is Data7n[17:10] in the published diagram;
* `pt_med_in` is PtMed1yIn[19:12], of which only [17:12] (port bits [5:0])
  are used;
* `pt_med_out` is PtMed1yOut[17:10].

Wiring out[7:0] of one stage to in[7:0] of the next moves every known bit up
by two. After the last stage the full result sits in out[7:0]. The first
stage gets 0 as its partial median.

## The chain and the data pipes: `median_finding_8b`

    din,d1st ─┬──────────► stage 1 ──► stage 2 ──► stage 3 ──► stage 4 ──► median
              │               ▲           ▲           ▲
              └► pipe 1 ──────┴► pipe 2 ──┴► pipe 3 ──┴► pipe 4 ──► dout, dv

Stage k+1 must see a data set exactly when stage k has finished with it,
that is N + 5 cycles after stage k saw it. Each data pipe is therefore a
delay line of exactly N + 5 cycles for the data and the marker.

* A pipe is a simple dual-port memory, 9 bits wide (data plus marker). It
  is written at `waddr` and read at `raddr` on every clock, with a
  registered read.
* All four pipes have the same delay, so they share one pair of address
  counters (`pipe_addr_gen`).
* `raddr` counts along with `waddr`, N + 4 behind it. The registered read
  adds the last cycle.
* The default depth is 256 words. That is one FPGA block RAM of 40 bits x
  256 words, which could hold all four pipes side by side, since they use
  the same addresses. The largest N is then 251. The published design quotes
  250, one less, presumably from one more register in its pipe.
* With `PIPE_DEPTH = 32` the pipes fit distributed memory (LUT RAM), for
  N <= 27.

The data go through the pipes unchanged, so every stage reads the original
values. With the delay N + 5 per pipe, the result and the raw data come out
together. For a set whose `d1st` enters in cycle c:

* `dv` pulses in cycle c + 4(N + 5);
* `dout` repeats the set's points in cycles c + 4(N+5) .. c + 4(N+5) + N - 1;
* `median` holds the set's result over exactly those N cycles.

A result therefore appears only when the next data set starts. The last set
of a stream needs one more marker before its result comes out. In a stream
that never stops, this does not matter.

## Interface of the top

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous reset, active high |
| `din` | in | DATA_W | data point, one per clock |
| `d1st` | in | 1 | high on the first point of each data set |
| `pt_sum0x` | in | CNT_W | 2**(CNT_W-1) - M, that is 128 - M |
| `n_size` | in | log2(PIPE_DEPTH) | data set size N |
| `median` | out | DATA_W | M-th highest value of the set now on `dout` |
| `dout` | out | DATA_W | delayed raw data |
| `dv` | out | 1 | delayed `d1st` |

Change `n_size` and `pt_sum0x` only between streams, for example under
reset. Changing them while sets are in flight misaligns those sets.
Simulation assertions in the top check four rules:

* markers are at least N cycles apart;
* 1 <= M <= 128;
* the counters cannot wrap;
* 1 <= N <= PIPE_DEPTH - 5.

| parameter | default | meaning |
|---|---|---|
| `DATA_W` | 8 | data bits. Must be even, giving DATA_W/2 stages. 10 gives five stages for 10-bit ADC data. |
| `CNT_W` | 8 | counter width. It bounds M and N - M as above. |
| `PIPE_DEPTH` | 256 | words per data pipe. N <= PIPE_DEPTH - 5. |

Latency from a set's first point to its result is DATA_W/2 · (N + 5)
cycles, 4(N + 5) at the defaults. Throughput is one data point per clock.
For a 1024x768 frame with an N-point window that is 786432 · N clocks: at
275 MHz, 38.9 frames/s for 3x3 and 14.0 frames/s for 5x5. 275 MHz is the
clock rate the published FPGA implementation met; this RTL was not timed on
an FPGA.

## What is this design's own

The paper leaves the following unspecified, so these are choices made here:

* **Reset.** A synchronous reset clears each stage's marker pipeline and
  output register, and the address counters. Counters and data registers
  need no reset: every marker reloads them.
* **Pipe fill mask.** After reset, the pipe memory holds whatever it
  powered up with. An unwritten word could show up as a false marker. So
  `pipe_addr_gen` counts writes since reset and drives `rd_ok`. `data_pipe`
  masks `dv` until the word being read has been written.
* **Pipe offset.** N + 4 plus one read cycle. The published text gives the
  total, a pipe length of N + 5, but not how it is split.
* **Hold register load.** The register that keeps a set's partial median
  while the set is counted is loaded by `d1st4q`. The published diagram
  shows its load pin but not what drives it, and this is the only timing
  that works.
* **Boundary bits.** The comparison uses partial-median bits [17:12]. One
  published figure prints [17:11], which would make a 9-bit operand; the
  text gives [..:12].
* **Input-rule assertions** and the small marker-distance counter they use.

## Not included

The published work also describes high-throughput versions. None of them is
in this RTL:

* a multi-channel stage, which compares 9 columns per clock, sums their
  increments through 3-to-2 encoders and adders, and accumulates 4-bit
  steps;
* a pixel strip buffer to feed it;
* a single-cycle version, with one chain per window offset and staggered
  markers;
* a "9753" version, which computes 9x9, 7x7, 5x5 and 3x3 medians together
  using EN7/EN5/EN3 enables.

The board-level test setup (input and output RAM, UART link, switches,
logic analyser) is not included either. Window-address generation for
diamond and other irregular windows is modelled only in the image testbench.

## Files

| file | contents |
|---|---|
| `rtl/tmf_pkg.sv` | defaults and the pipeline depth constant |
| `rtl/ptmed_lut.sv` | counter MSBs to two result bits |
| `rtl/incgen_2b.sv` | three boundary comparators and their pipeline |
| `rtl/qc_counter.sv` | preset counter whose MSB flags count >= M |
| `rtl/median_finding_2b.sv` | one 2-bit stage |
| `rtl/pipe_addr_gen.sv` | shared write/read address counters and fill mask |
| `rtl/data_pipe.sv` | one N+5-cycle delay memory |
| `rtl/median_finding_8b.sv` | the top: stages, pipes and the input-rule assertions |

## Verification

Every testbench checks itself and ends with one line,
`TB_RESULT checks=<n> failures=<n>`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ptmed_lut` | all 8 flag combinations |
| `tb_incgen_2b` | random operands, with the three-cycle latency |
| `tb_qc_counter` | preset and count every cycle; the MSB equals count >= M |
| `tb_median_finding_2b` | stage output every cycle for random set sizes, partial medians and ranks; first-stage use against the sorted answer |
| `tb_pipe_addr_gen` | address offset and `rd_ok` timing for N from 1 to 251 |
| `tb_data_pipe` | delay and masking for offsets up to the full depth |
| `tb_median_finding_8b` | the whole filter at its default size, described below |
| `tb_tmf_image` | full 1024x768 frames filtered with the median of six windows, described below |
| `tb_tmf_configs` (+ `tmf_run_check`) | `PIPE_DEPTH = 32` (N up to 27) and `DATA_W = 10` (five stages) |

`tb_median_finding_8b` runs the whole filter at its default size:

* the data sets printed in the published waveforms, checked against the
  results printed with them: 3-point medians, two 25-point medians, and
  9-point sets searched for median, maximum, 2nd, 3rd and minimum;
* the (N, M) pairs of the published examples: 3-point sets, a rank sweep on
  9 points, 13, 15, 21 and 25 points, 81 and 99 points, and 250 points;
* single-point sets, and random settings;
* data that are uniform, clustered (many ties), or only 0 and 255.

It checks `dv` timing, `dout` and `median` on every cycle. It also counts
how often each case occurred: back-to-back sets, max, min, median, ties,
N = 250, changes of N, and single-point sets.

`tb_tmf_image` filters full 1024x768 frames with the median of the 3x3,
5x5, 3x5, 3x7, diamond-13 and diamond-25 windows. It compares every output
pixel whose whole window lies inside the frame with a sorted reference and checks that a frame takes exactly one
clock per window point. It runs for about 75 s.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/tmf_pkg.sv \
        tb/tb_median_finding_8b.sv --top-module tb_median_finding_8b -o sim
    ./obj_dir/sim +verilator+rand+reset+2

`-y rtl -y tb` lets Verilator find every other module by its file name, so
only the package and the testbench need naming. `+verilator+rand+reset+2`
starts every register that nothing initialises at a random value. The
testbenches pass that way, which shows the design does not depend on
power-up values.
