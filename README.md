# Harmonic summing for a pulsar acceleration search, in SystemVerilog

A Fourier-domain acceleration search for pulsars works on a *filter-output
plane* (FOP). Each row holds the power spectrum of the signal after one of
85 acceleration templates; each column is one of 2^21 frequency channels. A
pulsar puts power into a fundamental and its harmonics. To collect that power,
the plane is stretched by k = 2..8 and added to itself:

    HP_1(r, j) = FOP(r, j)
    HP_k(r, j) = HP_{k-1}(r, j) + FOP(floor(r/k), floor(j/k))

Every point of every harmonic plane HP_k is then compared with a threshold
for its row. The points above threshold become *candidates*, and the last 200
are kept per plane.

The arithmetic is cheap: one float addition and one comparison per point and
plane. The hard part is memory. The k-th stretched plane reads the FOP at
(floor(r/k), floor(j/k)), so the reads for one output point are scattered
over eight places in the plane. The FOP is 85 × 2^21 floats (about 710 MB), so
it lives in off-chip memory.

This RTL implements the organisation that the paper "Harmonic-summing Module
of SKA on FPGA — Optimising the Irregular Memory Accesses" (Wang, Thiagaraj,
Sinnen) found fastest, which it calls MultipleHP-R. It rests on three ideas:

1. **All eight planes at once.** Each output point is computed in every plane
   and compared with its threshold at the same time, then dropped. No
   harmonic plane is ever written to memory, and off-chip traffic is
   read-only.
2. **Work-groups of whole columns.** The output is cut into work-groups of 16
   consecutive channels, all rows. The FOP points that such a work-group needs
   form one small rectangular block per stretched plane, and the largest block
   is the work-group's own 16 columns. These blocks are loaded into on-chip
   memory once and then gathered from freely.
3. **A reordered FOP (rFOP).** The host rewrites the FOP so that each
   work-group's blocks sit one after another in memory. Input then becomes a
   plain sequential stream of 8 floats per clock, with no random access to
   off-chip memory at all. The cost is that about twice the FOP size is read.

The design processes half an FOP per run: 42 rows × 2^21 channels. The
paper's timing runs use the same half, because the upper and lower halves of
the plane are independent and processed identically.

## The reordered work-group array

This is the part to understand before reading the RTL. The geometry is all
computed in `rtl/hsum_pkg.sv`.

Within the half plane, rows are numbered r = 0..41. A work-group covers
columns col0 .. col0+15, where col0 = 16·w. For stretched plane k it needs FOP
rows 0 .. floor(41/k) and FOP columns floor(col0/k) .. floor((col0+15)/k).
The array of one work-group stores one segment per k, in the order k = 1..8.
Segment k has a fixed size for every work-group: `seg_rows(k)` rows by
`seg_cols(k)` columns. `seg_cols(k)` is the largest column span over all
alignments of col0 modulo k. Inside a segment the points are stored column by
column, and the rows of a column are consecutive.

| k | rows | columns | points | first word |
|---|------|---------|--------|------------|
| 1 | 42 | 16 | 672 | 0 |
| 2 | 21 | 8 | 168 | 672 |
| 3 | 14 | 6 | 84 | 840 |
| 4 | 11 | 4 | 44 | 924 |
| 5 | 9 | 4 | 36 | 968 |
| 6 | 7 | 4 | 28 | 1004 |
| 7 | 6 | 4 | 24 | 1032 |
| 8 | 6 | 2 | 12 | 1056 |
| pad | | | 276 | 1068 |

These segment ends (672, 840, …, 1068) are the ones the paper publishes for
this configuration. The paper labels the templates of the upper half 1..42.
Stretching rows 1..42 by floor(r/k) would need source rows 0..21 for k = 2,
which is 22 rows and 176 points rather than 168. Counting rows from 0 within the half plane does
give them, so that is how this design counts. How the template at the
centre of the plane, which belongs to neither half, joins a search is left
to the host.

A work-group has 42·16 = 672 output points. Each *work-item* produces 4 of
them, so a work-group has 168 work-items. The input has to stream a whole
number of points per clock, rounded up to a power of two:
ceil(1068/168) = 7 becomes 8. So a work-group's array is 8 × 168 = 1344 words,
and the 276 words after word 1068 are padding that is never read. The same
functions reproduce every entry of the paper's table of points per clock: 3,
6, 12, 23 for one column, 2, 4, 7, 13 for 16 columns, and so on.

Given the array, the value for plane k at point (r, j) is at word

    seg_base(k) + (floor(j/k) − floor(col0/k)) · seg_rows(k) + floor(r/k)

This is `rtl/stretch_addr.sv`. It uses constant divisors only.

The rFOP itself is produced by software. The paper does it on the host with
`memcpy` and reports 87.8 ms for half an FOP. Software that feeds this design
writes, for w = 0, 1, …: for k = 1..8, for each segment column cc, for each
segment row rr, the value FOP(rr, floor(16w/k) + cc). It then pads the
work-group to 1344 words. Points beyond the last channel may be zero.

## Block structure and timing

```
 rFOP stream (8 x fp32 / clock, valid/ready)
        |
  rfop_buffer      two banks of 1344 words: one loads while the other is read
        |   32 gathers / clock (4 points x 8 planes)
  hp_calc          work-item sequencer, stretch_addr x4, gather register,
        |          harmonic_sum x4 (7 pipelined fp32_add each)
  channel_fifo     16 deep, one word = 4 points x (row, channel, 8 sums)
        |
  cand_detect      threshold_array, 32 fp32_gt, cand_shiftreg x8,
        |          read-out sequencer
 candidate stream (CL1, CL2, plane; valid/ready)
```

* **rfop_buffer.** Beats are written at word addresses 8·b .. 8·b+7. After
  168 beats the bank is full and loading moves to the other bank. `rfop_ready`
  stays low while the bank to be filled still holds a work-group that has not
  been computed. Up to two work-groups can therefore be accepted before
  `start`.
* **hp_calc.** It issues one work-item per clock. Work-item w of a work-group
  covers the flattened points 4w .. 4w+3, in column-major order: point p is
  row p mod 42 of column p div 42. The 32 gathered values are registered.
  Each of the 4 lanes then runs a chain of 7 registered float adders that
  builds HP_1..HP_8. A point leaves 8 clocks after its work-item was issued.
  The bank is released together with the gather of the last work-item, so the
  loader can start refilling it on the next clock.
* **Rate.** Loading a work-group takes 168 clocks, and so does computing one.
  With the input streaming continuously, a half FOP of 131,072 work-groups
  takes 131,072 × 168 + 10 = 22,020,106 clocks. The full-size simulation
  measures exactly that. At 263 MHz, the clock the paper reports for this
  setting, that is 83.7 ms per half FOP. The paper measured 107.7 ms for the
  calculation alone and 120 ms with candidate detection. On its board the
  stream comes from DDR memory, which does not deliver every clock. The input needs 8 × 4 bytes per clock, about 8.4 GB/s at 263 MHz.
* **channel_fifo.** This is the paper's "channel" between its two kernels.
  hp_calc issues only while the FIFO's free space exceeds the number of
  points in flight, so the FIFO cannot overflow. In this design the detection
  side takes one word per clock and never stalls, so the FIFO never fills.
* **cand_detect.** Every clock it compares 4 points × 8 planes with
  TA(k, row). Hits are packed into the candidate format below and shifted
  into one `cand_shiftreg` per plane. Each shift register keeps the last 200
  candidates; in one clock, lane 0 counts as the oldest. When the run has
  finished and the FIFO is empty, the lists are streamed out: plane 1 first,
  oldest candidate first. Then `done` pulses.

### Candidate format

Following the paper, a candidate is two 32-bit words:

    CL1 = F·2^24 + H·2^21 + B        CL2 = the harmonic sum (fp32)

Here F is the row within the processed half plane (0..41), H = k−1, and B is
the channel j. The host adds the half's offset and sign to F to get the
template index. `cand_total` counts every hit, so a list that overflowed
shows up as `cand_total > 200`.

### Top-level use (`hsum_top`)

1. While idle, write the thresholds: `ta_we`, `ta_plane` (= k−1), `ta_row`,
   `ta_data`. They keep their values across runs.
2. Pulse `start` with `num_wg` set to the number of work-groups. A whole half
   plane is N_CHAN/16 = 131,072.
3. Stream the rFOP on `rfop_*`, before or after `start`.
4. Take the candidates from `cand_*`. Wait for `done`.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_HP` | 8 | harmonic planes |
| `N_ROWS` | 42 | rows per run (half FOP) |
| `N_CHAN` | 2^21 | channels |
| `N_CAND` | 200 | candidates kept per plane |
| `N_COL` | 16 | columns per work-group |
| `N_PWI` | 4 | points per work-item (lanes) |

Points per clock (`N_LPCC`), work-items per work-group and the buffer size
are derived from these. The candidate format limits rows to 128 and channels
to 2^21. `N_ROWS·N_COL` must be divisible by `N_PWI`, and `N_PWI` must not
exceed `N_ROWS`. The other settings in the paper's tables, such as (16,8) or
(64,8), are reached through `N_COL` and `N_PWI`. (16,4) and (64,8) have
been simulated.

## What follows the paper and what does not

Taken from the paper:
* the harmonic-sum equations;
* the sizes (42 × 2^21 half plane, 8 planes, 200 candidates);
* the choice of 16 columns and 4 points per work-item;
* 8 points per clock and the padding to a power of two;
* the segment order and sizes of the reordered array;
* the chain of adders and the `>` comparators against per-row thresholds;
* one shift register per plane keeping the last N_CAND candidates;
* the CL1/CL2 candidate format;
* overlapping the load of one work-group with the compute of the previous;
* the FIFO channel between calculation and detection.

Choices of this design, where the paper gives only the function or nothing:
* The float adder is this design's own. It rounds to nearest even, flushes
  subnormals to zero and handles infinities and NaN only simply. The paper
  used the OpenCL compiler's adders.
* The order of points inside a segment, the work-item-to-point mapping, and
  the order of candidates within one clock. As the paper notes, which "last
  200" are kept depends on processing order, so lists can differ from another
  implementation when more than 200 are found.
* The two-bank buffer, all valid/ready handshakes, the 16-deep FIFO, the
  threshold loading port, the run control (`start`, `num_wg`, `done`) and the
  candidate read-out stream.
* The meaning of F: the row within the half plane.

Not in the RTL:
* the FOP reordering, which is host software;
* the off-chip DDR memory and its controller;
* the host and PCIe link;
* the upstream FT-convolution stage.

The top's stream ports stand where the memory interface would be. The other
methods the paper compares against are not built: SingleHP, naive
MultipleHP, MultipleHP-H and MultipleHP-N.

## Verification

Each block has a self-checking testbench in `tb/`. Expected values are
computed independently in `tb/tb_ref_pkg.sv`: float sums are formed in
double precision and rounded once to single precision by hand, and FOP
values come from a hash of (row, channel), so nothing needs storing.

* `tb_hsum_top` runs the whole design at 512 channels (32 work-groups) with
  8 planes and N_CAND = 16. It makes three runs: full-rate input, randomly
  throttled input and output, and a zero-threshold run in which every list
  overflows. It compares every candidate word and count, checks the
  168-clocks-per-work-group rate, and requires that each of these happened at
  least once: input back-pressure, loading overlapped with computing, the
  calculation waiting for input, padding, list overflow and output stalls.
* `tb_hsum_cfg` makes the same three runs with 64 columns per work-group
  and 8 points per work-item, over 1024 channels. It also checks the derived
  sizes: 13 points per clock before rounding and 16 after, 336 work-items,
  and a 5376-word bank.
* `tb_hsum_full` runs the top at its defaults over a whole half FOP: 2^21
  channels, 22 million clocks. It takes about 4 minutes in Verilator.
* The unit testbenches cover: the adder (20,000 random sums plus rounding
  corner cases); the comparator; the address generator against the
  segment table for all points of several work-groups; the adder chain and
  its latency; the buffer's bank swapping and back-pressure; the FIFO; the
  shift register's keep-last behaviour; and detection with read-out under
  back-pressure.

Simulate a testbench with plain Verilator, for example:

    verilator --binary --timing --assert --top-module tb_hsum_top \
      -y rtl -y tb +libext+.sv rtl/hsum_pkg.sv tb/tb_ref_pkg.sv tb/tb_hsum_top.sv
    ./obj_dir/Vtb_hsum_top

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

Limits of trust:
* The design has been simulated only, never synthesised to an FPGA.
* Only the (16,4) and (64,8) settings have been run, (64,8) at 1024
  channels only.
* The adder is exact only for normal numbers: subnormals are flushed.
  Positive power values, as in a real FOP, never come near that range.
