# In-memory bit-serial median accelerator for k-medians clustering

k-medians clustering replaces each cluster centre by the per-dimension
**median** of the cluster's members. The median is robust against outliers.
It is costly in software, because each update reads every data point again.
This design computes the median where the data are stored. It never reads the
numbers out. Instead it runs a *bit-serial* rank search over all stored
numbers in parallel. Each bit of the answer costs one column count and one
in-place update of the rows. A 64-bit median over up to 1024 points takes 715
clock cycles, whatever the number of points.

The host processor keeps its usual role. It assigns points to clusters by
distance and tests for convergence. Only the centre update, "median of
cluster *c* in this dimension", runs on the accelerator.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. `rtl/` holds the
design and `tb/` holds self-checking testbenches.

## 1. The bit-serial rank search

Take *n* unsigned numbers of *W* bits. We want the *k*-th smallest; the
median is *k* = ceil(*n*/2). The search goes from the most significant bit
(MSB) down to the least significant bit (LSB). At each bit position *j* it
does two steps:

1. **Vote (vertical step).** Count the ones in column *j* over all numbers
   taking part, giving `ones`. Then `zeros = n - ones`. If `zeros >= k`, the
   *k*-th smallest number has a 0 at bit *j*; otherwise it has a 1. This is
   result bit *j*. For the median it is the majority function: the bit is 0
   when at least half of the bits are 0.
2. **Propagate (horizontal step).** A *minority* number is one whose bit *j*
   differs from the result bit. Each minority number copies its bit *j* into
   all of its lower bits.

Why this works: a number that lost at bit *j* is already known to lie on one
side of the answer. If its bit was 1 while the answer's bit is 0, it is
larger than the answer. Filling its lower bits with 1s keeps it larger. It
also makes it vote 1 in every later column, which is exactly the weight it
should carry. A number that was 0 against an answer bit of 1 is filled with
0s in the same way. Nothing is ever re-read or moved. The numbers that took
part are changed in place, which is why the design works on a copy (section
2).

Worked example: the median of 3, 9, 5, 12 and 6. Here *n* = 5 and *k* = 3.

| bit | column (3, 9, 5, 12, 6)   | zeros | result | minority rows, after filling |
|-----|---------------------------|-------|--------|------------------------------|
| 3   | 0 1 0 1 0                 | 3     | 0      | 9 → 1111, 12 → 1111          |
| 2   | 0 1 1 1 1                 | 1     | 1      | 3 → 0000                     |
| 1   | 0 1 0 1 1                 | 2     | 1      | 0000 (no change), 5 → 0100   |
| 0   | 0 1 0 1 0                 | 3     | 0      | –                            |

The result is 0110 = 6. The same loop returns any rank when *k* is changed.
The hardware accepts *k* as a command argument. *k* = 0 selects the median.
For an even *n* this gives the lower median, the (*n*/2)-th smallest.

## 2. Organisation

```
 host write/read port ──► fp_to_fixed (optional) ──► address decode
                                                        │
      ┌──────────────┬──────────────┬─────── ... ──────┤  (ARRAYS = 16)
 compute_subarray  compute_subarray  ...  compute_subarray   64 rows x 64 bits
      │ sense[16]      │                       │             + label + valid
 bit_counter        bit_counter      ...  bit_counter        partial counts (0..16)
      └──────────────┴──── reduction_tree ─────┘             4 levels of adders
                               │ total
                          median_ctrl ── majority_unit       accumulate, decide
                               │ op, col, seg, cluster, result bit
                               └──► broadcast to every subarray
```

**compute_subarray** (`rtl/compute_subarray.sv`). This is one limited-size
array. Each of its 64 rows holds:

- a stored 64-bit number;
- a 4-bit cluster label and a valid flag;
- a *working copy* of the number;
- a *select* bit.

Each operation starts with a copy step. The stored numbers are copied into
the working copies. The select bit is set when the row is valid and its label
equals the requested cluster. After that, only selected rows vote and only
selected rows propagate. The stored numbers are never changed, so the same
data serve every cluster and every iteration.

A column is not sensed all at once. Each cycle, one 16-row *segment* of it is
put on `sense`, so an array needs four cycles per column. Propagation acts on
all 64 rows in one cycle. Each row computes a mask of the bits below column
*j* and either sets or clears them.

**bit_counter.** A population count of the 16 sensed bits, registered. In a
resistive-memory implementation this would be an analog current sum and a
quantizer. Here it is digital, with the same result.

**reduction_tree / reduction_unit.** A balanced binary tree of registered
two-input adders. It merges the 16 partial counts into one total. It is fully
pipelined, so the four segments of a column enter on four consecutive cycles.
Its latency is LAT = ceil(log2(ARRAYS)) = 4 cycles.

**median_ctrl + majority_unit.** The sequencer, described in section 3.
`majority_unit` applies the `zeros >= k` rule. With rank 0 it uses
*k* = ceil(*n*/2). A rank above *n* is clamped to *n*.

**fp_to_fixed.** An optional conversion on the write path, described in
section 4.

## 3. One operation, cycle by cycle

A command is `start`, with `start_cluster` and `start_rank`. The controller
then steps through these states:

| state      | cycles  | what happens                                                          |
|------------|---------|-----------------------------------------------------------------------|
| COPY       | 1       | working copy <= stored data; select rows of the cluster               |
| CNT_ISSUE  | SEGS    | sense the select bits of each segment                                 |
| CNT_WAIT   | LAT + 2 | sum the SEGS totals, giving *n*; if *n* = 0, end with `empty`         |
| VOTE_ISSUE | SEGS    | sense column *j* of each segment                                      |
| VOTE_WAIT  | LAT + 2 | sum the totals; majority_unit gives result bit *j*                    |
| PROP       | 1       | minority rows fill their lower bits; *j* = *j* - 1, or go to DONE     |
| DONE       | 1       | `done` = 1; `result`, `n_sel` and `empty` hold until the next start   |

So one bit costs SEGS + LAT + 3 cycles. `done` rises
(W + 1) × (SEGS + LAT + 3) clock edges after the edge that accepts `start`.
The extra one in (W + 1) is the counting pass. At the default sizes
(W = 64, SEGS = 4, LAT = 4) that is 65 × 11 = **715 cycles**. The cost does
not depend on how many points the cluster holds. It grows by one cycle per
bit for each doubling of ARRAYS, and by one cycle per bit for each extra
segment.

During every bit round the controller reports `vote_valid`, `vote_ones` and
`vote_bit`, so the search can be watched from outside. While a command runs,
`start` is ignored.

## 4. Number format

Numbers are 64-bit fixed point. The search compares them as **unsigned**
words. A host that writes raw words (`wr_float = 0`) must therefore store
them in an order-preserving unsigned encoding.

With `wr_float = 1`, `wr_data` is an IEEE-754 double, and `fp_to_fixed`
converts it on the way in:

- The value is multiplied by 2^23 (23 fractional bits) and truncated toward
  zero.
- Values outside the signed 64-bit range saturate, and so do ±infinity and
  NaN. A saturated conversion raises `fp_sat`.
- Zero and subnormal inputs give zero.
- The result is stored in *offset binary*: two's complement with the sign bit
  inverted. Unsigned order of these words equals signed order, so negative
  values rank correctly.

To decode a result, invert bit 63, read the word as signed, and divide by
2^23. The resolution is 1.2e-7 and the range is ±1.1e12.

## 5. Host interface and use in k-medians

| port | use |
|------|-----|
| `wr_en`, `wr_addr`, `wr_data`, `wr_label` | Write point `wr_addr`: row `wr_addr % 64` of subarray `wr_addr / 64`. This also marks it valid. |
| `wr_label_only` | With `wr_en`, rewrite only the label. This is how the host moves a point to another cluster. |
| `wr_float`, `fp_sat` | Convert a double on the way in (section 4). |
| `clear` | Invalidate all points. |
| `rd_addr` → `rd_data` | Read a stored word back. The data appear two cycles later. |
| `start`, `start_cluster`, `start_rank` | Start a command. `busy` and `done` report its progress. It returns `result`, `n_sel` (the number of points in the cluster) and `empty`. |

The array holds one dimension at a time. One k-medians iteration runs like
this:

1. For each point, the host finds the nearest centre, usually by L1 distance.
2. For each dimension, the host writes that dimension's values with the
   points' labels, or rewrites only the labels if the values are already
   loaded. It then issues one command per cluster.

Writes are allowed while a command runs. They change the stored numbers, but
the running command uses its working copy, so they do not affect it.

## 6. Sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `WIDTH`   | 64 | bits per number |
| `ROWS`    | 64 | rows per subarray (must be a multiple of `SEG_ROWS`) |
| `SEG_ROWS`| 16 | rows of a column sensed per cycle |
| `ARRAYS`  | 16 | subarrays, i.e. leaves of the reduction tree |
| `LABEL_W` | 4  | cluster label bits (16 clusters) |
| `FRAC`    | 23 | fractional bits of the float conversion |

The 64-bit width, the 2^23 scale and the 16-cluster maximum come from the
source description of the method. The array geometry does not; it is this
design's choice. With the defaults the accelerator holds 1024 points per
dimension. Small benchmark sets fit:

- iris (150 points);
- UCI wine (178);
- ionosphere (351);
- vowel (990);
- breast-cancer diagnostic (569).

The full white-wine quality set does not fit: it has 4898 points and would
need ARRAYS ≥ 77. For larger sets, raise `ARRAYS` and `ROWS`. The latency
grows only with the logarithm of ARRAYS and with the segment count. `WIDTH`
can be raised for wider formats; each extra bit costs one more round.

## 7. How this relates to the published description, and what is assumed

The source describes the method at the level of the algorithm and the
circuits. Several parts of this RTL are substitutes or choices of its own:

- **Storage and in-place compute.** The original keeps the data in resistive
  (RRAM) arrays. There, the vote is an analog current sum, quantized by a
  current mirror and a differential amplifier with a successive-approximation
  scheme. Line drivers drive the compute lines. Here the arrays are ordinary
  storage, propagation is row-parallel logic, and counting is a digital
  population count. The line driver, the amplifiers and the cells themselves
  are not modelled.
- **Inclusion bits.** The source says per-row bits decide whether a cell
  takes part, but not what they hold. Here a row takes part when it is valid
  and its label matches the requested cluster.
- **Working copy.** The source does not say how the stored data survive the
  in-place propagation. Here every operation starts by copying them.
- **Partial column sensing and merging.** The source senses only part of a
  column at a time and merges partial counts in a tree of reduction units.
  The segment size, the tree's fan-in of two, the pipelining, the separate
  counting pass for *n* and the whole cycle schedule belong to this design.
- **Rank input and even *n*.** The source gives the majority rule and
  mentions the general *i*-th-largest filter. The `start_rank` input and the
  clamping of a too-large rank are choices of this design. So is the lower
  median for an even *n*.
- **Number encoding.** The source gives the 64-bit width and the scale
  factor, printed as "23" and read here as 2^23. Truncation, saturation and
  the offset-binary encoding are choices of this design. The source treats
  the conversion as preprocessing, probably done on the host. Here it is an
  optional step on the write path.
- **Not in hardware.** The distance computation, the assignment step, the
  mean-based centroid of plain k-means and the convergence test stay in host
  software. The source describes no hardware for them.
- **Figures.** The block diagram of the hierarchical merging and the
  float-to-fixed example figure that the text refers to were not available.
  Nothing here is taken from a figure.

## 8. Simulation

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog that records a failure
if the run hangs. To run one with Verilator 5, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/median_pkg.sv tb/tb_median_accel.sv --top-module tb_median_accel -o sim
./obj_dir/sim
```

| testbench | what it checks |
|-----------|----------------|
| `tb_bit_counter` | counts and one-cycle latency against a bit-by-bit sum |
| `tb_reduction_unit` | sums, carry and valid |
| `tb_reduction_tree` | a 16-input and a 5-input (padded) tree, a new set every cycle; totals and exact latency (4 and 3 cycles) |
| `tb_majority_unit` | every (n, ones, rank) of a 6-bit unit against an explicit sorted list, and the majority rule |
| `tb_compute_subarray` | writes, label-only rewrites, clear, read-back, copy/select, every sensed segment and column, propagation against a row model, whole medians done through the array's ports |
| `tb_median_ctrl` | the controller against a behavioural stand-in for arrays, counters and tree: random clusters and ranks against sorting, `n_sel`, `empty`, and the exact cycle count |
| `tb_fp_to_fixed` | 20,000 random doubles and the special cases against real arithmetic; order preservation |
| `tb_median_accel` | the whole design at its default sizes (1024 × 64-bit points): every cluster's median, rank queries, label rewrites, clear, the float path, an empty cluster, and the 715-cycle latency. It also counts that propagation, tied votes, empty clusters, rank queries, float writes, saturation, label rewrites and clusters spread over several subarrays all occur. |
| `tb_workload_wine` | k-medians (k = 3, L1 assignment by the testbench acting as host) on 19 red-wine records with 12 attributes, run to convergence, then the column medians of a five-state census extract with negative values; every median against sorting |

All of them pass. For each block, a deliberately broken copy has been checked
to make its testbench fail. The testbenches compare the design with sorting
and with independent arithmetic. They do not compare it with any timing or
energy figure of the original work, since none of those is reproduced here.
