# A streaming TPC cluster finder for an FPGA read-out card

A Time Projection Chamber (TPC) delivers its raw data as zero-suppressed
charge samples: for every pad of every pad row, short runs of non-zero ADC
values along the drift-time axis. Track reconstruction does not work on these
samples but on *space points*, the charge-weighted centres of the
two-dimensional clusters a particle leaves in the pad-time plane of each pad
row. This design finds those clusters in hardware while the data stream
through the read-out card, so the host receives a short list of clusters
instead of the raw samples.

The design rests on two ideas.

1. **Work in one pass, in arrival order.** Samples arrive pad by pad, each pad
   from high to low time. The charges of one pad are first grouped into
   *sequences* (one contiguous run of samples), and a sequence is merged with
   a cluster started on the immediately preceding pad if their time positions
   are close. A cluster therefore only ever needs the clusters of one earlier
   pad, and these are stored in a small ring buffer.
2. **Keep every multiplication small.** The centroid is computed relative to
   the cluster's upper-left corner (highest time `a`, first pad `b`). Then
   every multiplicand is at most the cluster's height or width, and a few
   shifts and adds do the multiplication instead of a multiplier. The chip
   sends five integers per cluster and leaves the two divisions to the host.

The RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`, and the self-checking
testbenches are in `tb/`.

## The arithmetic: five integers per cluster

Take a cluster whose pads are `b .. b+n`. On pad `b+k` its sequence starts at
time `a_j` and holds the charges `q(a_j), q(a_j-1), ...`. Let `a` be the
highest start time of all its sequences. The hardware accumulates:

| value | meaning |
|---|---|
| `a` | highest start time (top edge of the cluster) |
| `b` | first pad |
| `Q = sum_j Q_j` | total charge, with `Q_j` the charge of sequence `j` |
| `P = sum_k k * Q_(b+k)` | pad moment relative to `b` |
| `T = sum_j [ S_j + (a - a_j) * Q_j ]` | time moment relative to `a`, with `S_j = sum_k k * q(a_j - k)` |

The centroids are then `G_pad = b + P/Q` and `G_time = a - T/Q`.

Each term can be built from one sequence at a time:

* `Q_j` and `S_j` depend only on the charges of one sequence. The Decoder adds
  them up as the samples pass, so samples are never stored. `k` counts
  downwards from the sequence's top sample.
* Merging sequence `j` into a cluster adds `Q_j` to `Q`, `k*Q_j` to `P` (`k` is
  the number of pads merged so far), and `S_j` plus a height correction to `T`.
  If the new sequence starts higher than the cluster (`a_j > a`), the
  cluster's top moves up, and the whole old moment shifts by
  `(a_j - a) * Q`. Otherwise the new sequence is shifted by `(a - a_j) * Q_j`.
  Either way exactly one product "height difference x charge" is needed. The
  multiplicand is always the smaller quantity, the height difference.

The testbenches check the arithmetic directly against the raw charges. For
every cluster they check `a*Q - T = sum q*t` and `b*Q + P = sum q*pad`.

### SmartMult (`cf_smartmult`)

The multiplicands `k` and `a - a_j` are bounded by `2**MULT_BITS - 1`
(default 15). `cf_smartmult` writes the multiplicand in canonical
signed-digit form: digits -1, 0 and +1, with no two adjacent digits non-zero.
It then adds at most three shifted copies of the other operand, with signs.
For a 4-bit multiplicand this needs one or two adders and a few shifters,
with no array multiplier. Three instances exist: one in the Decoder (`k*q`)
and two in the Merger.

The multiplicand limit is also a limit on cluster size. A sequence longer than
16 samples, a cluster wider than 16 pads, or a height difference above 15
marks the cluster as *overflowed*. An overflowed cluster is dropped when it is
finished.

## Data flow

```
in_word ──► cf_decoder ──seq──► cf_fifo ──seq──► cf_merger ──► out_cl
 10 bit      (sequences)        (16 deep)        │    ▲
                                                 ▼    │
                                              cf_ringram (256 clusters)
```

### Input format (`cf_decoder`)

One 10-bit word per clock cycle, qualified by `in_valid`. There is no
back-pressure: the Decoder keeps up with any word rate. Each channel (pad) is
sent in this order:

```
ROW  PAD  NW                  channel header; NW = number of words that follow
LEN  TIME q q q ...           one bunch: LEN = number of samples + 2,
LEN  TIME q q ...             TIME = time bin of the first (highest) sample,
...                           samples in descending time
```

This layout is modelled on the ALTRO front-end chip's bunch format (bunch
length including its two header words, then the time stamp). The exact header
words are this design's own. A one-cycle pulse on `in_eoe` between channels
ends an event. The Merger then flushes the clusters of the last row.

For every bunch the Decoder emits one sequence record, one cycle after the
bunch's last sample. The record holds row, pad, top time `a_j`, `Q_j`, `S_j`,
the geometric middle and an overflow bit. The middle is stored doubled as
`mid2 = 2*a_j - (len-1)`, so half time bins stay integers. Matching uses this
geometric middle rather than the exact sequence centroid: it is cheaper and
precise enough. Records leave in ascending row, ascending pad and descending
time order.

### The FIFO (`cf_fifo`)

The Decoder's output rate depends on how long the sequences are: short
sequences give many records. The Merger needs between 1 and about 5 cycles
per sequence, plus one cycle per cluster it sends. A 16-entry,
first-word-fall-through FIFO absorbs the difference. Since the input cannot
be stopped, a record that meets a full FIFO is lost. The sticky
`fifo_overflow` output then goes high.

## The Merger (`cf_merger`)

### Two lists in one ring buffer

Merging only involves the previous pad and the current pad, so the Merger
keeps two lists of started clusters. Both live in one ring buffer in a
dual-port RAM (`cf_ringram`), delimited by three pointers:

```
 begin ─► ┌──────────────────────┐
          │ search range         │  clusters of the previous pad,
          │                      │  highest time first
 end   ─► ├──────────────────────┤
          │ input range          │  clusters already continued or started
          │                      │  on the current pad, highest time first
 insert ► ├──────────────────────┤
          │ free                 │
          └──────────────────────┘   (addresses wrap around)
```

* A cluster that is merged, or a new cluster, is written at `insert`, and
  `insert` steps forward.
* A cluster leaves the search range from the front, at `begin`. It leaves
  either because it has been merged (it reappears at `insert` with the new
  sequence added) or because it can no longer match and is sent out.
* When the first sequence of the **next pad** arrives, whatever is left in the
  search range has no partner left and is sent. Then the lists are renamed:
  `begin = end`, `end = insert`. The current list becomes the search range and
  the new input range is empty. No data moves.
* On a **new row**, a **skipped pad** (a pad with no sequences) or the **end
  of an event**, both lists are sent and emptied (`begin = end = insert`).

Both lists are sorted by descending time, and sequences also arrive in
descending time. So an incoming sequence only ever needs to be compared with
the single cluster at `begin`:

* if the cluster is within the match distance, they merge;
* if the cluster lies **above** the sequence, every later sequence on this pad
  lies lower still, so the cluster is finished and is sent out;
* if the cluster lies **below** the sequence, no cluster in the search range
  can match. The sequence starts a new cluster, and the cluster at `begin`
  waits for the next sequence.

Every RAM access therefore reads at `begin` and writes at `insert`, and
addresses only ever stay the same or step by one. The read port is addressed
with the *next* value of `begin`, and the RAM is write-first. So the cluster
at `begin` is always on the read port at the start of a state, even if it was
written in the cycle before.

### States

| state | cycles | what happens |
|---|---|---|
| `idle` | - | wait for a record in the FIFO |
| `calc_dist` | 1 | two subtractions: the distance between the two middles, and the start-time difference `|a - a_j|`. Then: merge, split, send the cluster (it lies above), or insert the sequence (the cluster lies below) |
| `merge_mult` | 1 | SmartMult 1: `(a - a_j) x Q` of whichever of cluster and sequence is lower. SmartMult 2: `k x Q_j`. Adder A: `T + S_j`. Adder B: `Q + Q_j` |
| `merge_add` | 1 | adder A: `T + S_j + product 1`; adder B: `P + product 2` |
| `merge_store` | 1 | write the merged cluster at `insert`; `begin` and `insert` step |
| `insert_seq` | 1 | write a new cluster made of the sequence at `insert` |
| `send_one` | 1 | send the cluster at `begin`; `begin` steps; back to `calc_dist`, or to `insert_seq` if the search range is now empty |
| `send_many` | 1 per cluster | next pad: send the rest of the search range, then rename the lists |
| `send_all` | 1 per cluster | new row, skipped pad or end of event: send both lists |
| `split_cluster` | 1 | deconvolution: send the cluster at `begin` and start a new cluster from the sequence |

`merge_store`, `insert_seq` and `split_cluster` finish a sequence. They take
the next record from the FIFO and dispatch it in the same cycle, so a busy
Merger is not idle between sequences:

* a record on the next pad goes to `send_many`;
* a new row, a skipped pad or an end of event goes to `send_all`;
* a record on the same pad goes to `calc_dist`, or straight to `insert_seq`
  when the search range is empty.

Cycle cost per sequence:

* merge: 4 cycles (`calc_dist` plus three merge states);
* start a new cluster: 1 or 2 cycles;
* plus one cycle for every cluster sent.

Sending a cluster means `out_valid` is high for one cycle with
`out_cl = {row, a, b, Q, P, T}`. A cluster is dropped silently instead if it
overflowed, or if it fails the noise cuts `Q >= cfg_min_charge` and
`pads >= cfg_min_pads`.

### Matching and deconvolution

A sequence matches the cluster at `begin` if the two geometric middles differ
by less than `cfg_match_dist` time bins (2 is the usual setting). In the
doubled units the test is `|mid2_seq - mid2_cl| < 2*cfg_match_dist`. After a
merge, the cluster keeps the middle of the sequence just appended. This lets
a cluster follow an inclined track from pad to pad.

When `cfg_deconv` is set, a cluster is split at a local charge minimum along
the pad direction. The rule used here: the charge of the cluster's last
sequence was lower than the one before it, and the incoming sequence's charge
is higher again. The cluster is then finished at its minimum, and the
incoming sequence starts a new cluster. The cluster record therefore keeps
the last sequence charge and a "falling" bit. The literature this design
follows does not spell out this rule.

### Ring capacity

The ring holds 255 clusters (`RING_AW = 8`). When it is full, a new cluster
cannot be stored: it is dropped and the sticky `ring_overflow` goes high. A
merge or a split never needs a new entry.

## Top level (`cf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears pointers, FIFO and flags) |
| `in_valid`, `in_word` | in | 1, 10 | input word stream (format above), one word per cycle |
| `in_eoe` | in | 1 | end-of-event pulse, given between channels with `in_valid` low |
| `cfg_match_dist` | in | 4 | match distance in time bins |
| `cfg_deconv` | in | 1 | split clusters at local minima |
| `cfg_min_charge`, `cfg_min_pads` | in | 20, 5 | noise cuts |
| `out_valid`, `out_cl` | out | 1, `cl_out_t` | finished cluster: row (8), a (10), b (8), Q (20), P (24), T (24) |
| `fifo_overflow`, `ring_overflow` | out | 1 | sticky: data were lost |
| `merger_state` | out | 4 | current Merger state, for statistics |

Hold the `cfg_*` inputs stable during an event. There is no output
back-pressure: a consumer must take one cluster per cycle.

Parameters: `FIFO_DEPTH` (16), `RING_AW` (8, so 256 entries), and `MB` (4,
the SmartMult multiplicand width). The field widths live in `cf_pkg`: charge
10 bits, time 10 bits, pad 8 bits, row 8 bits, and 24-bit moments. A wider
`MULT_BITS` also needs the sum widths in `cf_pkg` checked.

Synthesised generically, the top level at default sizes has about 730
word-level cells, 670 flip-flop bits and 34 kbit of RAM. Most of the RAM is
the ring buffer (256 x 128 bits); the rest is the FIFO.

## What is taken from the source and what is this design's own

Taken from the description of the original FPGA implementation:

* the Decoder → FIFO → Merger + RAM structure;
* sequences with on-the-fly `Q_j` and `S_j`, and the geometric middle as the
  match reference;
* the relative-coordinate formulas and the five integers per cluster;
* the ring buffer with `begin`, `end` and `insert` pointers, and when lists
  are sent and renamed;
* the ten states and their transitions, with the arithmetic of each state
  (two subtractions, two shift-and-add multipliers, two adders);
* keeping `a` at the highest start time;
* dropping noise and overflowed clusters.

Choices of this design, where the description gives no detail:

* the exact input word layout and the end-of-event pulse;
* the multiplicand limit of 4 bits and its signed-digit recoding;
* FIFO depth and ring size, and the drop-and-flag policy on overflow of
  either;
* registered, write-first RAM reads;
* the doubled middle and the form of the match test;
* the local-minimum rule and the noise-cut criteria;
* the extra row field in the output record;
* unsigned (not signed) adders;
* a same-pad sequence facing an empty search range goes straight to
  `insert_seq`.

Known departures:

* **Split target.** The description says the sequence that starts a new
  cluster after a split goes into the *search* range. Elsewhere it says new
  clusters go into the *input* range. This design uses the input range, the
  only consistent choice with the pointer scheme.
* **No deconvolution along time.** The cluster-finding method also splits at
  local minima along the time direction. The hardware description mentions
  only the pad-direction split in the Merger, so no time split is built: a
  sequence is always a whole bunch.
* **Clock rate and resources are not checked.** The original ran at 35 MHz
  and used 1937 logic cells on an Altera APEX20KE-400. Neither can be checked
  here. The states are kept as simple as in the original: one subtraction
  pair, one multiplier pair or one adder pair per state.
* **State statistics differ.** The original measured the Merger idle more
  than 24% of the time on simulated heavy-ion events. The synthetic events in
  `tb_cf_top` have fairly long sequences and leave it idle about 70-75% of the
  time. The shares of the other states show the same pattern:
  `merge_mult = merge_add = merge_store`, and `calc_dist` slightly above
  merge + `send_one` + `insert_seq`.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` at the end. Each also
has a watchdog that ends the run with a failure if it hangs.

| testbench | what it checks |
|---|---|
| `tb_cf_smartmult` | every multiplicand 0..15 (and 0..31 for a 5-bit instance) with random and extreme multipliers, against `*` |
| `tb_cf_fifo` | random push/pop against a queue model: data, empty, full, sticky overflow |
| `tb_cf_ringram` | random read/write against an array model, including write-first collisions |
| `tb_cf_decoder` | 300 random channels (empty ones, over-long bunches), all record fields, exactly one cycle of latency, end-of-event record |
| `tb_cf_merger` | five configurations of random rows; every cluster compared in order with a reference model; every state and mechanism must occur |
| `tb_cf_top` | end to end at default parameters (below) |

`tb/cf_ref_pkg.sv` is the reference shared by the last three testbenches. It
builds sequences directly from a charge map and merges them with two plain
queues and ordinary multiplication. It has no ring buffer, pipeline or
SmartMult. It also supplies the synthetic data: charge clouds of random
position, width and amplitude on a pad x time grid, cut at a threshold.

`tb_cf_top` runs events of 3-4 pad rows, each 64 pads x 512 time bins. The
events are sparse, low occupancy (~10%) and high occupancy (~26%), each
without and with deconvolution, plus one with noise cuts. A last event is one
whole read-out partition with deconvolution: 25 rows of 100 pads x 1000 time
bins at ~21% occupancy, about 40 000 sequences and 4 700 clusters, all
matching the reference. It prints the share of cycles per Merger state for
each event. Two stress events follow:

* a long run of merging one-sample sequences overflows the FIFO;
* 300 sequences on one pad overflow the ring.

The testbench counts how often each mechanism occurred: merge, split,
send_one, next-pad renaming, new row, skipped pad, end of event, noise drop,
overflow drop, FIFO overflow and ring overflow. A mechanism that never
occurred counts as a failure.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cf_pkg.sv tb/cf_ref_pkg.sv \
          tb/tb_cf_top.sv --top-module tb_cf_top -o sim
./obj_dir/sim
```

For other testbenches, change the last file and `--top-module`.
`tb_cf_smartmult`, `tb_cf_fifo` and `tb_cf_ringram` need neither package
file. `tb_cf_decoder` and `tb_cf_merger` need both. Each run takes well under
a minute.

## Changing the design

* **Bigger clusters**: raise `MULT_BITS` in `cf_pkg`. Every SmartMult grows one
  term per two bits. `NPAD_W` follows automatically; check that `SEQQ_W`,
  `SEQS_W`, `CLQ_W` and `SUM_W` still hold the largest sums.
* **Busier rows**: raise `RING_AW`. Each entry is one `cluster_t` (128 bits).
* **Burstier input**: raise `FIFO_DEPTH`. Each entry is one `seq_t` (75 bits).
* **A different front-end format** touches only `cf_decoder`, as long as it
  still delivers sequences in row, pad, descending-time order.
