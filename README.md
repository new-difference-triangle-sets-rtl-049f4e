# A pipelined hardware search engine for difference triangle sets

An **(n,k) difference triangle set** (DTS) is a set of n integer "rulers", each
with k+1 marks `0 = a_0 < a_1 < ... < a_k`. All the positive differences between
two marks of the same ruler ("distances") must be distinct, across all rulers.
The **scope** is the largest mark. Small-scope DTSs are used to build
self-orthogonal convolutional codes, optical orthogonal codes and other
interference-avoiding codes. Finding one of minimum scope is a hard combinatorial
search. For example, an optimal (14,4)-DTS has scope 140, and finding one took a
48-worker FPGA design about ten days.

This RTL implements such a search engine. It uses a randomized hill-climbing
search: rulers are filled mark by mark from random candidates, and when a ruler
gets stuck, a previously completed ruler is swapped out. There is no processor
and no software loop. Every set of integers in 0..M is an (M+1)-bit word, and
testing one candidate mark takes a handful of shifts, ANDs and ORs over those
words. These are deeply pipelined so that one candidate enters per clock. Many
independent copies of this "worker" run side by side. The first to complete a
DTS wins, and its rulers are sent out on a serial line.

The structure follows a published FPGA design for this problem. That
description gives the mark-insertion algorithm, the search algorithm, the block
diagram of a worker and the device-level organisation, but not the source. So
the control details, encodings, thresholds and interfaces here are this
design's own. The list at the end says which parts are which.

## 1. Sets as words

Let `W = M+1`. A word `x` of W bits stands for the set `{i : x[i] = 1}`. While a
ruler is being built, a worker keeps four things:

| name | meaning |
|---|---|
| `nat` | the ruler itself: bit `a` set when `a` is a mark |
| `largest` | its largest mark `L` |
| `rev` | the ruler mirrored about `L`: bit `i` set when `L-i` is a mark |
| `used` | all distances used so far, by the completed rulers and by this one |

Take a candidate mark `m`. Its distances to the existing marks come from two
shifts:

```
if m > L:  left = rev << (m-L)    right = 0
else:      left = rev >> (L-m)    right = nat >> m
bisection    = left & right      // a distance that would occur twice (or m already a mark)
distances    = left | right
intersection = used & distances  // a distance already in use
accept  <=>  bisection == 0 && intersection == 0
```

`left` holds the distances `m-a` to the marks `a < m` (and to `m` itself).
`right` holds the distances `a-m` to the marks above `m`. On acceptance:

```
nat  |= 1 << m
rev   = (m > L) ? (left | 1) : (rev | 1 << (L-m))
L     = max(L, m)
used |= distances
```

No subtraction or comparison loop over the marks is needed. Only the two shift
amounts `|m-L|` and `m` depend on the data.

## 2. The search: hill climbing with row replacement

Each worker runs the following loop. Two limits `THRESH2` (attempts per ruler)
and `THRESH1` (outer iterations per DTS) bound the work.

1. Start with every ruler equal to `{0}` and `used` empty.
2. **Fill.** Offer random candidates to the current ruler until it has k+1 marks
   or `THRESH2` candidates have been tried. A full ruler is stored and a new one
   started.
3. **Replace.** If the ruler is stuck, go over the stored rulers r = 0, 1, ... in
   turn. Release r's distances from `used`, and give the stuck ruler another
   `THRESH2` candidates. If it completes, it takes r's place and r is
   discarded. If it does not, put everything back as it was and try the next r.
   If no r works, the stuck ruler keeps its marks and the next outer iteration
   continues it.
4. Each completed ruler or failed replacement round is one outer iteration.
   After `THRESH1` of them without a full DTS, the partial DTS is thrown away
   and the worker starts again from step 1.
5. With n rulers stored, the worker stops and raises `done`.

Candidates are not uniform. The j-th mark of a ruler is drawn from its own
distribution, a rounded Gaussian whose mean and spread grow with j. These
distributions are fitted offline, from DTSs found easily at a larger scope and
then scaled down to the target scope. The hardware only needs the resulting
discrete distributions (section 4).

## 3. The insertion pipeline and its feedback loop

This is the part that needs the most care. `rtl/insertion_pipeline.sv`
evaluates one candidate per clock:

```
stage 0          register m, |m-L|, m>L, rev, (m>L ? 0 : nat)
stages 1..MW     barrel shifters, one level per stage: level i shifts by 2^i
                 when bit i of the amount is set (MW = clog2(M+1) levels)
reduction stage  register left, left|right, and one OR flag per 32-bit chunk
                 of (left & right) | (used & (left|right))
decision         (combinational) accept = no flag set; the new state words
```

Total latency is `MW + 2` clocks from a candidate entering to its decision (10
clocks for M = 140).

The problem is feedback. A candidate's result depends on the row state, and
every accepted candidate changes that state. Candidates behind it in the pipe
were checked against the old state and are stale. The rule is therefore:

* The row state only changes on an accepted candidate (the **change flag**) or
  when the control FSM itself rewrites it.
* Both events come with **flush**. Flush clears the valid bit of every stage on
  the same clock edge that updates the state, including the stage capturing a
  new candidate on that edge.
* So every candidate in flight has seen one unchanged state from entry to
  decision. The pipe can read `nat`, `rev`, `largest` and `used` live from the
  state registers at whatever stage needs them, without carrying copies.

`flush` is driven combinationally by the FSM: `flush = change | !run`. `run`
depends only on FSM registers, so there is no combinational loop. The pipeline's
`change` output is gated by `run`, so a candidate finishing while the FSM is
restoring or committing a ruler is dropped.

An acceptance costs MW + 2 idle clocks. This is cheap where the search spends its
time: with most rulers placed, nearly all candidates are rejected and flushes
are rare. A rejected candidate costs nothing.

## 4. Random marks

`rtl/mark_generator.sv` has one lane per mark position (k lanes). Each lane
contains:

* a 32-bit maximum-length Fibonacci LFSR (`rtl/lfsr.sv`, polynomial
  x^32+x^22+x^2+x+1) that advances 8 positions per clock. Every clock gives 8
  fresh uniform bits `u`.
* a 256-entry **quantile table**: `table[u]` is the mark whose cumulative
  probability first exceeds `(u+0.5)/256`. Looking up a uniform sample in it is
  the inverse-CDF method at 8-bit precision.

The control FSM's **distribution select** is the number of marks already in the
ruler minus one, which is the position of the next mark. It picks the lane.
After a change of select, one or two candidates from the previous lane can still
arrive. They are ordinary candidates and do no harm.

The tables are written after reset through `cfg_we/cfg_lane/cfg_addr/cfg_data`.
This port is shared by all workers. To fill a table for position j with
Gaussian N(mu_j, sigma_j^2): for u = 0..255, store the smallest integer x in
1..M with Phi((x + 0.5 - mu_j)/sigma_j) > (u + 0.5)/256.

**Entropy.** Every temperature sample from the device's on-die sensor
(`temp_valid`, `temp_data`) is reduced to one bit, the XOR of its bits. That bit
is XORed into the feedback of every LFSR on that clock. Two boards loaded with
the same bitstream then diverge without needing different seeds. Within a
device, the lanes and workers start from distinct seeds (`dts_pkg::lane_seed`).
An injection could in principle steer an LFSR to all zeros, so a zero next
state is replaced by 1.

## 5. Releasing a stored ruler: the backtracking registers

Replacing ruler r means removing exactly r's distances from `used`. Rulers of a
DTS share no distance, so `used & ~D(r)` does it, where D(r) is r's distance
set. The row RAM holds rulers only as mark masks. `rtl/backtrack_regs.sv`
rebuilds D(r) with a single shift register:

```
S = r;  D = 0
while S != 0:  if S[0]: D |= S      // S = r >> t, and S[0] means t is a mark
               S >>= 1
D[0] = 0
```

This takes (largest mark of r) + 1 clocks, at most M+1 per replacement attempt,
which is small next to the `THRESH2` candidates tried afterwards. The same block
keeps a full snapshot of the stuck ruler's state (`nat`, `rev`, `largest`, mark
count, `used`). Every trial starts from that snapshot, and a failed round ends
by loading it back unchanged.

## 6. Control FSM

`rtl/worker_fsm.sv`, states in `dts_pkg::worker_state_e`:

| state | action |
|---|---|
| `S_INIT` | clear `used`, ruler = {0}, stored rows = 0, iters1 = 1 |
| `S_FILL` | pipeline runs; each evaluated candidate is an attempt (iters2) |
| `S_COMMIT` | write the full ruler to the RAM (at `rows`, or over r in a replacement); start a new ruler |
| `S_NEXT` | iters2 = 0; abandon to `S_INIT` if iters1 = THRESH1, else iters1+1 and fill |
| `S_BT_SAVE` | snapshot the stuck ruler, r = 0 |
| `S_BT_READ`, `S_BT_LOAD` | read ruler r from the RAM, start the distance extraction |
| `S_BT_EXTRACT` | wait for D(r) |
| `S_BT_RESTORE` | load the snapshot with `used & ~D(r)`, iters2 = 0 |
| `S_BT_TRY` | pipeline runs against the reduced `used` |
| `S_BT_UNDO` | all r failed: load the snapshot unchanged |
| `S_DONE` | n rulers stored; RAM read port handed to the readout |

`run` is true in `S_FILL` and `S_BT_TRY` while fewer than THRESH2 attempts
have been made and the ruler is not full. A ruler that fills on its last
allowed attempt still counts as completed.

## 7. Device level

`rtl/dts_search_top.sv` instantiates `NUM_WORKERS` copies of
`rtl/dts_worker.sv`. `rtl/result_select.sv` latches the first worker to raise
`done`; a tie on one clock goes to the lowest index. It then reads that
worker's rulers 0..n-1 and streams each as `ceil((M+1)/8)` bytes, least
significant byte first. `rtl/serial_tx.sv` sends them as 8N1 serial characters,
2604 clocks per bit (115200 baud from 300 MHz). To decode, rebuild each
(M+1)-bit mask from its bytes; the set bits are the marks. `found`, `winner`
and `tx_finished` report progress. After that the device is idle: n, k and M
are build-time parameters, and a new search means a new build.

Per worker, at the defaults (n=14, k=4, M=140), the memories are 14 x 141 bits
of row RAM and 4 x 256 x 8 bits of quantile tables. Coarse synthesis of the
default top (48 workers) gives about 78k flip-flop bits, 16k word-level cells
and 0.73 Mbit of memory bits.

## 8. Parameters

| parameter (top) | default | origin |
|---|---|---|
| `N`, `K`, `M` | 14, 4, 140 | the (14,4)-DTS of scope 140 search |
| `NUM_WORKERS` | 48 | workers fitted on one Kintex-7 XC7K325T for that search |
| `THRESH1`, `THRESH2` | 4096, 4096 | this design's choice (no values published) |
| `UBITS` | 8 | quantile table precision; this design's choice |
| `TEMP_W` | 12 | width of a temperature sample; this design's choice |
| `CLKS_PER_BIT` | 2604 | serial rate; this design's choice |

Other searches from the same work need other builds, for example (15,4) scope
151, (5,7) scope 170 with 77 workers, or k up to 7 with scopes up to 523
(524-bit datapaths). Set `N`, `K`, `M` and `NUM_WORKERS`. Nothing else in the
RTL is tied to the defaults.

## 9. Files

`rtl/`: `dts_pkg` (defaults, FSM and row-operation enums, LFSR taps, seeds),
`lfsr`, `mark_generator`, `insertion_pipeline`, `row_state`, `backtrack_regs`,
`row_ram`, `worker_fsm`, `dts_worker`, `result_select`, `serial_tx`,
`dts_search_top`.

`tb/`: one self-checking testbench per module, `tb_<module>.sv`, plus
`tb_dts_search_default.sv`. Each prints `TB_RESULT checks=N failures=F`.

| testbench | what it establishes |
|---|---|
| `tb_lfsr` | maximum period for widths 4..8; the 32-bit, 8-step sequence equals a bit-serial model, including entropy injection |
| `tb_mark_generator` | every output mark is predicted from an independent LFSR model and the loaded tables; select latency; histogram of a bell-shaped table |
| `tb_insertion_pipeline` | at M = 140, each decision and the new state agree with a brute-force reference that forms the distances directly; latency MW+2; streaming with flush leaves no stale acceptance |
| `tb_row_state`, `tb_backtrack_regs`, `tb_row_ram` | register operations against models; distance extraction against all pairwise differences, and its clock count |
| `tb_worker_fsm` | fill, commit, replacement, undo, abandonment and done, with the datapath replaced by a few registers |
| `tb_dts_worker` | one worker finds a (3,3)-DTS of scope 20; `used` checked every clock against the stored rulers; replacements, undos and restarts all occur |
| `tb_result_select`, `tb_serial_tx` | first-finisher choice, byte order, 8N1 framing and frame length |
| `tb_dts_search_top` | 4 workers, (3,3), scope 20: the serial stream decodes to a valid DTS equal to the winner's RAM; counts flushes, rejections, commits, replacement rounds, replacements, undos, abandonments, entropy injections and the winner selection, and fails if any never happened |
| `tb_dts_search_default` | the top at its defaults (48 workers, (14,4), scope 140) for 10^6 clocks: every ruler any worker stores is valid and distance-disjoint from that worker's others; progress and backtracking occur |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/dts_pkg.sv tb/tb_dts_worker.sv \
          --top-module tb_dts_worker -Mdir obj && ./obj/Vtb_dts_worker
```

The top-level and worker testbenches read internal signals by hierarchical name
to count events and check `used`.

## 10. How far to trust it, and where it departs from the source

Verified in simulation: the insertion arithmetic at full width, the feedback and
flush discipline, and the whole search. Small searches complete and yield valid
DTSs, and the default-size engine stores only valid rulers for 10^6 clocks. A
complete search at the default size was not simulated: it takes days of device
time. A trial run of the default engine for 3x10^7 clocks (0.1 s of device time)
stored about 20,000 rulers, but no worker got past 10 of the 14 rows, so no
end-to-end testbench at the default size is provided. The largest complete search simulated is 4 workers finding a (3,3)-DTS of
scope 20. Timing closure and device utilisation were not checked. The published
design reached 300 MHz at about 80% of a Kintex-7; the pipeline here has the
same shape (log-depth shifters, registered reductions), but its stage boundaries
are a guess.

Taken from the published description: the bit-mask insertion algorithm; the
search algorithm with its two thresholds; pipelined log-depth shifters with
flush on every successful insertion; the worker's block structure (generators,
insertion pipeline, row-state and used-distance registers, backtracking
registers, an n x (M+1) RAM and a control FSM, with their connections); LFSRs,
inverse-CDF binning and temperature entropy; parallel workers with
first-finisher selection and serial output; the default sizes.

This design's own: the threshold values; the quantile-table format and loading
port; one generator lane per mark position; what a RAM word holds; the
snapshot-and-recompute way of undoing a replacement (the original's extra
record-keeping is unpublished); restart after abandonment; rolling back the
stuck ruler's trial marks when a removal is undone (the source only says the
removal is undone, but keeping those marks could leave a distance used twice);
the exact FSM states; the first-finisher priority rule; the byte format and UART framing; the
entropy reduction to one bit; the pipeline stage boundaries and 32-bit
reduction chunks. The original device-level result path was "carefully
designed" for fan-out on a full FPGA. The plain broadcast and multiplexer used
here would need pipelining at 48+ workers and 300 MHz.

Not included: the die temperature sensor itself (a vendor macro; its samples
enter at `temp_valid`/`temp_data`) and the offline fitting of the mark
distributions (done in software; only its tables are loaded).
