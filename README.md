# CLF: a cache-like spatiotemporal denoising filter for DVS event streams

A dynamic vision sensor (DVS) does not output frames. Each pixel fires an
*event* `(x, y, t, p)` (column, row, timestamp, polarity) when the light on it
changes, so the output is a stream of tens of millions of events per
second. Thermal noise and junction leakage add *background activity*:
isolated events that belong to no moving edge. Real events cluster in space
and time; background events do not. A spatiotemporal filter keeps an event
when at least `N_CR` earlier events lie within `D_TH` pixels of it (a
`(2*D_TH+1) x (2*D_TH+1)` window) and are at most `T_th` old.

The classic way to do this keeps one timestamp per pixel, which is
O(m*n) memory (about 4 MB for a 1920 x 1080 sensor at 32 bits). The
cheapest known alternative keeps one event per row and one per column,
O(m+n), but misses correlations as soon as two objects share a row. The
Cache-Like Filter (CLF) sits in between: it keeps the last `s` events of
every row and of every column, organised like a set-associative cache, so
memory stays O(m+n) while the filter can remember several objects per line.

This repository holds synthesizable SystemVerilog for that filter, its
testbenches and an untimed reference model. The default build is a
1280 x 800 sensor with 4 row banks and 4 column banks, 4 events per row and
per column, 8-bit stored timestamps and a 3 x 3 window.

## 1. The decision

For an input event `e = (x, y, t, p)`:

* the **row side** (RDM, Row Denoising Module) looks at the stored events of
  rows `y-1, y, y+1` and counts those whose column is within `D_TH` of `x`
  and whose age `t - t_s` is at most `T_th`;
* the **column side** (CDM) does the same on columns `x-1, x, x+1`,
  comparing stored rows with `y`;
* the two counts are added (`out_count`) and the event is signal when the
  sum is at least `N_CR` (`out_is_signal`).

An earlier event at a neighbouring pixel can sit both in a row block and in
a column block, and is then counted twice. An earlier event at the same
pixel counts as correlated. With `N_CR = 1`, the setting that works best on
typical scenes, neither detail changes any decision.

## 2. Memory organisation

```
            row y  ->  bank  y mod N_BANK,  block  y / N_BANK
         column x  ->  bank  x mod N_BANK,  block  x / N_BANK

  block (one memory word) = S slots, slot i = { valid, t[BW_T-1:0], coordinate }
                            row block: coordinate = column x (11 bits)
                            column block: coordinate = row y (10 bits)
```

Each module has `N_BANK` banks (`clf_mem_bank`). A line `c` (row or column)
lives in bank `c mod N_BANK`. With `N_BANK` a power of two this is just the
low bits of `c`, and the block address is the remaining high bits
(`clf_addr_gen`). Because `N_BANK >= 2*D_TH+1`, the lines of one window
always fall in different banks, so all of them can be read in the same
cycle. This is why the default uses 4 banks for a 3-line window instead of
3. A 5 x 5 window (`D_TH = 2`) needs 8 banks.

Inside a block, a new event can go into any slot. Slots are replaced
first-in first-out. Timestamps arrive in increasing order, so FIFO order is
also least-recently-used order. Each bank has a small pointer memory
(`clf_wpt_mem`) that holds, for each block, the slot written last. The
Memory Block Updater (`clf_block_updater`) puts the new event into slot
`pointer+1` (wrapping at `S-1`) and rewrites the whole block. The row number
is not stored: it is implied by the block's address.

At the defaults, a row bank has 200 blocks of 4 x 20 bits and a column bank
has 320 blocks of 4 x 19 bits. Adding the pointer memories, the filter holds
165,440 bits.

The valid bit in each slot is this design's addition. After reset, both
modules clear every block and pointer, one address per cycle (320 cycles at
the defaults). `in_ready` stays low until clearing is done.

## 3. The two-stage memory pipeline and read cancellation

This section covers the part of the design that takes the most care.

In a 3 x 3 window, 5 of the 9 neighbours lie in the event's own row (or
column). So the module first reads only the own line's block. It reads the
two neighbour lines only when the own line gave no correlated event. Reads
that are skipped save energy. Per event and per module (RDM and CDM run in
lock-step):

| cycle | stage | work |
|---|---|---|
| 1 | A | event in the input register; own block and its pointer read (bank port 2) |
| 2 | B | own-line EDU counts; Updater writes the event into the own block (port 1); neighbour blocks read on port 1 of their banks, **unless** the own-line count is non-zero (read cancellation) |
| 3 | C | neighbour EDUs count; the counts are summed |
| 4 | D | RDM and CDM counts registered; top adds them and compares with `N_CR` |
| 5 | — | `out_valid`, `out_event`, `out_is_signal`, `out_count` |

One event enters per clock, so in any cycle up to four events are in
flight. Each bank has two ports:

* **port 1** reads or writes. It serves the write-back of the event in B, or
  that event's neighbour read. These never target the same bank, because
  the neighbour lines lie in other banks than the own line.
* **port 2** only reads. It serves the own-line read of the next event in
  A.

So a bank sees at most two reads, or one read and one write, per cycle.

**Forwarding.** When the event in A reads the block that the event in B
writes on the same edge, the memory returns the old word. The module spots
this case (same bank and same block address) and uses the written block and
pointer instead. Without forwarding, back-to-back events on one line would
miss each other and overwrite each other's slot. Neighbour reads never need
forwarding: they happen a cycle after the previous event's write-back and
always target other banks than the current write.

**What cancellation does to the count.** With `READ_CANCEL = 1`, a module
reports only the own-line count whenever that count is non-zero. So
`out_count` can be lower than the true number of correlated events, while
`count >= 1` stays exact. The decision is therefore exact for `N_CR = 1`. For
larger `N_CR`, build with `READ_CANCEL = 0` (neighbours always read, exact
count, same timing) or with `PIPELINED = 0`.

**`PIPELINED = 0`** is the simpler form without the pipeline registers:

* all window lines are read in stage A through port 2 (they lie in
  different banks);
* all EDUs work in stage B, with forwarding applied to every line;
* the count is exact, and the result comes one cycle earlier (4 cycles in
  the filter).

## 4. Short timestamps

Only the low `BW_T` bits of the 32-bit input timestamp are stored. The EDU
computes the age modulo `2^BW_T`. An old event whose real age is
`k * 2^BW_T + a`, with `a <= T_th`, therefore looks recent again and can
let a noise event pass. Once a line has seen newer events, FIFO replacement
evicts such stale entries. In the evaluated scenes, 8 bits cost little
accuracy compared with 32 bits, and they shrink a row slot from 44 to 20
bits. `T_th` must
be below `2^BW_T`. The unit of the timestamp (and hence of `T_th`) is
whatever the sensor delivers. With 8 bits and microsecond timestamps,
`T_th` can reach 255 µs.

## 5. Top-level interface (`clf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid` / `in_ready` | in / out | 1 | event handshake; `in_ready` is low only while clearing after reset |
| `in_event` | in | `clf_pkg::event_t` | `{x[10:0], y[9:0], t[31:0], p}`; coordinates must lie on the sensor (asserted) |
| `cfg_t_th` | in | `BW_T` | `T_th`, in timestamp units |
| `cfg_n_cr` | in | 8 | `N_CR` |
| `out_valid` | out | 1 | one pulse per accepted event, in order |
| `out_event` | out | `event_t` | the event, unchanged |
| `out_is_signal` | out | 1 | `out_count >= N_CR` |
| `out_count` | out | 8 | RDM count + CDM count (see read cancellation) |
| `stat_rd_cancel`, `stat_fwd` | out | 2 | per event, bit 0 RDM / bit 1 CDM: neighbour reads cancelled; own block forwarded |

An event accepted on a rising edge has its result registered four edges
later (three with `PIPELINED = 0`). There is no back-pressure, so the
filter runs at one event per clock, for example 100 M events/s at 100 MHz.
Hold `cfg_t_th` and `cfg_n_cr` steady while events flow. The filter marks
events and does not drop them: a consumer that wants only signal keeps
events with `out_is_signal` high.

## 6. Parameters and configurations

| parameter | default | meaning |
|---|---|---|
| `COLS`, `ROWS` | 1280, 800 | sensor size; smaller sensors simply use part of it |
| `N_BANK` | 4 | banks per module (`N_RM = N_CM`); power of two, `>= 2*D_TH+1` |
| `S_RM`, `S_CM` | 4, 4 | events per row / column block; 0 removes that module |
| `BW_T` | 8 | stored timestamp bits |
| `D_TH` | 1 | spatial threshold (3 x 3 window) |
| `READ_CANCEL` | 1 | cancel neighbour reads after an own-line hit |
| `PIPELINED` | 1 | two-stage memory access (5-cycle delay); 0 gives 4 cycles |

The FPGA configurations reported for this filter map onto the parameters as
follows (`N_RM/N_CM-s_RM-s_CM-BW_T`):

* 4-4-4-8: the defaults;
* 4-4-4-32: `BW_T=32`;
* 4-2-2-32: `S_RM=2, S_CM=2, BW_T=32`;
* 4-4-0-32 and 4-0-4-32: one module only;
* 8-4-4-8 and 8-4-4-32: `N_BANK=8`, which also allows `D_TH=2`.

Setting `N_BANK = S_RM = S_CM = 1` would reduce the scheme to the
row-and-column filter mentioned above. This RTL does not support that
setting. It needs the window lines in distinct banks, so `N_BANK` must be
at least `2*D_TH+1`; an elaboration-time assertion enforces this.

## 7. Files

| file | contents |
|---|---|
| `rtl/clf_pkg.sv` | coordinate and timestamp widths, `event_t` |
| `rtl/clf_top.sv` | the filter: input register, RDM, CDM, event delay line, decision |
| `rtl/clf_denoise_module.sv` | RDM / CDM: banks, pointer memories, pipeline, forwarding, clearing |
| `rtl/clf_addr_gen.sv` | window lines → bank, block address, on-sensor flag |
| `rtl/clf_edu.sv` | Event Decision Unit: correlated-event count of one block |
| `rtl/clf_block_updater.sv` | FIFO insertion into a block |
| `rtl/clf_mem_bank.sv` | dual-port block memory (1 read/write + 1 read port) |
| `rtl/clf_wpt_mem.sv` | pointer memory (1 write + 1 read port) |
| `tb/clf_ref_pkg.sv` | untimed reference model and mechanism counters |
| `tb/tb_*.sv` | self-checking testbenches |

## 8. Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/clf_pkg.sv tb/clf_ref_pkg.sv tb/tb_clf_top.sv --top-module tb_clf_top
./obj_dir/Vtb_clf_top
```

For the unit testbenches, `tb/clf_ref_pkg.sv` is needed only where it is
imported. The testbenches are:

* **`tb_clf_mem_bank`, `tb_clf_wpt_mem`:** random traffic against a shadow
  array, including a read and a write to the same address in one cycle.
* **`tb_clf_addr_gen`:** exhaustive sweep for 800 lines with 4 banks, and
  for 260 lines with 8 banks and `D_TH = 2`.
* **`tb_clf_edu`, `tb_clf_block_updater`:** random blocks against values
  computed in the testbench.
* **`tb_clf_denoise_module`:** four module builds (pipelined with and
  without cancellation, 8 banks with `D_TH = 2`, unpipelined) on one event
  stream. It checks every count against the model and checks the latency.
* **`tb_clf_top`, `tb_clf_top_nopipe`:** end to end on a 40 x 24 sensor,
  40,000 events, `N_CR` = 1 then 2. They check event, count, decision and
  delay, and require that clearing, read cancellation, forwarding, FIFO
  replacement, border windows, signal and noise all occur.
* **`tb_clf_top_cfg_row`, `tb_clf_top_cfg_col`, `tb_clf_top_cfg_422`,
  `tb_clf_top_cfg_8b5x5`:** the same end-to-end test in the 4-4-0-32,
  4-0-4-32 and 4-2-2-32 configurations, and with 8 banks and a 5 x 5
  window.
* **`tb_clf_top_full`:** the same end-to-end test with every parameter at
  its default (1280 x 800), 200,000 events.
* **`tb_clf_workloads`:** the default filter on synthetic scenes. A
  40 x 40 box moves across an 800 x 600 or a 346 x 260 sensor, with
  uniform noise at the noise-to-signal ratios of the labelled benchmark
  recordings the filter was evaluated on (1.29, 6.44, 5.47, 16.44 and 0.51,
  1.69, 0.41, 1.63). It reports precision, recall and accuracy against the
  known labels. The recordings themselves are not included, so these
  numbers say only that the filter separates the classes. They are not
  comparable with results on real data. A typical run:

```
box, large sensor (a)  800x600 noise/signal= 1.29  P= 92.96% R= 74.31% A= 86.41%
box, large sensor (d)  800x600 noise/signal=16.44  P= 36.10% R= 40.27% A= 92.29%
box, small sensor (a)  346x260 noise/signal= 0.51  P= 93.94% R= 82.90% A= 85.06%
box, small sensor (b)  346x260 noise/signal= 1.69  P= 78.69% R= 71.91% A= 82.50%
```

## 9. What follows the published design and what does not

These parts follow the published description:

* the RDM/CDM split;
* bank selection by `line mod N_BANK` and block address `line / N_BANK`;
* `S`-event blocks with FIFO replacement through a per-bank pointer memory
  (a pointer of 3 with `S = 4` writes slot 0);
* the EDU test on coordinate distance and timestamp difference, followed by
  a sum;
* the sum of the two modules compared with `N_CR`;
* the two-stage memory pipeline with read cancellation and a 5-cycle delay,
  and the 4-cycle unpipelined form;
* dual-port banks, with the port pairing of its pipeline sketch;
* the 1280 x 800, 4-4-4-8 default.

These are choices of this design, where the description is silent:

* synchronous-read memories, with the pipeline register at the memory
  output rather than after the first EDU sum;
* the forwarding path;
* a valid bit per slot and memory clearing after reset;
* the valid/ready input and the marked (not dropped) output event;
* 32-bit input timestamps, with the age taken modulo `2^BW_T`;
* the absolute coordinate difference;
* skipping window lines beyond the sensor border;
* polarity not stored (the decision never uses it);
* the `READ_CANCEL` switch;
* the observation outputs.

Not covered:

* the sensor itself;
* any host or transport interface;
* power, which depends on the FPGA or ASIC implementation.
