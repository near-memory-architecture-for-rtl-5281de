# Near-memory threshold-ordinal surface for event-camera corner detection

An event camera sends one event `(x, y, polarity, t)` for each pixel whose
brightness changes, at rates of tens of millions of events per second
(Meps). A good way to find corners in such a stream is to keep a
*threshold-ordinal surface* (TOS) and run a frame-based Harris detector on it
now and then. The TOS holds one 8-bit "novelty" value per pixel. Every event
updates the P x P patch around it (P = 7):

```
for each pixel q in the 7x7 patch around the event:
    TOS[q] = TOS[q] - 1
    if TOS[q] < TH: TOS[q] = 0
TOS[event pixel] = 255
```

On a processor or a plain digital datapath this costs 49 read-modify-writes
per event. At 500 MHz that is about 392 ns, or 2.6 Meps, which is less than
a DAVIS240 camera can produce. The TOS update is the bottleneck. The Harris
part is a convolution on a frame and is cheap by comparison.

This RTL puts the arithmetic next to the TOS memory. A whole row of the
patch is read in one cycle, and 120 columns of logic decrement and threshold
it in parallel. Read and write ports are separate, so rows overlap in a
four-stage pipeline. A 7 x 7 patch then takes 2·7 + 2 = 16 cycles, which is
63 Meps at 1 GHz. An event-rate monitor picks the lowest supply voltage and
clock frequency that still keep up with the camera.

## Event flow

```
 camera ──► stcf ──► fork ──► nmc_tos      TOS update, 16 cycles per event
 in_*     (noise      │                     └─ fr_*  row reads for the Harris engine
           filter)    ├─────► dvfs          event rate ─► op (VDD, f_clk)
                      └─────► harris_lut    corner tag ─► out_*
                                ▲
                                └── lut_*   written by the Harris engine
```

* `stcf` drops isolated background-noise events. An event passes if at least
  2 of its 8 neighbours fired within `tw_stcf`.
* The fork hands each surviving event to `nmc_tos` and `harris_lut` in the
  same cycle. The event is accepted only when both are ready, so the TOS never
  misses an event that was forwarded. `dvfs` counts accepted events.
* `harris_lut` adds the corner bit that the last Harris frame stored for that
  pixel and emits `out_ev = {x, y, p, t, corner}`.
* Back pressure goes back to the camera through `in_ready`. When the camera
  outruns the TOS (more than one event per 16 cycles), events wait. Nothing
  is dropped inside the design.

The whole design runs on one clock. The Harris engine, the voltage regulator
and the clock generator are outside it and are reached through ports.

## The TOS in five bits

A pixel's TOS is either 0 or at least TH, and in practice TH is 225 or more.
Every non-zero value therefore lies in 224..255 and starts with the bits
`111`. The array stores only the low five bits:

| stored `s` | TOS value |
|------------|-----------|
| 0          | 0 (and 224, which never survives the threshold when TH ≥ 225) |
| 1..31      | 224 + s   |

A freshly fired pixel is written with 31 (255). Decrementing and comparing
act on the 5-bit word directly: for TH in 225..255, `224+s-1 ≥ TH` is the same
as `s-1 ≥ TH[4:0]`. The TH input is 8 bits. Only `TH[4:0]` is stored, and an
assertion checks that `TH[7:5] = 111`. `tos_pkg::tos_expand` converts a stored
word back to 8 bits.

One block (`nmc_tos_block`) holds 180 rows x 120 columns of 5-bit words, a
180 x 600 bit array. A 240 x 180 sensor uses two blocks side by side:
block `b` covers x = 120·b … 120·b + 119, and each block has all 180 rows.

## One patch in sixteen cycles

Each patch row goes through four stages, one clock each:

| stage | what happens |
|-------|--------------|
| PCH   | precharge the read bitlines; the row address is presented |
| MO    | the row is read, all 120 words are decremented in the minus-one logic, and the result is written into the comparator's "TOS-1" row |
| CMP   | each word is compared with the stored threshold |
| WR    | per-column flip-flops latch the new value; the row is written back through the column-selected write port |

Because the read and write ports are separate, row k+1 can be precharged
while row k is in CMP. A new row starts every two cycles:

```
cycle   0   1   2   3   4   5   6  ...  12  13  14  15
row 0  PCH MO  CMP WR
row 1          PCH MO  CMP WR
row 2                  PCH MO  CMP WR
 ...
row 6                                   PCH MO  CMP WR
```

The last row finishes its write-back in cycle 15, and the next event may
start PCH in cycle 16. The latency and the event period are both
P·2 + 2 = 16 cycles. Events do not overlap.

`nmc_ctrl` runs the schedule with a 0..15 cycle counter. PCH fires on even
cycles for the first seven slots, and MO, CMP and WR follow as registered
copies of the row index. Rows of the patch that fall outside the sensor are
never issued, so the patch is clipped at the top and bottom edges. `ev_ready`
is high when the controller is idle and also in the last cycle of an update,
so a burst of events keeps the pipeline full.

At 1 GHz (1.2 V) this gives 16 ns per event, or 62.5 Meps. The throughput
figures in the DVFS table below are quoted per voltage and are consistent
with this cycle count.

## Row arithmetic

All three stages work on a whole row: 120 independent 5-bit words.

**Minus one (`mo_module`).** Subtracting 1 is adding `11111` with carry-in 0.
With one addend fixed, each bit reduces to

```
sum[b]   = ~(a[b] ^ c[b])        c[0] = 0
c[b+1]   =   a[b] | c[b]
```

The carry out of the top bit is 1 exactly when the word is non-zero. A zero
word would wrap around to 31, so the carry out is used as a write enable:
zero pixels are not written back and stay 0.

**Compare (`cmp_module`).** The comparator has two rows. One holds TOS-1,
written in the MO stage. The other holds the complement of `TH[4:0]`, loaded
once through `th_we`. Reading both rows onto a shared bitline gives, per bit,
the OR (bitline) and AND (complement bitline) of the two stored bits. A carry
chain turns these into a ≥ test:

```
carry[0]   = 1
carry[b+1] = (s[b] & t[b]) | ((s[b] | t[b]) & carry[b])     t = ~TH
cout       = carry[5]  =  (TOS-1 >= TH)
```

This is `s + ~TH + 1 = s - TH` computed with generate/propagate signals that
come straight from the two bitlines.

**Write-back (`wr_module`).** On the WR clock each column latches one of:

| condition | value written |
|-----------|---------------|
| column is the event pixel | 31 (TOS 255) |
| `cout` = 1 | TOS-1 |
| otherwise | 0 |

The column write enable is `col_sel & (nonzero | event_pixel)`. `col_sel`
comes from `col_selector` and marks the columns within ±3 of the event's x.

The event pixel is written in the same pass as its own row instead of in a
separate step after the patch. The final value is the same, and it costs no
extra cycle.

## Patch edges and block boundaries

Every block receives every event. `col_selector` computes
`d = BASE + column − ev_x` for each column and enables the ones with
|d| ≤ 3, so:

* a patch near the left or right sensor edge is clipped, because those
  columns do not exist;
* a patch that straddles x = 119/120 is updated by both blocks in the same
  16 cycles, because they run in lockstep. An assertion checks that their
  ready signals always agree.

## Reading the TOS for the Harris engine

The Harris engine reads whole rows through `fr_req / fr_blk / fr_row`. A read
is granted only when no update is in flight and none is being offered in the
same cycle, so TOS updates always win. The row arrives on `fr_data` one cycle
after `fr_gnt`, as 120 stored 5-bit words. After reset each block clears its
array, one row per cycle (180 cycles). It accepts no events or reads until the
clear is done.

## Noise filter (`stcf`)

`stcf` keeps a 33-bit entry per pixel: a valid bit and the last 32-bit
timestamp. For each event it reads the 8 neighbours one per cycle and counts
those that are valid and have `t − t_neighbour ≤ tw_stcf`. It then stores the
event's own timestamp, whether the event passes or is dropped. An event with
at least `SUPPORT` (= 2) supporting neighbours is passed on; otherwise
`dropped` pulses for one cycle. One event takes 10 cycles (accept, 8 reads,
store). Polarity is ignored. Neighbours outside the sensor count as
unsupported. After reset the memory is cleared in 43,200 cycles.

The filter's rule (count supporting events in a space-time neighbourhood,
with 2 as the threshold) comes from the published design. The 3 x 3
neighbourhood, the timestamp memory and the sequential scan are this
implementation's choices.

## Corner table (`harris_lut`)

One bit per pixel, written by the external Harris engine through
`lut_we / lut_x / lut_y / lut_corner`, one pixel per cycle. Each filtered
event reads its pixel's bit (one cycle of latency) and leaves as a tagged
event with a valid/ready output register. The engine's score threshold is
applied before the bit is written. The table is cleared after reset.

## Event rate and voltage/frequency selection (`dvfs`)

The rate is measured over a moving window of `TW = 10 ms` with a 50 %
stride. Three 20-bit counters take turns, and each counts accepted events for
5 ms (5000 ticks of the 1 µs `tick` input). At the end of each stride the
counter that just finished and the one before it are added, which gives the
number of events in the last 10 ms. The pointer then moves on
(`ptr ← (ptr+1) mod 3`) and the next counter is cleared. Counters and the sum
saturate at 2^20 − 1. The first rate comes out at the end of the second
stride.

`dvfs_lut` maps that count to the lowest of seven operating points whose
capacity covers it: `rate·10 ≤ capacity[i]·10000`, with capacity in units of
0.1 Meps:

| level | VDD (V) | capacity (Meps) | f_clk = 16 · capacity (MHz) |
|-------|---------|-----------------|------------------------------|
| 0 | 0.6 | 4.9  | 78   |
| 1 | 0.7 | 11.1 | 178  |
| 2 | 0.8 | 17.0 | 272  |
| 3 | 0.9 | 28.3 | 453  |
| 4 | 1.0 | 36.4 | 582  |
| 5 | 1.1 | 51.0 | 816  |
| 6 | 1.2 | 63.1 | 1010 |

The end points (63.1 and 4.9 Meps) are the published throughputs. The
intermediate capacities are the 2.6 Meps digital baseline divided by the
published normalised delays at each voltage, so they are read off a chart and
are approximate. Above 63.1 Meps the LUT stays at level 6 and sets
`overload`. `dvfs` loads the new operating point into `op` one cycle after
each rate and pulses `op_update`. After reset `op` is level 6 (1.2 V,
1010 MHz), so the design starts at full speed.

The window is measured in ticks of a fixed reference timer, not in clock
cycles, so it does not stretch when DVFS slows the clock. The f_clk in
`op` assumes one cycle per pipeline stage, as above.

## Top-level interface (`corner_system`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (starts the memory clears) |
| `tick` | in | 1 µs strobe for the rate window |
| `tw_stcf` [32] | in | noise-filter time window, in timestamp units |
| `th_we`, `th` [8] | in | load the TOS threshold (225..255) |
| `in_valid/in_ready`, `in_ev` | in/out | camera events, `event_t {x[9], y[8], p, t[32]}` |
| `out_valid/out_ready`, `out_ev` | out/in | filtered events with corner bit, `tagged_event_t` |
| `fr_req, fr_blk, fr_row` / `fr_gnt, fr_rvalid, fr_data` | in / out | TOS row reads (120 x 5 bits) |
| `lut_we, lut_x, lut_y, lut_corner` | in | corner-table writes |
| `op`, `op_update`, `rate` [20] | out | operating point `{level, vdd_mv, fclk_mhz, overload}`, its update strobe, last window count |
| `noise_drop`, `tos_busy` | out | status strobes |

Parameters (defaults): `SENSOR_W = 240`, `SENSOR_H = 180`, `BLOCK_COLS = 120`,
`P = 7`, `CNT_W = 20`, `STRIDE_TICKS = 5000`. `NUM_BLOCKS` is derived as
⌈SENSOR_W / BLOCK_COLS⌉. Coordinate and timestamp widths are in `tos_pkg`
(`X_W = 9`, `Y_W = 8`, `TS_W = 32`); a larger sensor needs wider coordinates
there as well.

At the default size, yosys coarse synthesis of the top gives about 13,900
word-level cells and 4,500 flip-flop bits. The memory bits total 1.69 Mbit:
216 kbit of TOS, 1.43 Mbit of filter timestamps and 43 kbit of corner table.

## How far this follows the published design

Taken from it: the TOS update rule; 5-bit storage with the top three bits
implied; 180 x 120-word blocks tiled across the sensor; row-parallel
PCH/MO/CMP/WR stages with separate read and write ports and the
P·(t1+t2)+t3+t4 schedule; the minus-one truth table; the two-row NOR
comparator feeding a carry chain from TH; write-back of TOS-1, 0 or 255
selected by the final carry; three round-robin 20-bit counters with a 10 ms
window and 50 % stride; seven voltage levels from 0.6 V to 1.2 V; and the
STCF → {TOS, DVFS, Harris LUT} system structure.

This design's own choices, where the source is silent:

* one clock cycle per stage; at 1 GHz this matches the published 16 ns;
* the contents of the voltage/frequency LUT (see above) and the reset
  operating point;
* valid/ready handshakes everywhere, the fork rule, and row reads that give
  way to updates;
* the STCF neighbourhood, its memory organisation and its timing;
* the corner table as one thresholded bit per pixel;
* clearing all memories after reset;
* blocks split in x, with every block seeing every event;
* a zero TOS stays zero when decremented. The literal 8-bit rule would wrap
  around, but the hardware write-disable for zero words prevents it;
* one DVFS unit for the whole chip. The published block diagram draws the
  DVFS controls next to each block.

Not modelled: the transistor-level circuits (8T cells, latched sense
amplifiers, inverter read-out, bitline timing); bit errors at low voltage;
the Harris score engine; and the regulator and clock generator. Their logic
is either the stored bit itself or lies outside this design, so each
appears only as a port or as the array read.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares against an
independent model and prints `TB_RESULT checks=N failures=M`. A watchdog ends
any run that hangs.

| testbench | what it checks |
|-----------|----------------|
| `tb_tos_sram_a` | row read, column-masked writes |
| `tb_mo_module` | all 32 words in every column against `s−1` and `s≠0` |
| `tb_cmp_module` | all word/threshold pairs against `s−1 ≥ TH` |
| `tb_wr_module` | value and enable selection, randomised |
| `tb_col_selector` | window, centre, edge clipping, second-block offset |
| `tb_nmc_ctrl` | full stage schedule, clipping, back-to-back period of 16 cycles, row-read arbitration |
| `tb_nmc_tos_block` | random events against the 8-bit update rule, full 180 x 120 block; a burst of N events takes 16·N cycles |
| `tb_nmc_tos` | two blocks, patches across the boundary |
| `tb_dvfs_rate_counter`, `tb_dvfs_lut`, `tb_dvfs` | window sums, saturation, every LUT threshold, operating point per stride across 8 density steps |
| `tb_stcf`, `tb_harris_lut` | pass/drop decisions and 10 cycles per event; corner tags, stalls and one event per cycle |
| `tb_corner_system` | end to end at a reduced size (32 x 20 sensor, 16-column blocks, 10-tick strides) |
| `tb_corner_system_full` | end to end with every parameter at its default |
| `tb_dvfs_workloads` | the DVFS at its defaults, fed at the peak rates of five recorded workloads |
| `tb_corner_system_workloads` | the full-size front end at those rates, each at its chosen clock, plus one overload rate |

The end-to-end tests model every block. They check each output event (order,
fields, corner bit), the whole TOS read back through the row port, and every
DVFS rate and operating point. They also count how often each mechanism
occurred, and any count of zero is a failure:

* noise dropped and signal passed;
* back pressure on the camera, and an output stall;
* a patch across the block boundary, and a patch clipped at the edge;
* threshold zeroing and corner tags;
* a row read held off while busy;
* DVFS raising the operating point (reduced test only) and lowering it.

The full-size test runs the 240 x 180 design with 5 ms strides and a tick
every 1000 cycles, about 21 million cycles. It covers two DVFS decisions and
takes about 5 minutes in verilator. The largest size simulated is therefore
the default size.

### Recorded workloads

The two workload tests use the peak event rates of five published
recordings. Three are automotive and laboratory scenes from a
high-resolution sensor. The other two are DAVIS240 scenes, recorded on the
240 x 180 sensor this configuration is sized for. Each rate is held for two
full strides, and the design's choice is checked against the table above.
Then the whole front end is clocked at the chosen frequency and fed 3000
events at that rate:

| workload | peak rate | events per 10 ms | chosen point | TOS busy | camera waits |
|----------|-----------|------------------|--------------|----------|--------------|
| driving     | 25.9 Meps | 259,000 | 0.9 V, 453 MHz | 91 % | never |
| laser       | 39.5 Meps | 395,000 | 1.1 V, 816 MHz | 77 % | never |
| spinner     | 11.4 Meps | 114,000 | 0.8 V, 272 MHz | 67 % | never |
| dynamic_dof |  4.5 Meps |  45,000 | 0.6 V, 78 MHz  | 92 % | never |
| shapes_dof  |  1.9 Meps |  19,000 | 0.6 V, 78 MHz  | 38 % | never |
| (overload)  | 70 Meps   | 700,000 | 1.2 V, 1010 MHz, overload | > 100 % | yes, one event per 16 cycles |

All window counts fit easily in the 20-bit counters (maximum 1,048,575).
The high-resolution recordings are larger than 240 x 180, so only their
rates are exercised here. Holding their full frames needs `SENSOR_W` and
`SENSOR_H` (and the coordinate widths) raised to the sensor's size.

To run one test with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tos_pkg.sv tb/tb_nmc_tos_block.sv --top-module tb_nmc_tos_block
./obj_dir/Vtb_nmc_tos_block +verilator+rand+reset+2
```

The simulator is two-state, so every register that is read has a reset
value or is cleared by a sweep.
