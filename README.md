# Adaptive-threshold L1 trigger for a EUSO photo-detection module

A EUSO fluorescence telescope looks at the faint ultraviolet light of
extensive air showers with a focal surface called the PDM (photo-detection
module): 36 multi-anode photomultipliers (MAPMTs) of 8 x 8 pixels, i.e.
2304 pixels, read out in photon-counting mode. Every gate time unit (GTU:
2.5 us on the ground-based EUSO-TA telescope, 1 us on the EUSO-SPB2 balloon)
each pixel delivers the number of photoelectrons it counted. A shower shows
up as a handful of pixels that are brighter than usual for a few GTUs, on top
of a night-sky background that differs from pixel to pixel and drifts with
time.

The L1 trigger in this repository decides, GTU by GTU, whether such a signal
is present. Its central idea is that **each pixel gets its own threshold,
derived from that pixel's own recent background**, and the trigger then only
*counts* pixels above threshold in regions of the focal surface. Two counting
rules are implemented on the same threshold front end:

* **EUSO-TA**: trigger if, in one GTU or summed over two consecutive GTUs,
  too many pixels are active in one MAPMT, one elementary cell (EC, 2 x 2
  MAPMTs) or the whole PDM (six conditions).
* **EUSO-SPB2**: trigger if one MAPMT has more than `n_pixel` active pixels
  in each of at least `N_GTU` consecutive GTUs.

The design follows the trigger scheme of the EUSO-TA / EUSO-SPB2 trigger
development published by the JEM-EUSO collaboration (ICRC 2019). The
arithmetic, the thresholds and the counting rules are theirs; the way the
data move through the hardware (one MAPMT per clock, banked thresholds, the
handshakes) is this implementation's own and is pointed out as such below.

## 1. The adaptive threshold

Over a window of 128 GTUs every pixel's counts are summed (`SUM`). The mean
is `lambda = SUM/128`; for Poisson-distributed background one standard
deviation is `sqrt(lambda)`. The threshold for the *next* 128 GTUs is set
`n_sigma = 4` deviations above the mean:

    S_pixel = lambda + 4*sqrt(lambda) = (SUM + 32*sqrt(2*SUM)) / 128

The right-hand form needs only an integer square root of `2*SUM`, a
multiplication by 32 (a shift) and a division by 128 (a shift). For other
`n_sigma` the constant 32 becomes `8*n_sigma` (`N_SIGMA` parameter).

In hardware the square root and the division truncate. A pixel is *active*
when its count is **strictly greater** than `S_pixel`. With these two
choices a background of 1.5 counts/GTU (`SUM = 192`) gives `S_pixel = 6`:
the pixel must see at least 7 counts, for which the Poisson probability is
about 0.093 %. This is the reference example of the trigger's designers and
is checked in `tb_spixel_calc`.

Timing of the windows: every GTU of window *k* is compared with thresholds
computed from window *k-1*. During window 0 (the first 128 GTUs after reset)
no thresholds exist; all thresholds then read as all ones and no pixel can be
active, so neither logic can trigger. Expect a 128-GTU warm-up after reset.

## 2. Data flow

    pixel counts --+--> pixel_accumulator --> spixel_calc --> threshold_store --+
     (1 MAPMT/clk) |        (128-GTU sums)       |         (2 banks)            |
                   |                             +--> sum_fifo --> L2 port      |
                   |                                                            v
                   +--> pixel_frame_buffer (2 GTUs) --------------------> pixel_comparator
                                                                                |
                                                              PMT_VALUE per MAPMT, 1/clk
                                                                  |           |
                                                             ta_trigger   spb2_trigger
                                                                  \           /
                                                              logic_sel -> l1_trig

**Input format.** One beat carries the 64 counts (8 bits each) of one MAPMT.
The 36 MAPMTs of a GTU come in raster order of the 6 x 6 grid (MAPMT `p`
sits at row `p/6`, column `p%6`), 36 beats per GTU, gaps allowed
(`pix_valid` low). The top counts beats itself, so the stream must start at
MAPMT 0 after reset and never drop a beat. The order of the 64 pixels inside
a beat does not matter to the trigger, but it must be the same in every GTU
(each lane has its own threshold). Bit width and beat order are choices of
this implementation; the rate it imposes is one MAPMT per clock, i.e. a
clock of at least 36 x the GTU rate: 14.4 MHz for EUSO-TA (2.5 us GTU),
36 MHz for EUSO-SPB2 (1 us GTU).

**Two paths.** The input feeds two paths at once:

1. `pixel_accumulator` keeps one 15-bit sum per pixel (36 x 64 array). In
   the first GTU of a window it overwrites instead of adding, so no clearing
   pass is needed. In the last GTU of the window it outputs the finished
   sums, one MAPMT row per clock; `spixel_calc` turns each row into 64
   thresholds (64 square-root units in parallel), which are written into the
   spare bank of `threshold_store`. The same rows go into `sum_fifo`, whose
   output is the port towards the L2 trigger (see section 5).
2. `pixel_frame_buffer` is a two-GTU circular buffer. While one GTU is being
   written, the previous, complete GTU is read out, one MAPMT per clock, and
   compared pixel by pixel with the matching threshold row. The result is
   `PMT_VALUE`, the number of active pixels of that MAPMT in that GTU.

**Why two threshold banks.** The new thresholds are computed during the last
GTU of a window, but that GTU is compared one GTU later (it waits in the
frame buffer). With a single bank it would be compared with the thresholds
it has itself just contributed to. `threshold_store` therefore writes the new
set into the spare bank and switches banks only when the comparator starts
reading the first GTU of the next window (the frame buffer carries a
"window start" tag with each frame). The output `thr_update` pulses at that
moment.

**Latency.** Results of a GTU (`res_valid`) appear 41 clocks after the clock
that delivered that GTU's last MAPMT, always the same: about 37 clocks to
finish the frame-buffer read-out, the comparator and the trigger pipeline
registers. `l1_gtu` is the index of the GTU the result belongs to (the first
GTU after reset is 0).

## 3. EUSO-TA logic (`ta_trigger`, `level_trigger`)

The 36 `PMT_VALUE`s of a GTU are collected into a 6 x 6 matrix. EC `k` (0..8,
raster order of the 3 x 3 EC grid) is the 2 x 2 block of MAPMTs at grid rows
`2*(k/3)`, `2*(k/3)+1` and columns `2*(k%3)`, `2*(k%3)+1`; `EC_VALUE` is the
sum of its four `PMT_VALUE`s, and `PDM_VALUE` the sum of all nine
`EC_VALUE`s. So all three levels count **active pixels**.

Each level is one `level_trigger` instance that keeps the previous GTU's
values and tests, per cell,

| level | one GTU: value > | two GTUs: value + previous > | default |
|-------|------------------|------------------------------|---------|
| MAPMT (36 cells) | `n_pmt1` | `n_pmt2` | 5 / 6 |
| EC (9 cells)     | `n_ec1`  | `n_ec2`  | 7 / 9 |
| PDM (1 cell)     | `n_pdm1` | `n_pdm2` | 15 / 20 |

The comparisons are strict ("more than"). The trigger is the OR of the six
conditions; `ta_cause` reports which ones fired, bit order MAPMT-1, MAPMT-2,
EC-1, EC-2, PDM-1, PDM-2 (`ta_cause_e` in the package). The intent: a near,
fast and faint shower lights many pixels for one GTU (EC or PDM level), a far
shower stays on one MAPMT for several GTUs (MAPMT level).

The thresholds are inputs (`ta_cfg`), so they can be retuned in operation;
`TA_CFG_DEFAULT` in `euso_trig_pkg` holds the values above. After reset the
"previous GTU" of every level counts as zero.

## 4. EUSO-SPB2 logic (`spb2_trigger`)

A MAPMT is *active* in a GTU when its `PMT_VALUE` is greater than `n_pixel`
(default 2). Each MAPMT has a 4-bit saturating counter of consecutive active
GTUs, cleared by a GTU in which it is not active. The trigger fires in a GTU
in which some MAPMT is active and its counter, this GTU included, has reached
`n_gtu` (default 2). `spb2_pmt` lists the MAPMTs that satisfy the rule.
Since a shower spends only a few microseconds in the field of view of one
MAPMT, persistence over 2 GTUs of 1 us is what separates it from background.

The SPB2 telescope has three PDMs, each triggering independently; the whole
focal surface is read when any of them triggers. That means three instances
of this design with their `l1_trig` outputs ORed outside it.

## 5. Sums towards L2

At the end of each 128-GTU window the 36 rows of pixel sums leave through
`sum_fifo` (64 rows deep) on the `l2_valid` / `l2_ready` / `l2_row` /
`l2_sum` port. These 128-GTU integrations are the frames of the slower L2
trigger (transient luminous events), which is not part of this design. The
producer cannot wait: if the FIFO is full, the row is dropped and
`l2_overflow` stays set until reset. A reader that takes one row per clock,
or at least 36 rows per window, never loses data.

## 6. Event storage (`event_storage`)

Each accepted L1 trigger freezes 128 GTUs of raw pixel data for the CPU. The
input stream is written continuously into an *open slot*, used as a ring of
128 frames (index = GTU number mod 128). A trigger for GTU `g` is accepted
when

* no earlier event is still being completed,
* the open slot already holds GTU `g-63` onwards (after reset and after each
  stored event the new slot needs 63 GTUs of history first),
* fewer than `N_EVENTS` (4) events were accepted in the current gate of
  `GATE_GTU` = 128^3 = 2 097 152 GTUs (5.24 s at 2.5 us per GTU).

The slot keeps filling until GTU `g+64`, then holds GTUs `g-63 .. g+64` and
is closed; writing moves to the next of the 4 slots (and pauses if all wait
for read-out). `ev_accepted` / `ev_rejected` report each trigger's fate.
Read-out streams a closed slot, oldest event first, frame by frame in time
order and MAPMT by MAPMT, on `ev_valid` / `ev_ready`, with the trigger's GTU
(`ev_trig_gtu`), the frame's GTU (`ev_gtu`), the MAPMT (`ev_row`) and
`ev_last` on the event's final row. The slot is freed after that row.

The event length and the 4-events-per-5.24 s budget are the published
system's; the 63/64 split around the trigger, the dead time while an event
completes, the slot count and the read-out format are this design's. Storage
is 4 x 128 x 36 words of 512 bits (9.4 Mbit), held in one flat array.

## 7. Top-level interface (`euso_l1_trigger`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `pix_valid`, `pix` | in | 1, 64 x 8 | one MAPMT of counts (section 2) |
| `ta_cfg` | in | `ta_cfg_t` | six EUSO-TA thresholds |
| `spb2_cfg` | in | `spb2_cfg_t` | `n_pixel`, `n_gtu` |
| `logic_sel` | in | 1 | 0: `l1_trig` from the TA logic, 1: from the SPB2 logic |
| `res_valid` | out | 1 | pulses once per GTU; the outputs below are valid with it |
| `l1_trig` | out | 1 | selected L1 trigger |
| `l1_gtu` | out | 32 | GTU index of this result |
| `ta_trig`, `ta_cause` | out | 1, 6 | TA result and its causes |
| `spb2_trig`, `spb2_pmt` | out | 1, 36 | SPB2 result and triggering MAPMTs |
| `thr_update` | out | 1 | a new threshold set has just been taken into use |
| `l2_*` | | | sum FIFO output (section 5) |
| `frame_overflow` | out | 1 | frame buffer overran (cannot happen with one MAPMT per clock) |
| `ev_accepted`, `ev_rejected` | out | 1 | an L1 trigger was / was not stored |
| `ev_valid`, `ev_ready`, `ev_last` | out, in, out | 1 | stored-event read-out handshake |
| `ev_trig_gtu`, `ev_gtu`, `ev_row`, `ev_pix` | out | 32, 32, 6, 64 x 8 | event, frame, MAPMT and counts |

Parameter: `N_SIGMA` (default 4). The geometry (36 MAPMTs, 64 pixels, 9
ECs), the 128-GTU window and the 8-bit count width are constants of
`euso_trig_pkg`; the leaf modules take them as parameters.

## 8. Files

| file | content |
|------|---------|
| `rtl/euso_trig_pkg.sv` | constants, types, configuration defaults, `isqrt` and `spixel` functions |
| `rtl/pixel_accumulator.sv` | 128-GTU per-pixel integration |
| `rtl/spixel_calc.sv` | threshold formula, 64 lanes |
| `rtl/threshold_store.sv` | two-bank threshold memory and window switch |
| `rtl/pixel_frame_buffer.sv` | two-GTU circular pixel buffer |
| `rtl/pixel_comparator.sv` | pixel > threshold, active-pixel count per MAPMT |
| `rtl/level_trigger.sv` | one level of the TA logic (1- and 2-GTU tests) |
| `rtl/ta_trigger.sv` | EUSO-TA logic: MAPMT / EC / PDM matrices and six conditions |
| `rtl/spb2_trigger.sv` | EUSO-SPB2 persistence logic |
| `rtl/sum_fifo.sv` | FIFO towards L2 |
| `rtl/event_storage.sv` | 128-GTU event memory and CPU read-out |
| `rtl/euso_l1_trigger.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_background_rate.sv` | Poisson background run of the whole design (section 9) |

## 9. Verification

Every testbench computes its expected values independently (for example the
square root by upward search, EC membership from grid coordinates), checks
cycle timing, ends with a line `TB_RESULT checks=N failures=M`, and has a
watchdog. They use only `$urandom`, so plain Verilator runs them:

    verilator --binary --timing --assert -Irtl rtl/euso_trig_pkg.sv \
        $(ls rtl/*.sv | grep -v _pkg) tb/tb_euso_l1_trigger.sv \
        --top-module tb_euso_l1_trigger -o sim
    ./obj_dir/sim

`tb_euso_l1_trigger` runs the complete design at its default size for three
full threshold windows plus two GTUs (386 GTUs, 13 896 input beats, well
under a second of simulation). The background is uniform in 0..3 counts
(mean 1.5) with rare noise hits; from the second window on it injects a
bright MAPMT, a spot spread over an EC, a faint PDM-wide flash, and a signal
persisting on one MAPMT. A behavioural model inside the testbench runs the
same chain (sums, thresholds, counts, both logics, the L2 FIFO) and every
GTU's result and every L2 row is compared with it. It also requires each
mechanism to happen at least once: the three threshold updates, each of the
six TA causes, an SPB2 trigger, an L1 trigger through each `logic_sel`
setting, one L2 FIFO overflow (the L2 reader is held off for two windows),
and both a stored and a refused event; every stored event is read back and
compared with the frames that were sent. A typical run reports: latency 41
clocks, TA causes 24/28/27/20/24/41, 15 SPB2 triggers, 8 L2 rows dropped,
2 events stored and 65 triggers refused (mostly while the slot rebuilt its
history).

`tb_background_rate` feeds 2048 GTUs of Poisson background (mean 1.5
counts/GTU in every pixel) through the full design. From its own sums it
predicts, with the exact Poisson tail, how many pixels should be active, and
the design's count must agree within five standard deviations (typically
7250 measured against 7276 expected). The measured active probability is
about 0.16 % per pixel and GTU rather than the 0.093 % of the textbook case:
with only 128 GTUs of data the estimated mean scatters, and about a quarter
of the pixels end up with a threshold of 5 instead of 6. No fake trigger of
either logic occurs in 1920 GTUs.

The block testbenches run reduced geometries where that keeps them short
(accumulator 4 x 4 lanes with an 8-GTU window, FIFO 16 bits x 8, event
storage 2 x 2 lanes with 8-GTU events, 2 slots and a 60-GTU gate) and full
size elsewhere; the complete design, event storage included, is run at full
size by the two testbenches above.

No measured data is included. The rates quoted for the trigger (about
1-4 Hz on balloon-flight background, efficiency around 0.5 and above for
laser shots below 1 mJ) come from offline analyses of recorded data, which
this repository cannot reproduce.

## 10. Where this implementation departs from, or adds to, the published scheme

* **Serial datapath.** The published scheme draws full 48 x 48 pixel
  matrices; here one MAPMT (64 pixels) moves per clock. Results are the same,
  the clock must be at least 36 x the GTU rate.
* **Frame buffer role.** The two-GTU pixel buffer appears in the published
  scheme without a stated purpose; here it decouples writing from comparing.
* **Threshold banks, warm-up, truncation.** The two banks, the "no pixel
  active" behaviour in the first window, and truncating square root and
  division are this design's.
* **EC and PDM counts.** The published block scheme labels the EC stage as a
  count of MAPMT values above the MAPMT threshold; the text and the
  threshold values (7 and 9 for an EC of only four MAPMTs) say it counts
  active pixels. This implementation counts active pixels.
* **Both logics in one design.** EUSO-TA and EUSO-SPB2 each use one logic;
  here both run in parallel on the shared front end and `logic_sel` chooses.
* **Event storage.** Trigger position inside the 128 stored GTUs, the
  history and dead-time rules, slot count and read-out format (section 6).
* **Widths and handshakes.** 8-bit pixel counts, 4-bit SPB2 persistence
  counter, 64-row L2 FIFO with drop-on-full, 32-bit GTU counter.
* **Not included.** The detector itself, the CPU, the L2 trigger and the
  slower continuous monitoring are outside this design; the L2 trigger only
  gets its input port and the CPU a read-out port.
