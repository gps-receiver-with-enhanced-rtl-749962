# Instant-on GPS timing core with an RTC-based frame sync estimator

A GPS receiver that has been switched off normally needs several seconds
before it can compute a position, even when it still holds valid ephemerides.
Before it can time its pseudoranges it must know where each satellite's
50 bit/s navigation message stands: which bit of which word of which
6-second sub-frame is arriving, and that sub-frame's time of week (TOW).
Waiting for the next sub-frame preamble and the TOW word takes 1.2 s to 6 s.

This core removes that wait. Just before main power goes off, each satellite
channel stores its position in the navigation message (word index, bit index,
TOW), the carrier Doppler and the count of an always-on 32 kHz real-time
clock. After power returns and the tracking loops report code, carrier and
bit lock again, the **frame sync estimator** turns the RTC difference into
the number of data bits that have gone by, and so into the current bit,
word and TOW. Frame sync is declared at the first bit edge after bit lock,
with no preamble. The receiver then sets its clock offset and produces
pseudoranges straight away. A sequencing controller puts the receiver to
sleep again and wakes it on a user request or every ten minutes.

The RTL follows the receiver described by Yoon et al., "GPS Receiver with
Enhanced User Positioning Time". That description gives the estimator's
arithmetic, the clock-offset equation, the pseudorange sequence and the
power flow chart. It gives no internal structure. Widths, handshakes, cycle
timing and several rules are therefore this design's own. They are listed in
[Where this design departs from or adds to the description](#where-this-design-departs-from-or-adds-to-the-description).

## Navigation message timing

| unit       | size                      | duration |
|------------|---------------------------|----------|
| C/A chip   | 1/1.023 MHz               | 0.978 µs |
| code epoch | 1023 chips                | 1 ms     |
| data bit   | 20 epochs = 20 460 chips  | 20 ms    |
| word       | 30 bits                   | 600 ms   |
| sub-frame  | 10 words = 300 bits       | 6 s      |

Word 1 of every sub-frame starts with an 8-bit preamble. Word 2 carries the
TOW, which is the GPS time at the *end* of that sub-frame in 6 s units. The
receiver has its own time base: a TIC every 100 ms, counted from a receiver
zero time ZT.

Each channel keeps three counters that together say where the message
stands:

* a **bit/word/TOW position**, advanced by one bit at every bit edge from
  tracking;
* a **chip counter** inside the current bit;
* the **code time**: the chips received between the start of the current
  sub-frame and the TIC, `(word*30 + bit)*20460 + chips in bit`.

## The frame sync estimator

The estimator (`frame_sync_estimator`) starts when the channel sees its
first bit edge after lock. At that edge it reads the RTC. It then computes,
in 1/32 ms units:

```
d   = RTC_now - RTC_stored                      off time (32 counts per ms)
d'  = d + d * (fd_stored + fd_now) / 2 / 1575.42 MHz     Doppler correction
n   = round(d' / 20 ms)                         data bits that went by
bit  = (bit_stored + n) mod 30
word = (word_stored + (bit_stored + n) div 30) mod 10
TOW  = TOW_stored + floor(d' / 6000 ms)
SyncTIC = TIC_now + (10 - word) * 6             TIC at the end of the sub-frame
valid   = state stored  and  d' < 10^6 ms
```

**Worked example.** The stored state is word 6, bit 19, TOW 2679 and RTC
17362. The RTC reads 6731176 at wake-up.

* The off time is 6713814/32 = 209806.6875 ms, which is 349 words, 20 bits
  and 6.6875 ms.
* The estimate is bit 9, word 6 and TOW 2713.
* The distance to the nearest bit edge is reported as 214/32 ms.

Four points need care.

* **Why rounding and the 10^6 ms limit.** The state is stored at a bit edge
  and the estimate is made at a bit edge, so in theory the off time is a
  whole number of bits. Rounding to the nearest bit absorbs RTC error of up
  to ±10 ms. A 10 ppm RTC builds up 10 ms of error after 10^6 ms (about
  16.7 minutes). Beyond that the estimate is rejected (`est_rejected`), and
  the channel syncs from the preamble as a conventional hot start would. The
  10-minute sleep period stays inside this limit.
* **Doppler.** While the receiver is off, the satellite's range changes, so
  the received message slips against the RTC. The stored and current carrier
  Doppler are averaged, and the off time is scaled by
  `1 + f_D / f_L1`. At 10 kHz this is about 6.5 chips/s, or 1.3 ms over
  200 s. `DOPPLER_COMP = 0` turns the correction off.
* **The TOW rule.** `TOW_stored + floor(off time / 6 s)` is the published
  rule, and it is the default. It ignores how far into its sub-frame the
  receiver stopped. Whenever the sub-frame boundary was crossed "early", it
  comes out one short: in the worked example the bit and word counters have
  crossed 35 sub-frame boundaries, not 34. `TOW_FROM_CARRY = 1` takes the
  TOW from the word counter's carry, which is always consistent with the bit
  and word.
* **SyncTIC** counts whole words to the end of the sub-frame and ignores the
  bit position within the current word. The published formula does the same.
  The resulting error of up to 580 ms is the same for every satellite, so it
  enters the solution as receiver clock bias.

The estimator is combinational between its input registers and its output
registers: `done` and the results come one clock after `start`. The division
by 640, 30 and 10 and the Doppler product make it the largest logic in the
design.

## Receiver clock offset, GPS time and pseudorange

`rco_calc` implements the clock-offset equation in integer milliseconds:

```
RCO.week = ZT.week - WeekNumber
RCO.ms   = ZT.ms + SyncTIC*100 - (TOW*6000 + 75)
GPS time at a TIC = ZT + tic_count*100 ms - RCO     (normalised into the week)
```

The 75 ms term is the propagation delay assumed before any position is
known. It is the reason the first fix after wake-up is worse than the later
ones. The controller sets the RCO on the clock after a TIC from the
lowest-numbered synced channel. Every channel registers its SyncTIC and TOW
at each TIC.

`pseudorange_calc` then computes, for each channel and each TIC, with
`t_s = (TOW-1)*6 s` as the start of the sub-frame being received:

```
delay_chips = (GPS time at TIC - t_s) * 1023 - code time
range       = delay_chips * 293.0523 m      (Q8: * 75021 >> 8)
```

Code time has a resolution of one chip, because the sub-chip code phase is
not brought in from tracking. Clock offset errors are common to all channels
and cancel in the differences between channels.

## Channel: two ways to frame sync

`fse_channel` holds one satellite's counters, its preamble detector,
estimator, retention registers, code time counter and pseudorange unit.

* **Estimated sync.** The controller raises `est_en` after a warm wake. The
  channel runs the estimator at its first bit edge with all three locks up.
  Two clocks later a valid estimate loads the position counters, and
  `synced_by_est` is set.
* **Preamble sync.** Otherwise, or after a rejected estimate,
  `preamble_detector` looks for `10001011` in either polarity. It counts to
  the second word and reads its 17-bit TOW, undoing the XOR with the last
  bit of word 1 (this also cancels the tracking polarity). It loads
  word 1 / bit 17 / TOW one clock after bit 46 ends, so sync comes 0.94 s
  after a preamble. Word parity is not checked.
* **Storing.** `save_req` stores, at the channel's next bit edge, the
  position of the bit starting there (`pos_next`), the RTC count and the
  Doppler. A channel without lock stores an invalid state, which makes it
  use the preamble after the next wake. The retention registers are reset
  only by `rst_n`. Power-off (`pwr_on` low) and loss of any lock clear
  everything else.

## Power and sequencing

`instant_on_ctrl` follows the receiver's flow chart:

```
SLEEP --user_req or 10 min on RTC--> VALIDATE --eph>=4--> LOAD --> ACQ
                                        |                           ^ |
                                     eph<4                   <4 sats| v
                                        v                          SATCHK <-- RCO <-- (more channels synced)
                                      COLD --eph>=4--> ACQ           | >=4
                                                                     v
           SLEEP <-- SAVE <--(eph<4)-- EPHCHK <--nav_done-- NAV <----+
                       ^                 | eph>=4
                       +---- EPHUPD <----+ (stays on 30 s)
```

* `pwr_on` is the main power control. Everything except the RTC counter, the
  controller and the retention registers is treated as losing its state when
  it is low.
* `eph_valid_cnt` comes from the positioning software, which judges
  ephemeris age (4 hours).
* The navigation solution is requested with `nav_req` and acknowledged with
  `nav_done`.
* The flow chart labels only some exits. The reading used here is: the
  unlabelled exit of the post-fix ephemeris check leads to the update, and
  "Start" means store the states and sleep.

## Hierarchy and interfaces

```
gps_instant_on_top
  rtc_counter          32 kHz counter, Gray-code crossing into clk
  tic_gen              1 ms tick, 100 ms TIC, TIC count (held while off)
  instant_on_ctrl      flow above
  rco_calc             clock offset, GPS time at each TIC
  fse_channel x NUM_CH
    preamble_detector
    frame_sync_estimator
    nav_timing_counter bit / word / TOW
    code_time_counter
    pseudorange_calc
gps_pkg                constants, nav_pos_t, saved_state_t
```

Outside the core, and present only as ports:

* **Correlation, acquisition and tracking.** These supply, per channel:
  `code_lock`, `carrier_lock`, `bit_lock`, and `chip_tick` (one pulse at the
  start of every chip). They also supply `bit_edge` (one pulse at the start
  of every data bit, on the same clock as that bit's first `chip_tick`),
  `bit_val` (the bit that has just ended) and `doppler` (signed Hz).
* **Navigation software.** It supplies `eph_valid_cnt`, `week_number`,
  `zt_week`/`zt_ms` and `nav_done`. It receives `nav_req`, GPS time and the
  pseudoranges.
* **The RTC crystal** (`rtc_clk`) and the RF front end.

| parameter        | default   | meaning                                        | source        |
|------------------|-----------|------------------------------------------------|---------------|
| `NUM_CH`         | 8         | satellite channels                             | satellites tracked in the published tests |
| `CLKS_PER_MS`    | 16368     | receiver clock 16.368 MHz (16 clocks per chip) | own choice    |
| `SLEEP_MS`       | 600 000   | sleep period                                   | published flow chart |
| `EPH_UPDATE_MS`  | 30 000    | stay-on time for ephemeris update              | published flow chart ("over 30 s") |
| `MAX_OFF_MS`     | 1 000 000 | longest off time the estimator accepts         | published tolerance analysis |
| `DOPPLER_COMP`   | 1         | code Doppler correction in the estimator       | own formula   |
| `TOW_FROM_CARRY` | 0         | 0: published TOW rule, 1: carry-consistent     | own option    |

Latencies:

* RTC reading: two synchroniser clocks after the RTC edge.
* Estimator: one clock.
* Estimated sync: position loaded two clocks after the bit edge.
* Preamble sync: one clock after the bit edge that ends bit 46.
* Code time and the SyncTIC/TOW registers: one clock after the TIC.
* GPS time: one clock after the TIC, once the RCO is set.
* Pseudorange: two clocks after the TIC.

## Where this design departs from or adds to the description

* The published receiver runs the frame sync estimator in software on an
  embedded ARM next to the position calculation. Here it is hardware,
  together with the storage and sequencing it needs.
* The estimator works on bit edges, and the elapsed bit count is rounded
  (see above). The description sketches the decomposition into 600 ms,
  20 ms and 1 ms parts but states no rounding. Its flow chart reads the
  current RTC during data load, while its text reads it after bit lock; the
  text is followed.
* Its printed example has a typo in the second RTC value (673176 against
  6731176 in the formula); 6731176 is the value that matches.
* The Doppler correction formula, the TOW carry option, the rejection
  fallback to the preamble, and state storage per channel are this design's
  own.
* The preamble value, the position of the TOW field and the D30 rule come
  from the GPS signal specification, not from the description. No parity
  check is done.
* Time is kept in integer milliseconds (RCO, GPS time) and whole chips
  (code time). There is no sub-chip code phase, so a pseudorange has a
  one-chip (about 293 m) quantum.
* The RTC runs at exactly 32 counts per ms, as in the published arithmetic.
  A 32.768 kHz crystal would need a different scale in
  `frame_sync_estimator`.
* The receiver time (TIC count) stops while main power is off. The RCO is
  set again after every wake.
* Cold start behaviour, what "Start" means in the flow, and all handshakes
  are this design's own.

## Simulation

Every module has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=N failures=M`. With Verilator 5, for example:

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv rtl/gps_pkg.sv \
    tb/tb_frame_sync_estimator.sv --top-module tb_frame_sync_estimator
./obj_dir/Vtb_frame_sync_estimator
```

* **`tb_frame_sync_estimator`** checks:
  * the worked example;
  * 300 random off times of up to 980 s, built from a physical model with
    ±9 ms jitter and ±10 kHz Doppler;
  * the 10^6 ms rejection and the one-clock latency.
* **`tb_fse_channel`** drives a modelled satellite (`tb_sat_model`) and
  covers:
  * preamble sync and pseudoranges;
  * a 3-minute power-off followed by estimated sync within one bit of lock;
  * an over-long off time, rejected and followed by preamble sync.
* **`tb_gps_instant_on_top`** runs the whole core at reduced size (4
  channels, 2.046 MHz, 1-minute sleep, 50 ms ephemeris update, 30 s off
  limit). It goes through a cold start, a warm wake and a stale-state wake,
  and counts each mechanism: cold start, preamble and estimated sync,
  rejection, both wake causes, ephemeris update, RCO and the lock-wait loop,
  navigation and save. At every bit edge it compares the channel positions
  with the satellite models. At every TIC it checks that pseudorange
  differences between channels equal the modelled delay differences
  exactly.
* **`tb_gps_instant_on_top_full`** runs the core at its default parameters:
  8 channels, 16.368 MHz, a real 10-minute sleep ended by the RTC timer, then
  estimated sync on all channels and a second fix. It reports too few
  ephemerides after each fix, which skips the 30 s update.
* **`tb_workload_off_times`** repeats the published off-time tests: eight
  satellites with carrier Doppler, switched off for 6, 8 and then
  15 minutes and woken by the user each time (the sleep period is raised to 20 minutes so the timer
  does not cut the last interval short, and the clock is 2.046 MHz). After
  every interval all eight channels sync through the estimator and the fix
  is requested 100 ms after wake-up: the last modelled channel locks
  after 71 ms, and the RCO is set at the first TIC, 100 ms after power-on.

In the system testbenches the sleep is simulated with a slowed clock: each
receiver clock moves time on by eight RTC half periods, and the RTC clock
toggles eight times within it, so the RTC counter still sees every edge.

The testbenches use only `$urandom`, and reset or initialise everything they
read, so they also run on two-state simulators.

The Doppler correction is checked in the estimator's own testbench and in
`tb_workload_off_times`. There the eight satellites carry Doppler shifts of
3 to 10 kHz of alternating sign, and each signal delay drifts by
-Doppler / 1575.42 MHz over the off time (5.7 ms over 15 minutes at 10 kHz).
After every wake the estimator's residual bit phase must be within 1/8 ms,
which holds only with the correction: without it the residual reaches 2.3 ms
after 6 minutes. Apart from that drift, the satellite model has a constant
delay.
