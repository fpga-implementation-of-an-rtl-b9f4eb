# Event-driven saliency-based selective attention in SystemVerilog

An event camera (here a DAVIS240C, 240x180 pixels) reports brightness changes
as a stream of pixel addresses instead of frames. Even so, a busy scene makes
more events than a small downstream processor, such as a neuromorphic core of
256 neurons, can handle. This design picks the most active place in the scene
and forwards only the events of a 16x16 window around it, the *focus of
attention* (FOA). The window moves on when another place becomes more active,
and once it has been looked at, a place is actively suppressed for a while.
Two *top-down* controls let an application restrict or bias where attention
may go, for example "only the upper half of the image".

Everything is event-driven. No frame or saliency map is ever scanned. Each
pixel keeps a leaky activity value that is updated only when that pixel fires.
A single register remembers which pixel is currently the most salient. The
RTL targets one clock domain (100 MHz is assumed throughout) and a 4-phase
asynchronous AER bus on both sides.

## Data flow

```
AER_in ──► FMS ──► HSR ──┬──► DPE(Exp) ──┬──► TDG ──┐
 (sensor)                │                └──► TDM ──┴──► SAL ──► P* = (sal_x, sal_y)
                         │                                          │
                         └──► DPE(Fov) ◄────────────────────────────┘
                                  │
                                  └──┬──► monitor stream (mon_*)
                                     └──► HSS ──► AER_out   (when hss_enable)
```

| block | module | job |
|---|---|---|
| FMS | `fms` | two-flip-flop synchroniser on the incoming `req` (data goes through the same stages) |
| HSR | `hsr` | 4-phase AER receiver that turns into a valid/ready stream |
| DPE (Exp) | `dpe_exp` | joins a row word and a column word into a pixel event `{y, x, pol}` at full resolution |
| TDG | `tdg` | top-down gating: drops events outside a region of interest (when enabled) |
| TDM | `tdm` | top-down modulation: chooses the gain an event adds to its pixel's state |
| SAL | `sal` (+ `timestamper`, two `dp_bram`, `exp_func`, `sal_func`) | keeps the pixel states and finds the most salient pixel P* |
| DPE (Fov) | `dpe_fov` (reuses `dpe_exp`) | passes only events inside the 16x16 window around P* and adds window-local coordinates |
| HSS | `hss` | optional 4-phase AER sender for the fovea events |
| top | `fovea_top` | wires all of the above together |

Shared types and constants are in `fovea_pkg`.

The word leaving HSR goes to both DPEs. The fovea output goes to both the
monitor port and HSS. Each of these splits is a *lock-step fork*: a word
moves only when every receiver can take it. So the fovea path sees exactly the
same events as the saliency path. It filters them with the P* that is current
at that moment.

## The pixel state and its update

This is the core of the design. Each pixel P has a state s_P, an activity value
that jumps up when the pixel fires and decays exponentially between events:

    s_P(t) = g + s_P(t_old) · exp(-(t - t_old) / τ)

Here t_old is the time of the pixel's previous update. The gain g is 1.0 for a
plain event. Top-down modulation may change it (see below). A pixel firing
steadily with period T settles near g / (1 - exp(-T/τ)), which is about g·τ/T
for T ≪ τ. The state therefore measures the pixel's recent firing rate over a
window of about τ.

Because the decay has a closed form, it only has to be computed when the
pixel is touched. Two memories hold what is needed for that:

* **RAM_FR**: one word per pixel holding s_P. It is 21 bits, signed, Q12.8:
  1 sign bit, 12 integer bits and 8 fraction bits. So 1.0 is 256 and the range
  is about ±4096. Every result saturates to this range.
* **RAM_TIME**: one 32-bit word per pixel holding t_old, in timestamp ticks.
  `timestamper` advances the tick every `CLK_PER_TICK` = 100 clocks, which is
  1 µs at 100 MHz. It wraps after 2^32 ticks, about 71 minutes. A pixel silent
  for that long would see a wrong elapsed time.

Both memories are addressed by `{y, x}` with 8 bits each. That makes them
65,536 deep, although only 43,200 entries are used. In exchange, no
multiplier is needed to form an address. Together they hold 65,536 x 53 bits,
about 3.5 Mbit, roughly 95 Xilinx 36-kbit block RAMs. `dp_bram` is a simple
dual-port RAM: port A writes, and port B reads with one clock of latency. The
memories start at zero, so an unused pixel has state 0 at time 0.

### Exp_Func: the decay without a divider or an exp table

`exp_func` is a three-stage pipeline that takes one operation per clock:

1. **Scale.** τ is given as its reciprocal, `inv_tau` = 2^24 / τ, with τ in
   ticks (24 bits wide). For example, τ = 200 µs gives `inv_tau` = 83886. The
   stage forms `u = Δt · inv_tau`, which is Δt/τ with 24 fraction bits, and
   splits it:
   * the segment index k = ⌊2u⌋ (bits 26:23 of u);
   * a 16-bit position inside the segment (bits 22:7);
   * a flag for u ≥ 8, beyond which the decay is taken as exactly 0.
2. **Interpolate.** exp(-u) is replaced by straight lines between the 17
   breakpoints u = k/2, k = 0..16. Breakpoint k has the value
   round(2^16 · exp(-k/2)) (the table `EXP_Y` in `fovea_pkg`, from 65536 down
   to 22). The stage computes `y[k] - (y[k] - y[k+1]) · frac`, in unsigned
   Q1.16.
3. **Apply.** It computes `g + (s_old · decay) >> 16` and saturates the
   result to Q12.8.

Chords lie above a convex curve, so the approximation never decays faster
than the true exponential. Its worst error is about +0.03 (3% of full scale),
near u = 0.25, and it shrinks quickly for larger u. Cutting off at u = 8 drops
a remainder below 0.0004 of the old state. `inv_tau` is an integer, so very
long time constants lose precision: τ = 10^6 ticks gives `inv_tau` = 16, an
error of about 5%. A tag (`TAG_W` bits) travels through the pipeline beside
each operation, so the saliency block knows where to write each result.

### Arithmetic conventions

Several quantities share the Q12.8 format: the gains from TDM, the excitation
`s_plus` and the inhibition `s_minus`. Negative states are allowed. A pixel
that was inhibited starts below zero and needs extra events before it can win
again. That is the point of inhibition of return.

## SAL: one event, step by step

`sal` has a small controller (`S_IDLE → S_WAIT_EV → S_ISSUE_P → S_WAIT_P →
S_CMP`, then `S_IOR` when P* moves). All state traffic goes through one path:
issue a read on port B of both RAMs, wait one clock, push the values through
Exp_Func, and write the result on port A. Each request carries a tag with four
fields: whether to write back, the request kind (event, P*, IOR), the pixel
address, and the timestamp to store.

For an incoming pixel event at tick t, SAL does the following:

1. **Event update.** It reads t_old and s_P(t_old) for the event pixel,
   computes s_P(t) with the modulated gain g, and writes s_P(t) and t back.
2. **P\* refresh.** It reads P*'s state and decays it to the same tick t with
   gain 0. The result s* is only compared, never written back. Because both
   values refer to the same tick, a second event on P* itself cannot "beat"
   P* (refreshing P* a few clocks later would let a tick boundary in between
   make P* look weaker than the event pixel, which is P* itself).
3. **Compare.** `sal_func` gets both values. If there is no P* yet, or
   s_P(t) > s*, the event pixel becomes the new P*. `sal_update` pulses and
   `sal_x`/`sal_y` change.
4. **Inhibition of return** (only when P* moved) runs two sweeps. Each sweep
   makes one read-modify-write per clock over a 16x16 window, row by row:
   * **excite**: every pixel of the window around the *new* P* gets
     `+s_plus`;
   * **inhibit**: every pixel of the window around the *previous* P* gets
     `-s_minus`. This sweep is skipped for the very first P*.

   Window positions outside the 240x180 array are skipped. Each touched pixel
   is first decayed to the present, then stepped, then stamped with the
   present time. This keeps the closed-form decay exact for later events.

   Before the second sweep, and again at the end, the controller waits until
   the Exp_Func pipeline is empty. Windows that overlap would otherwise read a
   pixel before its first update had been written. An `in_flight` counter
   provides this "pipeline idle" signal.

`in_ready` is high only while SAL is idle, so events are taken strictly one
at a time.

**Timing** (at 100 MHz):

* An event that does not move P* occupies SAL for 12 clocks. Sustained, that
  is about 8 million events per second.
* A move adds two sweeps of 256 clocks each plus two pipeline drains, about
  530 clocks or 5.3 µs.

During that time the exploring path fills and the fork stalls. HSR then
delays its `ack`, so the sensor itself waits and no event is dropped. In the
end-to-end test bench the worst time from an input request to the
corresponding fovea output was 5.26 µs.

### Choosing τ, s_plus and s_minus

The three numbers decide how attention behaves:

* τ sets how far back "activity" reaches.
* `s_minus` sets how long a visited place stays suppressed. The inhibited
  value decays with the same τ.
* `s_plus` makes the new window sticky. It raises P* and its neighbours, so a
  competitor must be clearly more active to take over.

A large `s_plus` with a small `s_minus` keeps attention on the strongest
source. `s_plus` = 0 with a large `s_minus` makes attention tour the active
places, with dwell times that follow their rates. The three-pixel test bench
uses τ = 200 µs, `s_plus` = 0 and `s_minus` = 10.0. It measures dwell times of
21.8 ms, 11.5 ms and 5.7 ms for pixels that fire on average every 40, 50 and
60 µs. The general end-to-end test uses τ = 200 µs, `s_plus` = 3.0 and
`s_minus` = 2.0.

## Top-down biasing

Both top-down blocks use the same *region of interest* from `tdb_params`. It
is an inclusive rectangle `x_min..x_max, y_min..y_max` in pixel coordinates.
"Upper half" of a 240x180 image is therefore y = 90..179 in this design's row
numbering. "Left half" is x = 0..119. Both blocks look at the same event in
the same clock. TDG registers the event and TDM registers its gain, so the two
stay paired on the way into SAL.

* **Gating (`enable_tdg`).** Events outside the region never reach SAL. They
  cannot raise any state, so P* can only ever be inside the region. The fovea
  path is not gated. If P* is near the region's border, the fovea window may
  still show events just outside it.
* **Modulation (`enable_tdm`).** Every event reaches SAL. Events inside the
  region add `gain_in` and those outside add `gain_out` (both Q12.8). With
  modulation off, every event adds 1.0. This biases rather than forbids: a
  strong enough source outside the region can still win.

## The fovea output

`dpe_fov` repeats the row/column merge and keeps an event only when
`cx-8 ≤ x ≤ cx+7` and `cy-8 ≤ y ≤ cy+7`, where (cx, cy) is the current P*. An
even-sized window has no middle pixel, so this placement is a choice. Each
kept event carries its absolute `x, y` and its polarity. It also carries
`local_x = x - cx + 8` and `local_y = y - cy + 8` (0..15), ready to address a
16x16 array of neurons. Nothing is passed until a first P* exists.

The output appears in two places:

* `mon_valid / mon_ready / mon_ev`, a `fov_ev_t` struct. This is where a host
  link (USB on the original board) would connect.
* When `hss_enable` is set, also on `aer_out_req / aer_out_data / aer_out_ack`.
  The data word is `{y[7:0], x[7:0], pol}`.

## AER interfaces

**Input word.** The DAVIS240C sends a row address and then one or more column
addresses. This design assumes a 10-bit word:

| bits | meaning |
|---|---|
| 9 | 1 = column (x) word, 0 = row (y) word |
| 8 | polarity (1 = ON), meaningful in column words |
| 7:0 | coordinate |

DPE (Exp) keeps the last row word and makes one pixel event for each column
word. A column word that arrives before any row word after reset is paired
with row 0. Polarity passes through to the output, but it does not change the
saliency update: ON and OFF events count alike.

**Handshake.** The input is standard 4-phase (return-to-zero) AER:

1. The sender sets the data and raises `req`.
2. The receiver raises `ack`.
3. The sender drops `req`.
4. The receiver drops `ack`.

Sampling:

* `req` and the data are sampled through two flip-flops.
* HSR raises `ack` only after the word has moved downstream. This is how
  back-pressure reaches the sensor.

The output sender HSS works the same way:

* It puts the data on the bus one clock before raising `req`.
* It synchronises the incoming `ack` with two flip-flops.
* Each word takes at least 6 clocks plus the receiver's response times.

Assertions in `hsr` and `hss` check that the data is held stable while a word
is outstanding.

## Configuration inputs

All of these are meant to stay static while events flow.

| input | format | meaning |
|---|---|---|
| `inv_tau` | 24-bit unsigned | 2^24 / τ, with τ in ticks (1 µs) |
| `s_plus`, `s_minus` | Q12.8 signed | excitation of the new FOA, inhibition of the old FOA |
| `enable_tdg`, `enable_tdm` | 1 bit | top-down gating / modulation on |
| `tdb_params.roi` | 4 x 8 bits | x_min, x_max, y_min, y_max (inclusive) |
| `tdb_params.gain_in`, `gain_out` | Q12.8 signed | TDM gains inside / outside the region |
| `hss_enable` | 1 bit | also send fovea events on the AER output |

Parameters of `fovea_top`:

| parameter | default |
|---|---|
| `FOA_W`, `FOA_H` | 16 |
| `SENSOR_X`, `SENSOR_Y` | 240, 180 |
| `CLK_PER_TICK` | 100 |

## What is given and what was chosen

These points follow the published architecture:

* the block structure and the names of the blocks;
* the 21-bit Q12.8 state;
* a per-pixel timestamp memory;
* the update rule with an input time constant;
* a piecewise-linear exponential;
* the event-by-event comparison against P*;
* excitation of the new window and inhibition of the old one;
* the 16x16 window;
* gating and modulation driven by an enable and a set of biasing parameters;
* 4-phase AER with a double flip-flop synchroniser;
* the optional output sender.

These are this design's own choices, made where the description stops:

* **Formats and encodings:**
  * the AER word layout;
  * `{y, x}` addressing;
  * the 32-bit timestamp and the 1 µs tick at an assumed 100 MHz;
  * the reciprocal encoding of τ;
  * the 16-segment breakpoints at u = k/2;
  * the cut-off at u = 8.
* **SAL behaviour:**
  * P* is refreshed at the event's own tick, and that refresh is not written
    back;
  * the IOR steps decay each pixel to the present before adding;
  * the window placement [c-8, c+7];
  * window pixels off the array are skipped;
  * events are processed one at a time, with back-pressure to the sensor
    instead of a FIFO.
* **Top-down blocks:**
  * the rectangle form of the region of interest;
  * the two-gain form of modulation;
  * when modulation is off, the gain is 1.0.
* **Interfaces and ordering:**
  * valid/ready streams between the blocks;
  * the order of the two IOR sweeps: excite, then inhibit.

The rule as published adds the constant 1 for an event. Here that constant is
the modulated gain, which is how modulation enters the state.

These parts are not included: the USB host link, the sensor itself and the
board-level clocking. The monitor stream is where a host link would connect.

## Verifying and simulating

Every block has a self-checking test bench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. The test benches:

* **Per block:** `fms_tb`, `hsr_tb`, `hss_tb`, `dpe_exp_tb`, `dpe_fov_tb`,
  `tdg_tb`, `tdm_tb`, `dp_bram_tb`, `timestamper_tb`, `exp_func_tb`,
  `sal_func_tb`.
* **`sal_tb`**: runs 1000 random events through the saliency block. It
  compares every state written, every P* decision and every IOR update with a
  bit-exact software model in `fovea_ref_pkg`. That package rebuilds the
  breakpoints with `$exp`.
* **`fovea_top_tb`**: drives the full-size design with default parameters
  through a sensor model on the asynchronous bus, in four phases:
  * bottom-up only;
  * gating to the upper half and then the left half;
  * modulation;
  * AER output.

  It checks that:
  * every fovea event lies in the window of the P* of the time and has the
    right local coordinates;
  * every P* picked under gating is inside the region;
  * the latency stays below 10 µs.

  It also counts each mechanism: gated events, both gains, moves, inhibition
  sweeps, dropped events, sensor stalls and output words. A mechanism that
  never happened counts as a failure.
* **`gesture_tb`**: a hand-gesture stand-in. A small blob circles once in
  43.1 ms inside a 128x128 field, the size of a DVS128 recording, with 10%
  background noise. Sampled every 100 µs, P* must stay within 12 pixels of
  the blob in at least 90% of samples. It must visit all four quadrants of
  the circle, and every fovea event must lie inside the window.
* **`three_points_tb`**: the controlled experiment with three pixels of
  different rates. Attention must visit all three, and the dwell times must
  be ordered by rate.

With Verilator 5, from the repository root (replace `fovea_top_tb` by any
test bench name):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/fovea_pkg.sv tb/fovea_ref_pkg.sv tb/fovea_top_tb.sv \
  --top-module fovea_top_tb -o sim
./obj_dir/sim
```

Each test bench builds in seconds and runs in under a second.
`timestamper_tb` (a 5-clock tick) and `sal_tb` (a 1-clock tick) override
parameters to stay short. `fovea_top_tb`, `gesture_tb` and `three_points_tb`
use the defaults. The memories are zeroed by an `initial` block, which FPGA tools map
to the block-RAM initial contents. An ASIC flow would need an explicit clear.
