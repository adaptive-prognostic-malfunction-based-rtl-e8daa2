# ALGAS4: four-corner landing guidance processor with adaptive malfunction detection

This repository holds a SystemVerilog implementation of ALGAS4. ALGAS4 is a landing-guidance
assistant for a vertical take-off taxi drone. Four identical processing corners sit under the
airframe: front, right, back and left. Each corner reads a lidar and a radar range sensor
pointed at the ground. It turns the two distances into a landing command with a fuzzy logic
node. It also watches how well the two sensors agree, using the Adaptive Prognostic Malfunction
Unit (APMU). Opposite corners exchange their results over a serial link, so each corner can
tell whether the drone is level above the landing spot.

The design targets four separate FPGAs, one per corner. In this code, each corner is
therefore a module with its own clock and reset.

## Contents

| Path | What it is |
|---|---|
| `rtl/algas4_pkg.sv` | widths, term encodings, the rule table, APMU constants, packet layout |
| `rtl/siu.sv` | Sensor Interface Unit |
| `rtl/fir15.sv` | 15-tap systolic low-pass FIR filter |
| `rtl/fls_mf.sv`, `fls_fuzzifier.sv`, `fls_inference.sv`, `fls_defuzzifier.sv`, `fls_core.sv` | fuzzy logic node |
| `rtl/apmu_fsau.sv`, `apmu_threshold_lut.sv`, `apmu.sv` | Adaptive Prognostic Malfunction Unit |
| `rtl/algas4_core.sv` | one processing core: 2 FIR filters, FLS node and APMU |
| `rtl/dic.sv` | Differential Inclination Control unit |
| `rtl/hsdci.sv` | serial link to the opposite corner (High-Speed Differential Communications Interface) |
| `rtl/algas4_corner.sv` | one corner: 2 SIUs, the core, the DIC and the HSDCI |
| `rtl/algas4_top.sv` | the four corners and the two pair links |
| `tb/` | one self-checking testbench per module, a landing-scenario test of the APMU window (`tb_apmu_eww.sv`), and `algas4_ref_pkg.sv` (reference models) |

## Architecture

```
              corner i (own clock clk[i], reset rst_n[i])
  lidar pins -> SIU -> FIR15 --+--> FLS node -----> fls_out ---------------+
                               |                                            |
  radar pins -> SIU -> FIR15 --+--> APMU ---------> alarm, phi ------------+
                               |                                            v
                               +-------------------------------------->  DIC  <-> HSDCI <== lanes ==> opposite corner
```

The corners are numbered 0 front, 1 right, 2 back, 3 left. Corner `i` is paired with corner
`(i+2) % 4`. Front/back and right/left therefore form the two differential pairs. For each
pair, the top module crosses the data lanes and the flow-control lines.

The sensors are off-chip parts, and so is the drone's central processor. Their signals are
top-level ports:
- sensor data and strobe pins, per corner;
- the APMU window size and threshold-table write port;
- the tilt tolerance;
- the link speed.

### Sensor Interface Unit (`siu`)

A sensor drives a distance word and a strobe. The strobe is asynchronous to the corner clock.
The SIU:
- passes the strobe through two flip-flops;
- detects its rising edge;
- captures the word, which by then has been stable for at least two cycles;
- pulses `sample_valid` for one cycle.

`sample_valid` follows the strobe by 3 cycles. This pulse is the "new signal activity" that
starts the processing.

### FIR filters (`fir15`)

Each sensor stream passes through a 15-tap low-pass filter in transposed (systolic) form. The
new sample is broadcast to all taps, and partial sums move one register per sample. The
coefficients are binomial, h[k] = C(14,k):

```
1 14 91 364 1001 2002 3003 3432 3003 2002 1001 364 91 14 1
```

They sum to 2^14. The output is the accumulator shifted right by 14 with round-half-up. This
gives exactly unity DC gain, and the output keeps the input width: 11 bits for lidar, 10 for
radar. The filter advances only on `in_valid`, and its result is valid one cycle later. The
multiplies are by constants, so synthesis builds them from adders; no hard multiplier is used.

### Fuzzy logic node (`fls_core`)

The node is a Mamdani fuzzy system with two inputs (lidar and radar distance) and one output
(the landing command, 0..127).

- **Activation.** The node holds the latest sample of each sensor. It stays idle until each
  sensor has delivered at least one sample. After that, every new sample from either sensor
  fires one evaluation with the stored partner value.
- **Fuzzification.** Each input has five terms: Extremely Near, Near, Middle, Far, Extremely
  Far. Term k is a symmetric triangle peaking at k·256 distance units:
  grade = min(255, 256 − |x − k·256|), zero from 256 units away. Neighbouring terms therefore
  cross at 50%. EN is a left shoulder and EF a right shoulder. Grades are 8 bits (0..255).
  Because the ramp length is a power of two, every slope is a subtraction and a shift. Both
  inputs use the same breakpoints, since both sensors are taken to report the same distance
  unit.
- **Inference.** There are eleven rules:

  | lidar \ radar | EN | N | M | F | EF |
  |---|---|---|---|---|---|
  | **EN** | EH | H | | | |
  | **N** | H | H | | | |
  | **M** | | | M | M | |
  | **F** | | | M | L | L |
  | **EF** | | | | L | L |

  AND is the minimum of the two grades. Rules that share an output term are combined with the
  maximum. This gives one firing strength for each of Low, Middle, High and Extremely High.
- **Defuzzification.** The output terms are singletons at 10, 40, 70 and 110. The crisp output
  is Σ(w·c)/Σw, computed with a small divider. If no rule fires, the output is 0.
- **Accuracy.** Compared with the same fuzzy system evaluated in real arithmetic, the
  fixed-point datapath deviates by at most one output unit out of 110. That loss comes from the
  8-bit grades and the truncating divide, and it is well inside the ±5% that the original
  fixed-point design was reported to lose against its floating-point model.

There is one register stage per step: store, fuzzify, infer, defuzzify. A result appears
4 cycles after the sample that triggered it, and a new pair can enter every cycle.

### Adaptive Prognostic Malfunction Unit (`apmu`)

The APMU decides whether lidar and radar disagree for long enough that one of them should no
longer be trusted. It takes the filtered lidar value S1 and the filtered radar value S2
(zero-extended). It is a four-stage pipeline, and a new pair may enter every cycle.

1. **Signal subtractor and absolute error.** |ΔS| = |S1 − S2|, 11 bits.
2. **Memory storage elements.** The unit has 16 register slots arranged as a FIFO-like shift
   buffer. Each new |ΔS| enters slot 0, and the older values move one slot on. Every slot is
   a flip-flop register reset to zero.
3. **Effective discrepancy weight.** The Frame Size Activator Unit (`apmu_fsau`) holds the
   window size n and turns it into a 16-bit thermometer mask that enables slots 0..n-1.
   All 16 slots keep shifting whatever the window, and the mask only selects which slots
   enter the sum. A window widened later therefore covers real recent history at once. Φ_eff
   is the sum of the enabled slots, 15 bits wide. This is the mean absolute error
   without the divide by n, so no divider is needed. The threshold absorbs the factor n
   instead.
4. **Comparator.** The threshold table (`apmu_threshold_lut`) has one entry per window size.
   The entry for the current n is read, and the alarm is raised when Φ_eff − Φ_threshold > 0.

Adjusting the unit:
- The drone's processor writes n through `win_we`/`win_n`. Values outside 4..16 are clamped.
  A small window reacts quickly to a short burst of disagreement but raises more false
  alarms. A large window needs the disagreement to last.
- Thresholds are written through `thr_we`/`thr_addr`/`thr_data`. Entry `a` serves window size
  `a+1`. After reset the table holds 20·n, which allows an average disagreement of
  20 distance units.

Timing:
- Stages 3 and 4 recompute every cycle. A change of window or threshold therefore reaches
  `alarm` two cycles later, even without new samples.
- After a new pair, `phi_eff` and `alarm` are updated together 4 cycles after `in_valid`.
  `out_valid` marks that cycle.

### One processing core (`algas4_core`)

The core instantiates the two filters, the FLS node and the APMU:
- Each filter feeds the FLS node directly.
- The core also keeps the latest filtered value of each sensor. Whenever either filter
  produces a value, the APMU receives the current pair.

Latency from a SIU `sample_valid`:
- filtered value: +1 cycle;
- FLS command: +5 cycles;
- APMU decision: +6 cycles.

### Differential Inclination Control (`dic`)

Outbound:
- Each FLS result of the local core is packed into one 32-bit packet: core id (2), alarm (1),
  FLS command (7), filtered lidar (11), filtered radar (10), and a sequence bit that toggles
  with each packet.
- The packet is offered to the HSDCI with a valid/ready handshake.
- If the link is still busy when a newer result arrives, the waiting packet is replaced,
  because only the latest state matters. Replacements are counted in `pkts_replaced`.

Inbound:
- Packets from the opposite corner are kept as `peer`.
- Every cycle the unit computes `incl_diff` = own lidar − peer lidar (signed, 12 bits).
- It raises `incl_warn` when |incl_diff| exceeds `tolerance`, meaning the drone is tilted or
  the ground under the two corners is not level.
- If no packet arrives for `LINK_TIMEOUT` cycles (default 100000), `peer_lost` is set and
  `incl_warn` is held low. The corner then carries on alone, and the remaining pair can
  continue when the other pair fails.

### Serial link (`hsdci`)

The link is full duplex, with one data lane and one flow-control line in each direction. A
frame is:

```
idle(1)… | start(0) | 32 data bits, LSB first | even parity | stop(1) | 2 idle bit times
```

Link speed:
- The bit period is 4, 8, 16 or 32 clock cycles, chosen by `speed`.
- The setting is latched at the start of each frame.
- Both ends must use the same setting. At the fastest setting, a frame occupies 148 cycles.

Clocking and reception:
- Corners run on independent clocks. Everything from the peer passes a two-flop synchroniser.
- The receiver re-times on the start edge and samples each bit in its middle. This tolerates a
  clock mismatch of roughly 0.5% at the fastest speed, and more at the slower ones.
- A frame with a bad parity bit or a missing stop bit is dropped and counted in `rx_errors`.

Flow control:
- The receiver holds one packet.
- It drives `fc_out` high only while that buffer is empty. `fc_out` is low in reset, so a
  corner that is held in reset is never sent to.
- The transmitter starts a frame only when the synchronised `fc_in` is high. Each cycle it
  waits is counted in `fc_stalls`.

The differential pad pair that carries the lane between boards is a vendor I/O buffer. The
module drives and reads the single-ended lane that the fabric sees.

## Parameters and defaults

| Item | Default | Origin |
|---|---|---|
| lidar / radar input width | 11 / 10 bits | published resolutions |
| FIR taps | 15 | published |
| fuzzy rules | 11 | published |
| APMU slots, minimum window | 16, 4 | published |
| grade width, command width | 8, 7 bits | this design |
| membership breakpoints, output centres | k·256; 10/40/70/110 | this design |
| threshold table reset contents | 20·n | this design |
| packet width, frame, speed codes | 32 bits, see above | this design |
| `LINK_TIMEOUT` | 100000 cycles | this design |

## Where this design departs from, or goes beyond, the published description

- **Window range.** The text sets the minimum number of memory storage elements to four,
  while the parameter table also lists an adjustable window of 1 to 16 samples. This design
  follows 4..16 and clamps smaller requests.
- **Average versus sum.** The APMU compares the sum of the window (eq. 2) with a per-window
  threshold. The mean absolute error's divide by n is folded into the threshold.
- **Uncovered input combinations.** The eleven rules say nothing about one sensor reading
  near while the other reads far: lidar EN/N with radar M/F/EF, and the mirror cases. No rule
  fires there, and this design outputs 0. The published control surface instead shows a
  plateau of about 60 in those corners, so it must come from more rules, or a default, than
  the published list.
- **Second sensor.** The fuzzy surface figure labels the second input "ultrasonic", while the
  text and the rules say radar. This design uses radar.
- **Unpublished internals.** Membership shapes, output centres, FIR coefficients, packet
  format, framing, parity, flow control and the time-out are not published. The choices
  above are this design's.
- **Clocking.** The published system gives every element its own clock domain. Here each
  corner has one clock. Crossings sit at the sensor interface and at the serial link, which
  are the places where independent clocks really meet on four separate FPGAs.
- **Link speed.** The published HSDCI is said to determine the link settings, such as speed
  and flow control. Here flow control is automatic. The speed is an input that the drone's
  processor sets the same at both ends; there is no automatic speed negotiation.
- **Not built.** The interrupt and semaphore mechanisms mentioned for synchronisation are not
  built; the design uses handshakes and flow control only. The sensors, the drone's central
  processor and the LVDS pads are outside the design.

## Simulating

Every testbench is self-checking. It ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog that stops a hung run. With
Verilator 5:

```
verilator --binary --timing -Irtl -y rtl -y tb \
    rtl/algas4_pkg.sv tb/algas4_ref_pkg.sv tb/tb_apmu.sv --top-module tb_apmu
./obj_dir/Vtb_apmu
```

Replace `tb_apmu` with any of: `tb_siu`, `tb_fir15`, `tb_fls_core`, `tb_apmu_fsau`, `tb_apmu`,
`tb_apmu_eww`, `tb_hsdci`, `tb_dic`, `tb_algas4_core`, `tb_algas4_corner`, `tb_algas4_top`.

What the testbenches cover:
- **Blocks.** The block tests compare against reference models in `tb/algas4_ref_pkg.sv`:
  - the membership functions, rule evaluation and defuzzification;
  - the FIR taps from Pascal's triangle;
  - a software window sum for the APMU.
- **Cycle counts.** The tests also check the latencies given above.
- **Fuzzy accuracy.** `tb_fls_core` also bounds every output against the real-arithmetic
  version of the fuzzy system: at most 5% of the output scale.
- **Window trade-off.** `tb_apmu_eww` plays a descent from 150 to 0 distance units. It injects
  two faults: a two-sample spike of 45 units, and an 80-sample stretch where the lidar reads
  40 units high. The run is repeated with windows of 4, 10 and 16 slots at the reset
  thresholds. Results:
  - The 4-slot window flags both the spike and the failure.
  - The 10- and 16-slot windows ignore the spike.
  - The failure is detected after 2, 4 and 8 samples respectively.
  - No alarm is raised while the sensors agree.
- **Link.** `tb_hsdci` runs two ends on clocks 0.4% apart, at all four speeds. It covers
  corrupted frames and flow-control stalls.
- **Whole system.** `tb_algas4_top` runs the complete four-corner system at its default
  parameters, each corner on a different clock. It drives a simulated descent, checks every
  corner's landing command against the reference model, and makes each mechanism happen:
  - extremely-near and far commands;
  - an injected sensor discrepancy that raises the APMU alarm;
  - a tilt seen by a pair;
  - a window-size change;
  - a threshold rewrite;
  - all four link speeds;
  - packet replacement;
  - a flow-control stall;
  - a corner held in reset until its peer declares it lost.

  It counts how often each of these happened, and a mechanism that never occurs counts as a
  failure.
