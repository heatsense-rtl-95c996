# HeatSense thermal anomaly detector: RTL for one NoC router

Dynamic thermal management in a many-core chip trusts the temperature sensors
of its tiles. A hardware Trojan inside a router can falsify what its sensor
reports. It can report low for a while and then high by the same amount, which
keeps the long-run average looking normal but delays cooling. Or it can report
high and then low, which causes needless throttling. The HeatSense scheme
(Hasanzadeh, Khalil, Sturton, Patooghy) catches such manipulation next to the
router, with almost no arithmetic:

* watch three features of the router: its congestion (F15), its temperature
  (F16) and the average of its last two temperature samples (F17);
* keep a running mean of each feature with a weighted moving average whose
  weights are 1 or 3, so the update needs only additions and shifts;
* replace the standard deviation by `sigma_n = mean >> n` and flag a feature
  whose value leaves the band `mean +/- sigma_n`;
* the number of flagged features (0..3) is the anomaly level, and the router
  answers by shutting 0, 4, 5 or all 6 of its ports.

This repository holds synthesizable SystemVerilog for that detector and its
port shutdown action. Self-checking testbenches for every block, for the whole
detector and for the two Trojan behaviours come with it. The router itself
(buffers, routing, allocation, crossbar), the temperature sensor and the
congestion measurement are not part of it. They meet the detector at its
ports.

## How the detection works

### Features

| index | feature | source | range |
|---|---|---|---|
| 0 | F15, router congestion | `congestion` input | 0..100 % |
| 1 | F16, router temperature | `temperature` input | 0..90 degC |
| 2 | F17, 2-sample temperature average | `(T_now + T_prev) >> 1`, computed in `features_log` | 0..90 degC |

All three are unsigned fixed-point numbers with 8 integer and 8 fractional
bits (Q8.8). Fractional bits are needed because the narrowest band is tight:
for a 60 degC reading, `sigma_7 = 60/128`, which is about 0.47 degC. With whole
degrees it would be zero.

### The moving average (`wma_calc`)

Each feature has its own averager:

    WMA_new = (w1 * x + w0 * WMA_old) / (w1 + w0)

A value gets weight 3 if it lies in the band `[t1, t2)` and weight 1 otherwise.
`w1` belongs to the new observation `x` and `w0` to the old mean. The divisor
is 2, 4 or 6. Division by 6 only happens when both weights are 3, and then the
result is just `(x + WMA_old)/2`. So the four cases reduce to:

| w1 | w0 | update |
|---|---|---|
| equal | equal | `(x + WMA_old) >> 1` |
| 3 | 1 | `(3x + WMA_old) >> 2` |
| 1 | 3 | `(x + 3*WMA_old) >> 2` |

All results are truncated. A value inside the band moves the mean faster than
one outside it, and the band edges `t1` and `t2` are inputs, set per feature.
The first sample after reset loads the mean directly. With weights this
large the mean follows a sustained change within a few samples. The detector
therefore reacts to steps in the reported values, such as the switch from
credit phase to exploitation phase, more than to a constant offset.

### Thresholds (`sigma_tuning`, `thresholds_determination`, `threshold_registers`)

    sigma_n = mean >> n,   upper = mean + sigma_n,   lower = mean - sigma_n,   n = 1..7

`sigma_tuning` holds `n`. It resets to 5 and can be rewritten at run time.
Writes outside 1..7 are clamped. The published evaluation found n = 1..4 too
wide to flag anything, and used n = 5, 6 and 7. Larger n gives a narrower band,
more detections and more false alarms. The six thresholds (upper and lower for
F15, F16 and F17) sit in registers. Until the first sample they hold the widest
possible window, so nothing is flagged before a mean exists.

### Anomaly level and the shutdown (`anomaly_determination`, `anomaly_level_register`, `port_shutdown_decision`)

Each feature is classified as Upper (above its upper threshold), Lower (below
its lower threshold) or Normal. A value exactly on a threshold is Normal. The
anomaly level is the number of features that are not Normal. The level
register moves straight to the new level from any state, so all twelve
transitions between Normal, Level 1, Level 2 and Level 3 are possible:

| state | ports shut | ports open | traffic capacity |
|---|---|---|---|
| Normal | 0 | 6 | 100 % |
| Level 1 | 4, at random | 2 | 33 % |
| Level 2 | 5, at random | 1 | 17 % |
| Level 3 | 6 | 0 | router isolated |

The random choice is made only when the level changes, and the mask is then
held. This stops an ongoing anomaly from making ports flap every sample. The
choice comes from a free-running 16-bit LFSR (`x^16+x^14+x^13+x^11+1`). Two
8-bit slices `r_a` and `r_b` of it give the open ports: `a = r_a mod 6` and,
at Level 1, `b = (a + 1 + r_b mod 5) mod 6`, which is never equal to `a`. The
testbench checks that all 15 two-port masks and all 6 one-port masks occur.

### Applying the shutdown (`input_port_gate`)

The mask acts between each incoming link and its input buffer. An open port
passes flits and back-pressure through unchanged. A shut port keeps its link
ready, so the upstream router never stalls, and it discards every flit offered
to it. Each discarded flit is counted in a per-port saturating counter, which
gives the packet loss caused by the shutdown directly.

## Timing

`heatsense_top` runs one evaluation per accepted sample:

| cycle | what happens |
|---|---|
| 0 | `sample_valid && sample_ready`: congestion and temperature are taken |
| 1 | the features log holds F15/F16/F17; the three averagers update |
| 2 | the new means are in; thresholds are computed and loaded into the registers |
| 3 | `eval_valid`: `feat_status` and `anomaly_level_now` show this sample's result |
| 4 | `anomaly_state` holds the level; if it changed, a new mask is drawn |
| 5 | `port_open` shows the new mask; the gate applies it combinationally |

Each feature is compared with thresholds that already include its own sample
in the mean. `sample_ready` is low in cycles 1 and 2, so the log cannot change
while an evaluation still reads it. The detector therefore takes at most one
sample every three cycles. Real temperature sampling is far slower than that.

## Interface of `heatsense_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `sample_valid` / `sample_ready` | in / out | 1 | feature sample handshake |
| `congestion`, `temperature` | in | 16 | F15 in %, F16 in degC, Q8.8 |
| `sigma_we`, `sigma_n_cfg` | in | 1, 3 | write the shift `n` |
| `wma_t1`, `wma_t2` | in | 3 x 16 | weight-3 band of each feature (index 0 F15, 1 F16, 2 F17) |
| `in_valid`, `in_flit`, `in_ready` | in, in, out | 6, 6 x FLIT_W, 6 | incoming links |
| `buf_valid`, `buf_flit`, `buf_ready` | out, out, in | 6, 6 x FLIT_W, 6 | to the input buffers |
| `features`, `means`, `sigma_n`, `thresholds` | out | | logged features, averages, `n`, the six thresholds |
| `feat_status`, `eval_valid`, `anomaly_level_now` | out | 3 x 2, 1, 2 | result of the latest evaluation |
| `anomaly_state`, `port_open` | out | 2, 6 | level register and port mask (1 = open) |
| `drop_count` | out | 6 x CNT_W | flits dropped on each shut port |

Parameters: `FLIT_W` (32), `CNT_W` (32) and `SEED` (LFSR seed, `16'hACE1`). The
package `heatsense_pkg` holds the feature format, the number of features and
ports, the limits of `n`, and the types (`feat_vec_t`, `thresh_t`,
`feat_status_e`, `anomaly_level_e`). There are two run-time assertions. One
checks that the number of open ports matches the level. The other checks that
no sample is taken while an evaluation is in flight.

## What follows the published scheme and what is this design's own

Taken from the scheme: the three features and the six threshold registers;
the update formula and the 1/3 weights of the moving average; `sigma_n` as a
right shift with `n` from 1 to 7; thresholds at `mean +/- sigma_n`; the level
as the count of features out of range; the 4, 5 and 6 shut ports at random;
the order of the blocks.

Chosen here, because the description leaves it open:

* the Q8.8 number format and the 16-bit features;
* computing F17 in hardware from two consecutive samples;
* which value selects `w0` (the old mean), the weight for values at or above
  `t2` (1), truncation, and loading the first sample as the mean;
* `n` as a writable register with clamping, reset to 5, shared by all three
  features;
* a value on a threshold counts as Normal;
* the LFSR, the selection rule, and keeping the mask while the level holds;
* dropping flits at shut ports rather than back-pressuring them;
* the pipeline, the valid/ready sample interface and the reset values.

Not included:

* the router's own datapath;
* the sensor and the congestion measurement;
* the exact `mean +/- K*std` thresholding, which is only a baseline it is
  compared with;
* feature sets other than F15/F16/F17. Sets using the running temperature
  average, the event cycle or packet fields would need other inputs in the
  features log.

How `t1` and `t2` should be set is not published. The testbenches use
50..90 % for congestion and 60..85 degC for the temperatures.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
with a reference written directly from the equations, using real integer
divisions where the RTL uses shifts. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_heatsense_top` runs the whole detector at its default parameters. It
  uses 4000 samples of a noisy 60 degC / 30 % trace with both Trojan
  behaviours and congestion bursts. A reference model predicts the logged
  features, means, thresholds and level of every sample. The test also checks
  the 5-cycle latency to the port mask, the number of open ports, the drop
  counters, a switch from `sigma_5` to `sigma_7`, and the one-sample-in-three
  back-pressure. It fails if any of these mechanisms never occurred: each
  level, Upper and Lower flags, weight-3 averaging, back-pressure, the sigma
  switch, dropped flits, varied Level-1 masks.
* `tb_attack_workloads` replays one trace with both Trojan behaviours under
  `sigma_5`, `sigma_6` and `sigma_7`. It checks that the levels nest
  (`sigma_7` >= `sigma_6` >= `sigma_5` for every sample) and that every phase
  edge of 4 degC or more is flagged. It also prints the flagged attack and
  clean samples for each setting. The published accuracy figures come from
  network-level simulations of real benchmarks and are not reproduced here.

To run one of them with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/heatsense_pkg.sv tb/tb_heatsense_top.sv --top-module tb_heatsense_top
    ./obj_dir/Vtb_heatsense_top

Each testbench finishes in well under a second.
