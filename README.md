# ALGAS3: landing-guidance signal processing for a four-corner drone

A vertical-take-off drone that lands by itself has to know, continuously and
reliably, how far each corner of its underside is from the ground. ALGAS3
(Autonomous Landing Guidance Assistance System, third version) does this with
one small processing core per corner. Each corner has two distance sensors
that work in different parts of the spectrum, an 840 nm lidar and a 24 GHz
radar, so that jamming or failure of one band still leaves a usable reading.
Each core:

* cleans both sensor streams with a 15-tap systolic moving-average FIR filter;
* watches how far the two cleaned readings disagree, frame by frame, and
  raises an early warning when they drift apart (the *Prognostic Malfunction
  Unit*, PMU): one sensor is failing, or someone is interfering with its band;
* evaluates a programmable table of *flight rules* (IF-THEN conditions such as
  "IF landing AND all sensors very noisy THEN stop landing, hover, hand over
  to manual control") for the fuzzy-logic node that steers the drone.

Cores on opposite corners (front/back, left/right) form *differential pairs*:
their readings are compared all the time and must agree within a preset margin.

This RTL covers the digital signal path of the system: the filters, the PMU,
the flight-rules unit, the pair checks, and the wiring of four cores. The fuzzy
inference node itself, the inter-core link, the inclination controller, the
sensor interfaces and the sensors are outside it. Their signals are ports of
the top level (see "What is not here").

## Structure

```
algas3_system                          four corners + two differential pairs
 ├─ algas3_core  x4  (0 front, 1 back, 2 left, 3 right)
 │   ├─ systolic_fir  (lidar)          15-tap moving average
 │   │   ├─ fir_ctrl                   signal & clock control unit
 │   │   └─ fir_pe  x15                coefficient reg + multiplier + AAC
 │   │       └─ aac                    delay element + asymmetric unsigned adder
 │   ├─ systolic_fir  (radar)
 │   ├─ pmu                            16-sample frame disagreement monitor
 │   └─ fru                            flight-rule table
 └─ pair_check  x2                     front/back, left/right
```

`algas3_pkg` holds the shared sizes, the FIR control bundle type
`fir_ctrl_t`, the flight-rule record `fru_rule_t` and the names of the rule
condition and action bits.

## The systolic FIR filter

This is the part of the design the source describes in the most detail, and
the part that is easiest to misread.

The filter is in *transposed* form. Each accepted sample `x[n]` is broadcast to
all 15 processing elements (PEs) at once. PE `k` multiplies it by its
coefficient `c_k` and adds the partial sum that PE `k+1` produced on the
previous sample, which it holds in its delay element. PE 14, the far end of the
chain, adds to zero. PE 0's sum is therefore

    y[n] = c_0 x[n] + c_1 x[n-1] + ... + c_14 x[n-14]

and is registered as `data_out`. Partial sums move one PE towards the output
per sample, while the input does not move at all. So no adder tree is needed
and every PE has the same short path: one multiply and one add.

Each PE's *AAC* (adder and accumulate) unit is a delay register followed by an
*asymmetric unsigned adder*: the product is narrower than the running sum and
is zero-extended into it. Widths are chosen "by need":

| quantity             | width | reason |
|----------------------|-------|--------|
| input sample `v`     | 10    | this design's choice |
| coefficient `z`      | 1     | a moving average needs only unit weights |
| product `q = v+z`    | 11    | |
| running sum / output `m` | 14 | the source's simulation shows a 14-bit output; 15 x 1023 = 15345 fits |

With the default unit coefficients `data_out` is the **sum** of the last 15
samples: the moving average times 15. It is not divided. Coefficients can be
rewritten (`coef_we`, `coef_addr`, `coef_data`; `coef_rd` reads back), for
example to shorten or thin out the window. Two things to know about this:

* the sum wraps modulo 2^14. Keep `sum(c_k) * (2^V_BITS - 1) < 2^M_BITS` when
  you widen `Z_BITS`;
* the 14 outputs that follow a coefficient change mix old and new
  coefficients, because those partial sums are already in the chain.

**Timing.** One sample per clock while `en = 1`. Clocks with `en = 0` freeze
the chain. `data_out` and `data_valid` change on the clock edge that accepts the
sample. `data_valid` is `en` delayed by one clock. `rst` is synchronous and
active high. It clears the chain and the output and resets every coefficient
to 1.

The *signal & clock control unit* (`fir_ctrl`) does the filter's
bookkeeping. It turns `rst`/`en` into the clear/enable bundle shared by all PEs,
decodes a coefficient write into a one-hot load strobe, and delays `en` into
`data_valid`. Its `ctrl.clr` output is `rst` passed straight through. That is
deliberate: it is one of the two signals of the bundle that every PE receives.

## Prognostic Malfunction Unit

The PMU compares the two *filtered* readings of its corner. For every sample
pair it forms `|lidar - radar|` and adds it to an 18-bit accumulator. After 16
pairs (a fixed, non-overlapping frame) it publishes the mean (`sum >> 4`) on
`pmu_mean`. It sets `pmu_alarm` if that mean is above `pmu_threshold` and
clears it otherwise, and pulses `pmu_frame_done` for one clock. The alarm holds
until the next frame ends.

The source fixes only the inputs and the 16-sample frame. The statistic (mean
absolute difference) and the threshold test are the simplest way to turn "the
difference between the two signals over a 16-sample frame" into a warning. The
unit cannot tell a failed sensor from a jammed one, so there is a single alarm.
Latency: the frame result appears one clock after the 16th filtered pair, which
is two clocks after the 16th raw sample pair enters the core.

## Flight Rules Unit

`fru` holds 8 rules. Each rule has a `valid` bit, a `care` mask and a `match`
value over 8 condition bits, and an 8-bit action vector. A rule fires when
`(cond & care) == (match & care)`. Every clock all rules are evaluated in
parallel. `fru_hit` shows which rules fired and `fru_act` is the OR of their
actions. Both are registered, one clock after `fls_cond`.

The condition bits are the crisp truth values of fuzzy statements that the
fuzzy node supplies. The action bits are commands returned to it. Both are
named in `algas3_pkg` after the two example rules that the table holds after
reset:

| slot | IF | THEN |
|------|----|------|
| 0 | NOT landing, beacon weak, moving away from beacon | reduce speed, range-limit error |
| 1 | landing, optical AND microwave AND UWB sensors very noisy | stop landing, hover, sensor error, manual control |

Slots 2-7 are empty after reset. Write a rule with `rule_we`, `rule_addr` and
`rule_wdata`. It takes effect on the next clock.

## Differential pairs

`pair_check` compares the readings of two opposite cores separately per sensor
type: lidar with lidar, radar with radar. It sets `pair_mismatch[p][0]` (lidar)
or `[1]` (radar) when the absolute difference exceeds `pair_margin`.
`pair_delta` gives the differences. Pair 0 is front/back and pair 1 is
left/right. The check runs on clocks where both cores present a new filtered
sample, so the four cores are expected to sample in step. A tilted drone or a
failing corner both show up here. The PMU, in contrast, sees disagreement
*within* a corner.

## Top-level interface (`algas3_system`)

All per-core signals are unpacked arrays indexed by corner. The programming
buses `coef_addr`, `coef_data`, `rule_addr` and `rule_wdata` are shared;
`coef_we[c][s]` (s = 0 lidar, 1 radar) and `rule_we[c]` select the target.
`pmu_threshold` and `pair_margin` are shared.

| group | signals |
|-------|---------|
| from the sensor interfaces | `sample_en`, `lidar_data`, `radar_data` |
| to the fuzzy node | `lidar_filt`, `radar_filt`, `filt_valid`, `fru_act`, `fru_hit` |
| from the fuzzy node | `fls_cond` |
| to the inclination controller | `pmu_alarm`, `pmu_mean`, `pmu_frame_done`, `pair_mismatch`, `pair_delta` |
| configuration | `coef_*`, `rule_*`, `pmu_threshold`, `pair_margin` |

Default parameters: `TAPS = 15`, `V_BITS = 10`, `Z_BITS = 1`, `M_BITS = 14`,
`RULES = 8`. At these defaults one system holds about 2,000 flip-flop bits plus
800 bits of flight-rule tables.

## What is not here

* **Fuzzy-logic processing node.** It fuses the two filtered readings into
  actuator commands and is steered by the flight rules. It comes from earlier
  work, and its membership functions, rule base and defuzzification are not
  published with this design, so none is invented here. Its inputs and outputs
  are top-level ports.
* **High-speed differential communication interface** between cores. Within
  one `algas3_system` the cores are simply wired together.
* **Differential inclination control unit, sensor interface units, sensors.**
  Only their connections are known.

## Where this departs from, or goes beyond, the source

* The source's figure marks the adder of the AAC as clocked as well as the
  delay element. A register in both would space the taps two samples apart.
  Here each PE has one register (the delay element), plus one output register
  for the whole filter.
* The source mentions storing coefficients in block RAM in one place, and
  says elsewhere that no block RAM is used. The coefficients here are
  registers, as drawn in its PE diagram.
* The fuzzy node's crisp inputs are 11 and 10 bits in the source. The filters
  here output 14-bit sums. How the two are matched (scaling, truncation) is not
  described and is left to the fuzzy node.
* Sensor width (10 bits), coefficient width (1 bit), reset behaviour, the
  valid/enable handshake, programming ports, the PMU statistic, the rule-table
  encoding and its size, and the per-sensor pair comparison are this design's
  choices.
* Clock rate (about 250-280 MHz on a mid-range FPGA in the source) and
  throughput figures have not been reproduced.

## Verification

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `aac_tb` | delay element and adder, including the wrap-around |
| `fir_ctrl_tb` | control bundle, one-hot coefficient strobes, valid latency |
| `fir_pe_tb` | coefficient register and multiplier, with 3-bit coefficients |
| `systolic_fir_tb` | a noisy 50 m to 9 m landing descent with two bumps, idle clocks, then random coefficients; compared with a direct-form sum over the sample history; one-clock latency |
| `pmu_tb` | 200 frames of healthy, drifting and borderline pairs; mean, alarm set/clear, frame pulse timing |
| `fru_tb` | both reset rules on all 256 condition patterns, then random rule tables |
| `pair_check_tb` | random agreeing/disagreeing readings |
| `algas3_core_tb` | a descent with periods of jammed radar, a coefficient change, random rule conditions |
| `algas3_system_tb` | end to end at default sizes: four corners, a tilt, a jammed radar, recovery, mid-run coefficient and rule writes |

`tb/algas3_ref_pkg.sv` is a clock-by-clock reference model of one core. The
core and system testbenches use it. The system testbench counts each mechanism
and fails if one never happens: filtering, idle clocks, coefficient and rule
reprogramming, PMU alarm raised and cleared, lidar and radar pair mismatch,
and each flight rule firing.

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/algas3_pkg.sv rtl/aac.sv rtl/fir_ctrl.sv rtl/fir_pe.sv rtl/systolic_fir.sv \
  rtl/pmu.sv rtl/fru.sv rtl/pair_check.sv rtl/algas3_core.sv rtl/algas3_system.sv \
  tb/algas3_ref_pkg.sv tb/algas3_system_tb.sv --top-module algas3_system_tb
./obj_dir/Valgas3_system_tb
```

The testbenches read no files. The end-to-end run takes well under a second.
