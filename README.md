# A voltage-scaled INT8 accelerator for embodied-AI agents, with anomaly clearance and entropy-driven supply control

Embodied agents pair a large language model that plans ("planner") with a
smaller network that picks a low-level action every step ("controller"). Both
run as INT8 matrix multiplications on systolic arrays, and on a battery the
obvious lever is the supply voltage. Lowering it below nominal without
lowering the clock makes long paths miss timing, and the paths that miss
first are the long carry chains of the accumulator's high-order bits. The
resulting errors are rare but huge.

This design rests on three observations, and each one is handled at a
different layer:

1. **Circuit layer: anomaly detection and clearance (AD).** A correct GEMM
   result almost never uses the top bits of the 24-bit accumulator, because
   it has to survive re-quantisation to INT8. So any result whose magnitude
   is above a known bound must be a timing error. Each array column ends in
   a comparator and a multiplexer that replace such a result with zero.
   Zero is the most common value, and the network tolerates it far better
   than a value ten thousand times too large.
2. **Model layer: weight rotation.** The planner's activations have a few huge
   outlier channels. These outliers feed the normalisation statistics, which
   makes the planner fragile. Folding a Hadamard rotation into the weights
   offline spreads the outliers out, and that also lets the AD bound be set
   tighter. **It needs no hardware**: the rotated weights are just different
   numbers loaded into the same arrays.
3. **Application layer: autonomy-adaptive voltage scaling (VS).** The
   controller is resilient in some steps and not in others. How confident its
   action distribution is, measured as the entropy of the action logits, tells
   the two apart: low entropy means a critical step that needs margin, and high
   entropy means the step can run at a lower voltage. A small predictor
   network estimates that entropy before each step. Every 5 steps the
   estimate selects a supply voltage from a staircase policy, and a digital
   LDO moves the controller arrays to it.

The RTL here covers the hardware of layers 1 and 3 and the array fabric they
sit in. Layer 2 has no hardware.

## Chip organisation

```
                 step_start, entropy_pred, mode            (from the scheduler)
                               |
                        +--------------+   vtarget   +------------------------+
                        | vs_controller|------------>| ldo_model x 16 slices  |--> VDD of the
                        |  + entropy_  |             | 0.60-0.90 V, 10 mV,    |    16 scaled arrays
                        |  voltage_map |             | 18 ns per step         |
                        +--------------+             +------------------------+

  arrays 0-1  (nominal 0.9 V, entropy predictor)       arrays 2-17 (scaled: planner, controller)
  +-------------------------------+                    +-------------------------------+
  | 128 x 128 PEs, INT8 x INT8    |  x vectors enter   | same                          |
  | -> 24-bit, weight-stationary  |  from the left,    |                               |
  | row of 128 ad_unit            |  sums leave below  |                               |
  +-------------------------------+                    +-------------------------------+
            ^        |                                             ^        |
   operand / result streams (top-level ports: no buffer-to-array datapath is specified)

  142 x sram_buffer (512 KB each, 71 MB)  <-- buffer port (for the off-chip HBM2 loader)
```

`create_top` instantiates all of this with the default sizes. These are 18
arrays of 128 x 128: two named for the entropy predictor and sixteen for the
controller in the reference layout. It also instantiates 16 LDO slices and 142
buffer banks. The predictor arrays stay at nominal voltage, so the prediction
that steers the voltage is itself free of timing errors. The other arrays
share one scaled supply.

At 500 MHz (2 ns clock), 18 arrays x 16,384 MACs give 1.47 x 10^14
MACs per second. That matches the quoted peak of 144 "TOPS" only if one MAC
is counted as one operation.

## The systolic array and its AD row (`systolic_array`, `ad_unit`)

Every PE holds one signed 8-bit weight. It multiplies the input arriving from
its left by that weight, adds the product to the partial sum arriving from
above, and registers both onward. For an input vector `x` (element `r` enters
row `r`), column `c` delivers

    y[c] = sum_r x[r] * w[r][c]      (24-bit, two's complement, wrapping)

The array accepts one whole input vector per cycle and returns one whole
output vector per cycle. It skews the inputs internally (row `r` delayed `r`
cycles) and de-skews the outputs (column `c` delayed `N-1-c` cycles). A vector
presented with `x_valid` in cycle *t* appears with `y_valid` in cycle
*t + 2N - 1*, which is 255 cycles at N = 128. Vectors may follow each other
back to back.

Weights are loaded one PE row per cycle (`w_we`, `w_row`, `w_data`) and must
not change while vectors are in flight. An assertion checks this.

Below the last PE row, each column goes through an `ad_unit`:

    anomaly = (y > bound) || (y < -bound)
    out     = anomaly ? 0 : y

The result is registered, and the per-column `anomaly` flags come out
alongside it. `ad_bound` is an input for each array, because the valid range
depends on the layer. Software sets it to 127 times the layer's output scale,
expressed in accumulator units: anything above that could not have been
re-quantised to INT8 anyway. A large bound (2^23 - 1) turns the clearance off.
The range is treated as symmetric. The true INT8 range reaches -128, so a
result in the last step below -127 times the scale is also cleared.

Within the bound, errors pass through. AD cannot correct a wrong value; it only
removes the ones large enough to destroy a layer's statistics. Weight rotation
narrows the valid range, which makes the same comparator catch more.

## Voltage scaling (`vs_controller`, `entropy_voltage_map`, `ldo_model`)

**Encodings.** A supply voltage is a 5-bit code counting 10 mV above 0.60 V:
code 30 is the 0.90 V nominal, and the LDO's range is codes 0-30. An entropy
is unsigned Q4.8. The largest possible action-logit entropy of the modelled
controller is about 13.1, and typical values are below 4.

**Policy.** `entropy_voltage_map` is a four-level staircase with three
ascending thresholds. An entropy at or above threshold *k* selects at least
level *k+1*, and each level has its own voltage code. Reset loads the policy
that was chosen as the best of those evaluated:

| predicted entropy | supply  | code |
|-------------------|---------|------|
| below 1.6         | 0.85 V  | 25   |
| 1.6 to below 2.0  | 0.82 V  | 22   |
| 2.0 to below 2.4  | 0.80 V  | 20   |
| 2.4 and above     | 0.78 V  | 18   |

The published policy is given only as sampled points: entropy 0.5, 1.0,
1.2, 1.4 -> 0.85; 1.6, 1.8 -> 0.82; 2.0, 2.2 -> 0.80; 2.4, 2.6, 2.8 -> 0.78.
This design places each step at the first sample of the new level. In Q4.8 the
thresholds are 410, 512 and 614. Other policies with up to four levels can be
written at run time (`policy_we`, `policy_in`). A two-level policy repeats
codes.

Even the most critical steps run below nominal. The policy's highest level is
0.85 V, because AD already absorbs the large errors there.

**Update interval.** In controller mode, each `step_start` brings the
prediction for the step about to run. The target is recomputed on the first
step after the mode is entered and on every `UPDATE_INTERVAL`-th step after
that (5 by default). Steps in between keep the target. Updating every step
would follow the entropy slightly better, but costs more switching. Intervals
of 10 or 20 steps were found to react too late.

**Planner mode.** While the planner runs on the scaled arrays, the target is a
fixed `planner_vcode` set by software: the lowest voltage at which the rotated
planner with AD still plans correctly. The mode register and this fixed
voltage are this design's way of sharing one supply domain between the two
networks.

**LDO.** `ldo_model` is a behavioural model of one slice of the distributed
digital LDO. It models the regulator only by its specification: the output
moves one 10 mV step toward the target every `LDO_STEP_CYCLES` = 9 clocks.
That is 18 ns per step, or 90 ns per 50 mV. The full 0.90 -> 0.60 V swing
therefore takes 540 ns, the quoted worst-case switching latency. This is
negligible next to a controller inference of about 1 ms, so the arrays never
stall for a voltage change and the clock frequency is never changed. The model
leaves out overshoot, ripple and load-current effects; a real LDO shows a
small overshoot after an upward step. One slice per scaled array is an
assumption: the total LDO area divided by the area of one slice gives roughly
that number.

## On-chip buffers (`sram_buffer`)

There are 142 banks of 512 KB. Each bank is modelled as 4096 words of 1024
bits, one 128-element INT8 vector per word, with a single port and a
one-cycle read. They hold a controller's whole weight set (61 MB for the
reference controller), so controller steps never touch off-chip memory. The
planner's weights (about 7.9 GB) have to be streamed from off-chip HBM2 for
every inference. The word width, port count and latency are this design's
choices. A memory compiler macro would replace the array.

## What is outside the RTL

The following parts have no specification to build from. Their signals are
ports of `create_top`:

- **Buffer-to-array datapath and scheduler.** Nothing is said about how
  operands move from the banks to the arrays, or how planner, predictor and
  controller are sequenced. Each array's `arr_w_*`, `arr_x_*` and `arr_y_*`
  streams, the buffer port `buf_*`, and the scheduler controls (`mode`,
  `step_start`, `entropy_pred`, `planner_vcode`, `policy_*`) are top-level
  ports. The end-to-end testbench plays these roles.
- **Re-quantiser.** Results leave as 24-bit values after clearance.
- **Entropy predictor network.** It is software on arrays 0-1: a three-layer
  CNN on the image and a 512->64 linear layer on the prompt embedding, fused
  by 128->128->1 linear layers. Its scalar output, converted to Q4.8, is the
  `entropy_pred` input.
- **HBM2 and its PHY.**
- **Error behaviour.** The timing errors themselves are not modelled. In
  simulation the arrays compute exactly, and anomalies are produced by setting
  a tight bound.

## Sizing against the evaluated workloads

| workload | weights | on chip (71 MB)? | compute at 1.47e14 MAC/s |
|---|---|---|---|
| reference controller (61 M params, 102 G MACs) | 61 MB | yes | 0.69 ms (0.94 ms reported) |
| RT-1 controller (35 M, 78 G ops) | 35 MB | yes | 0.53 ms |
| Octo controller (27 M, 76 G ops) | 27 MB | yes | 0.52 ms |
| entropy predictor (0.055 M, 43 M MACs) | 55 KB | yes | 2.6 us on 2 arrays |
| 8 B planner (5,344 G ops) | 7.9 GB | no, streamed | 36 ms |
| OpenVLA planner (4,595 G ops) | 6.9 GB | no, streamed | 31 ms |
| RoboFlamingo planner (2,411 G ops) | 2.6 GB | no, streamed | 16 ms |

The workload sizes are the published model statistics. The quoted planner
latency of 11.2 ms is below what the 5.3 T operations would take even at
peak, so one of those published figures is inconsistent.

## How far to trust it

Verified in simulation:
- Bit-exact GEMM results against a reference, including clearance at, just
  above and just below the bound.
- The 2N-1 cycle latency.
- The Policy C mapping at every Q4.8 entropy value.
- The 5-step update rhythm across mode changes.
- LDO slew (540 ns full swing, 90 ns per 50 mV).
- Buffer reads and writes.
- One full-size run of the top: 18 arrays of 128 x 128, 16 LDO slices and
  142 banks, through a complete controller step.

Every testbench was also run against a deliberately broken copy of its module
and fails there.

These are this design's choices and could differ from the original chip:
- The symmetric AD range.
- The registered AD output.
- The internal skew and de-skew of the array.
- The weight-load port.
- The voltage code and the entropy format.
- Where the steps of the policy staircase fall between the published sample
  points.
- The planner mode.
- One LDO slice per array.
- The buffer organisation.

## Simulating

Each module is one file in `rtl/`. `create_pkg.sv` holds the shared types and
the reset policy, and must be compiled first. Each testbench in `tb/` prints
`TB_RESULT checks=N failures=M` and finishes. For example:

    verilator --binary --timing --assert -Irtl --top-module create_top_tb \
        rtl/create_pkg.sv rtl/*.sv tb/create_top_tb.sv
    ./obj_dir/Vcreate_top_tb

| testbench | what it covers |
|---|---|
| `ad_unit_tb` | comparator/multiplexer corners and 2,000 random values |
| `systolic_array_tb` | 8 x 8 array, 40 back-to-back vectors, latency |
| `entropy_voltage_map_tb` | every entropy under Policy C, a rewritten two-level policy |
| `vs_controller_tb` | planner and controller phases, update interval, policy write |
| `ldo_model_tb` | ramp times and single-step slew |
| `sram_buffer_tb` | random write and read-back |
| `create_top_tb` | reduced top (8 x 8 arrays, 2 + 3 arrays, 6 banks): predictor runs, planner phase, 23 controller steps, mode switches, policy rewrite; counts each mechanism |
| `create_top_full_tb` | default-size top, one controller step |
| `predictor_fusion_layer_tb` | one 128 x 128 array running the entropy predictor's fusion MLP sizes (128->128 with AD, ReLU and re-quantisation in the bench, then 128->1) on 32 frames of random data |

The full-size top is large: 295 k PEs and 71 MB of buffer arrays. Building
its testbench with Verilator takes about six minutes with four compile jobs
and a little over 1 GB of memory. Simulating one controller step then takes
about 20 seconds.
Reduce `N`, `N_CTRL_ARRAYS` and `BANK_DEPTH` for quick experiments: every size
is a parameter.
