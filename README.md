# A weightless controller in logic: SystemVerilog for a learned LUT-network control policy

A Differentiable Weightless Controller (DWC) is a control policy for
continuous control, for example a walking robot's joint torques given its
sensor readings. It is built from lookup tables instead of multiply-accumulate
neurons. It is trained with ordinary gradient-based reinforcement learning,
using a differentiable relaxation. After training, every part of it is a
constant: comparison thresholds, LUT truth tables, the wiring between LUTs, and
one small table per action. The whole policy then compiles into a circuit with
no multipliers. It produces one action vector per clock, two to four clocks
after the readings arrive. It fits in a few thousand FPGA LUTs.

This repository holds synthesizable SystemVerilog for that inference circuit.
It follows the architecture of Kresse and Lampert, "Differentiable Weightless
Controllers: Learning Logic Circuits for Continuous Control". It also includes
self-checking testbenches and a bit-exact behavioural model. It does not hold
training code or a trained model (see "Where the network comes from").

## The datapath

```
 obs[0..D_IN-1]            b(0)                b(1)               b(2)            s_d             act[d]
 signed B_OBS-bit  ──►  thermometer  ──►  LUT layer 1  ──►  LUT layer 2  ──►  popcount  ──►  action table
 sensor words          (B bits/chan)      (D_L LUTs,        (G*D_ACT LUTs,    per group      (|G|+1 words,
                       comparators        k inputs each)    padded)           of G bits      one per action)
```

1. **Thermometer encoding** (`dwc_thermometer`, one per channel). Each reading
   is compared with B = 63 constant thresholds. Bit i is 1 when the reading is
   at or above threshold i, so the code is a run of ones from bit 0 upward.
2. **LUT layers** (`dwc_lut_layer`). Each LUT takes k = 6 bits from the
   previous layer and outputs one bit of its 64-entry truth table. The choice
   of the 6 bits is fixed wiring.
3. **Group popcount** (`dwc_popcount`). The last layer's bits are split into
   one group of G bits per action dimension. The number of ones in a group is
   that action's score s_d, an integer in 0..G.
4. **Action table** (`dwc_action_ram`). s_d addresses a (G+1)-word memory. The
   memory returns the actuator command for that score.

`dwc_core` holds steps 2 and 3 and the pipeline registers.
`dwc_controller` is the top level and wires all four steps together.

## Thermometer thresholds and what is folded into them

This is the least obvious part of the design.

During training each observation x_j is normalised with a running mean and
standard deviation, ẑ = (x_j − μ_j)/σ_j, clipped to [−10, 10], and encoded
with the same B thresholds for every channel. For odd B the thresholds sit at
stretched Gaussian quantiles:

* Take the quantiles q = 1/B, 2/B, …, (B−1)/B.
* Add q = 1/2, which lands between two of them because B is odd.
* Map them through the inverse normal CDF Φ⁻¹.
* Stretch by s = 10 / |Φ⁻¹(1/B)|.

The outermost thresholds then land on ±10 and the inserted one on exactly 0.
Thresholds are dense near 0 and sparse in the tails. For B = 63, index 0 is
−10, index 31 is 0 and index 62 is +10.

On the device, the sensor delivers integers. The tool flow models them as
symmetric quantisation with Q_max = 2^(b_obs−1) − 1 and scale Q_S = x_max/Q_max.
All of μ, σ and Q_S are constants after training. The normalisation therefore
disappears into per-channel integer thresholds:

    τ*_{i,j} = clip( floor( (τ_i · σ_j + μ_j) / Q_S,j ), −Q_max, Q_max )

The encoder is just B comparisons `obs >= τ*`. The clip to [−10, 10] needs no
logic: a reading beyond the outermost threshold already gives all zeros or all
ones.

There is one consequence of the clip to ±Q_max. When a threshold falls outside
the sensor range it is pinned to −Q_max or +Q_max. A reading of −Q_max then
still sets bit 0. This is what the formula gives, and the RTL keeps it.

`dwc_pkg::therm_tau` computes the thresholds while the design elaborates. It
evaluates Φ⁻¹ with Acklam's rational approximation, whose relative error is
about 1e‑9. `dwc_pkg::therm_threshold` applies the folding formula. The
thermometer testbench recomputes every threshold a different way, by bisection
on an erfc approximation, and sweeps the encoders over their whole input range.

## The LUT network

Layer l has D_l LUTs, 1024 in the main configuration. LUT i of layer l forms
its address from k previous-layer bits:

    addr = Σ_p  b(l−1)[c_{i,p}] · 2^p        (port p = 0 is the least significant bit)
    b(l)[i] = T_i[addr]

There is no weight and no multiplier anywhere. Because the interconnect is
constant, it costs no logic: each LUT maps onto one 6-input FPGA LUT.

The last layer is **padded**: it has G·D_ACT LUTs with G = ⌈D_l/D_ACT⌉, so
that it splits evenly into D_ACT groups. Group d is b(L)[d·G +: G]. With 17
actions, 1024 becomes 1037 (G = 61). With 8 actions, nothing is added (G = 128).

### Where the network comes from

The interconnect c and the truth tables T are what training learns. No
trained model comes with this source. `dwc_pkg::lut_conn` and
`dwc_pkg::lut_table` therefore return a deterministic pseudo-random network.
Each value is a 32-bit integer hash of (seed, layer, LUT, port).

The per-channel statistics behind the thresholds are placeholders in the same
way: `dwc_pkg::obs_mu`, `obs_sigma` and `obs_qs`. Q_S follows the recipe
x_max = 1.2 × the largest expected magnitude, where that magnitude is taken as
|μ| + 5σ.

To deploy a trained controller, replace the bodies of these five functions,
for example with case tables generated by the training flow. No module
changes. The `SEED` parameter picks among placeholder networks.

## Action heads

During training, action d is computed as

    z_d = s_d/|G| − 1/2,   l_d = α_d · z_d + β_d,   a_d = tanh(l_d)

Here α_d = exp(α_d,p) > 0 is learned. The tanh applies for SAC and DDPG;
PPO uses l_d directly. s_d takes only |G|+1 values, so the whole head,
including the tanh and the scaling to the actuator's integer format, is one
table of |G|+1 words.

`dwc_action_ram` is a synchronous single-port memory with one-clock read
latency. Its array form lets FPGA tools infer a block RAM.

How the tables are filled is this design's own choice: through the top-level
`tbl_we / tbl_act / tbl_addr / tbl_wdata` port.
* A write takes the single port of the selected table for that cycle and has
  priority over a read.
* Load the tables before streaming observations. An assertion in
  `dwc_controller` flags a write while results are in flight.

## Pipeline, throughput and reset

```
obs ─► encoders ─► layer 1 ─►[PIPE_MID]─► layer 2 ─►[PIPE_POP]─► popcounts ─►[reg]─► table read ─► act
```

* Throughput: one observation vector per clock. There is no back-pressure and
  no stall. At 100 MHz this is 10^8 actions per second.
* Latency from `obs_valid` to `grp_sum_valid`: 1 + PIPE_MID·(L−1) + PIPE_POP
  clocks. `act_valid` comes one clock later.

| PIPE_MID | PIPE_POP | popcount latency | action latency |
|---|---|---|---|
| 1 | 1 (default) | 3 | 4 |
| 1 | 0 | 2 | 3 |
| 0 | 0 | 1 | 2 |

The two optional registers are the ones used in the FPGA implementation of
the method. They are added only as needed to meet 100 MHz. With them, the core
latency is the reported 1–3 cycles, and the action table adds one.

The register after the popcount is this design's choice. It is inferred from
the reported one-cycle latency of the smallest builds.

Assertions in `dwc_core` and `dwc_controller` check this latency for every
accepted vector.

`rst_n` is synchronous and active low. It clears only the valid bits. Data
registers and table contents are not reset, so `act` is meaningful only while
`act_valid` is 1.

## Parameters of `dwc_controller`

| parameter | default | meaning |
|---|---|---|
| `D_IN` | 376 | observation channels (Humanoid-sized) |
| `D_ACT` | 17 | action dimensions (Humanoid-sized) |
| `B` | 63 | thermometer bits per channel, odd |
| `B_OBS` | 12 | sensor word width (12 or 16 in the deployment study) |
| `D_L` | 1024 | LUTs per hidden layer |
| `N_LAYERS` | 2 | LUT layers |
| `K` | 6 | LUT inputs (1..6) |
| `PIPE_MID`, `PIPE_POP` | 1, 1 | optional pipeline registers |
| `ACT_W` | 16 | action word width (own choice) |
| `SEED` | 1 | selects the placeholder network |

The defaults are the main configuration of the method: two layers of 1024
6-input LUTs and 63 thresholds. They are sized for the largest of the five
benchmark tasks. The other tasks are parameter overrides:

| task | D_IN | D_ACT | G at D_L = 1024 | G at D_L = 256 |
|---|---|---|---|---|
| Ant | 27 | 8 | 128 | 32 |
| HalfCheetah | 17 | 6 | 171 | 43 |
| Hopper | 11 | 3 | 342 | 86 |
| Humanoid | 376 | 17 | 61 | 16 |
| Walker2d | 17 | 6 | 171 | 43 |

Humanoid's 376 observations are stated with the method. The other sizes are
those of the standard Gymnasium v4 tasks. The default build runs only a
Humanoid-shaped network, because the group count is fixed by `D_ACT`.

The largest model mentioned, a HalfCheetah controller with 16384 LUTs per
layer and 255 thresholds, is the parameter setting
`D_IN=17, D_ACT=6, D_L=16384, B=255`. `tb_dwc_highcap` simulates it at full
size. At this width the method leaves the interconnect between the two layers
random and untrained, because learning it would take 16384² × 6 parameters;
only the first layer's interconnect and the truth tables are learned. The RTL
does not distinguish the two cases, since every connection is a constant.
`dwc_lut_layer` generates its LUTs in blocks of 1024 so that no generate
loop exceeds Verilator's 16384-iteration limit.

## Files

| file | contents |
|---|---|
| `rtl/dwc_pkg.sv` | thresholds, folding, network and statistics functions |
| `rtl/dwc_thermometer.sv` | one channel's encoder |
| `rtl/dwc_lut_layer.sv` | one LUT layer |
| `rtl/dwc_popcount.sv` | one group popcount |
| `rtl/dwc_action_ram.sv` | one action table |
| `rtl/dwc_core.sv` | LUT layers, pipeline registers, popcounts |
| `rtl/dwc_controller.sv` | top level |
| `tb/dwc_model_pkg.sv` | bit-exact behavioural reference |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/tb_dwc_env.sv` | parameterised end-to-end checker |
| `tb/tb_dwc_workloads.sv` | runs `tb_dwc_env` on all five task sizes in two configurations |
| `tb/tb_dwc_highcap.sv` | runs `tb_dwc_env` on the 16384-LUT, 255-threshold configuration |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes. Each has
a watchdog. They need Verilator 5 with timing support:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/dwc_pkg.sv tb/dwc_model_pkg.sv tb/tb_dwc_controller.sv \
    --top-module tb_dwc_controller -j 8
./obj_dir/Vtb_dwc_controller
```

Replace `tb_dwc_controller` with any other testbench name.
* `tb_dwc_controller` runs the top level at its default (full) size. Building
  it takes about 20 s; the simulation takes under a second. It loads all 17
  tables and streams 400 observation vectors in bursts and with gaps. It checks
  every popcount, every action word and both latencies against the reference
  model. It counts table writes, readings at or past the outermost thresholds,
  padded LUTs firing, back-to-back inputs and idle gaps, and fails if any of
  these never happened.
* `tb_dwc_workloads` takes about a minute to build. It runs Ant, HalfCheetah,
  Hopper, Humanoid and Walker2d sizes in two configurations: D_L = 1024 with
  12-bit sensors and latency 4, and D_L = 256 with 16-bit sensors and latency 2.
* `tb_dwc_highcap` runs the 16384-LUT configuration. Building it takes about
  7 minutes and 7.5 GB of memory with `-j 2`.
* `tb_dwc_core` runs three small cores side by side: both pipeline registers,
  none, and a 3-layer core. It checks data and latency.
* `tb_dwc_thermometer`, `tb_dwc_lut_layer`, `tb_dwc_popcount` and
  `tb_dwc_action_ram` test their modules alone.

The reference model evaluates the network straight from its definition.
It reads the same network-defining functions from `dwc_pkg`, so it confirms
that the circuit computes the network those functions describe. It cannot
confirm that those functions hold a good policy.

## What follows the method and what does not

Follows the method:
* thermometer encoding with stretched-Gaussian thresholds and the inserted
  zero threshold
* folding normalisation and quantisation into floor-rounded integer
  thresholds clipped to ±Q_max
* k-input LUT layers with fixed learned interconnect
* padding of the last layer to a multiple of the action count
* popcount action heads
* one single-port table per action, read in one cycle
* the two optional pipeline registers (between layers, before the popcount)
* the main sizes: 2 layers, 1024 LUTs, k = 6, B = 63, 12- or 16-bit sensors

Choices of this design, where the method is silent:
* LUT address bit order (first selected bit is the LSB)
* contiguous action groups
* the register after the popcount
* the table load port and its write priority
* 16-bit signed action words
* a synchronous reset of the valid bits only
* Acklam's Φ⁻¹ for threshold generation
* the default task size (Humanoid)

Not provided:
* a trained model. The interconnect, truth tables and normalisation
  statistics are seeded placeholders, so the circuit as shipped is the right
  shape and timing but does not control anything usefully.
* the sensor ADCs and actuator DACs. They sit outside the `obs` and `act`
  ports.
* the optional on-device float-to-integer quantisation stage, which the method
  reports only as an unusual alternative.

One indexing remark: the method's text once calls the top thermometer bit
"index 63". With 63 thresholds counted from 0, that bit is index 62, and the
zero threshold is index 31. The RTL uses 0..62.
