# A 64-bit-response multiplexer (arbiter) PUF

A physical unclonable function (PUF) gets a device-unique secret from
manufacturing variation, not from stored key bits. The arbiter PUF is the
classic delay-based example. A rising edge is launched into two nominally
identical paths made of chained multiplexer stages. Each challenge bit tells
its stage whether the two signals go straight on or swap lanes. A flip-flop
at the end, the *arbiter*, records which edge got there first. That gives
one response bit per N-bit challenge. Such a response is a nearly linear
function of the challenge, so machine-learning attacks such as logistic
regression learn it easily.

The design here widens the response instead. **N arbiter PUFs of N stages
each receive the same challenge and the same enable. Instance k gives
response bit k.** So an N-bit challenge gives an N-bit response. The
instances have identical logic and differ only in their delays: on the
FPGA target these come from placement, and in this RTL from a modelled
variation. By default N = 64, so the design has 64 instances, 4096
switch stages and 64 arbiters.

```
            en ──┬───────────────┬─── ... ───┐
                 │               │           │
      clg[63:0] ─┼──┬────────────┼──┬── ... ─┼──┐
                 ▼  ▼            ▼  ▼        ▼  ▼
            ┌───────────┐  ┌───────────┐  ┌───────────┐
            │arbiter_puf│  │arbiter_puf│  │arbiter_puf│
            │  SEED=s+1 │  │  SEED=s+2 │  │ SEED=s+64 │
            └─────┬─────┘  └─────┬─────┘  └─────┬─────┘
                  ▼              ▼              ▼
             puf_out[1]     puf_out[2]  ...  puf_out[64]
```

## One arbiter PUF (`arbiter_puf`)

```
 en ─┬─► top[0] ─┐  ┌─────────┐  ┌────────┐          ┌─────────┐        top[N] ──► D ┌───────┐
     │           ├─►│switch c0│─►│ delays │─► ... ──►│switch   │─►delay─┤             │arbiter│─► puf_out
     └─► bot[0] ─┘  │         │─►│        │─► ... ──►│ c[N-1]  │─►delay─┤ bot[N] ──► ▲ └───────┘
                    └─────────┘  └────────┘          └─────────┘                    (clock)
```

* **Launch.** Both inputs of stage 0 are tied to `en`. Raising `en` starts
  two edges at the same instant, so `c[0]` can never change the response.
* **Switch block** (`mux_switch_block`). It is two 2-input multiplexers
  with a common select `c[i]`. With `c[i] = 0` the upper input goes to the
  upper output and the lower input to the lower output. With `c[i] = 1`
  they cross over.
* **Segment delays** (`path_delay`). Each multiplexer output is followed by
  its own delay, 400 ps plus an instance-specific 0–63 ps.
  `puf_pkg::segment_delay_ps(seed, stage, path)` gives that value from a
  fixed integer hash. The hash stands in for manufacturing. A different
  `SEED` is a different physical instance, and a different `CHIP_SEED` on
  the top is a different chip.
* **Arbiter** (`arbiter`). It is a D flip-flop. The upper path drives D
  and the lower path drives the clock. When the lower edge arrives, the
  flip-flop stores 1 if the upper edge is already there, and 0 if not.

### What the response is

Let `a_i` and `b_i` be the arrival times of the upper and lower edges
after stage i, starting from `a_0 = b_0 = 0`. Stage i first swaps them if
`c[i] = 1`, then adds its own upper delay to `a` and its own lower delay to
`b`. The response is `a_N < b_N`. `tb/puf_ref_pkg.sv` computes exactly this
with integer arithmetic. Every testbench checks the simulated netlist bit
for bit against it. An exact tie (`a_N == b_N`) goes to the simulator's
event order, as a metastable race would. The testbenches count ties and
skip them. With the default delays, about 1 response bit in 600 is a tie.

### Timing and use

A measurement works like this:

1. Hold `en` low. Apply the challenge on `clg`. Wait until both paths are
   low everywhere: at most `N*(NOMINAL_PS+SPREAD_PS)` = 29.7 ns at N = 64.
2. Raise `en`. All response bits are final once the slowest lower path has
   arrived, again at most 29.7 ns after the edge. Each bit changes exactly
   at its own lower-path arrival time, and the testbenches check that.
3. Read `puf_out`. Lower `en` before the next challenge.

The response holds until the next rising edge of `en`. Changing `clg`
while `en` is high reroutes paths that are already high. That can glitch
the arbiter clock, so don't do it. Nothing is clocked except the arbiters,
and nothing is reset. The arbiters power up random in a two-state
simulator, and an FPGA gives their INIT value. A response is meaningful
only after the first enable pulse.

## What is modelled and what is not

The multiplexer stages, the tied first stage, the D flip-flop arbiter, the
N-copies-on-one-challenge structure and the port names (`EN`, `CLG`/`c`,
`PUF_OUT`) all follow the published design. The 64-bit default size also
comes from it. The following are choices of this RTL:

* **The delay model.** Its numbers (400 ps nominal, 64 ps spread) and its
  hash are invented. They give each instance a stable, unique and roughly
  unbiased response: in the full-size test about 49 % of response bits are
  1, and successive responses differ in about 31 of 64 bits. Real devices
  also have jitter, temperature drift, metastability and systematic
  placement skew, and none of these is modelled. The same challenge always
  gives the same response here, so no noise or error-rate figure can come
  from this model.
* **Which path clocks the arbiter** (the lower one). The schematic does
  not say.
* **Bit order.** Instance k drives `puf_out[k]`, and `puf_out` is indexed
  64 down to 1 as on the schematic.
* **Left out.** The FPGA pad buffers (IBUF/OBUF) are left to the
  implementation tool. The placement macro that makes the two paths
  symmetric on the fabric is also left out: it is a constraint file, not
  logic. Its effect is what `path_delay` models.
* **No response model from silicon.** The published CRP table was measured
  on one FPGA. Its responses cannot be reproduced. The full-size testbench
  applies its ten challenges and prints this model's responses.
* **Attack not included.** The logistic-regression attack used to judge
  the design is software, so it is not here.

### Implementation notes

`path_delay` is a behavioural model, not synthesizable logic. In an
implementation each segment is just the wire to the next stage, and
synthesis drops the delay. The model must not be instantiated once per
segment. With 8192 one-bit delay processes, verilator's timing scheduler
needs tens of GB. So each instance holds all N segment delays of one path
in a single process, and it forks a short-lived process for every edge.
That makes it a transport delay: every edge arrives, however short the
pulse. The `fork` keeps yosys' synthesis front end from reading the file.
verilator and slang accept it. For synthesis, replace `path_delay` with
`assign out = in;`.

## Files

| file | contents |
|---|---|
| `rtl/puf_pkg.sv` | width, delay constants, `path_e`, `segment_delay_ps()` |
| `rtl/mux_switch_block.sv` | one stage: two multiplexers, common select |
| `rtl/path_delay.sv` | behavioural delays of one path (N segments) |
| `rtl/arbiter.sv` | D flip-flop arbiter |
| `rtl/arbiter_puf.sv` | N-stage arbiter PUF, one response bit |
| `rtl/mux_puf_top.sv` | top: N instances on one challenge, N-bit response |
| `tb/puf_ref_pkg.sv` | integer reference model of the race |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mux_puf_full` |

Parameters: `mux_puf_top #(N = 64, CHIP_SEED = 1)` and
`arbiter_puf #(N = 64, SEED = 1)`. The delay constants `NOMINAL_PS` and
`SPREAD_PS` sit in `puf_pkg` (`SPREAD_PS` must be a power of two). All
files carry `` `timescale 1ps/1ps ``.

## Simulation

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and ends. Every
one has a watchdog. Example with verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/puf_pkg.sv tb/puf_ref_pkg.sv rtl/*.sv tb/tb_mux_puf_top.sv \
  --top-module tb_mux_puf_top -o sim && ./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_mux_switch_block` | all 8 input combinations |
| `tb_path_delay` | every segment's delay to the picosecond, rising and falling edges, a pulse shorter than the delay |
| `tb_arbiter` | capture on the clock edge, hold otherwise, 54 races |
| `tb_arbiter_puf` | 64 stages against the reference model. It covers 340 challenges, the response-change time, reproducibility, and both response values. |
| `tb_mux_puf_top` | two N = 8 chips. It checks every bit and the latency. It requires straight and crossed stages, 0 and 1 responses, repeated challenges, and instances and chips that differ. |
| `tb_mux_puf_full` | the 64 × 64 default design. It runs 750 CRPs (the smallest published set), starting with the ten published challenges, and checks every bit, reproducibility and bias. |

The full-size test takes about 5 minutes to build and run. The others
take seconds. The larger published CRP sets (1650, 2850 and 4920) need
only more enable pulses: about 0.35 s of simulation each.
