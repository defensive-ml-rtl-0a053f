# A recurrent-network latency obfuscator for the memory controller

When two programs share a memory controller, one of them can learn what the
other is doing by timing its own loads: the victim's memory traffic shows up as
contention, and a classifier trained on the attacker's latency traces can
recover secret-dependent behaviour such as the key bits processed by an RSA or
EdDSA loop. Adding random delay helps little against such a classifier unless
the delay is large; padding every load to a constant latency works but costs a
lot of performance.

The unit described here sits inside the memory controller and adds to each
load a delay chosen by a small trained recurrent neural network, the
*defender*. The defender looks at the recent latency history of the core that
issued the load and picks a perturbation meant to make the attacker's
classifier no better than a coin toss, while keeping the average added latency
small. Since time cannot run backwards, the delay is never negative: the
network ends in a ReLU.

The network is trained off-line, adversarially against a classifier and a
discriminator; training is not part of the hardware. The hardware only runs
inference, and its parameters (2177 bytes) can be reloaded at run time, so one
unit can be retargeted to protect a different victim.

This RTL follows a published architecture: the placement in the memory
controller, the per-core latency and state storage, the FF–GRU–FF network with
its sizes and INT8/FP16 formats, dropout as the noise source and the output
ReLU. Everything the published description leaves open has been filled in
here. That covers the number scaling, activation functions, clocking,
handshakes, table sizes and the configuration port, and is listed in the
section "What is published and what is chosen here".

## Where the unit sits

```
             requests (t_in tap)                     responses
 network ───────────────┬──────────► rest of MC ──► delay buffer ──► network
                        │              ▲   │            ▲
                        │   DRAM data  │   │            │ delay per tag
 DRAM ──────────────────┼──────────────┘   │            │
        (t_out tap)     ▼                  ▼            │
               load_timestamp_table ──► latency_buffer  │
                     │ (latency, core)      │ history   │
                     │                      ▼           │
                     │               defender_net ──────┘
                     │                  ▲     │
                     │          gru_state_mem (one state per core)
```

`mc_defender` is the top module. It observes two points of the memory
controller without changing them: loads arriving from the network (`req_*`,
giving t_in) and data returning from DRAM (`dram_ret_*`, giving t_out). It
owns the path from the rest of the controller to the network (`mc_resp_*` in,
`net_resp_*` out), where it holds each response back by the delay the
defender chose for that load.

Every load passes through the defender, whichever core issued it, because the
memory controller cannot tell the attacker's loads from anyone else's.

## The defender network

Per returned load, for the core `c` that issued it:

```
x   = latency history of core c          32 x INT8   (x[0] = this load)
a   = W1 x + B1                          16 x FP16
a'  = dropout(a)
h'  = GRU(a', h[c])                      16 x FP16   -> stored as new h[c]
g   = dropout(h')
d   = min(127, ReLU(W2 g + B2))          1 x INT8    (delay in sample units)
delay_cycles = d << lat_shift
```

The GRU is the usual one, with gates in the order r, z, n:

```
r  = σ(Wir a' + bir + Whr h + bhr)
z  = σ(Wiz a' + biz + Whz h + bhz)
n  = tanh(Win a' + bin + r ⊙ (Whn h + bhn))
h' = (1 − z) ⊙ n + z ⊙ h
```

The second dropout acts only on what goes to the last layer; the stored state
is not dropped.

### Number formats

This is the part an engineer porting trained weights must get exactly right.

| quantity | format | real value |
|---|---|---|
| latency sample `q` | INT8, 0..127 | `q / 2^7` |
| weight or bias `W` | INT8 | `W / 2^5` (range −4 … 3.97) |
| FF1 output, GRU input/state/output | FP16 (IEEE binary16) | as encoded |
| values inside a layer | signed Q.12, 24 bit | `v / 2^12` (±2048) |
| output `d` | INT8, 0..127 | `d / 2^7`, same units as the samples |

- **Latency sample.** A latency of L cycles becomes `q = min(L >> lat_shift, 127)`.
  The delay is scaled back with the same shift. The network therefore works in
  one unit throughout, as in training, where the perturbation `p` is added to
  the signal `x`.
- **FF1.** The sum `Σ W·q + (B << 7)` is Q.12 without any shift. It is
  saturated to 24 bits and rounded to FP16 (round to nearest, ties away from
  zero). No activation follows FF1.
- **GRU.** FP16 operands are converted to Q.12, with the magnitude truncated.
  Each gate sum `Σ v·W + (B << 12)` is exact. An arithmetic right shift by 5
  (a floor) returns it to Q.12, followed by saturation. σ and tanh are hard
  piecewise-linear forms: `σ(v) = clamp(v/4 + 1/2, 0, 1)` and
  `tanh(v) = clamp(v, −1, 1)`. Both products with a gate are floored back to
  Q.12. The new state is rounded to FP16. Because of the hard activations the
  state always stays in [−1, 1].
- **FF2.** The sum `Σ v·W2 + (B2 << 12)` (units 2^−17) is shifted right by 10
  to units of 2^−7. It is then clamped to 0..127.

Hard activations were chosen because they cost one shift and two compares. A
model trained with smooth σ/tanh should be fine-tuned with the hard forms
before its weights are quantized. Dropout drops each of the 32 positions with
probability `drop_thresh/256`. Kept values are not rescaled by `1/(1−p)`, so
fold that factor into the weights if training used it.

### Parameter layout and control registers

Written one byte at a time through `cfg_we / cfg_addr / cfg_wdata`:

| address | contents |
|---|---|
| 0 – 511 | W1[j][i] at `j*32 + i` (j = output 0..15, i = sample 0..31, 0 newest) |
| 512 – 527 | B1[j] |
| 528 – 1295 | W_ih[g][k] at `528 + g*16 + k`, g = 0..15 r, 16..31 z, 32..47 n |
| 1296 – 1343 | B_ih[g] |
| 1344 – 2111 | W_hh[g][k], same order |
| 2112 – 2159 | B_hh[g] |
| 2160 – 2175 | W2[j] |
| 2176 | B2 |
| 0xF00 | bit 0: enable (reset 1). When 0 the delay is 0, but histories and states keep updating |
| 0xF01 | bits 2:0: `lat_shift` (reset 1) |
| 0xF02 | `drop_thresh` (reset 0, no dropout) |

After reset all parameters are 0. The network then outputs ReLU(0) = 0, so
the unit adds no delay until it is programmed.

## One load, cycle by cycle

Call T the cycle in which `dram_ret_valid` is sampled.

| edge | what happens |
|---|---|
| T | table looks up t_in and the core; latency registered |
| T+1 | sample quantized and shifted into the core's history |
| T+1 … T+2 | `defender_net` evaluates combinationally on the history and state; the delay for the tag can be looked up (same-cycle bypass) |
| T+2 | new GRU state stored, delay stored for the tag, dropout generator advanced |

The rest of the controller may present the response (`mc_resp_valid` with its
tag) at any time. `mc_resp_ready` stays low until that tag's delay exists, so
a response presented at T or T+1 waits, and one presented at T+2 or later is
taken at once if the buffer has room. A response accepted at edge E with
delay d is offered on `net_resp_valid` from cycle E + 1 + d, so d is exactly
the extra latency over an unprotected pass-through. The exception is a
response queued behind one that has not left yet, because release is strictly
in order. The inference itself is one clock cycle of combinational logic, so
a load can return every cycle. The two pipeline registers only ensure that
two loads of the same core, returning back to back, each see the other's
history and state update.

## Delay buffer

`delay_buffer` is a 16-entry FIFO of (tag, data, release time). Release times
come from a free-running 16-bit counter compared with wrap-around arithmetic.
The largest delay, 127 << 7 = 16256 cycles, is well within range. Only the
head entry is checked, so nothing is ever reordered: a short-delay response
behind a long-delay one waits for it. This can only add latency, never remove
it, so it does not weaken the defence. It does add to the performance cost
when delays vary a lot. If the FIFO is full, `mc_resp_ready` falls and the
controller is back-pressured.

## Files

| file | role |
|---|---|
| `rtl/defender_pkg.sv` | sizes, formats, layout, FP16 ⇄ Q.12 conversion functions |
| `rtl/load_timestamp_table.sv` | t_in and core per tag, latency on return, delay per tag |
| `rtl/latency_buffer.sv` | 32-sample INT8 history per core |
| `rtl/gru_state_mem.sv` | 16 × FP16 GRU state per core |
| `rtl/weight_mem.sv` | 2177 parameter bytes and control registers |
| `rtl/dropout_rng.sv` | xorshift32 dropout mask, 32 positions per inference |
| `rtl/ff_input_layer.sv` | 32 → 16 layer |
| `rtl/gru_cell.sv` | one GRU step |
| `rtl/ff_output_layer.sv` | 16 → 1 layer, ReLU, saturation |
| `rtl/defender_net.sv` | the network: FF1, dropout, GRU, dropout, FF2 |
| `rtl/delay_buffer.sv` | in-order timed release FIFO |
| `rtl/mc_defender.sv` | top |

Top parameters: `NUM_CORES` (6), `TAGS` (64 outstanding loads), `DEPTH` (16),
`DATA_W` (64 bits of response payload).

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The expected values come from
`tb/defender_ref_pkg.sv`, a separate model of the arithmetic. It decodes and
encodes FP16 with real arithmetic and computes the layers in 64-bit integers.
The layer, GRU and network testbenches compare every FP16 bit. The network
test carries the GRU state over 60-step sequences.

`tb/tb_mc_defender.sv` runs the whole unit at its default parameters. It plays
the network, a DRAM with 40–400 cycle latencies and the rest of the controller
(0–8 cycles after DRAM), and runs 2600 loads from 6 cores in three phases:

1. programmed weights with dropout;
2. defender disabled;
3. new weights loaded at run time with a different shift.

It predicts the exact cycle each response must appear at the network and
checks it every cycle. It also counts that each mechanism occurred: delayed
responses, responses stalled because their delay was not yet known, a full
buffer, head-of-line waits, dropout, saturated samples, disabled-mode traffic
and reconfiguration.

`tb/tb_contention_trace.sv` replays the attack this unit defends against, at
the default sizes. Core 0, the attacker, keeps one load in flight and times
each one. Core 1, the victim, issues loads every 3 or 12 cycles depending on
the secret bit of the current loop iteration. The DRAM model charges each load
4 cycles per victim load in flight, so the attacker's latency depends on the
secret. Signals are 42 samples long in one phase, the length of one RSA loop
iteration, and 105 in the other, the length of one EdDSA iteration. Each phase
uses its own parameter set, loaded at run time. The testbench checks every
response's exit cycle against the reference. For each secret value it prints
the attacker's mean latency without and with the unit. With random parameters
that leave about 37 cycles of added delay, the leak stays plain, as expected:
only trained parameters can hide it.

To run one, for example the full unit:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/defender_pkg.sv tb/defender_ref_pkg.sv rtl/*.sv tb/tb_mc_defender.sv \
  --top-module tb_mc_defender
./obj_dir/Vtb_mc_defender
```

For a block testbench, list `rtl/defender_pkg.sv`, `tb/defender_ref_pkg.sv`,
the block's file(s) and `tb/tb_<block>.sv`. The full-unit test builds in about
half a minute and runs in under a second.

## What is published and what is chosen here

Published, and followed:
- The unit's placement in the memory controller.
- The two timestamps, t_in and t_out.
- A latency history buffer and a GRU state per core.
- A 32-sample INT8 history vector.
- Layers of 32 → 16 feed-forward, a 16-wide GRU, and 16 → 1 feed-forward
  with ReLU.
- INT8 weights and activations, with the GRU state kept in FP16.
- Dropout as the noise injected after the first layer and after the GRU.
- A delay buffer between the controller and the network.
- Parameters that can be reloaded for another victim.

Chosen here:
- All scaling (2^−5 weights, 2^−7 samples, Q.12 internals, the `lat_shift`
  quantization).
- Hard σ and tanh.
- No activation after FF1.
- The gate order and the parameter layout.
- The xorshift dropout generator and its threshold.
- The tag-indexed timestamp table with 64 tags.
- Six cores: the default follows the six-core desktop the traces came from.
- A 16-deep buffer with in-order release.
- One inference per cycle with two pipeline registers.
- The configuration port and control registers.
- All reset values and handshakes.

Known departures and limits:
- The published design keeps the 16-wide links between layers in FP16 and
  implies FP16 arithmetic in the GRU. Here the links and the state are stored
  as FP16, but each layer computes in Q.12 fixed point.
- The published figure lets the latency buffer take t_in and t_out directly.
  Here a separate table by tag measures the latency and feeds the buffer.
- The time a response needs to leave is counted from when it reaches the delay
  buffer, not from t_out. The published text says only that returning data is
  stalled "for a certain time period".
- The published target is about 1.25 ns between memory transactions, with an
  estimated 0.74 W and 0.69 mm² in 7 nm. This RTL makes no timing, power or
  area claim. Its inference is a single large combinational stage, and a real
  implementation at that rate would need to pipeline it. The per-core GRU
  state recurrence then becomes a hazard for back-to-back loads of the same
  core.
- Weights from the published training are not available. The tests use
  random parameters, so they show that the arithmetic and timing are right,
  not that the delays defeat an attacker.

Not included:
- The software defender used against the power side channel (a 64-wide FP32
  model running every 20 ms beside a power controller).
- The training networks (classifier, discriminator).
- DRAM, the rest of the memory controller and the on-chip network.
