# A real-time neural-network agent for measurement-based qubit reset

A superconducting qubit is reset by measuring it over and over. After each
measurement a small neural network looks at the raw readout trace and picks
one of three actions:

- **terminate**: the qubit is believed to be in the ground state. One more
  measurement, the *verification*, follows and the episode ends.
- **flip**: a π-pulse is fired.
- **idle**: the state is too uncertain to act on, so measure again.

The network is trained by reinforcement learning on a PC. The hardware
described here is the part that must run in real time on an FPGA. It
evaluates a network of ten dense layers fast enough that the decision is
ready **48 ns after the last sample of a 256 ns trace**. It runs full
episodes of 856 ns measurement cycles, and it records every trace and action
for the trainer.

The main idea is the *low-latency network*. A network does not have to wait
for the complete trace. The trace is cut into eight groups of 32 ns, and
layer *k* of the network takes group *k* as extra inputs, next to the outputs
of layer *k−1*. A layer finishes in exactly the time the next group takes to
arrive, so the layers run in a wave that travels along with the data. Only
the last layer adds latency.

## Where the time goes

One clock is 8 ns, and the ADC delivers eight 1 ns samples per clock.

| stage | module | clocks | what happens |
|---|---|---|---|
| mixing | `ddc` | 1 | The 250 MHz intermediate frequency is ¼ of the sample rate, so the local oscillator is just +1, 0, −1, 0 (cos) and 0, +1, 0, −1 (sin) on the eight lanes. Mixing is a per-lane sign. |
| down-sampling | `boxcar_downsampler` | 2 | The eight I and Q samples of a clock are summed into one 8 ns point. This boxcar also removes the 500 MHz mixing image. |
| network | `low_latency_net` | 4 after the last point | Eight dense layers. Each one gets 4 I + 4 Q points. |
| total | | **6 = 48 ns** | Counted from the clock in which the last 8 ns block enters the boxcar to `act_valid`. |

The testbench `tb_rl_agent_top` measures this latency for every decision.

## The dense layer (`dense_layer`)

The latency of the whole network is set by the dense layer, so it is built
for minimum clocks rather than minimum area. A layer with N inputs and M
outputs has N·M multipliers, and all neurons work in parallel.

1. **Clock 1:** every input is multiplied by its weight, and the products are
   registered.
2. **Every later clock:** two levels of pairwise addition, `(a+b)+(c+d)`, so
   the number of summands falls by a factor of up to 4 per clock. The bias is
   one more summand, so N+1 values are reduced.
3. **Last clock:** the final additions, the output scaling and saturation,
   then ReLU for hidden layers. For the output layer the argmax over the
   neurons is also taken here.

The latency is `1 + ceil(log4(N+1))` clocks:

| layer | N | latency |
|---|---|---|
| low-latency layer (12 previous outputs + 4 I + 4 Q) | 20 | 4 clocks = 32 ns |
| first preprocessing layer | 38 | 4 clocks |
| second preprocessing layer | 12 | 3 clocks |

`rl_agent_pkg::dense_latency(N)` gives the same number for any N.
`out_valid` follows `in_valid` by exactly that many clocks. A new input may
be given every clock, because the layer is fully pipelined.

Weights and biases come from `param_bank`, a bank of registers, not RAM. All
weights of a layer are used in the same clock, so they cannot share a memory
port.

## The wave (`low_latency_net`)

Points of the down-sampled trace arrive one per clock, numbered 0..31.

- Layer *k* is started in the clock that delivers point `4k+3`. Its 20 inputs
  are, in this order:
  - the 12 outputs of layer *k−1* (for layer 0, the 12 outputs of the
    preprocessing network);
  - the four I points 4k..4k+3, oldest first;
  - the four Q points in the same order.

  Points 4k..4k+2 wait in a three-entry window. Point 4k+3 goes straight from
  the input into the multipliers.
- Layer *k−1* was started four clocks earlier, so its result becomes valid in
  exactly the clock where layer *k* starts. No extra buffering is needed, and
  a layer is idle for three of every four clocks.
- Layer 7 is the output layer: 3 neurons, no ReLU. Its argmax is the action.
  It is valid 4 clocks after point 31.

A check (`seq_err`) flags any layer that is started before its predecessor's
result exists. This cannot happen while points arrive at most once per clock
and each trace starts with `first`.

Actions are encoded `TERMINATE = 0`, `FLIP = 1`, `IDLE = 2`, and `GF_FLIP = 3`
when the fourth action is built in.

### Sampling the action

During training the policy must be sampled, not just maximised. The Gumbel-max
trick is used: argmax(logitⱼ + gⱼ), with independent Gumbel-distributed gⱼ, is
distributed as softmax(logits). `gumbel_sampler` works as follows:

- Each action has its own 32-bit Galois LFSR (x³²+x²²+x²+x+1, with different
  seeds).
- The low 8 bits of the LFSR index a 256-entry table of
  −ln(−ln((u+0.5)/256)). The table is stored in `rtl/gumbel_lut.hex` as
  16-bit values with 8 fractional bits.
- The noise is added to the output-layer **biases**. The biases enter the
  adder tree anyway, so sampling costs no clock.
- `noise_en = 0` gives the greedy policy.

The table quantises u to 256 levels. That caps the largest noise at +6.2 and
slightly coarsens the tails. `tb_gumbel_sampler` checks the empirical action
frequencies against softmax.

## Memory of previous cycles (`history_buffer`, `preprocess_net`)

The policy also sees the traces and actions of the last *l* = 2 cycles of the
same episode.

- **Filtering.** To keep this input small, each previous trace goes through a
  32 ns boxcar: four consecutive points are summed. That leaves 8 I + 8 Q
  values per trace.
- **Actions.** Each previous action is stored one-hot, 3 bits, with a set bit
  worth 1.0.
- **Input size.** This gives 2 × 19 = 38 inputs.
- **Slot order.** Slot 0 is the newest cycle. Within a slot the order is I
  values, Q values, then action bits.
- **Episode start.** The history is cleared, so the first cycle of an episode
  sees zeros.

The preprocessing network is two dense ReLU layers, 38→12 and 12→12. It runs
while the experiment waits for the next readout:

- It is started two clocks after the sequencer commits an action (or clears
  the history).
- It is done 7 clocks later.
- Its 12 outputs replace the previous-layer inputs of low-latency layer 0.

A trace that starts while the network is still busy raises `error`. With an
856 ns cycle there are about 60 clocks to spare.

## Episodes and batches (`episode_sequencer`)

One measurement cycle is `CYCLE_CLKS` = 107 clocks (856 ns). In each cycle:

1. Clock 0 pulses `ro_trigger` to start the readout pulse.
2. `acq_delay` clocks later the 32-clock acquisition window opens. This delay
   is a run-time input, and it covers cables, converters and the readout
   resonator's response.
3. When the network's action arrives, it is applied:
   - `flip_trigger` (or `gf_trigger`) pulses for the conditional pulse
     generator;
   - the history is updated;
   - a status word goes to the recorder.
4. After **terminate**, the next cycle is the verification measurement. It is
   recorded, its action is ignored, and the episode ends.

Episodes begin on a fixed grid of `EPISODE_CLKS` = 12500 clocks (100 µs,
10 kHz). The run-time limit `max_cycles` forces a terminate once that many
feedback cycles have run. This keeps every episode inside its slot. The
maximum is 116 cycles including the verification.

`start` begins a batch. The batch ends at the first episode boundary at which
the recorder holds `N_RECORD` = 1000 measurements, and then `done` is raised.
An episode that is cut off by the full recorder still runs to its end, but
its remaining measurements are not stored.

## What the trainer reads (`episode_recorder`)

Each measurement *m* occupies 33 words of 32 bits, starting at `33·m`:

| word | contents |
|---|---|
| 0..31 | `{I[15:0], Q[15:0]}` of the down-sampled points, exactly as the network saw them |
| 32 | status: `{episode[15:0], cycle[10:0], forced, verify, first, action[1:0]}` |

From this the trainer can rebuild every network input, including the filtered
history, and the reward of each episode from its verification trace. The
memory is 1000 × 33 × 32 bit = 1.06 Mbit, which is block RAM on an FPGA. It
is read through `rec_rd_addr`/`rec_rd_data` with one clock of latency.
`rec_count` gives the number of stored measurements.

## Numbers and the parameter map

| quantity | format |
|---|---|
| activations, biases, trace points | 16-bit two's complement, 8 fractional bits |
| weights | 16-bit, 10 fractional bits |
| ADC samples | 12 bit |

Products are accumulated at full width. Each result is shifted right by 10,
saturated to 16 bits, then passed through ReLU. The down-sampled point is the
plain sum of eight samples, not scaled.

Parameters are written one 16-bit word at a time (`param_wr_en/addr/data`).
Inside a layer bank with N inputs and M outputs, weight w_jk is at
`BASE + j·N + k` and bias b_j at `BASE + M·N + j`. The default map is:

| bank | layer | base | words |
|---|---|---|---|
| 0 | preprocessing 38→12 | 0 | 468 |
| 1 | preprocessing 12→12 | 468 | 156 |
| 2..8 | low-latency hidden layers k = 0..6, 20→12 | 624 + 252·k | 252 each |
| 9 | output 20→3 | 2388 | 63 |

The total is 2451 words. `rl_agent_pkg::layer_base` computes the same map.
Parameters can be rewritten between batches. Writing them during a batch
takes effect immediately.

## Top level (`rl_agent_top`) and parameters

| parameter | default | meaning |
|---|---|---|
| `HIST_DEPTH` | 2 | previous cycles seen (≥ 1). Use zero weights to get l = 0. |
| `NEUR` | 12 | neurons per hidden and preprocessing layer |
| `SPL` | 4 | I (and Q) points per low-latency layer |
| `NPTS` | 32 | points per trace (256 ns); layers = NPTS / SPL |
| `N_ACT` | 3 | actions; 4 adds gf-flip (`gf_trigger`) |
| `N_RECORD` | 1000 | measurements per batch |
| `CYCLE_CLKS` | 107 | measurement cycle (856 ns) |
| `EPISODE_CLKS` | 12500 | episode grid (100 µs) |
| `SEED` | 0x12345678 | LFSR seed for the sampler |

Run-time inputs:

- `acq_delay`: clocks from the readout trigger to the trace.
- `max_cycles`: the forced-termination limit.
- `noise_en`: sampling on or off.

`error` collects three faults: a cycle without a decision, a broken layer
wave, and a late preprocessing network.

At the default size the design synthesises (generic gates) to about 12,900
cells, 42,400 flip-flop bits and 1.25 Mbit of memory. About 2,340 16×16
multipliers sit in the ten layers.

## Departures from the described system, and open points

- **Network depth.** "Seven hidden layers of twelve neurons" is read here as
  seven hidden low-latency layers plus the output layer, with the two
  preprocessing layers in addition. Only with eight low-latency layers do the
  32 points of a 256 ns trace divide into groups of four.
- **Front-end latency.** The front end here (3 clocks, 24 ns) is much shorter
  than the slow pre-processing of the system it follows, which spent 88 ns
  there. The 48 ns of the network itself is the same.
- **Memory filter.** The 32-point boxcar of the memory path is taken as 32
  samples of 1 ns (four 8 ns points). A boxcar over 32 down-sampled points
  would leave a single value per trace.
- **Own choices.** The following are this design's own choices and can be
  changed freely:
  - number formats;
  - the order of the inputs within a layer;
  - the host bus;
  - the acquisition delay;
  - the cycle limit;
  - the recorder layout;
  - the random-number source.
- **Larger configurations.**
  - A four-action agent needs `N_ACT = 4` at elaboration.
  - Traces longer than 256 ns need a larger `NPTS`, which adds layers.
  - Both change the parameter map.
- **Outside this RTL.** The converters, the pulse generators, the analog
  readout chain, the link to the PC and the training algorithm are not part
  of this RTL. The top exposes plain ports for them.

## Simulating

Every block has a self-checking testbench in `tb/`, `tb_<module>.sv`. Each
one prints a `TB_RESULT checks=… failures=…` line. The support files are:

- `tb/nn_ref_pkg.sv`: an integer reference model of the layers.
- `tb/qubit_readout_model.sv`: a behavioural qubit, readout and ADC that
  closes the loop for the top-level test.

The testbench code reads `rtl/gumbel_lut.hex` relative to the working
directory, so run from the repository root. For example:

```
verilator --binary --timing -Wno-fatal \
  rtl/rl_agent_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/nn_ref_pkg.sv tb/qubit_readout_model.sv tb/tb_rl_agent_top.sv \
  --top-module tb_rl_agent_top -o sim
./obj_dir/sim
```

`tb_rl_agent_top` runs one full batch of 1000 measurements at the default
size, about 350 episodes. It loads a hand-built policy:

- terminate on a low integrated I signal;
- flip on a high one;
- idle when it is ambiguous;
- never idle twice in a row, which exercises the memory path.

The testbench checks:

- every decision against the integer model and the simple rule;
- the 48 ns latency;
- the triggers;
- every recorded word, read back through the host port.

It also counts that idle, flip, terminate, forced termination, verification,
the memory path and noisy sampling all occurred.

`tb_low_latency_net` takes the number of actions as a parameter. Run it with
`-GN_ACT=4` to test the network with the gf-flip action as the fourth output.
