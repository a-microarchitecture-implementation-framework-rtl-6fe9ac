# A temporal-neural-network column with on-chip online learning

A temporal neural network (TNN) carries information in *when* a spike happens,
not in how often. This design builds one TNN column directly in synchronous
logic. One clock cycle is one unit of time, and time is never stored as a
binary number. Each input spikes at most once per computation window. It spikes
at a time 0..7, or not at all. Each neuron adds up ramp-shaped responses
weighted by its synapses. It fires when the sum reaches a threshold, and the
first neuron to fire wins. Every synapse then adjusts its own 3-bit weight from
the relative timing of its input spike and its neuron's output spike. This is
spike-timing-dependent plasticity (STDP). A variant, R-STDP, is steered by a
global reward signal. Learning therefore runs online, in the same pass as
inference.

The default column has 1024 inputs and 16 neurons, which gives 16384 learning
synapses. The published gate-level design study also evaluated 64x8 and 128x10
columns. Those are parameter overrides of the same RTL.

## Time: unit cycles, pulses and gamma cycles

* **Unit cycle.** One period of `clk`, the only clock.
* **Gamma cycle.** 15 unit cycles (`phase` 0..14). One input volley is
  processed in each one. `gamma_ctrl` produces `phase`, a `gamma_clk` waveform
  that is high for phases 0..7, and `gamma_end` at phase 14.
* **Spike encoding.** Input *i* spikes at time *t* (0..7) by holding `x[i]`
  high for exactly 8 unit cycles, phases *t*..*t*+7. An input that does not
  spike stays low. Pulses never run past phase 14. Neuron outputs are 8-cycle
  pulses too, but they are cut off at the gamma end.
* **Update edge.** The clock edge that closes phase 14 does several things at
  once: it applies every STDP update, reloads every membrane potential with
  -theta, clears every latch, and resets the winner-take-all (WTA) stage. The
  next volley can start at phase 0.

Why 15 cycles: encoding uses 7 cycles, so a spike at time 7 starts at phase 7.
Reading out a weight of up to 7 takes 7 more cycles, and the update needs one.
A spike at time 7 has the 8th cycle of its pulse (its "restore" cycle) at
phase 14. The synapse merges that restore with the STDP step (next section).

## The synapse: one counter is both weight memory and response generator

Most of the column's area is in its synapses, so the synapse is the cleverest
part. Each synapse is a 3-bit counter, plus a flag bit added in this design
(`synapse.sv`).

* While the input pulse is high, the counter decrements once per cycle. It
  wraps from 0 to 7. The synapse outputs 1 in every cycle before the wrap and
  0 after it. A weight *w* therefore gives *w* consecutive ones from the spike
  time on. This is the weight read out in thermometer code, and it is exactly
  the "ramp-no-leak" response: the response grows by one per cycle until it
  reaches *w*, then holds.
* The pulse is 8 = w_max+1 cycles long. After 8 decrements modulo 8, the
  counter holds its original weight again. No separate weight memory and no
  copy are needed.
* At the gamma end, `inc` or `dec` moves the weight by one. It saturates at 7
  and at 0.

"Before the wrap" is remembered by a one-bit `wrapped` flag. It is cleared at
every gamma end. This is the only state added to the 3-bit counter. For a pulse
whose last cycle is phase 14, the weight is restored (counter − 1) and the
STDP step is applied in a single update.

## The neuron body

`neuron_body.sv` counts how many synaptic responses are 1 in each cycle. It
adds that count to a register of log2(P)+1 bits. The register starts each
gamma cycle at −theta. The threshold is reached when the sum's sign bit turns
0, so no comparator is needed. In that same cycle the output pulse starts, and
a 3-bit counter holds it for 8 cycles. After firing, the register holds its
value until the next gamma cycle. This keeps the narrow register from
overflowing and limits the neuron to one spike per gamma cycle.

The sum is written arithmetically, and synthesis builds the adder tree. The
original design uses a hand-built full-adder tree: P−1 inputs form a
log2(P)-bit count, which is added to the register with the last input as
carry-in. Because the register is only log2(P)+1 bits wide, theta must be in
1..P.

## STDP and R-STDP (`stdp_logic.sv`)

Each synapse has its own update logic. Flip-flops remember whether the input
spiked (x), whether the neuron's output spiked (z), and whether z came strictly
before x. That last flag is a temporal "x ≤ z" comparator. A spike on both in
the same cycle counts as x ≤ z. The four cases are:

| case | condition | unsupervised (`reward` = 10) |
|---|---|---|
| 1 | x and z, x ≤ z | +1 with prob. μ_capture · max(F(w), μ_min) |
| 2 | x and z, x > z | −1 with prob. μ_backoff · max(F(w), μ_min) |
| 3 | x only | +1 with prob. μ_search |
| 4 | z only | −1 with prob. μ_backoff · max(F(w), μ_min) |
| – | neither | no change |

F(w) = (w/7)(1−w/7). A mux selected by the weight picks the matching random
bit F_w. The max is an OR with the μ_min bit. F makes weights "sticky" near 0
and 7.

The reward is a global 2-bit signal `{R1,R0}`. It changes the table as
follows:

* **+1 (01).** As unsupervised, but case 3 does nothing.
* **−1 (11).** Only cases 1 and 3 act, and case 1 *decrements*, with the same
  probability it would otherwise increment with.
* **0 (00).** Only case 3 acts.

The z a synapse sees is its neuron's output **after** winner-take-all. Neurons
that lose therefore learn as if they had not fired.

## Random bits (`brv_gen.sv`)

Each probability is a 9-bit numerator over 256, so 256 means "always". Each
lane of the generator is a 32-bit xorshift register stepped every cycle, and
one byte of it is compared with each probability. One byte feeds the
capture/backoff/search bits. A synapse uses at most one of these per update,
so sharing is safe. A second byte feeds the μ_min bit and a third feeds
F_1..F_6. The column has P lanes. Neuron *j*, input *i* uses lane
(*i*+*j*) mod P. Different neurons at the same input, and different inputs of
the same neuron, therefore use different lanes.

## Winner-take-all (`wta.sv`)

The first neuron to spike in a gamma cycle wins, and the lowest index wins a
tie. The winner is latched in a one-hot register. From then on, only the
winner's pulse passes to `y` until the gamma end. `y_pre` shows the outputs
before inhibition. An assertion checks that at most one `y` bit is ever high.

## Top level: `tnn_column`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock, synchronous active-high reset (weights → `INIT_W` = 0) |
| `x` | in | P | input volley, 8-cycle pulses aligned to `phase` |
| `theta` | in | log2P+1 | threshold, 1..P, loaded at each gamma end |
| `reward` | in | 2 | `reward_e`: 10 STDP, 01 +1, 11 −1, 00 zero; sampled at phase 14 |
| `mu` | in | 4×9 | `stdp_mu_t`: capture, backoff, search, min numerators |
| `y`, `y_pre` | out | Q | outputs after / before WTA |
| `phase`, `gamma_clk`, `gamma_end` | out | 4,1,1 | gamma framing |
| `weights` | out | Q×P×3 | crossbar, valid when inputs are low and at phase 14 |

Parameters: `P` (1024), `Q` (16), `ACC_W` ($clog2(P)+1), `INIT_W` (0) and
`SEED`. Reset leaves every weight at 0. Driving volleys with `reward` = 00 and
`mu.search` = 256 then raises by one the weight of every input that spiked.
This is one way to load weights without any extra port.

Files: `rtl/tnn_pkg.sv` (constants and types), `gamma_ctrl`, `synapse`,
`stdp_logic`, `brv_gen`, `neuron_body`, `neuron` (P synapses with their STDP
logic and one body), `wta`, and `tnn_column`.

## Where this RTL departs from, or adds to, the original design

* **Timing.** The text counts 7 + 7 + 1 = 15 cycles. A spike at time 7 with
  an 8-cycle pulse, however, ends exactly at the gamma boundary. This design
  follows the waveform, and merges the restore cycle of that pulse with the
  weight update.
* **Neuron body.** The accumulator is arithmetic, not a hand-placed
  full-adder tree. The hold-after-fire behaviour and the cutting of output
  pulses at the gamma end are this design's choices.
* **Random bits.** The "LFSR network" is only named in the source. Its form
  here (xorshift lanes, byte sharing, 9-bit probabilities) is this design's
  choice, and no probability values are given in the source.
* **Reward −1, case 1.** The decrement uses the case-1 probability. The
  source only says the weight is decremented instead of incremented.
* **Latches.** Set/reset latches are written as flip-flops that also look at
  the current cycle's pulse.
* **Threshold.** One threshold shared by all neurons, as an input port.
* **Added ports.** The `weights` observation port and `y_pre` are additions.
* **Learning demonstration not reproduced.** The MNIST demonstration (10
  neurons, R-STDP then STDP) is not reproduced. The source gives neither the
  receptive-field size nor the pixel-to-spike encoding.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block's
outputs with an independent model written in the testbench:

* **`tb_synapse`** checks the thermometer readout, the restore, and saturation.
* **`tb_stdp_logic`** covers every spike-time pair, every reward code and
  random Bernoulli bits.
* **`tb_brv_gen`** runs a bit-exact model of the generator and checks the
  output rates.
* **`tb_neuron_body`** checks firing cycles and pulse lengths.
* **`tb_neuron`** runs a full neuron with a ramp-no-leak reference and the
  update rule.
* **`tb_wta`** checks winner selection, ties, and blocking.
* **`tb_gamma_ctrl`** checks the 15-cycle period.

`tb_tnn_column` runs the whole column end to end at 16 inputs × 4 neurons,
for 2300 gamma cycles. It checks every output bit every cycle and every weight
after every update. The first phase uses certain probabilities, so the expected
updates are exact. The second phase uses probabilities below 1, and checks that
each weight either takes the expected step or stays put. The test counts each
mechanism and fails if any of them never happens: firing, empty volleys,
inhibition, ties, each of the four cases, each reward code, saturation at both
ends, the merged restore of a spike at time 7, and updates skipped by chance.

The default 1024×16 column passes Verilator lint in about 1.5 minutes. It has
not been simulated. Verilator's C++ build of a testbench at that size did not
finish within 28 minutes, so 16×4 is the largest size simulated.

To simulate a testbench with plain Verilator, run from the directory that
holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/tnn_pkg.sv tb/tb_tnn_column.sv --top-module tb_tnn_column
    ./obj_dir/Vtb_tnn_column

Each testbench prints `TB_RESULT checks=N failures=M`.
