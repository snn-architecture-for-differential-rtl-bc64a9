# A spiking-network layer that computes on differentially timed spikes

This RTL implements a fully connected spiking neural network (SNN) in which
every neuron is its own small piece of hardware. Neurons talk to each other
over fixed wires, with no router and no addresses. The design rests on two
ideas:

* **Differential time encoding.** A spike train is sent as a stream of words.
  Each word holds the spike's sign and the number of time steps since the
  previous spike on that wire. No absolute timestamp is stored anywhere, so
  no counter grows with run time.
* **Decoupled processing time.** The time steps inside the words have nothing
  to do with the clock. A layer takes as many clock cycles as it needs to
  work out which input spike comes next, and spike time simply stands still
  meanwhile. A wide gap in spike time costs no more clock cycles than a narrow
  one.

The default configuration is a 784-input, 1000-hidden, 10-output MNIST
classifier. It uses 6-bit weights, a decay factor of 0.5 per time step and a
firing threshold of 1.0, as in the evaluated setup.

## Spike words

A word is `DT_W+1` bits wide: a sign bit on top of a `DT_W`-bit magnitude
`dt` (`DT_W = 8` by default).

| word                       | meaning                                                        |
|----------------------------|----------------------------------------------------------------|
| `{s, dt}`, dt > 0          | a spike of sign `s`, `dt` time steps after the previous word   |
| `{s, 0}`                   | one more unit of amplitude at the same time as the previous word |
| all ones (`1_11111111`)    | overflow: `OVF = 2**DT_W-1` time steps passed, no spike        |

A spike of height 3 at time 40 is therefore `+40, +0, +0`. The overflow word
keeps `dt` bounded: a gap longer than `OVF - 1` is sent as overflow words plus
a remainder. Overflow words also keep time moving in layers further down the
network when a neuron is silent. Every neuron sends at least one word per
`OVF` time steps, and the next layer depends on that (see *Ordering and
stalls*).

## One layer

```
  in_word[0] -> [synaptic buffer] -> |dt|+ -> t_0 --+
  in_word[1] -> [synaptic buffer] -> |dt|+ -> t_1   |  ring, rotated N times per event
       ...                                    ...   |
  in_word[N-1]->[synaptic buffer] -> |dt|+ -> t_N-1 |
                                                 <--+-- (t - t_last) -> [ < ] -> t_curr -> t_last
                               common stage           | step (new_min/eq, sign)   | evt, dt
                                                      v                           v
                               neuron core 0 .. neuron core M-1 (one per neuron, all in parallel)
                                                      |
                                      out_word[j] -> next layer's synaptic buffer j
```

`neuron_layer` contains one `spike_fifo` per input synapse, one
`common_stage` and one `neuron_core` per neuron. Every input reaches every
neuron, so the search for the next input spike is the same for all neurons.
It is done once per layer, in the common stage. Only the weights differ
between neurons, and each neuron core holds its own.

### Common stage: finding the next input event

This is the least obvious part of the design. Each synapse slot holds the
time of the *head* spike: the oldest word not yet consumed on that input.
The slots sit in a ring. One event is processed in four steps:

1. **Load** (`L_LOAD`). Every slot whose head was consumed by the previous
   event pops its buffer. The popped `dt` (or `OVF` for an overflow word) is
   added to the slot's time. This is the time integrator: it turns
   differential time into the time of the new head. If a needed buffer is
   empty, the stage waits (`stall`).
2. **Rotate** (`L_ROT`, exactly `N` cycles). The ring shifts by one slot per
   cycle. The slot leaving the ring passes a subtractor that removes
   `t_last`, the time of the previous event, then a comparator that keeps
   the running minimum in `t_curr`, and then re-enters the ring. After `N`
   shifts every slot is back in place. Every time in the ring is now measured
   from the previous event, and `t_curr` is the distance `dt` from the
   previous event to this one.
3. **Drain** (`L_DRAIN`, 1 cycle). This gives the neuron cores' weight read
   and accumulate pipeline time to finish.
4. **Update** (`L_UPD`). Once no neuron core is still sending, the stage
   pulses `evt` with `dt = t_curr` and copies `t_curr` into `t_last`.

Each step of the rotation is broadcast to all neuron cores as a
`rot_step_t`, which carries:

* `new_min`: this head is earlier than every head seen so far in this turn;
* `eq`: it ties the running minimum;
* `spike`: it is a real spike, not an overflow word;
* `sign`: the spike's sign.

Each slot also carries a candidate bit. A new minimum clears every candidate
bit at once and sets its own; a tie sets its own. At the end of the turn the
candidate bits mark exactly the heads at the event time, and the next load
phase consumes those heads.

Times are re-based to the last event on every turn. So a slot never holds
more than `2*OVF`, and `DT_W+1` bits are enough, however long the network
runs.

An event costs `N + 3` clock cycles plus any waiting. That is `N` rotation
cycles, one drain cycle, one update cycle and one load cycle. The cost does
not depend on the `dt` values. The next event's load and rotation overlap
with the neuron cores sending the outputs of the current one.

### Ordering and stalls

Spike trains on different inputs carry no common clock. The only way to know
which input spike comes next is to have a head on *every* input. The load
phase therefore waits until every consumed slot has a new word. Overflow
words bound this wait in spike time: an upstream neuron always sends
something within `OVF` time steps.

Words of `dt = 0` on the same input become separate events at the same time.
Each of them adds the weight again, which is how spike amplitude greater than
one is applied.

**Caution: buffer depth.** A downstream layer cannot pick its next event
until every consumed input has a word. An upstream neuron that stays silent
sends nothing but an overflow word every `OVF` steps. Meanwhile a busy
neighbour keeps sending words into its own buffer in the downstream layer
(`BUF_DEPTH`, default 64). If that buffer fills, the two layers wait on each
other for good:

* the upstream layer cannot finish the event, because the busy neuron cannot
  deliver its word;
* the downstream layer cannot pick its next event, because the silent
  neuron's buffer is still empty.

`BUF_DEPTH` must therefore exceed the number of words any neuron can send
within one overflow window (`OVF` time steps). No hardware detects this
condition. The full-size testbench checks it on its workload before running.

### Neuron core

Each `neuron_core` implements

```
P <- r( P * 2**(-DECAY_SHIFT*dt) + sum of +/-w_i over the spikes at this event )
```

and is built from these parts:

* **Weight rotation register** (`weight_ring`). This memory holds the
  neuron's weights. A read pointer advances once per rotation step, so the
  weight read always belongs to the synapse whose time the common stage is
  comparing. After `N` steps the pointer is back at 0, like a shift ring.
* **Weight accumulator.** It restarts with `+/-w` on `new_min` and adds
  `+/-w` on `eq`. Overflow heads add nothing.
* **Decay shifter.** The potential's magnitude is shifted right by
  `DECAY_SHIFT * dt`, which rounds toward zero. No multiplier is needed
  because the decay factor is a power of two. Events made only of overflow
  words leave the potential alone. Their time is saved in `since_upd` and
  applied at the next real update, so the decay always covers the whole time
  since the last update. The sum saturates at the `P_W` range.
* **Thresholding and reset-to-mod.** While `P >= TH_HIGH` the core sends a
  `+` spike and subtracts `TH_HIGH`. With `USE_LOW`, while `P <= TH_LOW` it
  sends a `-` spike and subtracts `TH_LOW`. A potential several thresholds
  high thus gives several spikes: the first carries the time since the
  neuron's last word, the rest carry `dt = 0`. What stays is the potential
  modulo the threshold.
* **Last-spike-time register** (`since_last`). It counts the time since the
  neuron's last output word. When it reaches `OVF`, an overflow word goes
  out ahead of any spike of that event, and `OVF` is subtracted.

The core sends one word per cycle over `out_valid`/`out_ready` and holds
`busy` until its last word is taken.

Timing: a rotation step's weight is read one cycle after the step and
accumulated the cycle after that. This is why the common stage inserts the
drain cycle before `evt`.

## The network (`snn_top`)

`snn_top` chains two layers: `u_hidden` (784 to 1000) and `u_output`
(1000 to 10). The 1000 output trains of the hidden layer are wired straight
into the 1000 synaptic buffers of the output layer. Both layers run at the
same time, and the buffers and overflow words keep them in order.

`spike_classifier` counts the positive spike words of each output neuron.
`class_idx` is the neuron with the most spikes; on a tie the lowest index
wins.

Ports:

* `in_word/in_valid/in_ready[784]`: input trains.
* `wr_en, wr_layer, wr_neuron, wr_syn, wr_data`: weight writes, one per
  cycle. `wr_layer` is 0 for the hidden layer and 1 for the output layer.
* `out_word/out_valid/out_ready[10]`: output trains. The consumer must keep
  taking them.
* `counts`, `class_idx`, `class_valid`, `clear_counts`: the classifier.
* `evt_hid/evt_out`: pulse once per processed event.
* `stall_hid/stall_out`: a layer is waiting for an input word.

Reset (`rst_n`, asynchronous, active low) clears all potentials, times and
buffers but not the weights. Assert it between input samples.

### Parameters

| parameter     | default | origin                                                  |
|---------------|---------|---------------------------------------------------------|
| `N_IN`        | 784     | evaluated network                                       |
| `N_HID`       | 1000    | evaluated network                                       |
| `N_OUT`       | 10      | evaluated network                                       |
| `W_W`         | 6       | 6-bit weights of the main result (97.00 %)              |
| `DECAY_SHIFT` | 1       | beta = 0.5                                              |
| `TH_HIGH`     | 16      | threshold 1.0 in the weight format                      |
| `USE_LOW`     | 0       | only a positive threshold in the evaluated network      |
| `W_FRAC`      | 4       | own choice: weights are signed Q2.4 (range -2 .. 1.94)  |
| `DT_W`        | 8       | own choice: dt field width, `OVF` = 255                 |
| `BUF_DEPTH`   | 64      | own choice                                              |
| `CNT_W`       | 16      | own choice                                              |
| `ACC_W`, `P_W`| 17, 18  | own choice: wide enough to sum every weight of a neuron |

The weight accuracies reported for 4 to 9 bits are a sweep over `W_W`.
Weights of 4 and 5 bits fit the default 6-bit field. Weights of 7 to 9 bits
need `W_W` raised.

## Where this departs from, or adds to, the published description

* **Rebasing times at every event.** The published description says the
  integrators and the layer's time register are reduced when an overflow
  spike passes. Here every time in the ring is re-based to the previous event
  on each turn, by the subtractor in front of the comparator. The widths are
  bounded just the same. The candidate bits and the four-state control
  sequence are also this design's own.
* **The weight rotation register is a memory with a rotating pointer**, not
  a shift chain. It behaves identically, but the weights can sit in RAM or
  shift-register LUTs.
* **Own choices where the description is silent:**
  * weight loading port;
  * buffer depth and handshakes;
  * the `dt` width and the time value of an overflow word (`2**DT_W-1`);
  * rounding of the decay toward zero;
  * saturation of the potential;
  * sending an overflow word before an event's spikes;
  * the classifier's tie rule.
* **The input encoder is not part of the RTL.** Images are delta-encoded
  (send-on-delta with threshold 0.05 of full scale). How one image's spike
  sequence is spread over the 784 inputs is not specified, so `snn_top`
  takes ready-made trains. The full-size testbench contains an encoder: input
  `i` carries the train of image row `i mod 28`.
* The buffer-depth deadlock described above is a property of this
  implementation, and possibly of the scheme itself.

## Verification

Every testbench in `tb/` is self-checking and ends with
`TB_RESULT checks=N failures=M`.

* `tb_spike_fifo`: random pushes and pops against a queue model.
* `tb_weight_ring`: weight order over several turns, pointer wrap.
* `tb_spike_classifier`: counts, argmax, tie rule, clear.
* `tb_common_stage`: random trains with random gaps and a random busy
  signal. It checks each event's `dt`, its has-spike flag and the set of
  consumed inputs against a merge by absolute time. It also checks the
  per-step flags and that every event rotates exactly `N` cycles.
* `tb_neuron_core`: directed decay and reset cases, then 300 random events,
  word by word against a model of the neuron equation.
* `tb_neuron_layer`: a 5-input, 4-neuron layer with both thresholds and
  throttled outputs, compared word by word with the reference model in
  `snn_ref_pkg`.
* `tb_snn_top`: the whole top, reduced to 6-5-3, end to end. It compares
  hidden words, output words, classifier counts and class with the reference
  model run layer by layer. It also requires every mechanism to occur at
  least once: stalls in both layers, overflow-only events, tied heads,
  overflow words, zero-dt words, negative spikes, back-pressure between the
  layers and at the output, and a classifier clear.
* `tb_snn_top_full`: the top at its default size, 784-1000-10. It
  delta-encodes a synthetic 28x28 digit, runs it through and checks every
  hidden and output word against the reference model. The output layer's
  weights and hidden neuron 0's weights go through the weight port. The other
  999 hidden neurons' weights are written directly into their weight
  memories, which saves 783,000 load cycles. The hidden weights are sparse
  random values in {-1, 0, +1}. The test first checks that no hidden train
  is longer than `BUF_DEPTH`.

  In one run, the 913 input words, each row repeated on 28 inputs, gave
  122 hidden-layer events and 175 output-layer events. The last output
  event came 266,818 cycles after weight loading. The layers overlap, but
  each also waits on the other: the hidden layer stalled on empty buffers
  for 186,590 cycles and the output layer for 107,079. This is of the same
  order as the roughly 435,000 cycles per image reported for an FPGA build
  of this architecture on MNIST. The synthetic digit and random weights
  are not MNIST, so this is only a plausibility check.

`snn_ref_pkg` is the reference model. It uses absolute times and merges
spikes by sorting, not by a ring, so it checks the hardware independently.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/snn_pkg.sv tb/snn_ref_pkg.sv rtl/spike_fifo.sv rtl/weight_ring.sv \
  rtl/neuron_core.sv rtl/common_stage.sv rtl/neuron_layer.sv \
  rtl/spike_classifier.sv rtl/snn_top.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

Replace the last testbench file and `--top-module` to run another one. The
full-size testbench takes about two minutes to compile and several minutes
to run.
