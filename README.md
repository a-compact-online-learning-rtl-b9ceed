# An event-driven, online-learning spiking neural network processor

Wearable biosignal monitors (ECG, EEG, EMG) need a classifier that draws
almost no power, fits in a small area, and can keep adapting to the patient
it is worn by. This design is a hardware spiking neural network (SNN) built
for that case. The network is one layer of leaky integrate-and-fire (LIF)
neurons with lateral inhibition. It learns without supervision, on chip and
while it runs, using trace-based spike-timing-dependent plasticity (STDP).

Three ideas keep the hardware small:

* **Everything lives in memory.** Every membrane voltage, every trace and
  every synapse weight is a word in one of three memories. A single set of
  arithmetic units (the *event handlers*) visits the words one after another,
  one word per clock. There is no per-neuron logic.
* **Work happens only when there are events.** Input spikes arrive as
  address-event packets. The controller sleeps until a packet is waiting.
  Each input spike costs one pass over the excitatory neurons. The leak and
  fire passes run once per timestep. Learning updates are tied to spikes, so
  a quiet input costs almost nothing.
* **Exponentials become one multiply and one subtract.** Decays are computed
  as `X - X*dt/tau` with a fixed-point multiply. Nothing uses lookup tables.

The SystemVerilog here describes the whole digital processor. It covers the
AER input and output, the two event FIFOs, the event controller, the three
state memories, the data selection bus and the three event handlers. The
default size is 784 inputs and 100 excitatory neurons (78,400 plastic
synapses), which is the MNIST-sized network of the original design.

## The network being computed

```
 input neurons i        excitatory neurons j         inhibitory neurons
 (N_PRE, spikes    --->  (N_POST, LIF, plastic  --->  one per excitatory
  from outside)          weights w_ij >= 0)   <---   neuron, inhibits all
                                                    the others)
```

Each input neuron connects to every excitatory neuron through a weight
`w_ij`. Each excitatory neuron drives its own inhibitory neuron. That
inhibitory neuron pushes down the voltage of every *other* excitatory neuron.
This is a winner-take-all arrangement: a neuron that fires makes its rivals
less likely to fire, so different neurons come to learn different input
patterns.

The inhibitory neurons store no state here. An inhibitory neuron fires
exactly when its excitatory partner fires. So the inhibition a neuron
receives in a timestep is `v_inh` times the number of *other* excitatory
neurons that fired in the previous timestep. The controller counts the
spikes. Each excitatory neuron keeps a `fired` bit so its own spike can be
left out.

Every neuron and synapse has these state variables:

| state | where | meaning |
|---|---|---|
| `V_j` | post-neuron memory | membrane voltage, signed 16 bit |
| `X_post_j` | post-neuron memory | trace of neuron j's own spikes, 8 bit |
| `fired_j` | post-neuron memory | j fired in the last fire pass |
| `X_pre_i` | pre-neuron memory | trace of input i's spikes, 8 bit |
| `w_ij` | synapse memory | weight, unsigned 8 bit, address `i*N_POST + j` |

## One timestep, in three handler passes

Time is divided into timesteps. A timestep has three phases, and each phase
is a pass of one handler over memory.

**Integrate (per input spike).** When input `i` spikes, the integrate
handler visits every excitatory neuron `j`:

```
V_j   <- sat(V_j + w_ij)
w_ij  <- sat(w_ij - (lr_post * X_post_j) >> 8)     LTD, if learn_en
X_pre_i <- sat(X_pre_i + a_pre)                    once per spike
```

A synapse is weakened when its input fires *after* the output neuron has
fired. That is long-term depression (LTD), and its size is proportional to
the post trace.

**Leak (once at the end of the timestep).** The leaky handler visits every
input trace, then every excitatory neuron:

```
X   <- X - ceil(X * k_x / 256)                         both traces
V_j <- sat(V_j - floor((V_j - v_rest) * k_v / 256)
             - v_inh * (n_fired - fired_j))
```

Here `k = 256*dt/tau` is a Q0.8 fraction (`k_v`, `k_pre`, `k_post`).
`n_fired` is the number of excitatory spikes in the previous fire pass. The
trace decrement is rounded up so a trace actually reaches zero. The voltage
term is rounded toward minus infinity.

**Fire (once, after the leak).** The fire handler visits every excitatory
neuron:

```
spike   = V_j > v_thresh
V_j     <- spike ? v_reset : V_j
X_post_j<- spike ? sat(X_post_j + a_post) : X_post_j
fired_j <- spike
```

When neuron `j` spikes, the controller stops the fire pass and runs the LTP
pass over column `j` of the weights. It then emits the output packet and
resumes the fire pass at `j+1`:

```
w_ij <- sat(w_ij + (lr_pre * X_pre_i) >> 8)   for all i, if learn_en
```

A synapse is strengthened when its input fired shortly *before* the output
neuron. That is long-term potentiation (LTP).

"sat" clamps a voltage to the signed 16-bit range and a weight or trace to
0..255. These rules are the discrete-time form of a LIF neuron with
exponential traces. Only the traces of the two neurons a synapse joins are
needed to update it, which is why no spike-time history has to be stored.

## Events and time

Packets on the AER buses are 18 bits: `{ts[7:0], id[9:0]}` (`aer_pkt_t`).

* An **input packet** names an input neuron that spiked and the timestep it
  spiked in.
* An **output packet** names an excitatory neuron that fired and the
  timestep it fired in.

The processor keeps its current timestep in `cur_ts`, which starts at 0
after reset. It takes the packet at the head of the input FIFO:

* **Same timestamp as `cur_ts`.** The packet is consumed and integrated.
  Packets with `id = 10'h3FF` (`NULL_ID`) are consumed and do nothing.
  Packets with an id of `N_PRE` or more are also dropped.
* **Different timestamp.** The current timestep is finished: the leak pass
  runs, then the fire pass (with LTP and output packets), then `cur_ts`
  increments. The packet is examined again after that. A jump of k timesteps
  therefore runs k leak/fire rounds, so empty timesteps still leak.

Nothing but a later timestamp ends a timestep. To finish the last timestep of
a sample, send a `NULL_ID` packet carrying the next timestamp. Timestamps
must not decrease. They are compared only for equality, so they may wrap
modulo 256.

## The event controller

`event_controller` is the part that is hardest to read, because it runs
every pass through one two-stage pipeline.

* **Read stage.** The controller puts the read address of element `idx` on
  the memories that the pass needs.
* **Write stage.** One clock later, the memory data sit at the inputs of all
  three handlers, which are combinational. The results of the handler that
  owns the pass are written back to the same addresses.

The write-stage addresses are the read-stage addresses delayed by one clock.
The write stage carries its own phase tag (`phase_w`), so a pass can end, and
the next one start, while its last write is still in flight. Each memory has
one read port and one write port. A pass therefore handles one neuron or one
synapse per clock. No result depends on a word read in the same clock it is
written. The one overlap is `X_pre[i]` during integration: it is read on
every clock of the pass but written only once, on the first.

| pass | state | reads | writes | length |
|---|---|---|---|---|
| integrate input i | `S_INT` | `X_pre[i]`, `post[j]`, `w[i][j]` | all three (`X_pre` once) | N_POST |
| leak traces | `S_LEAK_PRE` | `X_pre[i]` | `X_pre[i]` | N_PRE |
| leak neurons | `S_LEAK_POST` | `post[j]` | `post[j]` | N_POST |
| fire | `S_FIRE` | `post[j]` | `post[j]` | N_POST + 1 |
| LTP of neuron j | `S_LTP` | `X_pre[i]`, `w[i][j]` | `w[i][j]` | N_PRE |
| emit packet | `S_EMIT` | - | output FIFO | 1 + wait |
| next timestep | `S_ADV` | - | `cur_ts`, spike count | 1 |

The fire pass is the delicate one. A spike is only known in the write stage.
By then the read of neuron `j+1` would already be issued. So when the fire
handler reports a spike, the controller issues nothing that clock and
remembers `j+1`. It runs the LTP and emit states and restarts the fire pass
at `j+1`. The fire pass also spends one extra clock after its last read, so
that a spike of the last neuron is still caught.

Cycle counts, counted as clocks with `busy` high (one idle clock precedes
each event):

* one input spike: `N_POST + 1`
* one timestep end: `N_PRE + 2*N_POST + 2`, plus `N_PRE + 2` per output spike
  with learning on (2 with it off), plus any clocks spent waiting for a full
  output FIFO.

At the defaults and a 100 MHz clock, one input spike takes 1.01 us. A
timestep without output spikes takes 9.86 us. Each output spike adds
7.86 us for its LTP pass.

## Memories, the selection bus and the host port

`pre_neuron_sram`, `post_neuron_sram` and `synapse_sram` are plain arrays
with one synchronous read port and one write port. A read of the word being
written returns the old word. Their contents are not reset, as in a real
SRAM.

`rw_select_bus` sits between the memories and everything that uses them.
While the controller is busy, the memory enables and addresses come from the
controller. `phase_w` selects which handler's results become the write data.
While the controller is idle, the memories belong to the **host port**
(`host_re`, `host_we`, `host_sel`, `host_addr`, `host_wdata`, `host_rdata`):

* The host loads the initial weights and states and reads back learned
  weights over this port.
* Read data return one clock after `host_re`.
* Host requests made while `busy` is high are ignored, and an assertion
  warns about them.

Before use, the host must write every weight, every `X_pre` (normally 0),
and every post-neuron word. A post-neuron word is normally
`{fired=0, X_post=0, V=v_rest}`. Its layout is `post_state_t`: bit 24 is
`fired`, bits 23:16 are `X_post`, and bits 15:0 are `V`.

## AER interfaces and FIFOs

Both AER ports use a four-phase REQ/ACK handshake. The address must be
stable while REQ is high.

* `aer_input` synchronises REQ with two flops. It pushes the packet and
  raises ACK, then lowers ACK after REQ falls. While the input FIFO is full,
  ACK is withheld, which stalls the sender.
* `aer_output` pops a packet into an address register. It raises REQ one
  clock later, and waits for the synchronised ACK to rise and then fall.

`event_fifo` (depth 16 by default) is a show-ahead FIFO. The head packet is
visible before it is popped, so the controller can compare its timestamp
first.

## Configuration (`snn_cfg_t`)

These fields are top-level inputs. Change them only while `busy` is low and
the input FIFO is empty.

| field | meaning | format |
|---|---|---|
| `v_thresh` | firing threshold (fires if `V > v_thresh`) | signed 16 |
| `v_rest` | voltage the leak pulls towards | signed 16 |
| `v_reset` | voltage after a spike (set to `v_rest` for reset-to-rest) | signed 16 |
| `v_inh` | inhibition per spike of another neuron | unsigned 8 |
| `k_v`, `k_pre`, `k_post` | `dt/tau` of voltage, pre trace, post trace | Q0.8 |
| `a_pre`, `a_post` | trace step on an input / output spike | unsigned 8 |
| `lr_pre` | LTP rate (`alpha_pre`) | Q0.8 |
| `lr_post` | LTD rate (`alpha_post`) | Q0.8 |
| `learn_en` | 1: online learning; 0: inference, weights frozen | 1 bit |

## Parameters and sizes

| parameter | default | note |
|---|---|---|
| `N_PRE` | 784 | input neurons (28x28 image) |
| `N_POST` | 100 | excitatory neurons (and as many implicit inhibitory ones) |
| `IN_FIFO_DEPTH`, `OUT_FIFO_DEPTH` | 16 | event FIFO depths |
| word widths | see `snn_pkg` | timestamp 8, id 10, V 16, w 8, X 8 |

At the defaults the memories hold 636,548 bits in total. The synapse memory
alone is 627,200 bits. After coarse synthesis the logic is about 300
word-level cells and 164 flip-flops.

How far the defaults cover the networks the design is meant for:

* **MNIST-sized, 784 x 100:** fits as built.
* **ECG, 251 inputs x 251 neurons, 100 timesteps:** needs `N_POST = 251`.
  The default 100 excitatory neurons are too few, although the 63,001
  weights would fit in the synapse memory.
* **Hidden-layer sizes up to 800:** need `N_POST` raised. IDs are 10 bits,
  so up to 1023 neurons per layer are possible.
* **Up to 200 timesteps per sample:** fits within the 8-bit timestamp.

## What follows the original design, and what is this design's own choice

These parts follow the published architecture and equations:

* the single-layer excitatory-inhibitory network;
* LIF neurons, trace-based STDP with LTD on an input spike and LTP on an
  output spike;
* the discrete leak `X - dt*X/tau` and `V - dt*(V - V_rest)/tau`;
* inhibition subtracted in the leak stage;
* the block structure: AER in/out, two event FIFOs, event controller,
  pre-neuron, post-neuron and synapse memories, data selection bus, and
  integrate, leaky and fire handlers;
* the timestamp rule that ends a timestep;
* the handler order integrate, then leak, then fire.

These are this design's own choices, because the description gives no
detail:

* all bit widths, fixed-point formats, roundings and saturation;
* the AER handshake protocol, the FIFO depths, and the memory port
  organisation (one read plus one write port);
* the controller pipeline and the moment the LTP pass runs;
* the spike-count form of inhibition, with the `fired` bit;
* `NULL_ID` packets;
* the host port;
* hyper-parameters as input ports, and the `learn_en` switch.

Two points in the source description disagree with each other. This design
resolves them as follows:

* **Sign of the LTP update.** The handler datapath drawing shows a
  subtractor on the weight at the fire stage, but the learning rule adds
  `alpha_pre * X_pre`. The rule is implemented.
* **Value after a spike.** The text says the voltage drops to the rest
  potential, while the drawings show a separate reset value. Both
  `v_rest` and `v_reset` exist; set them equal for the text's behaviour.

The leak multiplier is drawn fed by the voltage alone, while the equation
multiplies `V - V_rest`. The equation is implemented.

Not included:

* **Front end and readout.** The analog front end that turns a biosignal
  into spikes is not part of the processor. Neither is the off-chip step
  that assigns class labels to neurons after training.
* **Idle power saving.** No clock gating or low-power state is described,
  so none is built. The controller is simply idle.

The published accuracy figures (MNIST, ECG) depend on data, label
assignment and tuned hyper-parameters that are not given in enough detail
to reproduce. This RTL has been checked against a bit-exact reference model,
not against those accuracies.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_snn_pkg` | fixed-point helpers exhaustively, saturation limits, packed word layouts |
| `tb_event_fifo` | random traffic against a queue model, full/empty, push+pop when full |
| `tb_aer_input` | every packet once and in order, ACK latency, ACK withheld while full |
| `tb_aer_output` | order, address stable during REQ, no REQ while ACK high |
| `tb_pre_neuron_sram`, `tb_post_neuron_sram`, `tb_synapse_sram` | random reads and writes against an array, read-old-on-write |
| `tb_integrate_handler`, `tb_leaky_handler`, `tb_fire_handler` | thousands of random and corner cases against integer arithmetic |
| `tb_rw_select_bus` | write-data selection per phase, host ownership and read-back |
| `tb_event_controller` | exact sequence of every memory write, output packets, cycle counts, NULL_ID, timestamp gaps, output stall, learning off |
| `tb_snn_processor` | whole processor, 12 x 5 neurons, 28 timesteps |
| `tb_snn_processor_full` | whole processor at the default 784 x 100, 8 timesteps |
| `tb_workload_mnist` | default 784 x 100 network, 200 timesteps of image-like input (ten bar orientations on a 28x28 grid, 25 timesteps per image), learning then inference |
| `tb_workload_ecg` | 251 x 251 network, five heartbeat-like windows of 100 timesteps (P, QRS and T waves with four shapes), learning then inference |

The two end-to-end benches use a reference model of the whole network,
written in the testbench with the same arithmetic. They:

* drive Poisson-like random input spikes over the AER handshake, and answer
  the output with random delays;
* compare every output packet with the model;
* read back all three memories through the host port and compare every
  word;
* run a learning part and then an inference part;
* count each mechanism (integration, LTD, leak, inhibition, firing, LTP,
  input back-pressure, output FIFO stall, skipped timesteps, `NULL_ID`
  packets, inference mode) and count a failure for any mechanism that never
  happened.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/snn_pkg.sv \
          tb/tb_snn_processor_full.sv --top-module tb_snn_processor_full
./obj_dir/Vtb_snn_processor_full
```

Swap in any other testbench name. The full-size bench builds in a few
seconds and runs in about two. Each workload bench runs for 15 to 20
seconds: about 3.6 and 4.6 million clock cycles.

The workload benches use synthetic input. They show that the processor
runs those network sizes and timestep counts correctly, bit for bit against
the model. They do not measure classification accuracy.

## Files

`rtl/snn_pkg.sv` holds the shared types, widths and arithmetic helpers.
`rtl/snn_processor.sv` is the top level. Each remaining `rtl/` file is one
block named above. Every file starts with a comment giving its function,
timing, and which parts follow the original design.
