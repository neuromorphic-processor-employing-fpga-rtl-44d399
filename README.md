# A UART-programmed spiking neural processor with all-to-all connectivity

This is synthesizable SystemVerilog for a small neuromorphic processor built
for an FPGA. It holds a fixed array of identical leaky integrate-and-fire
(LIF) neurons, 74 by default. Any neuron's output can be routed to any
neuron's input through a matrix of multiplexers, and a *connection list* in a
register bank sets those routes. Because of this, one bitstream can run any
network that fits in the array: a 4-3 Iris classifier, a 64-10 MNIST
classifier, or a recurrent net. To switch networks, the host writes new
registers over a 9600 baud serial link. Nothing is resynthesised.

The design follows a published description of such a processor, in the
configuration presented there as its main one: 74 neurons, a 100 MHz clock
and a 9600 baud UART. Some details were left open in that description. The
choices made here to close them are listed in
[Departures and filled-in details](#departures-and-filled-in-details).

## One inference, end to end

```
 host ──rx──► uart_rx ──byte,valid──► register_bank ──connection patterns──► snn_module ──spikes,valid──► uart_tx ──tx──► host
                                                     ──thresholds, weights─►   (N x lif_neuron     ▲
                                                     ──impulses, start─────►    + spike_router)   │ bit tick
                                       refractory_period (pin) ──────────────►                 clk_div
```

1. The host sends one complete *register update*: the connection list, the
   thresholds, the weights and the input impulse vector, as raw bytes, in a
   fixed order (see [The update stream](#the-update-stream)).
2. The receiver (`uart_rx`) turns each 8N1 frame into a byte. The register
   bank (`register_bank`) files each byte into the next register. When the
   last impulse byte is stored, the bank pulses `impulse_valid` for one
   cycle.
3. The array (`snn_module`) samples the impulse vector in the next cycle,
   and only in that cycle. Sampled bit *n* is one extra input spike for
   neuron *n*. The neurons then run freely. Each neuron's spikes reach the
   neurons its connection-list row enables, one layer every 2 cycles.
4. In every cycle where some neuron spikes, the spike vector is handed to the
   transmitter (`uart_tx`). The transmitter sends it to the host as
   ceil(N/8) bytes. Vectors that arrive while a frame is still on the line
   are ORed together and sent as the next frame. The host therefore learns
   which neurons fired, not exactly when.

For a two-layer network the output layer fires exactly 5 cycles after
`impulse_valid`:

| cycle | event |
|---|---|
| 0 | `impulse_valid` (the last byte of the update has been stored) |
| 1 | impulse vector sampled into the array (`ext_q`) |
| 2 | input neurons: weight × input count registered (synapse stage) |
| 3 | input neurons spike (soma stage) |
| 4 | output neurons: weight × number of routed spikes registered |
| 5 | output neurons spike |

The time on the serial line dominates everything else. A full update for 74
neurons is 898 bytes, about 93.5 ms at 9600 baud. The reply is 10 bytes,
about 1 ms.

## The neuron

`lif_neuron` implements the fixed-leak discrete LIF model. Time steps are
clock cycles:

```
v~[k+1] = v[k] + w * (number of input spikes in cycle k) - LEAK * (v[k] != 0)
y[k+1]  = 1  if v~[k+1] >= threshold and r[k] == 0
v[k+1]  = 0  if y[k+1] == 1 or r[k] > 0,  else v~[k+1]
r[k+1]  = R_ref if y[k+1] == 1,           else max(0, r[k] - 1)
```

Points that are easy to miss:

* **One weight per neuron, not per synapse.** The register bank holds N
  8-bit weights. A neuron multiplies the *number* of spikes that arrive in
  a cycle by its own weight. To give inputs different strengths, route them
  to different neurons, or vary the thresholds.
* **Two pipeline stages.** Stage 1 (synapse) counts the routed spikes with a
  population count and registers weight × count. That register is the
  synaptic delay. The `SYN_DELAY` parameter lengthens it to a delay line of
  1 to 255 cycles (default 1). Stage 2 (soma) applies the equations and
  registers the spike. Spike in to spike out takes SYN_DELAY + 1 = 2 cycles.
* **The refractory period really blanks the neuron.** While r > 0 its
  potential is forced to 0, so input that arrives then is lost, not stored.
  With R_ref = R, a neuron can fire again R + 1 cycles after a spike at the
  earliest.
* **The potential is 8 bits, unsigned.** The leak never takes it below 0.
  The sum saturates at 255. Saturation cannot be seen from outside: any
  value above 255 is also at or above every possible threshold, so the
  neuron either fires or is refractory, and both set v to 0.
* **A threshold of 0 fires on every non-refractory cycle.** The
  equation says so. That is why the register bank resets all thresholds to
  255: an unconfigured array stays silent.
* **Without leak, sub-threshold charge persists across inferences.** A
  neuron that got some input but did not fire keeps its potential until the
  next inference. Set `LEAK` > 0 (for example 1) to make it decay during the
  long UART update between inferences. The first integration step of a
  neuron at rest is not affected, because the leak only applies when
  v ≠ 0.

## All-to-all interconnect

The paper's `connection_list[n][m] = 1` means that the output of neuron *n*
drives an input of neuron *m*. Conceptually there is a 2:1 multiplexer for
every ordered pair (n, m). It selects neuron n's spike or a constant 0, so
the fabric costs N² multiplexers and N² configuration bits: 5476 of each at
N = 74. Self-connections are allowed. The fabric has no notion of layers:
a feed-forward network is just a connection list with no backward entries.
Any other list gives a recurrent network.

The register bank stores the list *per destination*:
`conn_in[m][n] = connection_list[n][m]`, so `conn_in[m]` is the connectivity
pattern that neuron *m* receives. `spike_router` then feeds neuron *m* with
`conn_in[m] & spikes`: a mux whose other input is 0 is an AND gate. The host
still sends the list row by row per *source* neuron. Only the storage is
transposed, and in hardware that is just wiring.

Recurrent loops can oscillate indefinitely: there is no global stop, and the
transmitter then keeps sending frames. The refractory period and the leak
are the only damping.

## The update stream

Every update has the same length and order. Nothing frames it: after reset,
the bank expects byte 0 of an update, and after the last byte it wraps to
byte 0 again. A host that loses a byte has to reset the processor.

| section | bytes | content |
|---|---|---|
| connection list | N × ceil(N/8) | row n = connection_list[n][0..N-1], byte b holds m = 8b..8b+7, bit 0 first; padding bits ignored |
| thresholds | N | threshold[0] … threshold[N-1] |
| weights | N | weight[0] … weight[N-1] |
| impulses | ceil(N/8) | one input-spike bit per neuron, bit 0 of byte 0 = neuron 0 |

In total that is N·ceil(N/8) + 2N + ceil(N/8) bytes: 898 for N = 74, 22 for
N = 7 and 4 for N = 1. `snn_pkg::bytes_per_update()` computes it. A new
inference always means a full update, even when only the impulses change.

The refractory period is not in the stream. It is the 8-bit pin
`refractory_period`, shared by all neurons.

## Result frames

A frame is ceil(N/8) bytes, 8N1, LSB first. Byte 0 bit 0 is neuron 0, and
padding bits are 0. A frame starts when the transmitter is idle and at least
one spike is pending. `tx_valid` is high while a frame is on the line. For
a two-layer network the input-layer spikes (cycle 3) start a frame, and the
output-layer spikes (cycle 5) are merged into the following one. For MNIST
the host reads bits 64..73 of the frames to get the digit.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `snn_top` | `N` | 74 | neurons in the array |
| | `CLK_HZ`, `BAUD` | 100 000 000, 9600 | set the UART bit time, CLK_HZ/BAUD rounded = 10417 cycles |
| | `LEAK` | 0 | leak step λ per cycle for all neurons |
| `lif_neuron` | `POT_W` | 8 | membrane potential width |
| | `SYN_DELAY` | 1 | synaptic delay in cycles (1..255) |
| `uart_rx` | `CLKS_PER_BIT` | 10417 | |
| `clk_div` | `DIV` | 10417 | |

Threshold, weight and refractory period are 8 bits. The input count is
ceil(log2(N+2)) bits, so the synapse product is 15 bits at N = 74.

## Departures and filled-in details

What comes from the source description: the block structure (UART receiver,
register bank, SNN array, UART transmitter, clock divider), the LIF
equations, the 8-bit parameters, the default 1-cycle synaptic delay, the
2-cycles-per-layer and 5-cycle end-to-end latency, the multiplexer matrix,
and the sizes of the four register groups (N×N connection bits, N
thresholds, N weights, N impulse bits, 898 transactions for 74 neurons).

Filled in here, because the description does not give them:

* the order of the sections in the update stream, the bit order, and the
  lack of any resynchronisation;
* 8N1 framing, mid-bit sampling, a 2-flop input synchroniser, and dropping
  received frames whose stop bit is 0;
* how an input impulse enters a neuron: as one extra input spike, weighted
  like the rest, during a single sampling cycle;
* the content and merging rule of the result frames. The description only
  says that spike events (or refractory counters) are sent back. Here only
  spikes are sent;
* the clock divider as a bit-rate *tick* for the transmitter, not a derived
  clock. The receiver keeps its own bit counter so that it can align to the
  start bit;
* saturation and the clamp at 0 of the potential, and the reset value of
  the thresholds (255);
* the active-low synchronous reset.

Departures and conflicts:

* The evaluation of the 7-neuron Iris network quotes a 28-byte update and
  shows an 8-bit impulse value per input neuron, read as a spike count per
  feature. The 74-neuron transaction breakdown instead uses one impulse bit
  per neuron, and that layout is the one built. The Iris network here takes
  22 bytes and a binary input per feature.
* The LIF model in continuous form has a bias current and a multiplicative
  leak. Only the fixed-leak form is built: there is no bias input, and λ is
  a synthesis parameter, because no register is described for it.
* Refractory periods are mentioned among the UART-configured values. But the
  block diagram feeds them to the array from outside the register bank, and
  the transaction count has no room for them. They are a pin here.
* A synaptic delay "adjustable up to 255" is described, but no delay
  register. Here it is one synthesis parameter for all synapses.
* The description says the parameters are passed to the array "upon
  successful register updates". Here the connection, threshold and weight
  registers drive the array directly, so the array sees each value as soon
  as its byte arrives. Only the impulse vector is gated, by
  `impulse_valid`. While the update stream is arriving, no impulses are
  applied, so a network that is at rest stays at rest. A recurrent network
  that is still oscillating keeps running on the half-written
  configuration.
* A per-neuron utilisation table reports 13 registers per neuron. A neuron
  here has 32: 8 potential, 8 refractory count, 1 spike, and a 15-bit
  synapse register that holds the full product weight × count. The 13
  registers in that table cannot hold even an 8-bit potential and an 8-bit
  refractory count, so that table's neuron must be organised differently.
  How is not described.
* The utilisation tables list an `ascii_to_hex` instance whose function and
  position are not described. It is not built. The transaction counts only
  work for raw binary bytes.
* No trained weights or thresholds for Iris or MNIST are given. The
  testbenches use hand-set Iris thresholds and synthetic 8×8 digit
  templates.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_uart_rx` | random bytes through a serial model; a frame with a bad stop bit is dropped, and the receiver recovers |
| `tb_clk_div` | tick period, and the restart on `clr` |
| `tb_register_bank` | two random updates at N = 11: every register, the one-cycle `impulse_valid`, the wrap of the byte counter, the 898/4 byte formula |
| `tb_lif_neuron` | three neurons (leak 0/3, delay 1/3) against an independent model of the equations; 2-cycle latency; refractory blocking and leak must both happen |
| `tb_spike_router` | every routed bit against connection_list[n][m] AND spike[n] |
| `tb_snn_module` | Iris topology and random recurrent nets against the reference model; 5-cycle latency |
| `tb_uart_tx` | frame content and duration, merging of vectors sent while busy |
| `tb_snn_top` | whole processor, 7 neurons, fast baud: all 16 Iris input patterns, a reconfiguration that changes the answer, random feed-forward nets, leak 1; counts inferences, 5-cycle answers, refractory blocks, leak steps and transmitter merges, and fails if any count is 0 |
| `tb_mnist` | whole processor, 74 neurons, fast baud: ten synthetic digits, each classified by exactly its own neuron at cycle 5 |
| `tb_snn_top_full` | whole processor exactly as built (74 neurons, 100 MHz, 9600 baud): one 898-byte update, one MNIST inference and the 10-byte reply, about 96 million cycles |

The end-to-end tests share `tb/snn_e2e.sv`, which plays the host, and
`tb/snn_ref_pkg.sv`, a cycle-level reference model of the array. For every
inference they check that the register bank holds what was sent. They
compare the spike and potential of every neuron in every cycle of the
inference window. They also check that the reply frames report exactly the
neurons that spiked.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/snn_pkg.sv tb/snn_ref_pkg.sv \
          tb/tb_snn_top.sv --top-module tb_snn_top -Mdir obj -o sim && ./obj/sim
```

Replace `tb_snn_top` with any testbench name. Every testbench except
`tb_snn_top_full` builds and runs in under 20 s. `tb_snn_top_full` simulates
for about 3.5 minutes. The testbenches initialise everything they read and do not
rely on X values.

## Size

At the defaults the state is dominated by the connection list. The register
bank holds 74 × 74 = 5476 connection bits, 592 threshold bits, 592 weight
bits and 74 impulse bits, about 6.7 k flip-flops in all. The array adds
74 sampled impulse bits and 32 bits per neuron: 8 potential, 8 refractory,
1 spike and 15 in the synapse stage. That is about 2.4 k more. The
connection list and the multiplexer fabric grow as N²; everything else grows
as N. For comparison, the source reports about 7.6 k registers for its
processing unit in the 74-neuron MNIST build, without saying whether the
connection list is counted there.

## Files

`rtl/snn_pkg.sv` holds the shared constants and the update-length function.
Each of `uart_rx`, `register_bank`, `snn_module` (with `spike_router` and
`lif_neuron`), `clk_div`, `uart_tx` and the top `snn_top` has its own file,
named after the module. `tb/` holds the testbenches, the host model
`uart_host.sv`, the end-to-end checker `snn_e2e.sv` and the reference
model `snn_ref_pkg.sv`.
