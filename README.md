# PULSE-style event-driven spiking convolution engine in SystemVerilog

A spiking neural network (SNN) layer sees, at every time step, a binary map of
input spikes, and most of its bits are zero: 70-95 % of them on typical
image datasets. A conventional convolution engine slides the filter over all
positions and does most of its work on zeros. This design turns the loop
inside out. It finds the few input positions that did spike, and for each
one it adds the filter weights straight into the membrane potentials of the
output neurons that spike can reach. Work is then proportional to the number
of spikes times the filter size, not to the map size.

The second idea is that the hardware of each layer is sized by parameters
for that layer's own spike workload. Every layer is an instance of the same
engine with its own number of *neural cores*. A layer that sees many spikes
gets many cores, and a nearly silent one gets few. The default top level is
the four-layer FashionMNIST network (32C3-MP2-32C3-MP2-256-600) with 16, 32,
8 and 8 cores.

The RAMs are written as plain arrays for FPGA block RAM / UltraRAM
inference. Everything is synthesizable SystemVerilog-2017.

## Neuron model and number format

Each output neuron is a leaky integrate-and-fire (LIF) neuron with a 32-bit
membrane potential `u` in Q3.29 fixed point: bit 31 is the sign, bits 30-29
are the integer part, and 1.0 is `0x2000_0000`. Weights and biases use the
same format. Per time step:

```
u += w            for every input spike that reaches the neuron   (accumulation)
v  = u + bias                                                      (activation)
spike = !v[31] & (v[30] | v[29])       // v >= 1.0, the threshold
if (spike) v -= 1.0                    // reset by subtraction
u  = (v * beta) >>> 29                 // leak, beta = 0.15 = 0x04CC_CCCD
```

Because the threshold is fixed at 1.0, the comparison reduces to the three
top bits. No 32-bit comparator is needed. All adds wrap like plain 32-bit
adders, and the leak truncates.

## How one layer computes

A CONV layer has input `CIN x H x W`, `K x K` filters and `COUT` output
channels. Convolution is unpadded, so the output is `OH = H-K+1` by
`OW = W-K+1`. The layer is unrolled over output channels: there are `N`
neural cores, and core `n` computes channels `n, n+N, n+2N, ...`, one group
of `N` channels at a time. There are `G = ceil(COUT/N)` groups. All cores see
the same spikes and the same addresses at the same time. They differ only in
the weights they hold. No two cores ever write the same neuron, so no
arbitration is needed.

The controller (`ecu`) runs this loop:

```
for g in 0..G-1                          // channel group
  clear all membranes                    // NM = OH*OW cycles
  for t in 0..T-1                        // time step
    for c, r: fetch spike-train word (t,c,r)   \
      each set bit -> event (c,r,col)           > overlapped, one event
      each event  -> K*K (neuron, weight) pairs /  coefficient per cycle
    for every neuron (row-major): bias, threshold, reset, leak, spike -> pooling
```

Membranes persist across time steps and are cleared only when a new channel
group starts.

### Spatial chunks

A layer may also split its output map into chunks of `CHUNK_ROWS` whole
output rows (`CH1`, `CH2` on `pulse_net`). The loop then gains one level
between the group and the time step:

```
for g in 0..G-1
  for chunk base cb = 0, CR, 2*CR, ... < OH
    clear CR*OW membranes
    for t in 0..T-1
      fetch only input rows cb .. cb+CR+K-2  (those that reach the chunk)
      accumulate into neurons of rows cb .. cb+CR-1 (others skipped)
      activate rows cb .. min(cb+CR,OH)-1
```

Each core finishes all time steps of a chunk before it starts the next, so
its membrane RAM holds `CR*OW` words instead of `OH*OW`, with the same
number of cores. The price is that input rows on a chunk border are fetched
and compressed once for each chunk they reach (`K-1` rows per border), and
their events spend cycles on coefficients that fall outside the chunk.
`CHUNK_ROWS` must be a multiple of the pooling size `P` so that no pooling
window spans two chunks; the last chunk may be shorter. The default, 0, is
one chunk holding the whole map.

## The event path (the part that needs care)

Four units form one pipeline. Each unit works on a different stage of the
stream at the same time.

1. **Fetch.** The input spike RAM holds one fmap row per word. Word
   `(t*CIN + c)*H + r` has bit `col` set if neuron `(c, r, col)` spiked at
   step `t`. The controller issues one read per cycle when the encoder can
   take data. A one-word holding register absorbs the read latency of the
   RAM, so reads stream without gaps.
2. **Priority encoder (`penc`).** It holds the current row. Each cycle it
   emits the column of the lowest set bit, and clears that bit ("bit reset")
   when the event is taken. A row with `k` spikes costs `k` cycles. An empty
   row costs no event cycle, and the next row is accepted in the same cycle
   as the last event of the current one.
3. **Spike Events queue (`spike_events`).** This is a 16-entry register FIFO
   of `(channel, row, column)` events. It lets compression of later rows
   overlap the expansion of earlier events. If the queue is full, the encoder
   stalls. This is the normal state in a busy layer, because expansion costs
   `K*K` cycles per event and compression only one.
4. **Address generation (`addr_gen`).** For each event it walks the filter
   coefficients `(kr, kc)`, one per cycle. Coefficient `(kr, kc)` of a spike
   at `(r, col)` goes to output neuron `(r-kr, col-kc)` with weight
   `w[g][c][kr][kc]`. The neurons reached therefore span `(r-K+1, col-K+1)`
   to `(r, col)`. A coefficient whose neuron lies outside the output map
   takes its cycle but is not issued.

The generated `(neuron, weight)` pairs go to every core as `NC_ACC`
operations.

Inside a core (`neural_core`), every operation goes through a two-stage
pipeline. In the first cycle, the core reads the membrane word and the
weight. In the next cycle, it adds them and writes the result back. So it
updates one neuron per cycle. If the next operation reads the word being
written, the written value is forwarded, so back-to-back updates of one
neuron are exact. With `K >= 2` this never happens in a CONV layer, but it
does in an FC layer with one neuron per core.

The controller leaves the accumulation phase only when all of these hold:
every word is fetched, the encoder is empty, the queue is empty, the
generator is idle and no core has an operation in flight.

## Activation and pooling

In the activation phase, the controller broadcasts `NC_ACT` for each neuron
in row-major order. All cores produce their spike bit in the same cycle, so
the pooling unit (`maxpool`) receives `N` bits per cycle, one per channel.

On binary maps, max pooling is an OR over each `P x P` window. The unit ORs
each bit into a per-channel row buffer of `OW/P` bits. After the last neuron
of a window row, it copies the `N` pooled rows to a drain buffer. It then
writes them to the output spike RAM one per cycle, at word
`(t*COUT + channel)*PH + pooled_row`. Rows and columns beyond
`floor(OH/P)*P` are dropped.

The controller sends `P` rows, then waits for the drain to finish. This
costs about `N` cycles per pooled row. With `P = 1`, rows pass through
unpooled.

## FC layers on the same hardware

With `IS_FC = 1` the layer is fully connected:

- **Inputs.** The `CIN x H x W` input is flattened to
  `i = (c*H + r)*W + col`.
- **Neuron split.** Core `n` holds the `M = ceil(OUT/N)` output neurons
  `n*M ... n*M+M-1`. Neurons past `OUT` are padding and never fire.
- **Addresses.** For each event, the address generator walks the `M` local
  neurons. The weight of input `i` for local neuron `j` is at `i*M + j`.
- **Weight store.** FC weights are too many for flip-flops. They are kept in
  `uram_weight`, an array of 72-bit rows shaped like an UltraRAM tile. Two
  neighbouring neurons' 32-bit weights share a row (bits `[31:0]` and
  `[63:32]`).
- **Output.** The output is written as `N` rows of `M` bits per time step.
  A following FC layer therefore reads it with `CIN = N, H = 1, W = M`, and
  its input index equals the global neuron number.

## The network top level (`pulse_net`)

```
input RAM -> CONV 28x28x1 -> 32C3, 16 cores, MP2 -> RAM 13x13x32
          -> CONV 32C3, 32 cores, MP2            -> RAM 5x5x32
          -> FC 800 -> 256, 8 cores (32 each)    -> RAM 8 rows x 32
          -> FC 256 -> 600, 8 cores (75 each)    -> output RAM 8 rows x 75
```

All sizes, the four core counts and `T = 8` are parameters.

- **Output layer size.** The output layer has 600 neurons: 10 classes, each
  represented by a population of 60 neurons (population coding). Population
  coding lets a short spike train (8 steps) still carry the class reliably.
- **Layer order.** Within a frame, the layers run one after another. Each
  layer's `done` starts the next one.

Host interface:

- `in_we/in_waddr/in_wdata` write the rate-coded input, word
  `(t*IN_C + c)*IN_H + r`, one bit per column.
- `cfg_layer/cfg_nc/cfg_addr/cfg_data` with `cfg_w_we` or `cfg_b_we` load
  the weights and biases of one core:
  - CONV weight: `cfg_addr = ((g*CIN + c)*K + kr)*K + kc` for channel
    `g*N + n`.
  - CONV bias: `cfg_addr = g`.
  - FC weight: `cfg_addr = i*M + j` for neuron `n*M + j`.
  - FC bias: `cfg_addr = j`.
- `start` runs one frame. `done` pulses at the end.
- `out_re/out_raddr` read the output spikes. Word `t*N4 + n` holds neurons
  `n*M4 ... n*M4+M4-1` at step `t`, and data come one cycle after `out_re`.
  Class scores are spike counts summed over each class's population. That
  decoding is left to the host.
- `perf_cycles/events/stalls/spikes[4]` are per-layer counters of the last
  frame. They give each layer's latency and spike workload, which is the
  data needed to re-balance the core counts.

Reset is asynchronous and active low. The RAMs are not reset: each frame
overwrites every spike-RAM word it later reads.

## Timing

Per layer, one frame takes roughly

```
G * ( OH*OW                                  clear
    + T * (words + E_t*K*K + ~10)            fetch/compress/accumulate (overlapped)
    + T * (OH*OW + ceil(OH/P)*(N+3)) )       activation and pooling drain
```

Here `E_t` is the number of input spikes at step `t` and `words` is
`CIN*H`. With spatial chunks, the clear and fetch terms are paid per chunk,
over the rows that reach it. For FC layers, use `M` in place of `K*K` and `OH*OW`.

At the default size, one random frame with 28 % input density took 46.9k,
154.5k, 190.4k and 58.3k cycles in the four layers (about 450k in all). The
random weights used for that frame give far higher spike rates in the inner
layers than a trained network would. The queue-full stall counters show that
address expansion, at one coefficient per cycle, sets the pace.

## Where this design departs from, or goes beyond, the paper

The architecture follows PULSE (Aliyev and Adegbija):

- the Event Control Unit with priority encoder, Spike Events registers and
  address generation;
- neural cores unrolled over output channels;
- the Q3.29 three-bit threshold;
- OR max pooling;
- URAM rows holding two FC weights;
- the FashionMNIST network and core partition.

Choices of this design where the paper is silent, or that resolve its
inconsistencies:

- **Affected-neuron range.** The text gives the neurons reached by a spike
  as `(row-3, col-3)` to `(row, col)`, which would be 4x4 for a 3x3 filter.
  The paper's spike-convolution figure shows `(row-2, col-2)` to
  `(row, col)`, and that range is used.
- **Threshold.** The bit test fires at `v >= 1.0`. The paper's equation says
  `v > 1.0`. The bit test is used.
- **Update order.** The order is bias, threshold, subtract, leak (the paper's
  loop listing). The paper's membrane equation applies the leak before adding
  new input instead.
- **Core offsets.** Core offsets are 0-based, so core `n` handles channels
  `n, n+N, ...`. The paper's example mixes 0- and 1-based numbering.
- **"First" set bit.** The encoder takes the lowest column first.
- **Layouts and interfaces.** These are all this design's own: the spike-RAM
  word layout, the FIFO depth of 16, the clear phase, the row-wise pooling
  drain, the FC neuron split and padding, the forwarding path, the
  configuration port and the performance-counter set. So is the shape of a
  spatial chunk (whole output rows, a multiple of the pooling size) and its
  default of one chunk, since no chunk size is given for the evaluated
  networks.
- **Padding and the leak multiply.** Convolutions are unpadded (28 -> 26 ->
  13 -> 11 -> 5). The leak is a constant multiply, which synthesis reduces to
  shifts and adds.

Not built:

- **Overlap of successive frames across layers.** The paper's reported
  throughput is higher than one frame per latency, which implies that
  different layers work on different frames at the same time. That needs
  double-buffered spike RAMs and is not described, so `pulse_net` runs one
  frame at a time.
- **Other network shapes.** The MNIST network (three CONV layers, one FC)
  has a different layer chain. It can be assembled from `pulse_layer` but
  not from `pulse_net`; `tb_mnist_layers` chains four `pulse_layer`
  instances that way (28x28 input, 32C3 - 32C3 - pool 3 - 10C3 - FC
  population of 500, 3 time steps, 8/32/4/2 cores). The SVHN network has the default chain, so it can
  run on `pulse_net` by overriding parameters (`IN_C=3, IN_H=IN_W=32, T=18,
  N1=N2=32, N3=N4=3, F2=400`), as `tb_pulse_net_svhn` does.

## Files

| file | contents |
|---|---|
| `rtl/pulse_pkg.sv` | Q3.29 constants, threshold and leak functions, core operation enum |
| `rtl/spike_ram.sv` | spike-train RAM, one fmap row per word |
| `rtl/penc.sv` | priority encoder with bit reset |
| `rtl/spike_events.sv` | Spike Events FIFO |
| `rtl/addr_gen.sv` | neuron/weight address generation (CONV and FC) |
| `rtl/ecu.sv` | Event Control Unit: controller plus the three units above |
| `rtl/uram_weight.sv` | FC weight store, two weights per 72-bit row |
| `rtl/neural_core.sv` | LIF neuron core: membrane RAM, weights, biases, pipeline |
| `rtl/maxpool.sv` | OR pooling and output-row writer |
| `rtl/pulse_layer.sv` | one CONV or FC layer with N cores and counters |
| `rtl/pulse_net.sv` | four-layer network top level |
| `tb/tb_*.sv` | self-checking testbench per module |
| `tb/pulse_ref_pkg.sv` | frame-level reference model of CONV and FC spiking layers |
| `tb/layer_harness.sv` | drives and checks one layer against the model |
| `tb/net_tb_body.svh` | shared body of the two network testbenches |

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pulse_pkg.sv tb/pulse_ref_pkg.sv tb/tb_pulse_net.sv --top-module tb_pulse_net
obj_dir/Vtb_pulse_net
```

Replace `tb_pulse_net` by any other `tb_*` module. Each testbench prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog that ends the run
with a failure if it hangs.

- `tb_pulse_net` runs the network at a reduced size. That size has two
  channel groups in layer 1, layer 1 split into spatial chunks of 4 output
  rows, padded FC neurons and a dropped pooling edge.
- `tb_pulse_net_full` runs one frame at the default size, which takes about
  half a minute.
- `tb_pulse_net_svhn` runs one frame of the SVHN-sized network (32x32x3
  input, 18 time steps, 32/32/3/3 cores, output population of 400) on the
  same top with parameter overrides.
- `tb_mnist_layers` runs one frame of the MNIST-shaped network, whose
  layer chain differs, on four directly chained `pulse_layer` instances.
- All four compare every intermediate spike RAM with the reference model.
- The three `pulse_net` ones count the mechanisms: encoder stalls, compression overlapping
  accumulation, empty rows, group switches, chunk switches (when a layer is
  chunked), pooled-row writes, and spikes in
  every layer.

The unit testbenches check:

- the encoder's one-event-per-cycle rate;
- the generator's `K*K` cycles per event;
- the core's one-cycle spike latency and forwarding;
- the exact operation stream the controller broadcasts.

How far to trust the RAM contents: the testbenches load random weights,
because no trained model is included. Layer results match an independent
frame-level model bit for bit, but accuracy on a real dataset has not been
measured.
