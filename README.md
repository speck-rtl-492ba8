# Speck: an event camera with a spiking convolutional network on the same die

Speck puts a 128x128 dynamic vision sensor and a nine-layer spiking
convolutional neural network (sCNN) processor on one chip. The pixels do not
produce frames. Each pixel reports only a change in brightness, as an
address event {polarity, x, y}. The processor is event driven too. An incoming
event updates only the neurons whose receptive field contains that pixel.
Neurons that cross their threshold emit new events, which travel to the next
layer. Sensor to decision is therefore one pipeline with no frame buffer
anywhere.

This repository is a synthesizable SystemVerilog model of the digital part of
that chip:

- the sensor arbiter
- event pre-processing
- the network on chip
- nine convolution cores
- the readout

It also has a behavioural model of the asynchronous pipeline stage the
silicon is built from.

## The main abstraction: a clocked model of an asynchronous chip

The chip itself is clockless. Its pipelines use quasi-delay-insensitive
dual-rail encoding with a four-phase handshake. Only the last part of the
readout is clocked.

This RTL keeps the dataflow and the arithmetic and replaces every handshake
with a synchronous valid/ready channel:

- An event moves across a channel when `valid && ready` is high at a rising
  clock edge.
- Every block has an active-low asynchronous reset `rst_n`.
- Memories are plain arrays with no reset, so they must be written before use.

Consequences:

- Latencies and throughputs are in clock cycles, not nanoseconds.
- The ordering of events that meet at a merge follows a round-robin arbiter
  here. On the chip it would follow arrival time.
- `qdi_pcfb_buffer` models one dual-rail pre-charge full buffer stage
  (behavioural, with delays) to show what each register stage stands for. It
  is not used inside `speck_top`.

## Dataflow

```
pixels --> evs_arbiter --> sensor_interface --> sensor_preproc --> noc_router --+--> cnn_core 0..8 --+
              external AER in --^      |                             ^            |                   |
                                       +--> monitor out              +------------+-------------------+
                                                                                  +--> readout_core --> class outputs
```

The network on chip (`noc_router`) is a star:

- Source 0 is the pre-processing block and source k+1 is core k.
- Core k has destination id k; the readout core has id 9.
- Each core, and the pre-processing block, can send every event to up to two
  destinations.
- One core can receive from several sources, so a layer can merge branches.
- Each sink has its own round-robin merge.

### Sensor side

- **`evs_arbiter`**
  - Each pixel keeps its request until it is acknowledged. A request is one
    bit per polarity, `pix_req[y][x][p]`.
  - The arbiter picks a column with a live request, then a row within that
    column, both round-robin. It emits `{p,x,y}` and pulses `pix_ack` for one
    cycle.
  - A pixel whose kill bit is set is ignored. This is how hot or broken
    pixels are switched off.
  - Throughput is one event per cycle.
- **`sensor_interface`**
  - Merges the on-chip stream with an external AER input, alternating when
    both wait.
  - Can copy every on-chip event to a monitor output. A sensor event retires
    only when both the forward branch and the monitor branch have taken it,
    so a stalled monitor stalls the sensor.
- **`sensor_preproc`** has five register stages:
  1. Pooling: divide x and y by 1, 2 or 4.
  2. Region of interest: an inclusive window. Events outside it are dropped;
     the rest get window coordinates.
  3. Mirroring in x and/or y, then an optional x/y swap.
  4. Polarity handling: polarities become channels 0/1, or only ON or only
     OFF is kept, or both merge into channel 0.
  5. Routing to one or two destinations.

### The convolution core (`cnn_core`)

This is the hardest part to follow. An input event `{c, x, y}` does not carry
a value; its weight is implied. The core must find every output neuron the
event reaches, using the layer configuration `cnn_cfg_t`:

- input size `in_w x in_h x in_c`
- `out_f` output features
- kernel `k_w x k_h`
- stride `2^s` per axis
- zero padding per axis

It processes an event in five steps.

1. **Kernel mapping** (`cnn_kernel_mapper`)
   - Padding shifts the event to `xp = x + pad`.
   - The output column of the window whose kernel tap covers `xp` with the
     largest index is the anchor: `ox0 = min(xp >> s, OW-1)`.
   - Its kernel tap is `kx0 = xp - ox0*2^s`.
   - The sweep then walks `ox` down by one while `kx` goes up by `2^s`, until
     `kx >= k_w` or `ox < 0`.
   - The same is done in y, and the whole x/y sweep is repeated for every
     output feature `f`.
   - Output map size: `OW = ((in_w + 2*pad - k_w) >> s) + 1`.
   - Each step produces one packed pair per cycle:
     - kernel address `k = ((c*F + f)*KH + ky)*KW + kx`
     - neuron address `n = (f*OH + oy)*OW + ox`
   - This packing is the "compression": memory is used only for the taps and
     neurons that exist. Events outside the input map, or reaching no
     neuron, are dropped.
2. **Kernel memory** (`cnn_kernel_memory`)
   - Each word is an 8-bit signed weight plus a kill bit.
   - Zero weights and killed words produce no neuron update. They cost a
     cycle but no neuron access.
3. **Merge with leak.**
   - A tick input starts `cnn_leak_unit`. It walks every neuron and adds the
     bias of that neuron's feature (16-bit, per feature, with a kill bit).
   - If a tick arrives during a sweep, one further sweep is remembered.
   - Leak and kernel events alternate into the neuron units.
4. **Neuron units** (`cnn_neuron_unit`, `NU` = 2 per core)
   - Neurons are interleaved over the units by the low address bits.
   - Each unit does read - add - compare - write on a 16-bit state:
     - `s = sat16(v + w)`
     - spike if `s >= threshold`
     - after a spike, either subtract the threshold or jump to a fixed reset
       value
     - the stored state is clamped at the lower bound
   - A killed neuron word is never updated and never spikes.
   - A unit takes one event every two cycles (read, then write). Two units
     keep pace with the single kernel memory.
5. **Output stage** (`cnn_output_stage`)
   - Spikes are merged and the neuron address is unpacked back to
     `{f, x, y}`.
   - Pooling divides x and y by 1, 2 or 4. Pooling is a sum: the spike keeps
     its weight and only its address gets coarser.
   - The event is sent to up to two destinations. Each destination adds its
     own channel offset, so several cores can feed one core without their
     channels overlapping.

A layer becomes fully connected when the kernel is as large as the input map
and the output map is 1x1.

The cores are identical except for their memory sizes (`speck_pkg`):

| core                 | 0   | 1   | 2   | 3   | 4   | 5   | 6   | 7   | 8   |
|----------------------|-----|-----|-----|-----|-----|-----|-----|-----|-----|
| neuron words (Ki)    | 64  | 64  | 64  | 32  | 32  | 16  | 16  | 16  | 16  |
| kernel words (Ki)    | 16  | 32  | 64  | 32  | 64  | 16  | 16  | 16  | 16  |

- Neurons total 320 Ki = 327,680, the chip's "327K".
- The three kernel sizes match fully connected layers of 64K, 32K and 16K
  synapses.
- The per-core split is this model's choice.

### Readout (`readout_core`)

- Events from the network enter a FIFO (16 deep). Channel `c < 16` selects a
  class counter.
- A readout tick closes the current time bin. Each class value is the mean of
  the last `2^avg_log2` bins (1 to 16).
- One cycle later the block latches:
  - all values and their flags against one threshold
  - the largest value and its class (the lowest class wins a tie)
- It pulses `out_valid`. Results appear two cycles after the tick.

## Configuration

Configuration is static during operation and uses the top-level ports.

- **Structs:** `pre_cfg`, `core_cfg[9]`, `ro_cfg`.
- **Memory write port `mem_wr`:** fields `core`, `sel` (kernel/neuron/bias),
  `addr`, `kill` and `data`.
  - Neuron state can be read back through `nrn_re/nrn_core/nrn_raddr` and
    `nrn_rdata`, with one cycle of latency. Bit 16 of `nrn_rdata` is the kill
    bit.
- **Address formats:**
  - Kernel address `k`: packed as above. Its weight is in `data[7:0]`.
  - Neuron address: `n` as above. Unit `n % NU` holds it at word `n / NU`;
    the port hides this.
  - Bias address: the feature index.
- **Ticks:** `sim_tick` (leak/bias) and `readout_tick` (readout bin) are
  single-cycle pulses from outside.

## Where this model departs from the chip

- It is synchronous; the chip is asynchronous QDI. The bundled-data pad
  protocol and the self-timed SRAM interface are not modelled. External
  input and monitor output are valid/ready ports.
- The analog pixel is not modelled. Its request, acknowledge and kill wires
  are top-level ports.
- The following are this model's own choices, not given for the chip:
  - the arbiters' round-robin order
  - ON before OFF
  - the merge policies
  - the number of neuron units per core
  - state, weight and counter widths (8-bit weights, 16-bit state and bias)
  - the per-core memory split
  - the channel-offset form of the output "shift"
  - the readout window lengths and single threshold
- The following are interpretations:
  - the order of the pre-processing stages
  - flip before swap
  - the exact saturation and clamp rules
- Each core has a single kernel memory bank. The chip can split a core's
  kernel memory into several banks read in parallel; the number per core is
  not given for the chip.
- The QDI stage model follows the textbook pre-charge full buffer sequence.
  It is not a gate-by-gate copy of the transistor stacks.
- Latency and throughput differ from the chip's nanosecond figures. In this
  model:
  - A convolution core needs about 9 cycles from input event to first output
    event.
  - A core then handles one synapse per cycle.
  - Pre-processing adds 5 cycles.

## Sizes and performance of the RTL

- All parameter defaults are the chip's sizes: 128x128 sensor, nine cores
  with the memories above, 16 readout classes.
- The full-size test (`tb_speck_top`, no parameter overrides) simulates in a
  few minutes with Verilator.
- The arbiter's request OR-trees over 16K pixels are the largest logic in the
  design.

Networks that fit at the default sizes:

- The N-MNIST network 34x34x2-16C5-16C3-P2-8C3-F10, one layer per core. The
  largest layer needs 14,400 neurons and the largest kernel 11,520 words.
- Nine-layer 3x3 convolution chains.
- Fully connected read-out layers up to 64K weights.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

- compares against an independent reference model
- prints `TB_RESULT checks=N failures=M`
- has a watchdog

The testbenches:

| testbench | what is checked |
|-----------|-----------------|
| `tb_evs_arbiter` | every live request served exactly once with its address, killed pixels never, output held under stall, one event per cycle |
| `tb_sensor_interface` | per-stream order through the merge, monitor fork under stalls, disabled inputs drained |
| `tb_sensor_preproc` | pooling, window, flips/swap, polarity modes, two destinations, latency |
| `tb_noc_router` | delivery, per-source order, header strip, drop of bad ids, non-blocking past a stalled sink |
| `tb_cnn_kernel_mapper` | brute-force synapse enumeration over random shapes, strides and padding; one pair per cycle |
| `tb_cnn_kernel_memory` | weight skip rules, sign, rate, latency |
| `tb_cnn_neuron_unit` | saturating update, both reset modes, clamp, kill, one event per two cycles |
| `tb_cnn_leak_unit` | bias sweep order, skips, pending tick, rate |
| `tb_cnn_output_stage` | decompression, pooling, offsets, two destinations, latency |
| `tb_cnn_core` | full core against a reference neuron memory, both reset modes, leak, stalls |
| `tb_readout_core` | window averages 1..16, threshold flags, winner with ties, latency |
| `tb_qdi_pcfb_buffer` | dual-rail protocol, data integrity, full-buffer capacity |
| `tb_speck_top` | end-to-end at full size (see below) |

`tb_speck_top` drives the full-size chip:

- **Stimulus:** pixel requests, some of them on killed pixels, plus an
  external event stream.
- **Network:** a three-core network.
  - A 3x3 convolution with leak and pooling.
  - A strided 3x3 convolution with reset-to-value neurons.
  - A fully connected layer.
- **Reference:** weights and biases are chosen so that spike counts do not
  depend on event order. The check can therefore be exact even though
  parallel paths interleave freely.
- **Checks:** readout values and winner after every tick, the monitor
  stream, and every used neuron word.
- **Mechanisms:** it counts each one and fails if any of them never
  happened:
  - merge
  - monitor stall
  - window drops
  - two-destination routing
  - network contention
  - weight and neuron skips
  - both spike modes
  - leak
  - pooling
  - stride
  - threshold flags
  - a change of averaging window

To run a testbench with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/speck_pkg.sv tb/tb_cnn_core.sv --top-module tb_cnn_core -o sim
./obj_dir/sim
```
