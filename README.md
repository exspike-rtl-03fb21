# ExSpike: full-event SNN accelerator with adjacent-position event compression

Spiking neural networks are sparse: most neurons stay silent most of the time.
A conventional convolution engine still visits every input position and every
input channel. This design does the opposite: the only thing that causes work
is an input spike. Each spike adds one row of stored weights to the membrane
potentials of the neurons it reaches. The hardware is organised so that a
spike is found, turned into an address and applied with little overhead.

On top of this event-driven convolution, the design removes a second kind of
waste. Two horizontally adjacent input positions often carry spikes on the same
channels. Their events would add the same weight vectors to two output
neighbourhoods that are shifted by one column. *Adjacent-position event
compression* (APEC) processes those shared events once and reuses the result
for both positions.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, and parameterised
with the sizes of the reference configuration:
- 32 parallel output channels;
- 3x3 kernels;
- 8-bit weights and 16-bit membrane potentials;
- a 64 KB spike buffer, 294 KB neuron memory, 294 KB weight memory and 1 KB instruction memory.

## 1. Event-driven convolution

Take a spike at input position (y, x) on channel c. For a 3x3 kernel with
stride 1 and zero padding, it contributes `W[o][c][ky][kx]` to output neuron
(y+1-ky, x+1-kx) of every output channel o. The contribution goes only to the
targets that lie inside the map.

The **EPE core** (event processing engine) has 32 **EPE clusters**, one per
output channel of the current output-channel *group*. A layer with C_out
output channels is run as ceil(C_out/32) groups, one after another.

For every event, each cluster gets the 9 weights of its output channel for
channel c, read from one Weight SRAM word. Its **WPE block** (weight processing
elements) holds nine accumulators, one per kernel tap. Each accumulator adds
its weight. Because every event of one input position reaches the same 3x3
neighbourhood, the nine accumulators collect the complete contribution of that
position.

When a position is finished, the nine partial sums move into the cluster's
**elastic FIFO** (eFIFO). The WPE block clears and can take the next position
at once. The **MPE** (membrane potential engine) pops the eFIFO and does
read-add-write on the Neuron SRAM for each tap whose target lies in the map:
- Neuron address: `n_base + g*H*W + y*W + x`.
- A word holds all 32 clusters' 16-bit potentials side by side.
- Addition saturates.

The eFIFO decouples the fast accumulation from the three-cycle-per-tap
membrane update. When it is full, the event stream stalls.

After all positions of a group are accumulated, the **FPE** (fire processing
engine) sweeps every output position:
1. add the 16-bit bias of its channel;
2. compare with the layer threshold;
3. emit a spike and reset the potential to zero, or keep the sum.

If the layer's `leak` bit is set, a kept sum is halved by an arithmetic shift.
This gives a leaky integrate-and-fire neuron with a decay factor of 1/2 per
timestep. The next timestep's input then adds to the decayed potential.

The 32 spikes of one position go out as one 32-bit lane of the output spike word.

A 1x1 kernel uses only the centre accumulator.

### Transposed convolution

A **transposed convolution** (3x3, stride 2, used for upsampling in
segmentation networks) needs no new datapath. Only the target rule changes:
- tap (ky, kx) of an input spike at (y, x) goes to (2y-1+ky, 2x-1+kx);
- the output map is 2H x 2W.

This corresponds to padding 1 and output padding 1. Each partial-sum set
still belongs to one input position, so APEC, the eFIFO and the MPE work
unchanged.

### Word layouts

| Memory | Word | Layout |
|---|---|---|
| Spike / Residual Spike SRAM | 1024 x 512 bit | one spatial position, all channels; bit c = channel c; 16 lanes of 32 bits, lane g written by group g |
| Weight SRAM | 1045 x 2304 bit | one input channel of one group: cluster k, tap t (t = 3*ky+kx) at bits `[k*72 + t*8 +: 8]`; address `w_base + g*cin + c` |
| Weight SRAM, bias word | same | cluster k at bits `[k*16 +: 16]`; address `b_base + g` |
| Neuron SRAM | 4704 x 512 bit | cluster k at bits `[k*16 +: 16]`; address `n_base + g*OH*OW + y*OW + x` (OH x OW = output map) |
| Instruction SRAM | 64 x 128 bit | one layer per word, see section 6 |
| FC weight memory | 512 x 128 bit | 16 outputs x 8 bit per row |

## 2. Finding events: spike buffer, fast event filter, AER FIFO

The **Sparse Core** walks the input map in raster order. It reads one word per
position, and positions without any spike are skipped at once.

A non-empty word goes to the **fast event filter**. The filter keeps the
remaining spike bits in a register r and, every cycle:
1. isolates the lowest set bit as a one-hot code, `r & (~r + 1)`;
2. converts the one-hot code to the channel number;
3. clears that bit.

So a word with n spikes yields exactly n events in n cycles, whatever their
positions. Channels at or above the layer's `cin` are masked off.

### Max pooling

Max pooling of a binary spike map is an OR over the window. A convolution
with `pool_shift = k > 0` reads the stored map of size (h * 2^k) x (w * 2^k). Each
scanned position is the OR of its 2^k x 2^k window, collected from one read
per cycle. `h` and `w` are the pooled sizes. The pooled map is never written
back: pooling costs only the extra reads of the next layer's scan.

Each event is written to the **AER FIFO** as an address-event
{position, y, x, channel}. The EPE core pops events as fast as it can:
one Weight SRAM read per event, a second cycle for the add.

### Closing a sequence

All events of one input position form a *spike sequence*. The end of a
sequence is the moment its partial sums may move to the eFIFO.

The Sparse Core knows that moment: the filter is idle and the AER FIFO is
empty. It then offers a *sequence-end token* to the EPE core over a
valid/ready handshake. The token carries:
- a tag (SINGLE, OV, P0 or P1, see below);
- the position (y, x);
- a flag saying whether the position had any spikes.

The EPE core takes the token only once its own pipeline has finished the last
event. It then does the partial-sum move that the tag calls for. The scan
continues with the next position only after the token was taken.

## 3. Adjacent-position event compression (APEC)

With APEC enabled, the Sparse Core pairs positions (y, 2j) and (y, 2j+1). For
a pair with spike words s0 and s1:

```
ov = s0 & s1      overlap: events common to both positions
p0 = s0 & ~ov     events only at the left position
p1 = s1 & ~ov     events only at the right position
```

The three sequences are filtered in the order ov, p0, p1, with one token after each.

| Token | Partial-sum move in every WPE block |
|---|---|
| OV | `acc` is copied into a second register bank, `acc_ov`. Nothing goes to the eFIFO yet. |
| P0 | `acc = acc_ov + W(p0)` is the complete sum of the left position. It is pushed to the eFIFO with target (y, 2j). Then `acc` is reloaded from `acc_ov`. |
| P1 | `acc = acc_ov + W(p1)` is the complete sum of the right position. It is pushed with target (y, 2j+1). Then both banks are cleared. |

The overlap events are applied once instead of twice. The number of weight
accumulations drops from |s0|+|s1| to |s0|+|s1|-|ov|. The cost is one extra
bank of 9 x 16 bits per cluster.

If a pair has no common events, the OV step is skipped. A position without
spikes pushes nothing. The last column of a row with an odd width is processed
alone, as a SINGLE sequence. Only groups of two are built. Larger groups give less in
practice because overlaps among more than two positions become rare.

Example, with 8 channels:

| Word | Value |
|---|---|
| s0 | 10101010 |
| s1 | 00101010 |
| ov | 00101010 |
| p0 | 10000000 |
| p1 | 00000000 |

Without APEC this pair costs 7 events; with it, 4. The end-to-end test counts
every overlap sequence and every eFIFO stall.

## 4. Attention core: spike-driven self-attention

Output spikes leave the FPEs through the **Attention Core** on their way back
to the spike buffer. For ordinary layers it writes the 32-bit lane into the
destination word: position `dst_base + pos`, lane g.

For spike-driven self-attention, the Q, K and V maps are produced by three
ordinary layers, each tagged with an attention mode:

| Mode | What the Attention Core does |
|---|---|
| K | K spikes are written back unchanged. |
| V | For each output position, the K word of the same position is read first. The core then writes V back and ORs `V & K` into a **KV status** register: 512 bits, one per channel, kept in flip-flops. After the V layer, bit c is set if any token had both K and V spikes on channel c. The register is cleared when a V layer starts. |
| Q | The core writes `Q & KV_status` instead of Q. This is the attention output. |

The attention output therefore needs no matrix product at all: only an AND,
a column-wise OR, and a second AND.

## 5. EAFC core: average pooling fused into the FC layer

A classifier ends with global or windowed average pooling followed by a fully
connected layer. Because both are linear, the pooling is folded into the FC
weights ahead of time: each weight is divided by the window area. The
hardware then treats the FC layer as one more event consumer.

In an FC layer, the Sparse Core sends its events to the **EAFC core** instead
of the EPE core. No APEC is used and no tokens are sent. Each event (y, x, c)
selects FC weight row

```
fc_base + ((y >> ps) * (W >> ps) + (x >> ps)) * cin + c
```

where ps is log2 of the pooling window side. That row of 16 signed 8-bit
weights is added to 16 saturating 16-bit output accumulators, one event per
cycle. At the end of the layer the 16 results are stored in result group
`fc_group`, one of 8. Wider FC layers are therefore run as several passes.

## 6. Program control

The **fetcher/decoder** runs a program from the Instruction SRAM. Each 128-bit
word is one layer; `exspike_pkg::instr_t` is its exact layout.

| Op | What the fetcher/decoder does |
|---|---|
| `OP_CONV` | For each of `groups` output groups: start a Sparse Core scan, wait for the scan and for the EPE pipeline to drain, then, if `fire` is set, run the FPE sweep. |
| `OP_TCONV` | The same, as a stride-2 transposed convolution. |
| `OP_FC` | One scan into the EAFC core, then store the results. |
| `OP_END` | Stop. |

Per-layer fields:
- source and destination buffer, and the K buffer;
- map height and width (up to 63);
- input channels and group count;
- the base addresses of every memory;
- kernel size (3x3 or 1x1), APEC on/off, attention mode;
- the threshold and leak bit;
- the pooling shift: max pooling of a convolution's input, or the average-pooling window of an FC layer;
- the FC result group;
- `g0`, the absolute index of the first output group.

A few patterns are expressed in the program rather than in hardware:
- **Layers larger than the Weight SRAM.** Weight, bias and neuron addresses
  use the group index counted from 0 within the instruction. The spike lane
  written back is `g0 + g`. A layer with more weight rows than the SRAM holds
  is therefore run as several instructions of a few groups each, with
  `w_base`/`b_base`/`n_base` pointing at that segment. The host reloads the
  Weight SRAM between program segments. Membrane potentials and spike maps
  stay in place.
- **Shortcut connections.** A layer with `fire=0` only accumulates. The next
  layer reads another map, possibly from the Residual Spike SRAM, into the same
  neuron addresses and fires. The two contributions add up in the membrane.
- **Ping-pong buffering.** Layers alternate between the Spike SRAM and the
  Residual Spike SRAM.
- **Timesteps.** Layers are repeated. The membrane potentials persist in the
  Neuron SRAM between repetitions.
- **Direct coding of a multi-bit input image.** Each pixel's bit-planes become
  separate spike channels. The weights are pre-shifted by the bit weight
  offline. In this design the shifted weights must still fit in 8 bits.

## 7. Top level and host interface

`exspike_top` connects:
- the fetcher/decoder and Instruction SRAM;
- the two spike SRAMs;
- the Sparse Core;
- the EPE core with Weight and Neuron SRAMs;
- the Attention Core;
- the EAFC core.

The spike SRAM read ports are shared. The Sparse Core uses them during a scan,
and the Attention Core during a fire sweep, when it reads K.

While `busy` is low, a host can:
- write any memory through `host_we/host_sel/host_addr/host_wdata`;
- read a spike map back through `host_re/host_raddr/host_rdata`;
- read FC results through `fc_res_grp/fc_res_data`.

Counters report events, overlap sequences, weight accumulations, FC events and
cycles. The reset is asynchronous and active low. SRAM contents are not reset.

## 8. Timing

The design has one clock domain, and all memories have a one-cycle read
latency. Rough costs:

| Operation | Cost |
|---|---|
| Input read | 1 cycle per source word (4^k words per position with pooling), plus 3 cycles per position |
| Filtering | 1 event per cycle |
| EPE accumulation | 2 cycles per event (weight read, add) |
| Sequence end | about 3 cycles |
| MPE update | 3 cycles per tap in the map, so up to 27 cycles per pushed position |
| FPE sweep | 4 cycles per output position plus the write-back handshake; 2 cycles more in V mode |
| EAFC | 1 event per cycle after a 2-cycle weight read |

## 9. Where this design departs from the reference description, or fills gaps

- **Neuron model.** Leaky integrate-and-fire with hard reset to 0, a
  per-channel bias and one fixed decay choice: none or 1/2. The leak is
  applied at the fire step. The input scaling of the usual LIF equation is
  left to the offline weights.
- **Convolution shape.** Kernels are 3x3 or 1x1 with stride 1 and same-size
  output, plus 3x3 stride-2 transposed convolution. Strided (downsampling)
  convolution is not built. The exact transposed-convolution mapping and the
  placement of max pooling in the input scan are choices of this design.
- **Weights must be on chip.** All weights of one instruction must be in the
  Weight SRAM: `cin * groups` rows plus the bias words. Nothing streams weights
  while a layer runs. Larger layers are split by output groups, and the host
  reloads the SRAM between program segments.
- **Direct coding.** A multi-bit input image is encoded as bit-plane channels
  with pre-shifted weights. The shifted weights must still fit the 8-bit
  weight word, which limits the input precision and the first-layer weight
  range.
- **Firing order.** Firing happens once per group, after the whole map has
  been accumulated. The alternative fires each row as soon as it has received
  all its inputs. Both give the same result; only the order of work and the
  latency differ.
- **MPE is not pipelined.** The MPE does one read-modify-write at a time
  rather than a pipelined update, which keeps it simple and makes eFIFO stalls
  frequent.
- **Own choices.** The instruction format, the FIFO depths (AER 16, eFIFO 4),
  the token handshake, and the grouping of APEC pairs along rows are this
  design's own.

## 10. Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
The full design test, `tb_exspike_top`, runs at the default sizes:
1. It loads a 9-layer program and random spikes and weights into an 8x8,
   64-channel network.
2. It compares every output map and the FC results with a behavioural
   reference model in the testbench.
3. It checks that every mechanism occurred: APEC overlaps, eFIFO stalls, all
   attention modes, shortcut accumulation, a group offset, leaking
   potentials, pooled input, transposed convolution and FC.

A second full-size test, `tb_workload_segnet`, runs the layer chain of a
spiking segmentation network, 8C3-16C3-32C3-32C3-16TC3-2TC3:
- The input is 8x8. The two transposed layers grow it to a 32x32 map, which
  fills a whole spike SRAM.
- The input is a direct-coded 4-bit image: four bit-plane channels, with
  first-layer weights pre-shifted by the bit position.
- It takes about 20k cycles.

With plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl --top-module tb_exspike_top \
    rtl/exspike_pkg.sv rtl/*.sv tb/tb_exspike_top.sv
./obj_dir/Vtb_exspike_top
```

The package must come first. Block testbenches override parameters to stay
small, for example 4 clusters or a 64-bit spike word. The top-level test takes
about 15k cycles.
