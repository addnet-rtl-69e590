# AddNet: a CNN layer built on reconfigurable constant-coefficient multipliers

A general 8×9-bit multiplier in FPGA fabric costs many lookup tables. Suppose instead each
weight may take only one value from a small, fixed set of integers. Then a multiplication can
be done with two to four adders, fixed wire shifts and a few 4-to-1 multiplexers. The stored
weight is no longer a number. It is a short *index* `s`, and the index bits drive the
multiplexer selects. Such a circuit is a reconfigurable constant coefficient multiplier
(RCCM).

The coefficient sets are chosen offline so that their histogram matches a trained network's
weight distribution, which is roughly Gaussian. Training then maps each weight onto the set,
scaled by one 8-bit constant λ per layer. This RTL provides:

* three RCCMs:

  | Multiplier | Adders | Coefficients | Index width |
  |---|---|---|---|
  | 2-Add | 2 | 15 | 4 bits |
  | 3-Add | 3 | 59 | 6 bits |
  | 4-Add | 4 | 207 | 8 bits |

* a convolution-layer accelerator built from 2048 processing elements (PEs) that use them. It
  runs one layer at a time: the host sends a layer, reads its output back, and sends the next
  layer ("loopback").

Everything is synthesizable SystemVerilog-2017 in `rtl/`. There is a self-checking testbench
for each module in `tb/`.

## 1. The multiplier stages

Every RCCM is built from two kinds of adder stage. Each stage takes a 2-bit select code. A
fixed table σ maps the code to an operation on operands that are already shifted left by
constant amounts φ, so the shifts are plain wiring.

* **Topology A:** `y = ±A_p + B1`, with `A_p ∈ {A1, A2, A3, 0}`. B1 is always added and never
  negated.
* **Topology B:** `y = ±A_p ± B_q`, with `A_p ∈ {A1, A2, 0}` and `B_q ∈ {B1, 0}`.

Negation is done by inverting the operand and feeding a carry-in of one into the same adder.
So a stage is still one carry chain, which on the FPGA is one LUT level per bit.

The modules are `rccm_topology_a` and `rccm_topology_b`. Each is parameterized by its σ table
(a `typedef`ed array of packed structs from `addnet_pkg`). All stages compute at the full
product width, so wraparound never loses information.

### How the stages are wired

Stage k takes the index bits `{s[2k+1], s[2k]}`. Shifts are written `·2^n`.

| Multiplier | Stages (outputs) | Output stage B (Topology B) | Product |
|---|---|---|---|
| **2-Add** (`rccm_2add`) | A_I (Topology A) on x, 2x, 8x with B1 = 4x gives a = x·{5, 6, 12, 4} | −a+4x, −8a+4x, a−4x or 8a−4x | W_IN+8 bits |
| **3-Add** (`rccm_3add`) | A_I gives a1 = x·{9, 12, 16, 4}; A_II gives a2 = x·{2, 3, 9, 0}; both work on x in parallel | −a1+a2, −8a1+a2, a1−a2 or 8a1−a2 | W_IN+10 bits |
| **4-Add** (`rccm_4add`) | A_I gives a1 = x·{2, 3, 9, −7} and A_II gives a2 = x·{3, 4, 10, 0}, both from x. A_III adds 8·a2 to a1, 2·a1, 8·a1 or −a1 | combines a3 with 2x | W_IN+12 bits |

These are the coefficient sets the stages produce:

* **2-Add:** 0, ±1, ±2, ±8, ±28, ±36, ±44, ±92.
* **3-Add:** 0 and ± each of 1–7, 9, 10, 12, 13, 14, 16, 23, 29, 30, 32, 63, 69, 70, 72, 87,
  93, 94, 96, 119, 125, 126, 128.
* **4-Add:** 0 and 103 magnitudes, the largest being 1214.

The σ tables and shifts are in `addnet_pkg`. The full sets, with their counts of 15, 59 and
207, follow from enumerating all indices; `tb_rccm_*` checks every index against them.

Many indices give the same coefficient. The weight-to-index mapping can pick any of them.

`addnet_mult` selects one of the three multipliers with the `ARCH` parameter (2, 3 or 4).

With `PIPELINE=1` each adder level gets a register. Latency is then 2 cycles for 2-Add and
3-Add and 3 cycles for 4-Add. With `PIPELINE=0` (the default) the multiplier is purely
combinational. Register placement is a choice of this implementation.

## 2. Processing element

`addnet_pe` computes one output channel. It has:

* a local index store, `weight_index_buffer`. Each word holds P indices of b bits, where b is
  4, 6 or 8;
* P multipliers;
* an adder for the P products;
* a 32-bit accumulator;
* ReLU and an activation register.

A feature group (P values) comes with its buffer address. `in_first` starts a new sum and
`in_last` ends it.

The buffer read takes one cycle, the multipliers one cycle (more if pipelined) and the product
sum one cycle. The accumulator updates on the following edge, so:

* `act_valid` rises `LATENCY` = 3 + (multiplier latency) cycles after the group is issued;
* the PE takes one group per cycle without stalling.

Features are 8-bit unsigned activations, zero-extended to the multiplier's `W_IN` = 9
bits.

**Weight buffer depth.** The default depth is 4096 words. That is one 18 Kb block RAM in its
4K×4 shape, one per PE. It holds the 3×3×256 = 2304 indices of a 2-Add AlexNet conv3 neuron.
That layer is the case where 4-bit indices halve the block RAM count compared with 8-bit
weights.

## 3. The network layer

`network_layer` joins the following parts:

* N_PE PEs;
* a serial-to-parallel converter that gathers P features into a group and broadcasts it,
  registered, to all PEs;
* `fan_in_p2s`, which reads the PEs' results out one per cycle through an N-to-1
  multiplexer;
* `scale_unit`, which applies λ.

The host sends the input in *window order*: for each output pixel, its J×K×S receptive-field
values (im2col order). An output pixel is then a dot product over `cfg_groups` groups of P.

A layer runs as follows:

1. **Configure.** `cfg_start` samples `cfg_groups`, `cfg_neurons` (1..N_PE), `cfg_pixels`,
   `cfg_scale` (λ) and `cfg_shift`.
2. **Load weights.** The index stream is written as one contiguous burst per PE, in order:
   `cfg_groups` words for PE 0, then the same for PE 1, and so on.
3. **Run.** Feature groups are broadcast. After the last group of a pixel, every PE holds its
   result and the fan-in starts streaming results 0..cfg_neurons−1.
4. **Overlap and stall.** The next pixel accumulates while the fan-in runs. Only its *last*
   group is held back until the fan-in of the previous pixel is finished, so results are never
   overwritten. This stall shows on `ev_stall`. With fewer groups than neurons it is the
   normal steady state: the layer is then limited by the fan-in at one output per cycle.
5. **Finish.** The last output carries `out_last`, and the layer returns to idle.

**Scaling (`scale_unit`).** Each ReLU result v is turned into an 8-bit activation:

`out = min(255, floor(v·λ / 2^shift + 1/2))`

The operation is round-half-up fixed-point quantization followed by saturation.

## 4. Accelerator top (`addnet_accel_top`)

The top adds the stream plumbing of the host system around the layer:

```
input DMA 256b → stream_downsizer 256→24 → stream_fifo (input buffer, 512×24)
               → stream_downsizer 24→8 → network_layer
weight DMA 256b → stream_downsizer 256→b → stream_fifo (weight buffer, 512×b)
               → network_layer
network_layer → stream_fifo (output buffer, 512×9 incl. last)
               → stream_upsizer 8→256 → output DMA (tlast on the final beat)
```

### Streams and configuration

* All three DMA channels are AXI4-stream style ports: `tvalid`, `tready`, `tdata` and
  `tlast`.
* Packing:
  * The input stream carries three features per 24-bit word and ten words per beat. The top
    6 bits of each beat are unused.
  * The weight stream carries 256/b indices per beat.
  * Both are filled LSB first.
  * The output beat holds 32 bytes, byte k in bits 8k+7..8k.
  * A partial last beat is zero-filled.
* `cfg_start` also empties the input and weight paths. This drops words left over from a
  previous, partly used beat. A layer's DMA streams must therefore start after its
  `cfg_start`.

### Performance registers (`register_bank`)

| Address | Content |
|---|---|
| 0 | busy cycles |
| 1 | input beats |
| 2 | weight beats |
| 3 | output beats |
| 4 | stall cycles |
| 5 | pixels |
| 6 | identification constant `0xADD00002` |
| 7 | status (bit 0 = busy) |

Reads are registered: `reg_rd_data` is valid one cycle after `reg_rd_en`. The registers
clear on `cfg_start`.

### Interface outside this RTL

The PCIe core, its DMA engines and the host driver are not part of the RTL. Their streams
and the configuration appear as top-level ports.

## 5. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N_PE` | 2048 | PEs (enough for every output channel of the largest layer) |
| `P` | 1 | multipliers per PE |
| `ARCH` | 2 | 2-, 3- or 4-Add |
| `WBUF_DEPTH` | 4096 | index words per PE |
| `PIPELINE` | 0 | register each adder level |
| `DMA_W` | 256 | DMA beat width |
| `IN_BUF_W` | 24 | input buffer width |
| `BUF_DEPTH` | 512 | stream FIFO depth |

`W_IN` = 9 and `ACC_W` = 32 are parameters of the layer and the PE.

## 6. What the layer can hold

These limits apply with the default parameters:

* up to 2048 output channels and 4096 weights per channel in one pass;
* 2-Add arithmetic;
* any number of pixels.

Examples:

* AlexNet conv2–conv5 fit: at most 384 channels, with 1200–2304 weights per channel.
* ResNet's 3×3×512 convolutions (4608 weights per channel) do not fit.
* AlexNet's fully connected layers do not fit.

Pooling, residual additions and building the input windows are left to the host between
layers. For a first layer with 4-Add weights, build with `ARCH=4` (8-bit indices).

## 7. Where this RTL departs from the reference design, or fills gaps

* The reference accelerator came from a third-party CNN library. Its internal timing and
  control are not published. Everything below is therefore this implementation's own:
  * the control protocol (`in_first`/`in_last`, burst order of the weights);
  * the stall rule and the registered broadcast;
  * the buffer depths;
  * the register map;
  * the zero-extension of activations.
* The reference block diagram has a return path from the activation buffer to the
  accumulator. It is not modelled: each pixel restarts its sum.
* The reference text and its block diagram number the DMA channels differently. Here the
  channels are simply named input, weight and output.
* Only the loopback single-layer architecture is built. The full on-chip AlexNet dataflow
  pipeline and its inter-layer windowing are not.
* λ is treated as unsigned, and the right shift after scaling is a run-time input.
* The 4096-word weight buffer is derived from the block-RAM argument above. It is not a
  number stated directly.

## 8. Simulating

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>` and has a cycle
watchdog. The reference models (coefficient tables computed from σ/φ, and the
requantization formula) are in `tb/tb_coef_pkg.sv`. With Verilator 5, for example:

```
verilator --binary --timing -Irtl rtl/addnet_pkg.sv tb/tb_coef_pkg.sv \
    $(ls rtl/*.sv | grep -v addnet_pkg) tb/tb_addnet_accel_top.sv \
    --top-module tb_addnet_accel_top
./obj_dir/Vtb_addnet_accel_top
```

### What the testbenches cover

* **`tb_rccm_2add`, `tb_rccm_3add`, `tb_rccm_4add`:** check every index against the
  coefficient set and random products. In pipelined mode they also check the latency.
* **`tb_addnet_pe`:** runs a 3-Add PE with P=2, pipelined. It checks weight reloading and the
  5-cycle latency.
* **`tb_network_layer`:** runs two layers on a 6-PE array. It forces stalls, ReLU zeros and
  clipping.
* **`tb_addnet_accel_top`:** drives the top end to end at 40 PEs, P=2. It runs two layers;
  the second takes the first layer's output as its input. It uses random valid/ready on all
  streams. It counts feature stalls, input and output back-pressure, partial output beats,
  ReLU zeros and clipping, and fails if any never happened.
* **`tb_addnet_accel_top_full`:** runs the same flow with every parameter at its default. A
  2048-neuron layer is followed by a 50-neuron layer with 4096 inputs, which fills every
  weight buffer. It takes about two minutes in Verilator.
* **`tb_workload_alexnet`:** runs the AlexNet conv2, conv3 and conv5 layer shapes on a
  384-PE build with the other parameters at their defaults, one after the other: 1200, 2304 and 1728 weights per channel. For each
  layer it cuts two output pixels' receptive fields, with padding and stride, out of a
  random activation map.
* **`tb_workload_alexnet_conv1`:** runs the 7×7×3, stride-2 first layer on a 96-PE, 4-Add
  build.
