# A spiking inference accelerator built from multiplexers and adders

A spiking neural network passes binary spikes between layers instead of
real-valued activations. The input of a convolution is then a 0/1 map, and a
product "weight x input" is either the weight or zero. This accelerator uses
that fact: its processing elements have no multipliers. Each one has three 2:1
multiplexers, which pass a weight or zero depending on whether an input
spike is present, and an adder that sums them into a running partial sum.
Sixty-four such elements form an 8x8 array that computes one 8x8 tile of an
output feature map. A second unit, the aggregation core, takes each finished
tile and does the rest of the neuron work: it adds an optional residual
partial sum, applies a folded batch normalisation `y*G + H`, adds the result
to the membrane potential from the previous timestep, and fires a spike when
the potential reaches the threshold. After a spike it subtracts the threshold
from the potential. Membrane potentials live in a two-bank (ping-pong) store:
in each timestep one bank is read and the other written, and the roles swap
for the next timestep.

The accelerator is the programmable-logic half of a processor + FPGA system.
The processor converts frames to spikes, loads weights, batch-norm
coefficients and spikes over an AXI4-Lite port, starts one *pass* per layer
and timestep, and reads back the output spikes. Everything in `rtl/` is
synthesizable SystemVerilog, with parameters that default to the published
sizes:

| Item | Size |
|---|---|
| PE array | 8 x 8, three 8-bit weight multiplexers per PE |
| Partial sum, membrane potential, threshold | 16 bit, signed |
| Input spike buffer | 128 B (1024 spikes) |
| Weight buffer | 8 KB = 64 kernel slots of 128 B |
| Residual partial-sum buffer | 128 kB |
| Membrane potential store | 64 kB, two banks of 32 kB |
| Output spike buffer | 56 kB |
| Host link | AXI4-Lite, 32-bit data, 18-bit byte address |

The published FPGA build runs at 100 MHz. Nothing in this RTL depends on
that clock rate.

## The processing element and the 3 + 1 cycle rhythm

`rtl/pe.sv`. Each cycle a PE receives three weights `W1..W3`, which are one
row segment of a kernel, and three spikes `I1..I3`. It adds the selected
weights to its accumulator. A 3x3 kernel therefore needs three accumulate
cycles, one per kernel row. A fourth, *final* cycle copies the sum into the
PE's output register `psum`, where the aggregation core can take it. So a
tile of a 3x3 layer with one input channel costs 3 + 1 cycles.

* `clr` together with `acc_en` starts a fresh sum. This happens on the first
  accumulate of every tile.
* `psum_valid` is high for one cycle, the cycle after `fin`.
* The accumulator saturates at the 16-bit limits. It does not wrap.

Larger kernels are split into row segments of three weights. A KxK kernel
needs `ceil(K/3)` segments per row, and the weight buffer feeds zeros past
column K. So a kernel costs `K * ceil(K/3)` accumulate cycles per input
channel:

| K | Accumulate cycles per input channel |
|---|---|
| 3 | 3 |
| 5 | 10 |
| 7 | 21 |
| 11 | 44 |

Several input channels accumulate into the same sum before the one final
cycle.

## Mapping a layer onto the array

`rtl/spiking_core.sv`, `rtl/sia_controller.sv`. This is the part that takes
the most care, because the published description gives only the array and
the row-by-row rhythm. This implementation maps a layer as follows.

**Tiles.** PE `(r, c)` computes output neuron `(oy0 + r, ox0 + c)` of one
output channel. All 64 PEs receive the same three weights in a cycle.
Output maps of up to 32x32 are covered by up to 4x4 tiles. Tiles at the
right or bottom edge may be only partly inside the map. Neurons outside the
map are masked by the aggregation core and never spike.

**Spike fetch.** For kernel row `kr` and segment start column `kc`, PE
`(r, c)` needs these input positions:

    iy = (oy0 + r) * s + kr - p
    ix = (ox0 + c) * s + kc + m - p      m = 0, 1, 2

Here `s` is the stride (1 or 2) and `p = (K-1)/2` is the "same" padding.
Positions outside the map read as 0. The input buffer is a flat 1024-bit
vector holding the input channels one after another, each one row-major:

    bit = ch_base + iy * in_w + ix
    ch_base = i * in_h * in_w

The fetched spikes are registered for one cycle. The weights come out of the
synchronous weight memory in that same cycle, so the two stay aligned.

**Kernel slots.** The kernel from input channel `i` to output channel `o` is
in slot `o * in_ch + i`. A slot holds the K*K signed bytes row-major from the
start of its 128-byte slot.

**Loop order of a pass.** From outermost to innermost:

    output channel o
      tile row ty
        tile column tx
          input channel i
            kernel row kr
              row segment j

Every innermost step is one accumulate cycle. After the last step of a tile
comes the final cycle. Tiles are numbered `n` in this loop order. Tile `n`
owns memory words `8n .. 8n+7` in the membrane store and the residual
buffer, and bytes `8n .. 8n+7` of the output buffer. Each of these words or
bytes is one PE row.

**Limits of one pass.**

* `in_ch * in_h * in_w <= 1024`, so all input spikes fit the buffer.
* `in_ch * out_ch <= 64`, so all kernels fit the weight buffer.
* `K <= 11`.
* `out_ch * tiles * 8 <= 2048`, so all potentials fit one membrane bank.

The testbench keeps to these limits. An assertion in the controller checks
the configuration.

## Aggregation: residual, batch norm, activation

`rtl/aggregation_core.sv`, `rtl/batchnorm_unit.sv`,
`rtl/activation_unit.sv`. When a tile's sums are ready the controller hands
them over with `load`. The core processes one PE row per cycle through eight
lanes. For row `r` it first issues reads of the membrane store and the
residual buffer. One cycle later it computes each lane and writes the
results:

    y   = sat16(psum + residual)             residual only if res_en
    ybn = sat16((y * G) >>> 8 + H)           G, H of the tile's output channel
    u0  = first_ts ? 0 : U_prev
    u0  = lif ? u0 - (u0 >>> leak) : u0      LIF leak
    u   = sat16(u0 + ybn)
    spike = (u >= Vth) && inside_map
    U_next = spike ? u - Vth : u             reset by subtraction

`U_next` is written to membrane word `8n + r`. The eight spikes of the row
are written as one byte to output byte `out_base + 8n + r`, with bit `c` for
column `c`.

Timing of the core:

* A tile keeps it busy for 9 cycles. `ready` comes back on the 10th.
* A 3x3 tile with one input channel arrives every 4 cycles. The PE output
  registers and one hand-over in flight give some slack. Beyond that, the
  controller holds the final cycle of the next tile until the core is free,
  and counts each such cycle as a *stall*.
* The testbench checks the exact pass length:

      stalls = (tiles - 1) * max(0, 11 - A)
      cycles = tiles * (A + 1) + stalls + 12

  Here `A` is the number of accumulate cycles per tile. So a pass with
  `A >= 11` runs without stalls.

`G` is a signed Q8.8 number (256 means 1.0). `H` is an integer on the
partial-sum scale. Both come from a 64-entry table that the processor loads
with each layer, one entry per output channel.

## Membrane ping-pong across timesteps

`rtl/membrane_pingpong.sv`. The store has two banks, U1 and U2, of 2048
words. Each word holds eight 16-bit potentials.

* With select 0, a pass reads U1 and writes U2.
* With select 1, it reads U2 and writes U1.

When a pass ends, the controller flips the select, so the next timestep of
the same layer reads what this one wrote. The bank contents are not reset.
The first timestep of a layer sets `first_ts`, which makes the previous
potentials read as zero. CTRL bit 1 forces the select back to 0.

The store has no per-layer base address. So a network of several layers on
one input runs layer by layer. For each layer, all timesteps run as
successive passes. Each timestep writes its output spikes to its own region
of the output buffer, where the processor or the next layer can find them.

## Host interface

`rtl/axil_config.sv`, `rtl/sia_pkg.sv`. The accelerator is one AXI4-Lite
slave with a 32-bit data path. Its handshake:

* A write needs AWVALID and WVALID in the same cycle. BVALID follows one
  cycle later.
* A read returns RVALID three cycles after it is accepted.
* Unmapped addresses and writes to the output window answer SLVERR.

Byte addresses:

| Address | Name | Contents |
|---|---|---|
| 0x00000 | CTRL (W) | bit 0 start a pass, bit 1 reset the ping-pong select |
| 0x00004 | STATUS (R) | bit 0 busy, bit 1 done, bit 2 ping-pong select |
| 0x00008 | SHAPE | [5:0] in_w, [13:8] in_h, [19:16] K, [20] stride 2 |
| 0x0000C | CHANS | [6:0] in_ch, [22:16] out_ch |
| 0x00010 | NEURON | [15:0] Vth, [19:16] leak shift, [24] LIF, [25] first timestep, [26] residual add, [27] chain |
| 0x00014 | OUTBASE | [15:0] output byte base |
| 0x00018 | RESBASE | [12:0] residual word base |
| 0x0001C | CYCLES (R) | cycles of the last pass |
| 0x00020 | STALLS (R) | stall cycles of the last pass |
| 0x00024 | SRCBASE | [15:0] output byte base of the previous layer's spikes (chain) |
| 0x00100 | BN table | 64 words, [31:16] G, [15:0] H |
| 0x00200 | input spikes | 128 bytes |
| 0x02000 | weights | 8 KB, slot s at 0x2000 + 128 s |
| 0x10000 | output spikes (R) | 56 kB |
| 0x20000 | residual sums | 128 kB, 16 bytes per word, lane l in bytes 2l, 2l+1 |

The top module also has a `done` output that rises when a pass ends. It can
serve as an interrupt.

To run one pass:

1. Write the weights, the BN table and the layer registers.
2. Write the input spikes, or set `chain` and SRCBASE to take them from
   the output buffer (see the next section).
3. Write the residual sums, if `res_en` is set.
4. Write CTRL = 1.
5. Poll STATUS until bit 1 (done) is set, or wait for `done`.
6. Read the output spikes.

For the next timestep, write the new input spikes, clear `first_ts`, and
start again.

## Feeding one layer's output to the next

`rtl/layer_input_select.sv`. The first layer's spikes come from the
processor. Every later layer can take its input from the output buffer
instead, without the spikes leaving the accelerator. To do this, the
processor sets the `chain` flag and points SRCBASE at the previous layer's
output of the same timestep. The pass then begins by copying those spikes
into the input scratchpad.

The copy has to reorder the spikes. The output buffer holds one byte per PE
row, tile by tile. The input scratchpad holds one bit per neuron, channel by
channel and row-major inside a channel. The copy engine reads one output
byte per cycle and scatters its eight bits:

    output byte  SRCBASE + 8*(o*nty*ntx + ty*ntx + tx) + r,  bit c
    input bit    o*in_h*in_w + (8ty + r)*in_w + (8tx + c)    if inside the map

Here `nty = ceil(in_h/8)` and `ntx = ceil(in_w/8)`. The shape used is the
current layer's input shape, which is the previous layer's output channels
and map. The copy takes `in_ch * nty * ntx * 8 + 1` cycles, and these are
counted in CYCLES.

To keep all timesteps of one layer available to the next layer, give each
timestep its own OUTBASE. The testbench runs a whole layer, all its
timesteps, before the next layer.

## What one pass holds, and how long it takes

The published evaluation uses CIFAR-10 ResNet-18 and VGG-11 layers:

* 3x3 convolutions with 64, 128, 256 and 512 channels on 32x32, 16x16, 8x8
  and 4x4 maps;
* a 512x10 fully connected layer;
* a sweep of 3x3 to 11x11 kernels with 64 output channels on a 32x32 map.

None of the full layers fits one pass. The table below shows the largest
slice of each shape that does fit, with its cycles per pass. These are
compute cycles only, without the AXI4-Lite transfers. They are measured by
`tb_sia_workloads`, which checks every output neuron of each run.

| Slice (in_ch -> out_ch) | Cycles per pass | Limit reached |
|---|---|---|
| 3x3 on 32x32, 1 -> 16 | 3076 (2040 stalls) | input buffer, membrane bank |
| 3x3 on 16x16, 4 -> 16 | 844 | input buffer, kernel slots |
| 3x3 on 8x8, 16 -> 4 | 208 | input buffer, kernel slots |
| 3x3 on 4x4, 64 -> 1 | 205 | input buffer, kernel slots |
| fully connected, 64 -> 1 | 77 | kernel slots |
| 5x5 on 32x32, 1 -> 16 | 3083 (255 stalls) | input buffer, membrane bank |
| 7x7 on 32x32, 1 -> 16 | 5644 | input buffer, membrane bank |
| 11x11 on 32x32, 1 -> 16 | 11532 | input buffer, membrane bank |

How to read these numbers:

* With one input channel, a 3x3 tile has only 3 accumulate cycles. The
  aggregation core allows at most one tile every 12 cycles, so it sets
  the pace and most cycles are stalls.
* A 5x5 tile has 10 accumulate cycles, so the two cores are nearly
  balanced: one stall per tile. From 7x7 upwards the PE array sets the
  pace, and the time grows with `K * ceil(K/3)`.
* The published latencies hardly change from 3x3 to 11x11. So they are
  probably dominated by moving data rather than by this compute time.

## Where this design departs from, or adds to, the published description

* **Adder width.** The element is described with an 8-bit adder, but also
  as producing a 16-bit partial sum. This design follows the 16-bit partial
  sum, so the adder is 16 bits wide.
* **Row timing.** "Three cycles for each of three rows plus one" is read as
  one cycle per kernel row, 3 + 1 cycles in total.
* **Sign of H.** The batch-norm folding gives `y*G + H`, but the formula
  given for `H` carries a sign that fits `y*G - H`. This design computes
  `y*G + H` and leaves the sign of `H` to the processor.
* **Where potentials are stored.** One sentence stores updated potentials in
  the input scratchpad. The memory description gives them the 64 kB
  ping-pong store. This design follows the ping-pong store.
* **Event-driven accumulation.** This is read as: a spike selects its
  weight, and no spike adds zero. A row cycle is never skipped when its
  segment has no spikes. This keeps the published fixed 3 + 1 cycles.
* **Bias.** The published text adds a bias after batch normalisation. Here
  the bias is folded into `H`; there is no separate bias register.
* **Leak.** The LIF leak is not specified. Here it is a shift:
  `U - (U >>> leak)`, with the shift set per layer.
* **This design's own choices.** The published description does not specify these:
  * the tiling and the loop order;
  * padding and stride;
  * the kernel-slot layout and kernels up to 11x11;
  * the eight aggregation lanes and their schedule;
  * the stall rule and the cycle and stall counters;
  * the fixed-point format of G;
  * saturation everywhere;
  * the register map;
  * reset values: an 8x8 map, 3x3 kernel, threshold 256 and G = 1.0 for
    every channel.
* **Not built: accumulation across passes.** Only the residual input can
  bring partial sums from outside a pass. A layer larger than one pass
  (for example 64 input channels at 32x32) needs partial sums over input
  channels combined before the activation. This design has no such path.
  Such layers can be run only if the processor supplies the missing sums
  through the residual buffer. The full ResNet-18 and VGG-11 CIFAR-10 layers
  are all larger than one pass. An 11x11 kernel and a single-channel 32x32
  map with 16 output channels do fit.
* **Fully connected layers** map as 1x1 kernels on a 1x1 map. Input channel
  `i` is spike `i`. One pass holds at most 64 weights, so a 64-input,
  1-output slice.
* **Layer-to-layer data.** The published flow chooses inside the logic
  between first-layer data and the previous layer's output. How it does so
  is not described. The copy engine, the chain flag and SRCBASE are this
  design's own.

## Files

All files are in `rtl/` and `tb/`.

| Module | Role |
|---|---|
| `sia_pkg` | widths, sizes, address map, `host_req_t`, `layer_cfg_t` |
| `sia_top` | the accelerator |
| `axil_config` | AXI4-Lite slave, registers, BN table |
| `sia_controller` | pass sequencer |
| `spiking_core`, `pe` | 8x8 PE array and spike fetch |
| `aggregation_core`, `batchnorm_unit`, `activation_unit` | neuron update |
| `layer_input_select` | copies the previous layer's output into the input buffer |
| `input_scratchpad`, `weight_scratchpad`, `residual_memory`, `membrane_pingpong`, `output_scratchpad` | buffers |

Each module has a self-checking testbench `tb/tb_<module>.sv`. The workload
testbench is `tb/tb_sia_workloads.sv`. Every testbench checks
against values computed independently inside the testbench, and ends by
printing `TB_RESULT checks=N failures=M`.

`tb_sia_top` runs the whole accelerator at its default sizes. It acts as the
processor over AXI4-Lite. It compares every output spike, and every cycle
and stall count, with a reference model written in the testbench. Because
the model carries its own membrane potentials across timesteps, a wrong
stored potential shows up as a wrong spike later. It runs these layers:

* 10x10, 3x3, IF, two input and three output channels, three timesteps;
* chained on that layer's output: 3x3, stride 2, LIF;
* 12x12, 5x5, stride 2, LIF, with residual input;
* chained on that layer's output: 6x6, 5x5, three output channels;
* 9x9, 11x11;
* 8x8, 7x7, LIF, with residual input;
* a 64-input fully connected slice;
* 32x32, 3x3, 16 output channels, two timesteps.

It counts these mechanisms and fails if any of them never happened:

* IF and LIF layers;
* residual add;
* stride 2;
* multi-segment kernel rows;
* stalled passes;
* spikes, reset by subtraction, and neurons that stayed silent;
* partly filled tiles;
* ping-pong swaps;
* a fully connected layer;
* chained layers;
* the AXI error response.

To simulate with plain Verilator 5, from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        --top-module tb_sia_top rtl/sia_pkg.sv tb/tb_sia_top.sv
    ./obj_dir/Vtb_sia_top

Replace `tb_sia_top` with any other testbench name to run that testbench.
The full-size run finishes in seconds. Synthesis reads the same files. The
memories are plain arrays with synchronous reads, which map to block RAM.
