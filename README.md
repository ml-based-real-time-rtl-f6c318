# Beam-loss de-blending U-Net on an FPGA SoC — fabric-side RTL

Two accelerators share one tunnel at Fermilab: the Main Injector (MI) and the
Recycler Ring (RR). 260 beam-loss monitors along the tunnel report every
3 ms, and for each monitor the control system needs to know which of the two
machines is causing the loss, so the lossy one can be tripped quickly. A
small U-Net makes that call: it takes the 260 readings of one frame and
returns 520 numbers, a pair of sigmoid scores (MI, RR) per monitor.

The system this RTL belongs to runs on an Arria 10 SoC. The ARM processor
receives frames over Ethernet and hands them to the fabric; the fabric runs
the network and interrupts the processor when the answer is ready. The idea
that shapes the fabric side is that the network IP is **not** fed as a
stream. The processor only drops a frame into an on-chip RAM and says "go".
The IP then fetches the frame itself over a memory-mapped host port, runs,
writes its results into a second RAM, and signals completion. That keeps
the processor's part down to a few bus writes and one interrupt.

This repository gives synthesizable SystemVerilog for the whole fabric side:
the two buffers, the control block, the latency counters, the memory-mapped
wrapper and the U-Net itself (11 computing layers of 20). It follows the
architecture, layer list, shapes, number formats and reuse factor of the
design published as "ML-based Real-Time Control at the Edge: An Approach
Using hls4ml" (Shi et al.). Where the publication is silent, the choices made
here are listed in [Departures and choices](#departures-and-choices).
The original IP was generated by hls4ml and a vendor HLS compiler. This
RTL is a hand-written equivalent, so its schedule and timing are its own.

## One frame, step by step

```
 processor ──32-bit bridge──┬── input buffer  (260 x 16) ──16-bit──┐
                            ├── output buffer (520 x 16) ◄─16-bit──┤
                            ├── control registers ──conduit── memory-mapped wrapper ── U-Net core
                            └── parameter window ─────────────────────────────────────┘
              irq ◄── control
```

1. The processor writes 130 32-bit words (260 samples) into the input buffer.
2. It writes GO to the control register.
3. The control block pulses `ip_start` on the conduit to the wrapper.
4. The wrapper reads the 260 samples in address order over its 16-bit
   Avalon-MM host port and fills the core's input map.
5. It starts the core, waits for it, then writes the 520 results in address
   order to the output buffer.
6. It pulses `done` on the conduit.
7. The control block sets STATUS.DONE and raises `irq` (if IRQ_EN is set).
8. The processor reads 260 words back and writes STATUS to clear DONE and
   the interrupt.

A GO that arrives while the IP is busy is ignored. The performance counters
record the cycles from step 3 to step 6 for every frame.

### Bridge address map (`deblend_node_top`)

32-bit words with word addresses; reads return one cycle later with
`hps_readdatavalid`; there are no wait states.

| Word address      | Target | Contents |
|-------------------|--------|----------|
| 0x00000 – 0x00081 | input buffer  | word a = sample 2a in bits 15:0, sample 2a+1 in bits 31:16 |
| 0x00200 – 0x00303 | output buffer | word a = result 2a (bits 15:0), result 2a+1 (bits 31:16); results 2m, 2m+1 are the pair for monitor m |
| 0x00400 + 0 | CTRL   | write bit0 = GO; bit1 = IRQ_EN (read/write) |
| 0x00400 + 1 | STATUS | bit0 BUSY, bit1 DONE; write 1 to bit1 clears DONE and irq |
| 0x00400 + 2 | LAT_LAST | cycles from IP start to IP done, last frame |
| 0x00400 + 3 | LAT_MAX  | largest such count |
| 0x00400 + 4 | FRAMES   | frames completed |
| 0x00400 + 5 | PERF_CLR | any write clears the three counters |
| 0x40000 + i | parameter i | writedata[7:0] loads parameter i (write only) |

## The network

Samples enter as `ac_fixed<16,7>` (16 bits, 7 integer bits including sign,
9 fraction bits). A map of L positions and C channels is stored
position-major: word `p*C + c`.

| # | Layer | Output (L, C) | Format x | Parameters | Cycles |
|---|-------|---------------|----------|-----------:|-------:|
| 0 | BatchNorm (scale, shift) | (260, 1) | 7 | 2 | 263 |
| 1 | Conv1D k2 + ReLU | (259, 4) | 8 | 12 | 1,815 |
| 2 | Conv1D k2 + ReLU | (258, 4) → skip S1 | 9 | 36 | 3,356 |
| 3 | MaxPool 2 | (129, 4) | 9 | – | 1,550 |
| 4 | Conv1D k2 + ReLU | (128, 6) | 9 | 54 | 1,922 |
| 5 | Conv1D k2 + ReLU | (127, 6) → skip S2 | 9 | 78 | 2,415 |
| 6 | MaxPool 2 | (63, 6) | 9 | – | 1,136 |
| 7 | Conv1D k2 + ReLU | (62, 8) | 9 | 104 | 1,304 |
| 8 | Conv1D k2 + ReLU | (61, 8) | 9 | 136 | 1,527 |
| 9 | UpSample ×2 | (122, 8) | 9 | – | 979 |
| 10 | ZeroPad 2 + 3 | (127, 8) | 9 | – | 1,019 |
| 11 | Concat with S2 | (127, 14) | 9 | – | 1,781 |
| 12 | Conv1D k2 + ReLU | (126, 6) | 9 | 174 | 4,412 |
| 13 | Conv1D k2 + ReLU | (125, 6) | 10 | 78 | 2,377 |
| 14 | UpSample ×2 | (250, 6) | 10 | – | 1,503 |
| 15 | ZeroPad 4 + 4 | (258, 6) | 10 | – | 1,551 |
| 16 | Concat with S1 | (258, 10) | 10 | – | 2,583 |
| 17 | Conv1D k2 stride 2 + ReLU | (129, 4) | 10 | 84 | 3,227 |
| 18 | Conv1D k2 stride 2 + ReLU | (64, 4) | 7 | 36 | 834 |
| – | Flatten | (256) | 7 | – | 0 |
| 19 | Dense + sigmoid | (520) | 6 | 133,640 | 519 |

The trainable parameters add up to 134,434, the published count. That total
is what fixes the kernel size at 2 and the last two strides at 2, since only
the shapes are published. Flatten costs nothing because the 64×4 map is
already stored in flattened order.

### How the engines work

`unet_core` gives every layer its own engine and its own output RAM
(`fmap_ram`, one write port, one registered read port). A sequencer starts
layer k+1 one cycle after layer k reports done, so only one engine is
active at a time. The two skip maps are read twice, once by a pooling layer
and later by a concatenation. One read port each is enough: the sequencer's
stage number selects which of the two layers drives the address.

* **Conv1D** (`conv1d_layer`). For output position p, the K·CIN input words
  it needs are adjacent in memory, from `p*STRIDE*CIN` on. They are read one
  per cycle, and each word goes to COUT multiply-accumulators at once. The
  COUT sums start at the bias. After the last tap, ReLU is applied and each
  sum is rounded and written, one word per cycle. One position costs
  K·CIN + COUT + 1 cycles.
* **Dense + sigmoid** (`dense_sigmoid_layer`). The 256 inputs are first
  copied into registers. The published reuse factor is 260, so each
  multiplier is used 260 times: every cycle two complete outputs are
  computed, each as a 256-term dot product (512 multipliers). A cycle
  earlier, that weight row is read from a store of 260 rows × 512 weights.
* **Pool / UpSample / ZeroPad / Concat** move one word per cycle (pooling:
  one output every 3 cycles). They change the number format where input
  and output differ. That happens once in the network: skip S1 is x=9, and
  the second concatenation is x=10.

### Fixed-point rules

All activations are 16-bit `ac_fixed<16,x>`, and x is set per layer as in
the table above. This "layer-based precision" is what let the published
design fit its device at 16 bits. Weights are `ac_fixed<8,3>` (5 fraction
bits) and biases `ac_fixed<8,4>` (4 fraction bits). A multiply-accumulate
runs at full precision in a 48-bit accumulator, starting from the bias
shifted into place. The result is converted to the layer's format once: it
is rounded to nearest with ties to even (AC_RND_CONV) and then saturated
(AC_SAT). `unet_pkg::requant` does this conversion, and every conversion in
the design goes through it.

The sigmoid is a 1024-entry table over [-8, 8). The dense sum v (in
`ac_fixed<16,6>`, 10 fraction bits) selects the entry
`idx = clamp(floor(v/16) + 512, 0, 1023)`, which is `floor((x+8)·64)`. The
table holds unsigned 8-bit values y, where the probability is y/256. A
table that matches a real sigmoid is `y[k] = min(255, trunc(256 / (1 + exp(-((k+0.5)/64 - 8)))))`.
The testbenches use this one. The result word is written as `y << 2`, which
is y/256 read as `ac_fixed<16,6>`: 0 means 0 and 1020 means 255/256.

## Loading a network

The trained weights are not published, and hls4ml bakes weights into its IP.
Here every parameter is writable through the parameter window instead, so
any trained model of this shape can be loaded at run time. Each parameter
is one signed 8-bit value. The global index is laid out layer by layer, in
the order of the table above. Within a layer it follows the Keras
`get_weights()` order:

| Layer | First index | Layout inside the layer |
|-------|------------:|-------------------------|
| BatchNorm | 0 | scale, shift (inference BN folded: scale = γ/√(σ²+ε), shift = β − μ·scale) |
| Conv 1 … Conv 10 | 2, 14, 50, 104, 182, 286, 422, 596, 674, 758 | kernel `[k][cin][cout]` flattened, then COUT biases |
| Dense | 794 | kernel `[i][o]` (256 × 520), then 520 biases |
| Sigmoid table | 134,434 | 1024 unsigned entries |

Loading takes 135,458 bus writes. Parameters are held in registers and
RAMs, and reset does not clear them.

## Timing

With no bus wait states, one frame costs:

* core: 36,075 cycles (the layer latencies above plus 2);
* IP, from `ip_start` to `done`: 37,378 cycles. The extra cycles are 262
  for fetching the input and 2 per result for writing the output.

At the 100 MHz clock of the published system, the IP takes 0.37 ms. The
requirement is 3 ms per frame at 320 frames per second. The published
hls4ml IP took 1.57 ms, and the whole system 1.74 ms once the processor's
share is included. The difference comes from the schedule, not from
different arithmetic: hls4ml's dataflow with reuse factor 32 is replaced
here by the per-layer engines described above. Processor-side time
(copying, driver and interrupt latency) is outside this RTL.

The latency formulas, counted from the cycle in which `start` is high to
the cycle in which `done` is high, are:

| Engine | Cycles |
|--------|--------|
| Conv1D | OUT_LEN·(2·CIN + COUT + 1) + 2 |
| BatchNorm | LEN·CH + 3 |
| MaxPool | 3·(IN_LEN/2)·CH + 2 |
| UpSample / ZeroPad / Concat | output words + 3 |
| Dense | N_IN + RF + 3 |

Every layer testbench checks its formula exactly.

## Departures and choices

These follow the publication:

* the block set: two dual-port buffers with a 32-bit processor port and a
  16-bit IP port, a control block with a conduit to the IP, a memory-mapped
  IP that reads and writes the buffers in order, an interrupt, and
  performance counters;
* the layer list, shapes, per-layer x, the 8-bit weight, bias and table
  widths, rounding and saturation, 260 inputs and 520 outputs, and dense
  reuse factor 260.

These are this design's own choices, because the publication does not give
them:

* the pooling type (max), the upsampling method (repeat), how zero padding
  is split (2+3 and 4+4), and the order of the concatenated channels (the
  up-sampled path first);
* ReLU after every convolution and a sigmoid on the dense layer. These are
  read from the publication's layer diagram legend;
* an unsigned sigmoid table with 1024 entries over [-8, 8);
* the output word format (y/256 in `ac_fixed<16,6>`);
* a single rounding per sum;
* layer-by-layer execution rather than a streaming dataflow, and the
  multiplier arrangement of the convolutions (COUT multipliers, each reused
  K·CIN ≤ 28 times);
* the register map, GO/DONE/IRQ_EN semantics, the address map, the
  parameter window and the start/busy/done conduit;
* how the control block learns that the input is complete. The publication
  says only that the bridge notifies it once the write is done. Here that
  notice is the processor's write of GO, sent after its last input word;
* the bridge. The publication names both AXI and an Avalon memory-mapped
  bridge. The fabric side here is a simple Avalon-MM agent with fixed
  latency.

Not included: the processor and its software, SDRAM controller, Ethernet,
the processor-to-fabric bridge and the PLLs. These are vendor parts that the
publication uses but does not design. The top brings the bridge's fabric
side out as ports. The published 18-bit and uniform 16-bit variants and the
MLP used during bring-up are not built.

## Files

`rtl/` (one module or package per file):

| File | Role |
|------|------|
| `unet_pkg.sv` | formats, sizes, bus structs, `requant` |
| `deblend_node_top.sv` | top: bridge decode, buffers, control, counters, IP |
| `dual_port_buffer.sv` | input/output RAM, 32-bit and 16-bit ports |
| `unet_control.sv` | registers, start, interrupt |
| `perf_counter.sv` | latency / frame counters |
| `unet_mm_wrapper.sv` | Avalon-MM host around the core, with hold assertions |
| `unet_core.sv` | the network and its sequencer |
| `fmap_ram.sv` | feature-map RAM |
| `batchnorm_layer.sv`, `conv1d_layer.sv`, `maxpool1d_layer.sv`, `upsample1d_layer.sv`, `zeropad1d_layer.sv`, `concat1d_layer.sv`, `dense_sigmoid_layer.sv` | layer engines |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`) and
`unet_ref_pkg.sv`, a bit-exact reference model of every layer and of the
whole network. The reference model rounds by integer division where the
RTL uses shifts. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/unet_pkg.sv tb/unet_ref_pkg.sv tb/tb_deblend_node_top.sv \
    --top-module tb_deblend_node_top -o sim && ./obj_dir/sim
```

For another testbench, change the last file and `--top-module`.
`tb_deblend_node_top` is the full-size, end-to-end test:

* it loads a random signed network (plus a real sigmoid table) through the
  bridge;
* it runs three frames: one with the interrupt, one with a GO sent while
  busy (which must be ignored), and one polled with the interrupt disabled;
* it compares all 520 results of each frame with the reference model;
* it checks the latency register against the cycles it observed and
  against the 3 ms budget.

The build takes about 15 s and the run under a second. `tb_unet_core` runs the core alone with two networks:
one with every parameter drawn from [0, 1), the kind of randomised model
used for bring-up, and one with signed parameters. Besides the 520
results, it compares the two skip maps, both concatenations and the
flattened map word by word.

What the tests cannot show is accuracy on real beam-loss data. The trained
weights and datasets are not public. Any network with this shape and these
formats is computed bit-exactly to the rules above, so accuracy depends only
on the weights loaded.
