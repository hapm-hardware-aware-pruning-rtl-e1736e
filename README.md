# HAPM convolution accelerator — SystemVerilog RTL

This is an FPGA accelerator for small residual CNNs (ResNet-style networks on
CIFAR-10 sized images) on a Zynq-class SoC. Its main idea is a
**hardware-aware pruning** contract between training and hardware. The network
is pruned in units of whole 3×3 kernels, not single weights, so a pruned kernel
is entirely zero. A pruned kernel is exactly what the accelerator can detect and
skip for free at run time. That run-time mechanism is the **Dynamic Sparsity
Bypass (DSB)**: a 3×3 window whose kernel (or whose input data) is all zero is
not pushed through the multipliers. Its partial sums are passed on in 2 cycles
instead of 4.

The arithmetic is done by an array of small weight-stationary systolic
matrices. Each matrix has 2×3 processing elements, and one PE maps to one DSP
slice. They sit around a 240 KB on-chip Block RAM that holds activations,
kernels and partial sums.

The RTL covers everything on the programmable-logic side:

- the PEs and matrices, with their buffers and the bypass;
- the matrix block;
- the three "principal modules" (convolution controller, residual adder,
  pooling);
- the Block RAM and its multiplexer;
- the layer translator, which sequences a network and talks to the processor
  and the DMA engine.

The processor, the AXI CDMA and the DDR memory are not part of the RTL. Their
signals are ports of `hapm_top`, and the end-to-end testbench models them.

## System

```
      processor (AXI4-Lite master, IRQ in)            DDR3
             |  s_*            ^ irq                    |
             v                 |                        |
      +---------------- layer_translator ---------+  AXI CDMA (outside)
      |  layer table, start/status registers      |---m_* (CDMA registers)
      |  owner select, start/done of each module  |<--cdma_irq
      +--------------------------------------------+     |
             | owner        | start/cfg/done              | cdma_a / cdma_b
             v              v                             v
   +------------------ bram_mux (2 ports per requester) -------------+
   |  cdma   | conv_controller  | adder_module | pooling_module      |
   +---------+--------+---------+--------------+---------------------+
             |        | coef 24b / data 32b+flag / psum 16b*N_CU
             |        v
             |   matrix_block: N_CU x cu_matrix (2x3 PEs each)
             v
        block_ram: 61440 x 32 bit, two ports
```

A network runs as a sequence of layers, and each layer is one of three kinds:

- a 3×3 convolution, run by the controller on the matrix block;
- an element-wise addition, which closes a residual block;
- P×P pooling.

For each layer the translator gives both Block RAM ports to the module for that
layer, pulses its `start` with the layer's configuration struct, and waits for
`done`. If a convolution's kernels are kept in DDR (`coef_ext`), the translator
first copies them into the Block RAM. It does this through the CDMA's AXI4-Lite
register port, writing these registers:

| CDMA register | Value written |
|---|---|
| `CDMACR` | interrupt on completion |
| `SA` | DDR address |
| `DA` | Block RAM address |
| `BTT` | byte count; writing it starts the copy |

It then waits for the CDMA's interrupt and clears it. At the end of the network
it raises `irq`.

Processor-side register map (AXI4-Lite, 32-bit):

| offset | register | bits |
|---|---|---|
| 0x0 | control | write 1 to bit 0: start (ignored while busy) |
| 0x4 | status  | bit 0 busy, bit 1 done (write 1 to bit 1 to clear; `irq` = done) |
| 0x8 | layer   | index of the current / last layer |

The network is fixed when the design is built: `layer_translator` (and
`hapm_top`) take a `LAYERS` parameter, an array of `hapm_pkg::layer_t`.
`hapm_pkg` has constructor functions (`conv_layer`, `add_layer`, `pool_layer`)
to fill it. The default table, `DEFAULT_NET`, is one residual block on an
8×8×3 input:

- conv 3→24;
- conv 24→24;
- add (with ReLU);
- 2×2 max pooling.

The addresses of the default table are listed in `hapm_pkg.sv`.

## Number formats

- Coefficients are 8-bit Q2.5 and activations 8-bit Q3.4.
- A product is a Q6.9 value, and partial sums are carried as 16-bit two's
  complement numbers in that format. They wrap like a 16-bit bus.
- At the end of a layer the controller requantises with
  `sat8(relu?(psum >>> shift))`. `shift` is 5 for Q6.9 → Q3.4, and the shift
  truncates.
- Biases are stored as 16-bit Q6.9 values.
- The adder saturates its 8-bit sum. Pooling takes the maximum, or the sum
  shifted right by log2(P²).

## The computation-unit matrix (`cu_matrix`, `pe`)

This is the part that takes the most care to read.

**PE.** A PE is a multiplier, a 2-input mux and an accumulating adder. The mux
feeds the adder either the product `coef*data` or the partial sum arriving from
the PE below. The adder adds that to its own registered output. A `first`
control makes the adder forget the fed-back value, which starts a new sum.

**Array.** The array has CU_Y = 3 rows and CU_X = 2 columns.

- Row r, counted from the bottom, holds kernel row `CU_Y-1-r`.
- Data arrives as columns of CU_H = CU_X + CU_Y − 1 = 4 activations, one
  32-bit word. Column c of the array sees the data shifted by c rows.
- So the two columns compute two vertically adjacent outputs of the same 3×3
  window position. Column 0 covers input rows y..y+2 and column 1 covers rows
  y+1..y+3.

**One window takes four slots.**

1. Slots 0–2 carry kernel column s and data column s, for s = 0, 1, 2.
2. Slot 3 carries zeros, and every PE adds the partial sum coming from the PE
   below it.

The bottom row gets the incoming partial sum instead. That partial sum is the
bias for the first input channel, or the sum left by the previous channels for
the others.

PE(r,c) handles slot s in cycle `t0 + r + c + s`. The sum therefore climbs one
row per cycle, and column c's result is complete in the top row at
`t0 + 2·CU_Y + c`. A new window can start every CU_Y + 1 = 4 cycles, which gives
**two 3×3 outputs every 4 cycles per matrix**. The testbench checks both the
rate and the first-output latency (7 cycles from issue to visible output).

In a drawing, the staggering comes from registers that forward coefficients to
the right and data diagonally. In this RTL it comes from one delay line of
window slots, which gives every PE the same operands in the same cycles.

**Buffers.** Each matrix has four buffers:

- a data FIFO (`DATA_DEPTH` = 32 columns, each with a 1-bit "last window of
  this kernel" flag);
- a circular coefficient buffer: a kernel is written once as 3 words of
  3 coefficients and re-read for every window of the channel. It is released
  when a window flagged *last* is issued, and it can already hold the next
  kernel;
- a partial-sum input FIFO;
- a partial-sum output FIFO.

A window is issued only when all of the following hold:

- a whole window of data is in the data FIFO;
- the kernel is in the coefficient buffer;
- CU_X partial sums are waiting;
- the output FIFO will have room for the results.

**DSB.** When the bypass is built in (`DSB=1`), the matrix checks at issue time
whether the kernel or the window's three data columns are all zero. If so, the
window is not sent into the PEs. Its two partial sums go through a delay line
of the same latency, and only CU_X = 2 slots are used instead of 4. Results stay
in order, and the output is identical to the computed one, because zero
products change nothing.

**Where the saving shows, and where it does not.** Inside a matrix the bypass
saves exactly what it should: a bypassed window takes 2 slots instead of 4. In
this RTL, though, the convolution controller cannot feed the matrices faster
than about one window every 20–30 cycles (see *Speed* below). The matrices
spend most of their time waiting, and a layer takes the same number of cycles
with or without the bypass. Measured on a 16×16×8 → 16×16×8 layer with half of
the kernels pruned: 39,142 cycles either way, with 4096 windows bypassed. The
large inference-time gain reported for kernel-pruned networks needs a feed path
that keeps the matrices busy, which this controller does not have.

## Matrix block (`matrix_block`)

The block holds N_CU = 24 matrices, and each one computes a different output
channel of the same window.

- **Data and flag:** broadcast on the 32-bit data bus, with the 1-bit flag, to
  every matrix.
- **Coefficients:** the 24-bit coefficient bus is shared; `coef_sel` picks the
  matrix that takes each word.
- **Partial sums:** they move as vectors of 24 × 16 bits. A push goes into every
  matrix, and a pop takes one result from every matrix.
- **Handshake:** `data_ready` and `psum_ready` are the AND over all matrices,
  and `out_valid` is the AND of their output valids.

A matrix whose kernel is pruned runs ahead of the others, up to the depth of
its buffers.

## Convolution controller (`conv_controller`)

It runs the loop nest of one layer:

```
for f0 in 0 .. N_of-1 step N_CU                 filter group: one filter per matrix
  read N_CU biases
  for g in 0 .. N_if-1                          input channel
    load kernel (f0+cu, g) into matrix cu
    for x, for y step 2                         window positions
      push 3 data columns, push 2 partial-sum vectors
        (biases if g = 0, else the 16-bit sums saved after channel g-1)
    drain results as they appear:
      g <  N_if-1: 16-bit sums to the scratch area (two per word, two words per cycle)
      g == N_if-1: requantised bytes to the output tensor (one byte per matrix,
                   two matrices per cycle, at the final position with a border)
```

Draining has priority over feeding, so the matrices never deadlock on a full
output FIFO.

The layout of the Block RAM is fixed by the controller, and the other modules
use the same layout:

| data | address |
|---|---|
| activations (byte) | `base + (channel·W + x)·H + y` |
| kernels (word) | `coef_base + (f·N_if + g)·3 + column`; byte r = kernel row r |
| biases | 16-bit, two per word, right after the kernels in the default table |

In the activation layout, each column of 4 input rows is 4 consecutive bytes,
so one data column takes one read on each port. Tensors are stored with their
zero border, so the next layer reads them as already padded input. The
controller supports 3×3 kernels and strides 1 and 2. N_of must be a multiple of
N_CU: pad a layer with zero kernels, which the bypass then skips.

**Speed.** The controller needs 4 cycles per data column (address, read, capture,
push). Each partial-sum vector adds a reload from the scratch area, and each
output position takes several write cycles. The matrices therefore wait for
the controller, not the other way round.

- The layer formula of the design (`hapm_pkg::min_cycles`, below) gives a lower
  bound that the controller does not reach.
- Measured: 2262 cycles for an 8×8×3 → 6×6×8 layer with N_CU = 4, against a
  bound of 288.
- Measured: 45,382 cycles for the whole default network at N_CU = 24.

- Measured: 166,287 cycles for the worked example below (34×34×12 → 32×32×12,
  N_CU = 12), against its bound of 12288.

Most of the gap comes from Block RAM bandwidth, not from the matrices.

- Both 32-bit ports together move 64 bits per cycle.
- Every window position of a channel after the first moves 2 partial-sum
  vectors in and 2 out. At N_CU = 12 that is 4 × 12 × 16 = 768 bits, or
  12 cycles, before any activations are read.
- So with a single dual-port memory and 16-bit intermediate sums, about
  15 cycles per window is the floor.
- The FSM adds its own hand-over cycles on top, about 27 cycles per window in
  the example.

With 32-deep data buffers the controller never waits for buffer room:
`feed_stall` stays low in every test. The slow-down that shallow buffers cause
in the original system therefore cannot be reproduced here. Making the feed
path a pipeline that keeps the matrices busy is the obvious next step.

## Theoretical cycle count

`hapm_pkg::min_cycles` evaluates the per-layer lower bound:

```
min = N_valid · p_x · p_y · N_if · N_of/N_CU
k_o = |k - s| (1 if 0),  p_x = (N_ix - k_ox)/s_x,
g_cu = (CU_h - k_oy)/s_y,  g_ky = N_iy/k_oy - s_y,  p_y = ceil(g_ky / g_cu)
```

Here N_valid = 4 cycles per window, and input sizes include the border. For
N_CU = 12, a 34×34 padded input and N_if = N_of = 12 it gives
4·32·8·12·1 = 12288 cycles.

## Residual adder and pooling

`adder_module` reads word i of tensors A and B on the two ports. In the next
cycle it writes four saturated sums (optionally ReLU'd) to C: 2 cycles per
4 bytes. Adding whole buffers, borders included, keeps the borders zero.

`pooling_module` reads the P×P window byte by byte and keeps the maximum or the
sum. It writes one byte per output on port B: 2·P² + 1 cycles per output. It
skips the input border and writes an optional output border.

## Block RAM and multiplexer

`block_ram` is 61440 × 32 bits (240 KB) of true dual-port RAM:

- byte write enables;
- one-cycle read latency;
- read-first;
- written as an array, so synthesis can infer Block RAM.

`bram_mux` routes both ports from exactly one owner: the CDMA, the controller,
the adder or the pooling module. The translator chooses the owner. An assertion
flags a module that requests while it does not own the RAM. The translator hands
the RAM to the CDMA before it writes `BTT`, because the CDMA starts copying as
soon as `BTT` is written.

## Where this RTL departs from, or adds to, the original description

- Everything about the control and memory side is this design's own choice:
  - the register map;
  - the layer-table format;
  - the Block RAM layout;
  - requantisation by shift;
  - FSM timing;
  - the bypass done per window with a 2-cycle pass-through;
  - the `first` control of the PE;
  - buffer depths other than the data FIFO.
- The CDMA register offsets are those of the Xilinx AXI CDMA in simple mode.
- The scheduling loop is described as the layer translator's job. Here the
  translator picks the layer, and the convolution controller walks that layer's
  loop nest.
- The published loop listing uses the filter index where the input-channel
  index is meant. The channel index is used here.
- The configuration used is the largest reported one: 144 DSP slices,
  N_CU = 24, 32-deep data buffers, bypass on. The reported results table credits
  it with 7.468 GOPs, while the accompanying prose gives that figure to the
  72-DSP build.
- Only the default four-layer network is given as a layer table. The 21-layer
  ResNet that was evaluated has no published layer list, so it is not included.
- The controller is far slower than the theoretical bound (see above), so
  absolute inference times are not comparable with the reported ones. For the
  same reason the bypass gives no layer-level speed-up here, and the stalls
  that shallow data buffers cause in the original system do not occur.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pe` | 2000 random cycles against a reference accumulator |
| `tb_cu_matrix` | all outputs for normal, zero-kernel and zero-data windows; the 4-cycle window rate; the 7-cycle latency; the number of bypasses |
| `tb_matrix_block` | 3 matrices with different kernels, one of them zero, kept in step |
| `tb_conv_controller` | whole layers (stride 1 and 2, multiple channels and filter groups, with bypass) against a software convolution, border included; cycles ≥ the bound |
| `tb_adder_module`, `tb_pooling_module` | every output byte, saturation, cycle count |
| `tb_bram_mux`, `tb_block_ram` | routing; read-first and byte enables |
| `tb_layer_translator` | the CDMA register sequence, ownership, start and configuration of each layer, status, interrupt |
| `tb_conv_workload` | the worked example layer (N_CU = 12, 34×34×12 → 32×32×12, pruned kernels), full output compared, cycles printed next to the bound |
| `tb_dsb_compare` | one half-pruned layer on two datapaths, built with and without the bypass: both outputs correct, cycle counts compared |
| `tb_hapm_top` | the whole accelerator at its default parameters |

`tb_hapm_top` plays the processor, the CDMA and DDR:

1. It preloads the image through the CDMA ports.
2. It starts the accelerator over AXI4-Lite.
3. It serves two CDMA kernel copies.
4. It compares every byte of all four layer outputs with a software model.
5. It runs the network twice.

It fails if any of these never happens: a CDMA copy, a bypassed window, a
partial-sum reload, each layer type, an ownership change, or the interrupt.
It takes about 20 s in Verilator.

Simulate any of them with plain Verilator, for example:

```
verilator --binary --timing --assert rtl/hapm_pkg.sv rtl/*.sv tb/tb_hapm_top.sv \
          --top-module tb_hapm_top -Mdir obj && ./obj/Vtb_hapm_top
```

(add `-Wno-fatal` if lint warnings should not stop the build).
