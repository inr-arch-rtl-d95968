# Streaming dataflow kernels for gradient graphs of implicit neural representations

An implicit neural representation (INR) stores a signal, for example an
image, as the weights of a small network (typically a SIREN: layers of
`sin(W x + b)`) that maps coordinates to values. Editing such a signal
directly in weight space needs the network's output *and its first and
higher-order gradients* with respect to the input coordinates. Written out
by automatic differentiation, those gradients form large computation graphs
of matrix multiplies, transposes, element-wise products, sines and cosines,
in which almost every intermediate result is used once or twice and then
discarded.

This RTL implements the hardware side of the INR-Arch approach (Abi-Karam,
Sarkar et al., "INR-Arch: A Dataflow Architecture and Compiler for
Arbitrary-Order Gradient Computations in Implicit Neural Representation
Processing"): instead of keeping every intermediate tensor in a scratchpad,
each graph node becomes its own hardware kernel, all kernels run at the same
time, and every graph edge is a small FIFO (an *array stream*) that holds
only a few elements of the tensor flowing along it. Memory then scales with
the FIFO depths rather than with the tensor sizes, and the kernels overlap.

The repository contains the kernel library, the array-stream FIFO, and one
complete accelerator built from them: a SIREN layer together with the
gradient of that layer with respect to its input. The compiler that
generates such accelerators for whole networks (graph extraction,
de-duplication, deadlock analysis and FIFO sizing) is software and is not
part of this RTL.

## Array streams

An array stream carries a multi-dimensional array from exactly one producer
kernel to exactly one consumer kernel, always in row-major order. Each beat
is a *block* of `BS` elements. The shape of the array is not sent on wires:
it is fixed at elaboration by the parameters of the two kernels, which is
what lets a kernel such as transpose or select know where each element
belongs.

`array_stream_fifo` is the storage of one stream:

* valid/ready handshake on both sides; a block moves on a clock edge where
  both are high;
* `DEPTH` blocks of storage, default 2 (the smallest useful FIFO);
* one cycle from push to visibility at the output; a full FIFO accepts a
  push in a cycle it is also popped;
* `peak_occ` reports the largest number of blocks held at once since reset.
  That is the quantity a depth optimiser reads back from a run to size the
  FIFO in the next build.

Elements are 32-bit signed fixed point with 10 integer bits and 22 fraction
bits (Q10.22, range about +-512, resolution 2.4e-7). `rtl/inr_pkg.sv`
defines the type and the two arithmetic helpers: addition wraps on overflow,
multiplication keeps the floor of the exact product and wraps. There is no
saturation anywhere.

## The kernel library

All kernels share the valid/ready stream interface, a synchronous
active-low reset `rst_n`, and a block size parameter `BS`.

| Kernel | Degree | Buffers | Rate | Latency |
|---|---|---|---|---|
| `elementwise_add` | 2:1 | none | 1 block/cycle | 1 cycle |
| `elementwise_mul` | 2:1 | none | 1 block/cycle | 1 cycle |
| `elementwise_sin`, `elementwise_cos` | 1:1 | pipeline only | 1 block/cycle | 27 cycles |
| `mm` (C = A B) | 2:1 | all of A and B | ceil(K/P) cycles per element of C | all inputs, then M N ceil(K/P) + 2 cycles |
| `transpose` | 1:1 | whole array | 1 block/cycle out | whole input, then drain |
| `dim_select` | 1:1 | none | 1 element/cycle in | - |
| `block_size_adapter` | 1:1 | one block | 1 input block/cycle | 1 cycle |
| `copy_stream` | 1:N | none | 1 block/cycle | 0 cycles |

Notes on the less obvious ones:

* **Element-wise kernels** read both inputs in the same cycle and register
  the result. A kernel that needs both operands waits for the slower input.
  This matters for deadlock (below).
* **Sine and cosine** use a pipelined CORDIC per lane (`cordic_sincos`).
  The angle is first reduced with `k = round(x * 2/pi)` and
  `r = x - k * pi/2`, with pi/2 held to 40 fraction bits, so the whole Q10.22
  range is handled. Then 24 rotation stages on `r` run with 30 fraction
  bits, and a final stage folds the quadrant `k mod 4` back in. Measured error
  is below 1 LSB against double precision. A stall freezes the whole
  pipeline, so the 27 stages also act as 27 blocks of buffering.
* **`mm`** has two phases. In LOAD it reads A (M x K) and B (K x N) into
  local buffers. The two inputs are read independently, each whenever its
  own stream has data. In COMPUTE it produces C in row-major order. `P`
  multipliers and an adder tree form P terms of one dot product per cycle,
  so `P` is the matrix-multiply parallelism factor. Products are truncated
  to Q10.22 and accumulated in Q10.22. Nothing is written before both inputs
  are complete, which is the defining property of this kernel in the
  dataflow.
* **`transpose`** must hold the whole array before its first output block,
  which is why a graph compiler works hard to remove transposes (pairs cancel;
  duplicates of the same input are merged). A 2-D permute is the same
  operation.
* **`copy_stream`** is how one result feeds several kernels while keeping
  one producer and one consumer per stream. A block is offered to all
  outputs at once. An output that takes it is marked done, and the input is
  consumed when every output has it. No output can run more than one block
  ahead of another, so when any output stream is full the copy stops reading.
* **`dim_select`** is `torch.select(dim, index)` on a 2-D array. It walks
  each input block one element per cycle and packs the elements of the
  chosen row (`DIM=0`) or column (`DIM=1`) into output blocks.
* **`block_size_adapter`** re-packs a stream between block sizes that divide
  each other. Element 0 of a block is always the earliest element.

## Why FIFO depths decide whether the design runs

Kernels with different access patterns, joined by shallow FIFOs, can
deadlock. The smallest case is the graph Input -> {Mm, Cos} -> Mul:

```
            +--> Mm  (needs all of its input before any output) --+
 Input --copy                                                      +--> Mul
            +--> Cos (one element out per element in) ------------+
```

Mul needs one element from each side. Mm produces nothing until it has the
whole input. Cos runs ahead, its output FIFO fills because Mul is waiting
for Mm, so Cos stops reading. Then the copy stops too, because its Cos-side
output is full, and Mm never receives the rest of its input. Every kernel
now waits for another.

`tb/tb_deadlock_example.sv` builds this graph from the real kernels
(`tb/deadlock_graph.sv`, 8 x 8 input, 64 elements, `BS = 1`):

* with every stream at depth 2 the graph freezes with the source stalled
  after 33 of 64 elements and no result out. The idealised account (stall at
  the fifth element) counts only the FIFOs. Here the 27-stage Cos pipeline
  and the kernels' registers hold the rest;
* with the one stream into Cos made as deep as the whole input (64 blocks),
  the graph completes and all 64 results are correct.

The order of operations inside one kernel matters just as much. In
`tb/tb_fifo_order_example.sv` a producer writes A0, A1, A2 and then B0 into
two FIFOs, and a consumer reads B0 first and then A0 to A2. With depth 2 the
producer blocks on A2, so B0 never arrives and the consumer never starts.
With A at depth 3 both processes run to the end. The `peak_occ` output of
the FIFO then reports 3 for A. That is the "observed depth" used to size
streams.

In a generated accelerator, a compiler finds deadlock-free depths by
analysing the order of every FIFO read and write. It then shrinks each depth
as far as it can without slowing the design. That analysis is not hardware.
Its result enters the RTL as the per-stream `DEPTH` parameter of the top, and
its input can come from the `fifo_peak` outputs.

## The example accelerator: one SIREN layer and its input gradient

`inr_arch_top` computes, for a batch of coordinates X (BATCH x IN_F), a
weight W (HID x IN_F), a bias B and an upstream gradient U = dL/dY
(both BATCH x HID):

```
Z = X W^T + B          Y = sin(Z)                         (forward)
D = U .* cos(Z)        G = dL/dX = D W                    (backward)
G_SEL = column SEL_IDX of G
```

The SIREN frequency factor omega_0 is assumed to be folded into W and B.
B must be supplied already broadcast to BATCH x HID. This layer contains
every kernel type found in SIREN gradient graphs (Mm, Add, Mul, Sin, Cos, T,
Select), wired by the same rules a generated design follows:

```
 X --[S_X]--> adapter 1->BS --[S_XB]-------------------------> mm1.A
 W --[S_W]--> copy --[S_W1]--> transpose --[S_WT]------------> mm1.B
                  \--[S_W2]-------------------------------------> mm2.B
 mm1 --[S_MM1]--> add <--[S_B]-- B
 add --[S_Z]--> copy --[S_Z1]--> sin --[S_Y]--> Y
                    \--[S_Z2]--> cos --[S_C]--> mul.B
 U --[S_U]--> mul.A ;  mul --[S_D]--> mm2.A
 mm2 --[S_G]--> copy --[S_G1]--> adapter BS->1 --[S_GN]--> G
                    \--[S_G2]--> dim_select --[S_GS]--> G_SEL
```

`mm1` is X W^T (M=BATCH, K=IN_F, N=HID) and `mm2` is D W (M=BATCH, K=HID,
N=IN_F). The transposed weight is made on chip from the same W stream. Each
of the 20 streams is one `array_stream_fifo`. The names in
`rtl/inr_arch_top_pkg.sv` index the `DEPTH` parameter and the `fifo_peak`
output.

Defaults: `BATCH=64`, `IN_F=2` (x, y), `HID=256`, `P=64`, `BS=4`,
`SEL_IDX=0`, all depths 2. All depths of 2 are enough here because `mm`
drains each input independently and every fan-out ends in a kernel that
either streams or buffers everything. No path waits on a partly filled
sibling path.

**Ports.** One stream per graph input and output. `x`/`g` carry one
element per beat, the others `BS` elements, all row-major. Inputs of one
operation may be offered in any interleaving. Operations may follow each
other back to back, and each kernel returns to its loading state after its
last output.

**Timing.** At the default size one operation takes about 17,000 to 21,000
cycles, depending on how often the outputs are ready. The time is dominated
by `mm1`, which writes 64 x 256 results at one per cycle (K = 2 uses only 2
of its 64 multipliers). Everything downstream overlaps with it. `mm2`
(K = 256, 4 cycles per result) finishes about 520 cycles after its last
input.

**Storage.** `mm1` buffers 640 words, `mm2` 16,896 words (its A operand is
the whole 64 x 256 D), and `transpose` 512 words. In total that is about
70 KiB of buffer plus 20 FIFOs of two blocks each.

## Chaining layers: the gradient of a two-layer network

A whole INR gradient graph is a chain of such layers. In the backward pass
the layers are visited in reverse. `tb/siren2_graph.sv` joins two
`inr_arch_top` instances into the input gradient of a two-layer SIREN:

```
 X -> layer 1 --Y1--> adapter BS->1 --> layer 2 --> Y2
      layer 1 <--U1-- adapter 1->BS <--G2-- layer 2 <-- U2
      layer 1 --> G1 = dL/dX
```

Layer 1 now has the deadlock shape described above. Its cosine branch waits
for U1. U1 exists only after layer 2 has taken all of Y1, because layer 2's
first `mm` buffers its whole input. Until then, every cos(Z1) block must be
stored somewhere. With depth 2 on every stream the graph stops. With
layer 1's stream `S_C` (after the cosine) set to the whole BATCH x H1 array,
`DEPTH` = BATCH*H1/BS blocks, it finishes. The sine branch and all other
streams can stay at depth 2.

`tb/tb_siren_gradient.sv` runs both versions at a reduced size: batch 16,
2 inputs, widths 8 and 4, `P=4`, `BS=2`. The depth-2 version stops with no
output. The sized version (64 blocks) matches a real-arithmetic reference
within 8 LSB on both Y2 and G1.

## What follows the paper and what does not

Taken from the paper: array streams as fixed-depth FIFOs in row-major order
with a block size and compile-time shape; the kernel set; the 1:N copy
stream for every fan-out; the buffer-then-write behaviour of Mm and T and
the fully streaming behaviour of Cos; a default FIFO depth of 2; the Q10.22
number format; batch 64; matrix-multiply parallelism 64.

Choices of this design, where the paper gives no detail:

* valid/ready handshakes and synchronous active-low reset;
* block size 4 and hidden width 256 (SIREN's common default);
* `copy_stream` delivers to all outputs in one cycle rather than one output
  after the other; its blocking behaviour is the same;
* element-wise kernels read both inputs in the same cycle rather than
  alternately;
* wrap-around and truncation in all arithmetic; `mm` accumulates in the
  element format;
* meaning of the parallelism factor (P terms of one dot product per cycle),
  and `mm` reading its two inputs independently;
* CORDIC for sine and cosine;
* element-serial `dim_select`;
* `fifo_peak` as a hardware output.

Not provided: the compiled accelerators for whole INR-editing models. Their
graphs (hundreds of nodes), layer sizes and per-stream depths are not
published in a form that could be turned into a netlist. The compiler
passes, the trace-based simulator used to order FIFO operations, and the
FPGA platform (memory and host interface, 300 MHz clock) are also missing.
The accelerator here is one layer of such a graph. Two layers are chained
in a testbench only.

## Files

`rtl/` (one module or package per file):

* `inr_pkg.sv`: element type and fixed-point helpers
* `array_stream_fifo.sv`: array-stream storage
* `copy_stream.sv`, `block_size_adapter.sv`: stream plumbing
* `elementwise_add.sv`, `elementwise_mul.sv`, `elementwise_sin.sv`,
  `elementwise_cos.sv`, `cordic_sincos.sv`: element-wise kernels
* `mm.sv`, `transpose.sv`, `dim_select.sv`: buffering and shape kernels
* `inr_arch_top_pkg.sv`, `inr_arch_top.sv`: the SIREN-layer accelerator

`tb/`: one self-checking testbench per module (`tb_<module>.sv`). Also:

* `tb_inr_arch_top.sv`: three operations at a reduced size with random
  handshakes;
* `tb_inr_arch_top_full.sv`: one operation at the default size;
* `tb_deadlock_example.sv` with `deadlock_graph.sv`: the deadlock
  experiment;
* `tb_fifo_order_example.sv`: the two-FIFO operation-order example;
* `tb_siren_gradient.sv` with `siren2_graph.sv` and `stream_src.sv`: two
  chained layers, with depth 2 and with the sized cosine stream.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog that counts a failure if it hangs. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb -Irtl rtl/inr_pkg.sv rtl/inr_arch_top_pkg.sv \
    tb/tb_inr_arch_top.sv --top-module tb_inr_arch_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another. The full-size testbench takes
about 10 s to build and run.

What the testbenches establish:

* every kernel is checked against values computed independently in the
  testbench (integer models of the fixed-point rules and real-valued
  references), under random valid/ready;
* the rates and latencies in the table above are checked cycle by cycle;
* the top-level tests compare Y with sin(Z) to 3 LSB and G with a
  double-precision evaluation of (U .* cos Z) W to 4 HID + 8 LSB. The
  observed error is 140 LSB (3e-5) at HID = 256;
* the top-level tests also count each mechanism and fail if one never
  happened: internal back-pressure stalls, a FIFO filling to its depth, a
  copy serving its outputs at different times, the transpose holding its
  output, both matrix multiplies switching from load to compute, both
  adapters, and the selector skipping elements;
* sine and cosine were compared across the whole input range, including
  points next to multiples of pi/2.

Not established: timing closure or resource use on an FPGA, and behaviour
on graphs larger than one layer.
