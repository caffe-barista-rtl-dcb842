# FP32 blocked-GEMM kernel for CNN training on an FPGA

Training a CNN in a framework such as Caffe spends most of its arithmetic in
the convolution layers. Each of their three training computations is a matrix
product: the forward pass (after `im2col`), the weight gradients and the input
gradients. This RTL is the accelerator side of a system that sends exactly those
GEMMs to a PCIe-attached FPGA while the CPU keeps the rest of the training loop.
The host cuts the operand matrices into tiles, pads them with zeros and places
them in the board's off-chip memory. The kernel computes `C = A * B` one output
tile at a time on a systolic mesh of FP32 multiply-accumulate processing
elements (PEs), then writes each finished tile back.

The design's central trick sits inside the PE. An FP32 multiply-add on FPGA DSPs
takes many cycles (Q = 10 here). A single running sum would therefore accept a
new product only every Q or so cycles. Each PE instead keeps Q+1 independent
partial sums and visits them in turn. The PE then takes an operand pair every
cycle, and it folds the Q+1 partials into one value once the tile is complete.

The default configuration is the one built and measured on the FPGA:
`<Tr, Tc, Tp> = <16, 16, 64>`, FP32, Q = 10.

## 1. Blocked GEMM and the data layout

`A` is R x P, `B` is P x C, `C` is R x C. The tile sizes are Tr (rows of A and C),
Tc (columns of B and C) and Tp (the shared inner dimension).

```
n_rt = ceil(R/Tr)    n_ct = ceil(C/Tc)    n_pt = ceil(P/Tp)
```

The host pads R, C and P with zeros up to whole tiles. The kernel never sees a
partial tile, so padding costs only wasted multiplications. The host writes the
tiles contiguously, each tile row-major:

| tile | word address of its first element | size (words) |
|------|-----------------------------------|--------------|
| A(rt, pt) | `a_base + (rt*n_pt + pt) * Tr*Tp` | Tr*Tp |
| B(ct, pt) | `b_base + (ct*n_pt + pt) * Tp*Tc` | Tp*Tc |
| C(rt, ct) | `c_base + (rt*n_ct + ct) * Tr*Tc` | Tr*Tc (written by the kernel) |

Inside a tile, element (x, y) of an X x Y tile is at offset `x*Y + y`. The kernel
loops over output tiles with rt outer and ct inner. For each output tile it
reads the n_pt pairs A(rt, pt), B(ct, pt) in order. The partial sums stay inside
the PEs across all n_pt pairs, so each C tile leaves the chip once, already
complete.

## 2. Block structure

```
             off-chip memory (read channel)                (write channel)
                 |                     |                          ^
           burst_reader -------+-------+                    burst_writer
                 |             |                                  |
             buffer_a      buffer_b                           buffer_c
          Tr banks x Tp   Tc banks x Tp                     Tr x Tc words
                 |  skewed rows |  skewed columns                  ^
                 v              v                                 |
                +-----------------------------------+  all Tr*Tc results
                |  pe_array: Tr x Tc  pe            | ----------------+
                |  A moves right, B moves down      |
                +-----------------------------------+
                         ^ sequencing, counters
                   gemm_controller
```

| file | role |
|------|------|
| `rtl/barista_pkg.sv` | shared types (`word_t`, `addr_t`, `len_t`, `fp32_t`, controller state enum) and default sizes |
| `rtl/fp32_mul.sv` | FP32 multiplier, LAT = Q cycles |
| `rtl/fp32_add.sv` | FP32 adder, LAT = ADD_LAT cycles, with a side-band tag |
| `rtl/pe.sv` | one PE: multiplier, adder, (Q+1)-word cache, interleaving, reduction, A/B forwarding |
| `rtl/pe_array.sv` | the Tr x Tc mesh |
| `rtl/buffer_a.sv`, `rtl/buffer_b.sv` | input tile buffers with skewed read-out |
| `rtl/buffer_c.sv` | output tile buffer, parallel capture, serial read-out |
| `rtl/burst_reader.sv`, `rtl/burst_writer.sv` | one memory burst per tile |
| `rtl/gemm_controller.sv` | tile loops, phases, cycle counters |
| `rtl/barista_gemm.sv` | the kernel top |

## 3. Dataflow through the mesh

During a FEED phase the controller reads index k = 0 .. Tp-1 from both buffers,
one index per cycle. Buffer A returns column k of the A tile (one word per row).
Buffer B returns row k of the B tile (one word per column). Both reads take one
cycle. Row i of A then passes through i skew registers and column j of B through
j. Inside the mesh each PE hands its A word to the right neighbour and its B word
to the neighbour below, one register per hop. Counting cycles from the issue of
index 0:

```
A[i][k] reaches PE(i,j) at cycle k + 1 + i + j
B[k][j] reaches PE(i,j) at cycle k + 1 + j + i
```

The two operands of every product therefore meet in the same cycle. The last
pair reaches PE(Tr-1, Tc-1) at cycle Tp + Tr + Tc - 2. The FEED phase lasts
exactly that many cycles, which is the per-tile-pair term of the cycle model in
section 5. A and B travel with valid bits. A PE multiplies only when both are
valid, and an assertion checks that they always arrive together.

## 4. Interleaved accumulation inside a PE (`pe.sv`)

This is the part that is easiest to get wrong, so here it is in detail.

```
 a_in, b_in --> fp32_mul (Q cycles) --> p --+
                                            v
                 cache[slot] ----------> fp32_add (ADD_LAT cycles, tag = slot)
                      ^                     |
                      +---- write slot <----+        (one more cycle)
```

* The PE has a cache of SLOTS = Q+1 words. All slots are zero after reset and
  after every reduction.
* Products leave the multiplier at most one per cycle. Product number n (counted
  from the start of the output tile) goes to slot `n mod (Q+1)`. The adder reads
  `cache[slot]`, adds the product, and writes the sum back ADD_LAT cycles later.
  The slot number travels through the adder pipeline as a tag.
* With ADD_LAT = Q, a read-add-write loop takes ADD_LAT + 1 = Q+1 cycles. A slot
  is revisited no sooner than Q+1 products later, which is never less than Q+1
  cycles. So its previous sum is always back in the cache when it is needed, and
  the PE never stalls. An elaboration-time assertion requires ADD_LAT + 1 <= Q+1.
* Gaps in the operand stream, such as the buffer reloads between tile pairs, are
  harmless. They only delay the next visit to a slot.
* When the whole mesh is idle, the controller pulses `reduce_start`. The PE then
  runs `acc = 0 + cache[0]`, `acc = acc + cache[1]`, ..., `acc = acc + cache[Q]`
  through the same adder. Each step waits for the previous sum, so a step takes
  ADD_LAT + 1 cycles and the reduction takes (Q+1)(ADD_LAT+1) = (Q+1)^2 = 121
  cycles. Each slot is zeroed as it is read. `c_out` and a one-cycle `c_valid`
  appear exactly (Q+1)^2 cycles after `reduce_start`.

The result therefore depends on the FP32 summation order. C[i][j] is not the
sequentially rounded dot product. It is the in-order sum of Q+1 strided partial
sums, each rounded in FP32. The testbenches compute their reference in exactly
this order.

## 5. Phases and cycle budget (`gemm_controller.sv`)

For every output tile:

| phase | duration | what happens |
|-------|----------|--------------|
| LOAD_A | >= Tr*Tp | burst read of A(rt, pt) into buffer A |
| LOAD_B | >= Tp*Tc | burst read of B(ct, pt) into buffer B |
| FEED | Tp + Tr + Tc - 2 | operands stream through the mesh |
| (repeat the three phases above for pt = 1 .. n_pt-1) | | |
| DRAIN | about Q + ADD_LAT + 1 | wait until no product is in flight in any PE |
| REDUCE | (Q+1)^2 | all PEs reduce their partials in parallel |
| CAPTURE | 1 | buffer C copies all Tr*Tc results |
| WRITE | >= Tr*Tc + handshake | burst write of the tile, wait for the write response |

`cyc_compute` counts FEED and REDUCE cycles. It equals the compute model exactly:

```
cycles_compute = n_rt * n_ct * ( n_pt * (Tp + Tc + Tr - 2) + (Q+1)^2 )
```

`cyc_total` counts all busy cycles, memory phases included. The off-chip traffic
is also exactly what a simple data model predicts: per output tile,
`Tr*P' + Tc*P'` words are read and `Tr*Tc` are written, where P' is P padded to
whole tiles. The end-to-end testbenches check both counts. Loading is not
overlapped with computation, and the memory path carries one 32-bit word per
cycle. At the default size, one tile pair takes at least 2048 cycles of loading
but only 94 cycles of FEED. The kernel is therefore strongly memory-bound. This
matches the observation, on the real system, that kernel-to-memory transfers
rather than the PEs limit performance.

## 6. Interfaces of `barista_gemm`

Kernel control:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `start` | in | 1 | one-cycle pulse while idle; samples the arguments below |
| `a_base`, `b_base`, `c_base` | in | 32 | word addresses of the first A, B and C tile |
| `n_rt`, `n_ct`, `n_pt` | in | 16 | tile counts, all >= 1 |
| `busy` | out | 1 | kernel running |
| `done` | out | 1 | one-cycle pulse after the last C tile's write response |
| `state` | out | 4 | controller phase (`ctrl_state_e`), for observation |
| `cyc_total`, `cyc_compute`, `tiles_done` | out | 32 | counters, cleared at `start` |

Memory uses two channel pairs with AXI-style valid/ready rules: a payload stays
stable until accepted. Addresses are in 32-bit words, lengths in words, and at
most one burst is outstanding per direction.

* read: `ar_valid/ar_ready/ar_addr/ar_len`, then `r_valid/r_ready/r_data/r_last`.
  One burst is one whole A or B tile.
* write: `aw_valid/aw_ready/aw_addr/aw_len`, `w_valid/w_ready/w_data/w_last`, then
  `b_valid/b_ready`. One burst is one whole C tile.

The memory may stall any channel for any number of cycles. Everything is
synchronous to `clk` and uses an active-low asynchronous `rst_n`.

## 7. Number format

FP32 multiply and add round to nearest-even. Subnormal inputs and results are
flushed to zero. Overflow gives infinity. NaN, inf*0 and inf-inf give 0x7fc00000.
An exact cancellation gives +0. Each unit is one combinational stage followed by
LAT pipeline registers, so a synthesis tool with retiming can distribute them.
Hand-pipelining, or vendor floating-point cores, would be the way to reach a
high clock rate. The measured system ran at 250 MHz.

## 8. Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `TR` | 16 | mesh rows, rows per A/C tile |
| `TC` | 16 | mesh columns, columns per B/C tile |
| `TP` | 64 | inner tile size; must be >= 2 |
| `Q` | 10 | multiplier latency; the cache has Q+1 words |
| `ADD_LAT` | 10 | adder latency; must be <= Q |

The package fixes the address width (32), the burst-length width (16) and the
tile-count width (16). A tile may have at most 65535 words.

On-chip storage at the defaults: buffer A 1024 words, buffer B 1024 words, PE
caches 16*16*11 = 2816 words, buffer C 256 words. The three terms of the FPGA
resource model for buffers A, B and C (Tr*Tp, Tp*Tc, Tr*Tc*(Q+1)) correspond to
the first three of these. Buffer C of that model is the interleaving storage in
the PE caches. The separate Tr x Tc output buffer lets the result leave while the
mesh starts on the next tile.

## 9. Where this RTL follows the source design, and where it chooses

Taken from the design description:

* the blocked GEMM, the tiling with zero padding, and one output tile at a time
  with partial results kept on chip;
* the Tr x Tc mesh with A flowing right and B flowing down;
* one MAC and a (Q+1)-word cache per PE, and interleaving over Q+1 partial sums;
* Q = 10 for FP32 and <16,16,64> as the default;
* buffers A, B and C, and burst reads of whole tiles;
* the compute-cycle formula, which this RTL meets exactly.

Own choices, where the description is silent:

* adder latency = Q;
* round-robin slot order and a sequential reduction through the shared adder;
  this order is what makes the reduction take (Q+1)^2 cycles;
* valid bits beside the data; buffer banking, 1-cycle reads and skew registers;
* shift-register buffer C;
* AXI-like word-wide memory channels, the tile layout inside memory, and the tile
  loop order;
* start/done control, counters, reset behaviour and FP corner-case handling.

Known differences:

* The mesh is described as producing "one output per cycle". This mesh finishes
  a whole tile of Tr*Tc outputs at once after the reduction.
* There is no overlap of memory transfers with computation, and no double
  buffering.
* The bandwidth model assumes the mesh is fed Tr + Tc words per cycle. Here the
  memory port carries one 32-bit word per cycle, and the buffers are filled
  before each FEED. The FEED itself does deliver Tr + Tc words per cycle, from
  the on-chip buffers. The off-chip word count equals the model's data term.
* Only the FP32 datapath exists. An INT8 variant (Q = 1, one DSP per MAC)
  appears only in performance projections and is not built.

## 10. Not included

The host side is software and is not part of this RTL: the Caffe integration
(routing CONV-layer GEMMs to the FPGA), the OpenCL runtime that tiles, pads,
launches and untiles, and the PCIe transfers. The board DRAM and its controller
are not included either. The testbenches model the host and the memory
behaviourally (`tb/gemm_host.sv`, `tb/offchip_mem_model.sv`).

## 11. Sizing for the evaluated networks

The kernel streams tiles, so on-chip storage does not depend on the matrix
sizes. The limits are 16-bit tile counts (up to 65535 tiles per dimension) and
32-bit word addresses. The CIFAR-10 CONV layers of ResNet20 and AlexNet are far
inside these limits. For example, the largest ResNet20 forward GEMM per image is
16 x 144 by 144 x 1024 (layer sizes from the standard network definition). That
is 1 x 64 output tiles of 3 inner tiles each. Kernels of other shapes, such as
<32,32,64> or <36,36,72>, need only different parameters. The FP32 datapath
works for any TP >= 2, including sizes that are not powers of two.

## 12. Simulation

Every testbench in `tb/` is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The FP32
reference arithmetic lives in `tb/fp_ref_pkg.sv`. It evaluates in double
precision and rounds once to FP32, which gives the correctly rounded result for
a single add or multiply.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp32_mul`, `tb_fp32_add` | thousands of random and corner-case operations, bit-exact, and the exact latency |
| `tb_pe` | interleaving, reduction result, the (Q+1)^2 reduction latency, forwarding, cache clearing |
| `tb_pe_array` | 3 x 4 mesh fed by a hand-made skewed wavefront |
| `tb_buffer_a`, `tb_buffer_b`, `tb_buffer_c` | load order, skew timing, capture and read-out order |
| `tb_burst_reader`, `tb_burst_writer` | bursts against a stalling memory model |
| `tb_gemm_controller` | tile order, addresses, feed indices, cycle model |
| `tb_barista_gemm` | 4 x 4 x 8 kernel; all end-to-end testbenches check every C element, the compute cycles and the memory traffic; three GEMMs including padded and multi-tile ones; also requires that padding, multi-Tp accumulation, slot wrap-around, reduction, read stalls, write back-pressure and address waits each occurred |
| `tb_barista_gemm_full` | default <16,16,64> kernel, a padded 20 x 100 x 18 GEMM (2 x 2 x 2 tiles) |
| `tb_resnet20_layers` | default kernel on two ResNet20 CONV GEMMs (conv0: 16 x 27 x 1024; a 3x3 layer of group 1: 32 x 288 x 256), about 650k cycles; compute is about 7 % of the cycles there, so the memory path dominates |

To run one with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/barista_pkg.sv tb/fp_ref_pkg.sv rtl/fp32_mul.sv rtl/fp32_add.sv rtl/pe.sv \
  rtl/pe_array.sv rtl/buffer_a.sv rtl/buffer_b.sv rtl/buffer_c.sv \
  rtl/burst_reader.sv rtl/burst_writer.sv rtl/gemm_controller.sv rtl/barista_gemm.sv \
  tb/offchip_mem_model.sv tb/gemm_host.sv tb/tb_barista_gemm.sv \
  --top tb_barista_gemm -o sim && ./obj_dir/sim
```

For `tb_barista_gemm_full`, swap in its file and top. Verilating the full-size
mesh takes about a minute; the simulation itself takes about a second. Unit
testbenches need only their module, the packages and, for the burst engines,
`tb/offchip_mem_model.sv`.
