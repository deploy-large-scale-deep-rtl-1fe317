# A 4×4 low-precision matrix multiplier for locally quantized neural networks

Low-cost IoT devices cannot afford 32-bit floating-point inference for
networks such as AlexNet or VGG-16. One approach is to quantize weights and
activations to a few bits. A single quantization step per layer works down to
about 8 bits. Below that, the rounding error of a layer-wide step grows too
large. *Local quantization* divides each layer into small regions, typically
one convolution kernel or less, and gives each region its own step:

    s_k = (x_max,k - x_min,k) / (2^n - 1)        q = round((x - x_min,k) / s_k)

Inside one region every value shares one step and one offset. So the dot
product over the region can be done entirely on the small integer codes. It
is converted back to a real number once per region, with that region's
constants:

    sum_j w_j a_j  ≈  sum_k  Q_k^-1( sum_{j in region k} qw_j * qa_j )

The integer sums are where almost all the work lies. This RTL computes them.
It is a matrix multiplier for 8-bit weight codes and n-bit activation codes
(n = 2 by default, 4 or 8 as alternatives). It returns a 4×4 tile of exact
integer dot products per job. Quantization of the activations, the
per-region rescaling and the non-linear layers are left to a host processor.

## Where the multiplier sits in an inference flow

| step | done by | what |
|---|---|---|
| weight quantization, per region | offline, host | 8-bit codes `qw` and per-region `w_min`, `s_w` |
| activation quantization, per region | at run time, host | n-bit codes `qa` and per-region `a_min`, `s_a` |
| integer dot products | **this RTL** | `C[r][c] = sum_k A[r][k] * B[k][c]` over one region |
| dequantization and accumulation over regions | host | see below |
| activation function, pooling, next layer | host | |

A convolution layer becomes a matrix product in the usual way. Row `r` of `A`
is one receptive field, for example the 11×11×3 = 363 inputs of an AlexNet
first-layer output pixel. Column `c` of `B` is one kernel. Four pixels and
four kernels make one job. Larger layers are tiled into such jobs. Smaller
local regions mean more and shorter jobs, one per region.

**Signed weights.** The weight port is a two's complement byte. An unsigned
8-bit code `qw` (0..255) from the formula above is stored as `qw - 128`. The
host then recovers the region's real-valued sum from the hardware result `C`
and two code sums it can keep on the side:

    sum(qw*qa) = C + 128 * sum(qa)
    sum(w*a)  ≈ N*w_min*a_min + w_min*s_a*sum(qa) + a_min*s_w*sum(qw) + s_w*s_a*sum(qw*qa)

where `N` is the region length. Weights quantized symmetrically around zero
go in directly and need only the last term. `tb/lq_conv_tb.sv` carries out
this whole flow on synthetic data.

## Block structure

```
                 par_wr_*  (row k of B: 4 x 8-bit weights)
                     |
                 +---v---------------------------------+
                 |  PSC  parameter stream controller   |
                 |  tile buffer K_MAX x (4 x WP)       |
                 +--+--------+--------+--------+-------+
                    |col 0   |col 1   |col 2   |col 3     4 column buses, WP bits
 in_wr_*         +--v--+  +--v--+  +--v--+  +--v--+
 (column k of A) | CU  |  | CU  |  | CU  |  | CU  |
    |     row 0 -+ 0,0 +--+ 0,1 +--+ 0,2 +--+ 0,3 |      every CU of a row taps
 +--v--+         +-----+  +-----+  +-----+  +-----+      the same input bus,
 | ISC |  row 1 -  ...                                   every CU of a column
 |     |  row 2 -  ...                                   the same parameter bus
 +-----+  row 3 -  ...          4 row buses, WI bits
```

* **ISC** (`rtl/isc.sv`), the input stream controller, holds the input tile
  `A` as K_MAX words of 4 × WI bits. On a start it puts column `k` of `A`
  on the four row buses in cycle `k+2`.
* **PSC** (`rtl/psc.sv`), the parameter stream controller, does the same
  for the weight tile `B`, row `k` on the four column buses. The two are
  started by the same pulse and have identical timing, so they run in
  lockstep. An assertion in the top checks this.
* **CU array** (`rtl/cu_array.sv`): CU(r, c) sees input bus `r` and
  parameter bus `c`. Each cycle the array therefore adds one outer product
  (`A[:,k]` times `B[k,:]`) into the 16 accumulators: 16 multiply-adds per
  cycle. There is no data movement between CUs. The buses are broadcast,
  not systolic.
* **CU** (`rtl/cu.sv`) is a multiplier followed by an adder whose output
  feeds back into itself (the accumulator). A *clear* that travels with
  the first operand pair makes the adder load the product instead of adding
  it. No separate reset of the accumulators is needed between jobs.
* **Top** (`rtl/matrix_multiplier.sv`) wires these together and adds the
  job protocol. `rtl/mm_pkg.sv` holds the default sizes and the two sizing
  functions.

## CU pipeline and latency

The CU latency is the number of cycles from presenting an operand pair to
seeing it in `result`:

| configuration | WP × WI | CU stages | CU latency |
|---|---|---|---|
| Fixed 8×2 (default) | 8 × 2 | product reg → accumulator reg | 2 |
| Fixed 8×4 | 8 × 4 | operand reg → product reg → accumulator reg | 3 |
| Fixed 8×8 | 8 × 8 | operand reg → product reg → accumulator reg | 3 |

The latencies (2 for 8×2, 3 for the wider inputs) are those of the
reference FPGA implementation. `mm_pkg::cu_latency()` chooses them from WI.
Where the third stage sits is this design's choice: an operand register in
front of the wider multiplier. The `clear` and `last` flags are delayed
with the operands through every stage, so they act on the product they
came with.

The product of an unsigned WI-bit code and a signed WP-bit weight needs
WP+WI bits. The accumulator is `ACC_W = WP + WI + clog2(K_MAX)` bits wide, 23
at the defaults, so no job of up to K_MAX steps can overflow.

## Job protocol and timing

```
cycle      0      1      2      3   ...  K+1    K+2   K+3 (8x2)
start     ‾‾‾|___________________________________________
busy      ___|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|___
step on          -     k=0    k=1  ...  k=K-1
 buses
done      ___________________________________________|‾|_
```

1. Write the tiles. Input-port address `k` takes `A[0..3][k]`;
   parameter-port address `k` takes `B[k][0..3]`. Writes may happen at any
   time, but not to an address that the running job has still to read.
2. Pulse `start` with `k_len = K` (1 ≤ K ≤ K_MAX) while `busy` is low. A
   start while busy, or with an out-of-range length, is ignored.
3. Step `k` reaches the CUs in cycle `k+2`: one cycle to register the start,
   one for the buffer read. `done` pulses in cycle `K + LATENCY + 1`, that
   is K+3 for 8×2 and K+4 for 8×4 and 8×8. `result` then holds `C` and keeps
   it until the next job's first product reaches the accumulators, at the
   earliest LATENCY+2 cycles after the next start.
4. `busy` falls in the cycle after `done`. The next job can start there.

Both tiles stay in their buffers, so a job may reuse either one. New kernels
against the same receptive fields need only a parameter reload. New pixels
against the same kernels need only an input reload. The tiles are
single-buffered. A tile load costs one cycle per step, as long as the job
it feeds. The next tile may only overwrite addresses the running job has
already read, so loading hides behind computing only in part. A
double-buffered tile store would keep the array fully busy; it is not
built here.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `ROWS`, `COLS` | 4, 4 | CU grid | reference design (4×4 CUs) |
| `WP` | 8 | weight width | reference design (8-bit weights) |
| `WI` | 2 | input code width | reference design's 8×2 configuration; 4 and 8 also supported |
| `K_MAX` | 4608 | tile buffer depth, longest job | chosen: VGG-16's largest kernel, 3×3×512 |
| `ACC_W` | 23 | accumulator width | derived, overflow-free for K_MAX |
| `LATENCY` | 2 | CU latency | derived from WI as above |

All ports are plain vectors. `result` is packed `[ROWS][COLS][ACC_W]`; read
each element with `$signed()`. Reset `rst` is synchronous and active high.
Only control state and the output registers are reset. The tile buffers are
not.

## What fits

* AlexNet conv1 with one region per kernel: K = 363, one job of 366 cycles.
* VGG-16 3×3 convolutions up to 512 input channels: K = 4608 = K_MAX.
* Smaller regions (for example 5×5 or 3×3 windows) are short jobs. Their
  fixed 3-cycle overhead from start to done (beyond K) matters when K is
  only 9 or 25.
* Fully connected layers with one region per weight row (K = 9216 for
  AlexNet fc6, 25088 for VGG-16 fc6) exceed K_MAX. The host splits such a
  region into several jobs and adds the integer partial sums itself. All
  jobs share the same region constants, so this is exact.
* Whole networks: AlexNet's convolution layers need 666 M multiply-adds,
  about 41.6 M array cycles. VGG-16's need 15.3 G, about 959 M cycles. Both
  figures leave out tile loading.

After coarse synthesis at the defaults, the datapath (16 CUs) uses 548
flip-flops and the whole multiplier 607. The two tile buffers add
36,864 + 147,456 memory bits. The reference FPGA implementation of the
8×2 configuration reports 562 flip-flops and 535 LUTs.

## Verification

Every testbench is self-checking. Each prints one
`TB_RESULT checks=N failures=M` line and stops itself with a watchdog if
something hangs.

| testbench | what it shows |
|---|---|
| `tb/cu_tb.sv` | 8×2 and 8×4 CUs against a cycle-indexed integer model: exact latency (2 and 3), clear, back-to-back dot products, idle gaps, extreme operands |
| `tb/cu_array_tb.sv` | 40 random jobs on the 4×4 array: all 16 sums, done timing, K = 1, back-to-back |
| `tb/isc_tb.sv`, `tb/psc_tb.sv` | cycle-exact streaming, flags, busy, ignored starts, replay, partial rewrite, a full 4608-step tile |
| `tb/matrix_multiplier_tb.sv` | whole design at default sizes. Counts and requires each mechanism: K = 1, an AlexNet conv1 tile (K = 363), a full 4608-step job, input reuse, parameter reuse, a back-to-back job, a start while busy, out-of-range lengths, an all-extreme job |
| `tb/mm_configs_tb.sv` | the 8×4 and 8×8 configurations side by side: sums and the K+4 done time |
| `tb/lq_conv_tb.sv` | local quantization end to end on an AlexNet conv1 tile (K = 363) and a VGG-16 3×3 tile over 64 channels (K = 576). Real-valued data is quantized per region in the testbench and run one region per job. Sums are checked exactly and the dequantized results are rebuilt. The error must fall from one layer-wide scale, to one region per kernel, to smaller regions (33 values, or one channel's 3×3 window) |

To run one with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl \
    rtl/mm_pkg.sv rtl/cu.sv rtl/cu_array.sv rtl/isc.sv rtl/psc.sv \
    rtl/matrix_multiplier.sv tb/matrix_multiplier_tb.sv \
    --top-module matrix_multiplier_tb
./obj_dir/Vmatrix_multiplier_tb
```

For the block testbenches, drop the files they do not use. Each takes well
under a second to simulate.

## Relation to the reference design, and what is this design's own

The following come from the published description of the multiplier:

* the three kinds of block (input stream controller, parameter stream
  controller, computing unit) and their names;
* the 4×4 grid, with one input bus per row and one parameter bus per column;
* the CU as a multiplier feeding an accumulating adder with a clear input;
* 8-bit weights with 2-, 4- or 8-bit inputs;
* the CU latencies of 2 and 3 cycles.

The following are this design's own choices; the description is silent on
them:

* the controllers' insides: tile buffers, a write port, one step per cycle;
* the start / busy / done protocol and the `first` / `last` flags;
* the timing of clear, which travels with the first operand pair;
* unsigned input codes and signed weights;
* the accumulator width;
* the parallel result port;
* synchronous active-high reset;
* K_MAX.

The reference design was built and measured on an FPGA. Frequency and power
figures for it do not carry over to this RTL, and this RTL has not been
synthesized for a device. The fixed-point look-up-table scheme of the same
work, which replaces multiply-accumulate by table look-ups of precomputed
weighted sums, is a software technique for processors without sub-byte
SIMD. It is not part of this hardware. The same holds for the quantizers
and for dequantization.
