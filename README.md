# A group-wise quantized matrix-vector engine for Llama2 inference

Generating text with a Llama2-style model one token at a time (batch size
one) is almost entirely matrix-vector multiplication: every layer multiplies
the current activation vector by its seven weight matrices, and at the end the
classifier multiplies it by a vocabulary-sized matrix. With TinyLlama 1.1B on
an embedded ARM processor these products take about 98 % of the run time. They
are also starved for memory bandwidth, because each weight is used exactly
once per token.

This RTL is the programmable-logic half of such a system, following the
LlamaF accelerator described by Xu, Li and Ji ("LlamaF: An Efficient Llama2
Architecture Accelerator on Embedded FPGAs"). Weights are stored in DDR as
INT8 in *groups* of 256 consecutive columns, each group with its own FP32
scale; the activation vector is quantized the same way at run time. The engine
streams the INT8 weights from DDR at 16 bytes per clock, multiplies each group
of 256 with the matching group of the activation vector in integer
arithmetic, and applies the two FP32 scales only once per group. Everything
else in the model (attention, RoPE, RMSNorm, SwiGLU, the KV cache and the
quantization of activations) stays in software on the host processor.

The original was written in C++ and converted to RTL by high-level synthesis;
what follows is a hand-written SystemVerilog rendering of the same structure,
with the details that a C++ description leaves to the tool (handshakes,
memory layout, pipelining, floating-point corner cases) filled in here and
listed in the last section.

## What one kernel computes

For a matrix with `m` rows and `n` columns (`G = n/256` groups per row), an
INT8 vector `xq` with FP32 group scales `xs`, INT8 weights `wq` and FP32
weight scales `ws`:

```
for i in 0 .. m-1:
    sum = +0.0
    for g in 0 .. G-1:
        group_sum   = Σ_{k<256} wq[i][256g+k] * xq[256g+k]       (exact, INT32)
        float_scale = ws[i][g] * xs[g]                            (FP32)
        sum         = sum + float_scale * float(group_sum)        (FP32)
    out[i] = sum                                                  (FP32)
```

Each FP32 operation rounds to nearest-even, in exactly the order written, so
a software model that follows this loop reproduces the hardware bit for bit
(the testbenches do exactly that).

There are two kernels, because the column count is fixed in hardware:

| kernel | columns `n` | groups | TinyLlama matrices served (rows `m`) |
|---|---|---|---|
| kernel 1 | `N1` = 2048 (`dim`) | 8 | W_q+W_k+W_v concatenated (2560), W_o (2048), W_1+W_3 concatenated (11264), classifier (32000) |
| kernel 2 | `N2` = 5632 (`hidden_dim`) | 22 | W_2 (2048) |

Matrices that share an input vector are concatenated by the host, so one
kernel call produces q, k and v (or the two FFN branches) together.

## How a kernel runs: pre-fetch, then a dataflow pipeline

A call starts by reading the whole quantized vector into the chip
(`x_prefetch`): `n` INT8 values become `G` vectors of 256 INT16 lanes held in
a RAM, and the `G` scales are kept in registers. Every row reuses them, so x
costs one read per call instead of one per row.

Then four stages start at the same moment and run concurrently, coupled only
by FIFOs ("streams"):

```
 DDR ──wq──▶ read_cast ──w_stream (256×INT16)──▶ dot_product ──group_sum_stream (INT32)──▶ accumulate ──out──▶ DDR
                                                     ▲                                       ▲   ▲
                                          xq vectors │ (on-chip)                 xs_vector   │   │
                                                                                             │   │
 DDR ──ws──▶ read_scale ──ws_stream (G×FP32, one row)─────────────────────────────────────────┘
```

* **read_cast** takes one 128-bit beat per cycle from the weight port,
  sign-extends its 16 bytes to INT16 and places them in the next 16 lanes of
  a 256-lane vector. After 16 beats the group vector goes onto `w_stream` and
  the next one starts filling in the same cycle.
* **dot_product** takes one group vector per cycle at most, reads the cached
  x vector of the same group (a counter tracks the group within the row),
  forms 256 INT16 lane products in parallel and reduces them through an
  8-level adder tree whose first level widens to INT32. Latency is
  2 + 8 = 10 cycles; the whole pipe stalls together when `group_sum_stream` is
  full, so nothing is dropped.
* **read_scale** turns the weight-scale stream into one vector of `G` FP32
  scales per row (see below for why this needs care).
* **accumulate** takes a row of scales, then for each of the `G` group sums
  spends three cycles: scale product and INT32→FP32 conversion, multiply, add.
  After the last group it writes `out[i]` as one 32-bit word.

**The rate.** Weights arrive at 16 per cycle, so a group takes 16 cycles and
a row `16·G` cycles; the dot-product stage could take one group per cycle and
accumulate needs only 3 cycles per group, so the weight port alone sets the
pace. A call costs about `m·n/16` cycles plus a fixed pre-fetch (`n/16 + G/4`
beats and two memory latencies) and a drain of about `10 + 3G` cycles. In
simulation with a 20-cycle memory latency, the 32000 × 2048 classifier takes
4,096,218 cycles for 4,096,000 cycles of weight transfer. At the 205 MHz clock
of the original FPGA build that is 32 operations per cycle, 6.56 GOPS peak;
the original system measured 4.7 GOPS on real DDR.

**Backpressure.** All streams use valid/ready. If the write port stalls, the
accumulate stage stops taking group sums, `group_sum_stream` fills, the
dot-product pipeline freezes, `w_stream` fills and `read_cast` drops its ready
towards memory. Memory read requests are issued ahead (bursts of 16 beats, no
limit on outstanding bursts), and data is held in memory by the read
channel's ready, so no buffering beyond the streams is needed.

## Number formats along the way

| point | format |
|---|---|
| weights and x in DDR | INT8 |
| lanes of `w_stream` and the x cache | INT16 (sign-extended) |
| lane products | INT16 (an INT8 × INT8 product lies in [-16256, 16384]) |
| adder tree, group sum | INT32 from the first tree level on; a group sum is below 2^23 in magnitude |
| scales, float_scale, row sum, out | IEEE-754 FP32 |

The FP32 units (`fp32_mul`, `fp32_add`, `int32_to_fp32`) round to nearest,
ties to even. Subnormal inputs are treated as zero and results below the
normal range become a signed zero, as is usual for FPGA floating-point
cores; overflow gives infinity; NaN or inf·0 or inf−inf gives `0x7FC00000`.
For the scales of a quantized model (around 2^-7 to 2^-11) none of these cases
occur.

## Scales of a 22-group row

The weight scales are stored as one contiguous array of `m·G` FP32 words.
With `G = 8` a row is 32 bytes, two whole beats. With `G = 22` a row is
88 bytes, five and a half beats, so rows start in the middle of beats.
`read_scale` therefore unpacks each beat into four words and packs words into
a row register; words that do not fit into the current row go into a small
spill buffer and become the start of the next row once the finished row has
been taken. A beat is accepted only when the spill buffer is empty, which
costs at most one cycle per row, against the `16·G` cycles a row of weights
takes.

## Memory layout and ports

All addresses are byte addresses. The host places, for one call:

| region | size | alignment |
|---|---|---|
| `xq` | `n` bytes | 16 bytes |
| `xs` | `G` FP32 words, little-endian | 16 bytes |
| `wq` | `m·n` bytes, row-major | 16 bytes |
| `ws` | `m·G` FP32 words, row after row | 16 bytes |
| `out` | `m` FP32 words | 4 bytes |

Each kernel has three read ports (index `PORT_X` = 0, `PORT_WQ` = 1,
`PORT_WS` = 2) and one write port. A read port is a reduced AXI-style pair:
a request (`valid`, `addr`, `len` = beats − 1, with `rd_req_ready`) and
response beats (`valid`, 128-bit `data`, `last`, with `rd_resp_ready`),
delivered in request order. Requests are never longer than 16 beats. Inside
the design the same signals form the interface `mem_rd_if`, whose
assertions check that a request or a beat is held until it is taken. The
write port is `wr_valid`/`wr_ready` with a byte address and a 32-bit word.
Connecting a port to a real AXI4 HP port needs only constant ID, size and
burst fields, and a write-address/write-data split.

## Control

`llamaf_top` has, for each kernel (`k1_*`, `k2_*`): `start` (one-cycle
pulse), `args` (a `gqmv_args_t` struct of the five base addresses and `m`,
sampled at `start`), `busy`, and `done` (one-cycle pulse after the last
`out` word has been accepted). A `start` while busy is ignored, and an
assertion flags it. `m = 0` returns `done` at once. The two kernels are
independent and may run at the same time.

The host schedules the layer's calls in the order of the model: QKV on kernel
1, attention in software, W_o on kernel 1, FFN W_1+W_3 on kernel 1, SwiGLU in
software, W_2 on kernel 2, then the classifier on kernel 1 after the last
layer. Because a kernel reads only the regions named in its arguments, the
host can copy the next layer's weights into a second buffer while a kernel is
running; this overlap of weight loading with computation was worth about 56 %
in throughput in the original system, and the end-to-end testbench exercises
it.

## Modules

| file | role |
|---|---|
| `llamaf_pkg.sv` | GS = 256, 16-byte beat, address width, FP32 and INT types, argument and port structs, the INT8/INT16/INT32 cast helpers |
| `llamaf_top.sv` | the two kernels, N1 = 2048 and N2 = 5632 |
| `gqmv_port.sv` | a kernel with its read interfaces flattened to structs |
| `gqmv_kernel.sv` | start/done control, pre-fetch, then the four stages and three streams |
| `x_prefetch.sv` | reads and caches xq (INT16) and xs |
| `read_cast.sv` | weights → 256-lane INT16 group vectors |
| `read_scale.sv` | weight scales → one FP32 vector per row |
| `dot_product.sv` | 256-lane multiply and 8-level adder tree |
| `accumulate.sv` | scale products, INT32→FP32, FP32 sum, output write |
| `stream_fifo.sv` | valid/ready FIFO used for each stream |
| `burst_reader.sv` | issues bursts for a contiguous range, passes beats on |
| `mem_rd_if.sv` | read-channel interface with handshake assertions |
| `fp32_mul.sv`, `fp32_add.sv`, `int32_to_fp32.sv` | combinational FP32 units |

Parameters: `N` (columns) on every stage and on the kernel; `N1`, `N2` on the
top. `N` must be a multiple of 256 and at least 512 (two groups).

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/llamaf_pkg.sv tb/tb_llamaf_top.sv --top-module tb_llamaf_top -o sim
./obj_dir/sim
```

Replace `tb_llamaf_top` by any testbench name below. Testbenches use
`tb/ddr_model.sv`, a behavioural memory with a fixed latency, per-port
request queues and optional random stalls, and `tb/tb_fp_pkg.sv`, a
bit-exact FP32 reference built on `real` arithmetic (a double holds the
exact product of two singles, and rounding a sum first to double and then to
single gives the correctly rounded single).

| testbench | checks |
|---|---|
| `tb_fp32_units` | 9000 random products, sums (many nearly cancelling) and conversions bit for bit, plus special values |
| `tb_stream_fifo` | random traffic against a queue model, ready/valid at empty and full |
| `tb_burst_reader` | every beat, burst sizes and count, with a stalling memory and consumer |
| `tb_x_prefetch` | every cached lane and scale for n = 5632; pre-fetch time |
| `tb_read_cast` | every lane of every vector; exactly 16 cycles per vector; stalls |
| `tb_read_scale` | every scale of every row for n = 5632 (unaligned rows); stalls |
| `tb_dot_product` | every group sum, including ±128 extremes; latency 10; one group per cycle |
| `tb_accumulate` | every output bit for bit for 22 groups; write addresses; stalls |
| `tb_gqmv_kernel` | a kernel end to end at n = 512, rate, and full streams |
| `tb_llamaf_top` | both kernels at full size, concurrent runs, stalls, a weight copy during a run; counts each mechanism |
| `tb_workloads` | all five TinyLlama matrix shapes at full size, every output bit for bit, cycle counts (about 80 s) |

## Where this RTL departs from, or adds to, the original description

Followed from the source: the group size of 256 and W8A8 quantization; the
three-stage organisation (pre-processing, dot product, accumulate) with x
pre-fetched and cached on chip; the INT8→INT16 casts of weights and x; the
256-wide SIMD product and the 8-level adder tree widening to INT32; the
streams `w_stream`, `ws_stream` and `group_sum_stream`; the per-row packing
of weight scales into a vector of `n/256`; `float_scale = ws · xs` followed
by the dot product with the FP32 group sums; the 128-bit memory beat; two
kernels with 2048 and 5632 columns.

Choices made here, where the description is silent:

* The order of the FP32 operations: (ws·xs)·float(group_sum), summed in
  group order from +0.0. The source gives this order for the hardware; its
  reference loop writes `group_sum × ws × xs`, which may differ in the last
  bit.
* Handshakes (valid/ready everywhere), FIFO depths (2 for the vector streams,
  4 for group sums), pipelining of the adder tree (a register per level), a
  three-cycle sequential accumulate, and the stall-all policy of the dot
  product pipeline.
* The memory interface: separate read ports for x, weights and weight
  scales, a reduced AXI-like protocol, bursts of up to 16 beats with
  unlimited outstanding requests, single-word writes of the outputs, and the
  data layout in the table above.
* Control by `start`/`busy`/`done` and argument ports instead of a register
  file on a control bus.
* Floating-point conventions for subnormals, NaN and overflow.
* Asynchronous active-low reset of control state; data registers and RAMs are
  not reset.

Not part of this RTL: the host processor and everything it runs (attention,
RoPE, RMSNorm, SwiGLU, activation quantization, the KV cache, the schedule
that overlaps weight copies with kernel runs), the DDR memory and its
controller, and the processor-to-fabric AXI interconnect. The testbenches
stand in for the first two with a behavioural memory and a scripted sequence
of kernel calls.

What has been checked and what has not: every module compiles under
Verilator lint and the Yosys/slang front end, and every output of every test
above matches the reference bit for bit, including the full-size TinyLlama
matrices. Timing closure at 205 MHz has not been checked; the adder tree and
the FP32 units are written for clarity, and the combinational FP32 units in
`accumulate` in particular would need pipelining for a high clock rate on an
FPGA. The 256-lane multiply and the 256-lane x cache with 16-lane writes are
written as plain arrays; an FPGA build would map them to DSP blocks and
block RAM.
