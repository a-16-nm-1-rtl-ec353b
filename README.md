# A GEMM accelerator with one shared, bank-interleaved memory

This is a DNN accelerator built around an 8×8×8 integer matrix-multiply array, which
performs 512 multiply-accumulates per cycle. It is written in synthesizable
SystemVerilog (IEEE 1800-2017).

Many accelerators give each operand its own buffer: one for inputs, one for weights, one
for outputs. That wastes capacity whenever a layer's operands have different sizes than
the buffers. Here every functional unit instead shares a single 128 KB memory, made of 32
banks that are each 64 bits wide, and any region of it can hold any operand. The cost of
this is *bank contention*: several units may want the same bank in the same cycle. The
design answers that in two ways.

- Every memory access goes through a **data streamer**. A streamer generates addresses
  itself, and each of its access channels prefetches into a small FIFO whenever there is
  room. A channel that loses a bank conflict then catches up from its queue, while the
  array keeps consuming data that arrived earlier.
- The wide, rarely used paths are **time-multiplexed**. The quantization unit has 8 lanes
  rather than 64. The partial-sum reader and the output writer share one group of
  crossbar ports.

The three functional units are:

- the GEMM core;
- a quantization SIMD unit, which turns 32-bit results into int8;
- a data reshuffler, which does layout changes, 8×8 transposes and max-pooling.

A small control processor and a DMA engine complete the chip, but they are not part of
this RTL. They connect at the top level as a register-write port and as a 512-bit memory
port.

```
 control core ──csr_*──► csr_manager ──configs/start──► all streamers and units
                                   ▲ busy
 DMA engine ──dma_req/dma_rsp (8 ports)──┐
                                          ▼
 input streamer (8×64b, 6-D AGU) ──► ┌──────────┐   ┌──────────────────────┐
 weight streamer (512b, 3-D AGU, ──► │ mem_xbar │◄─►│ shared_memory        │
   8×8 transposer)                   │ 80 ports │   │ 32 banks × 512 × 64b │
 psum / output streamer (2048b, ◄──► │ rr/bank  │   └──────────────────────┘
   32 shared ports)                  └──────────┘
 Q_Out streamer (8×64b) ◄────────────────┘ ▲ ▲
 reshuffler In / Out streamers (8×64b) ────┘ │
                                             └── DMA
 input + weight ──► gemm_core ─┬─► (quant_en=0) output streamer (int32)
 psum streamer  ──►            └─► (quant_en=1) quant_simd ──► Q_Out streamer (int8)
 reshuffler In ──► data_reshuffler (copy / transpose / maxpool) ──► reshuffler Out
```

## Shared memory and its addressing

`shared_memory` holds 32 single-port banks. Each bank is 512 words of 64 bits, so the
memory totals 128 KB. Reads return data one cycle after the request.

A byte address has 17 bits, split into three fields:

| Bits | Field |
|---|---|
| `[2:0]` | byte within a word |
| `[7:3]` | bank |
| `[16:8]` | row |

Consecutive 64-bit words therefore fall in consecutive banks. Eight consecutive words
(eight banks, one row) make a 512-bit **super bank**. The four super banks of one row (all 32 banks) make
the 2048-bit beat that the partial-sum/output path moves.

`mem_xbar` connects 80 ports of 64 bits each to the 32 banks. Each bank has its own
round-robin arbiter. The grant is combinational, in the same cycle as the request. Read
data and `rvalid` come back one cycle after the grant. A port keeps its request until it
is granted, but it may also withdraw it. The partial-sum/output multiplexer relies on
withdrawal. Assertions check two rules: a grant implies a request, and no bank is granted
to two ports at once.

The port allocation is:

| Ports | Owner |
|---|---|
| 0–7 | input streamer |
| 8–15 | weight streamer |
| 16–47 | partial-sum reader / output writer (shared) |
| 48–55 | Q_Out streamer |
| 56–63 | reshuffler In |
| 64–71 | reshuffler Out |
| 72–79 | DMA (top-level `dma_req` / `dma_rsp`) |

## Data streamers and prefetching

This is the part that does most of the work, and the part to understand before
programming the design.

### Address generation

An `agu` is a nested loop counter with up to six dimensions. Each dimension has a bound
and a signed byte stride. Dimension 0 is innermost. Every output beat gets the address:

    base + Σ_d index_d · stride_d

The AGU keeps this sum incrementally, so it needs no multipliers. A streamer produces
`bound_0 · … · bound_{D-1}` beats and then goes idle. A stride of 0 makes the streamer
repeat data, which is how operands are reused across a loop.

### Channels

A streamer has one or more **access channels**. Each channel has three parts:

- its own address queue;
- a memory interface controller, which keeps at most one request in flight;
- a data FIFO of `DEPTH` entries.

Channel *c* reads the AGU address plus `c · ch_stride`. With `ch_stride` set to a
matrix's row pitch, the eight channels of the input streamer fetch eight different rows in
the same cycle. This gives the array an 8×8 tile of a row-major matrix without any
re-layout.

A channel issues its next request whenever its FIFO, counting the request in flight, has
room. The channels do not wait for one another. An output beat is valid when every
channel's FIFO has data.

A channel can be `WORDS` × 64 bits wide. The weight streamer has one 512-bit channel that
reads a whole super bank at a time.

### Convolution without an im2col copy

The input streamer's six loops are enough to run a convolution directly as a GEMM. The
feature map is stored in C/8×H×W×8 layout, so each 64-bit word holds eight channels of one
pixel. The six loops then walk, from innermost outward:

1. the kernel column;
2. the kernel row;
3. the channel group;
4. the N-tile reuse;
5. the block of eight output pixels along a row;
6. the output row.

The eight channels fetch eight neighbouring output pixels through a channel stride of
*stride*·8 bytes. `tb_voltra_conv2d` checks this for a 3×3 kernel at stride 1 and at
stride 2. The output width must be a multiple of 8.

### Streamer configurations

| Streamer | Channels | FIFO depth | AGU |
|---|---|---|---|
| input (A operand) | 8 × 64 b | 8 | 6-D |
| weight (B operand) | 1 × 512 b, optional 8×8 byte transpose | 8 | 3-D |
| partial sum (C in) | 2048 b | 1 | 3-D |
| output (D out, int32) | 2048 b | 1 | 3-D |
| Q_Out (quantized out) | 8 × 64 b writer | 2 | 3-D |
| reshuffler In | 8 × 64 b | 2 | 6-D |
| reshuffler Out | 8 × 64 b writer | 2 | 6-D |

### Why the partial-sum and output FIFOs are so shallow

The array is output stationary: it reads a partial-sum tile once, at the start of a tile,
and writes the result once, after K/8 cycles. A one-entry FIFO is therefore enough.

The psum reader and the output writer share the 32 ports of one 2048-bit group. The reader
has priority, and the writer only uses cycles the reader leaves free. `out_deferred` marks
every cycle in which the writer waited. The GEMM core has a result register, so a deferred
write does not stall the array until the next tile also finishes.

### Writers

Write streamers (`stream_writer`) mirror the readers. Each channel takes its slice of
every input beat and writes it at its own address. A beat is accepted when every channel
has room.

## GEMM core

`gemm_core` holds a grid of 8×8 `dotprod_unit`s. Each unit computes an 8-term signed int8
dot product and adds it into its own 32-bit accumulator. Every cycle, it multiplies:

- an 8×8 A tile (M×K), which arrives as 512 bits with byte `m*8+k`;
- an 8×8 B tile (K×N), which arrives as 512 bits with byte `n*8+k`, i.e. column-major
  inside the tile.

Each result tile is 64 int32 values: word `m*8+n` of a 2048-bit beat.

The core has a hardware loop over `M/8 × N/8` output tiles, with the K/8 steps innermost.
The loop bounds are given in tiles through the CSRs.

- **Tile start.** At the first k step of a tile, the accumulators either clear or, when
  `psum_en` is set, load the tile from the partial-sum stream. Loading a psum lets a K
  dimension that was split across runs accumulate in place.
- **Tile end.** After the last k step, the 64 sums move into a result register and the
  array continues with the next tile straight away.
- **Stalls.** The array stalls only in two cases: an operand stream is empty, or the
  result register is still occupied when the next tile finishes. The core's `stall` output
  shows when either happens.

Results go to one of two places, chosen by `quant_en`:

- the int32 output streamer, when it is 0;
- the quantization unit and then the Q_Out streamer, when it is 1.

When M, N or K is not a multiple of 8, the software must pad it.

The operand byte orders mean that:

- A is usually read straight from a row-major matrix through the input streamer's channel
  stride.
- B is read as pre-blocked 64-byte tiles. Alternatively, a row-major (k-major) block can
  be turned into the needed order by the weight streamer's transposer. This is how Kᵀ is
  produced in attention (S = Q·Kᵀ) without a separate transpose pass.

## Quantization SIMD unit

Each `quant_pe` lane computes:

    y = clamp_int8( ((relu ? max(x,0) : x) · mult + 2^(shift-1)) >>> shift  +  zp )

The arithmetic is 64-bit intermediate with round-half-up. The multiplier is 32 bits
signed, the shift is 0–63, and the zero point is int8.

`quant_simd` has only eight lanes. A hardware counter feeds row r of the 8×8 result tile
to the lanes in cycle r, so one tile is quantized in eight cycles. The next tile is taken
in the cycle the current one finishes. This is fast enough because the array itself needs
at least one cycle per k step, and a real layer has K ≥ 64 in most cases.

The 64 int8 results leave as one 512-bit beat, with byte `m*8+n`.

## Data reshuffler

The reshuffler is a separate unit with its own In and Out streamers. It can therefore run
at the same time as a GEMM, for example preparing the next layer's operand or pooling the
previous one. It has three modes:

- **`RS_COPY`**: the beat passes through unchanged. The layout change comes entirely from
  the two streamers' address patterns. Examples are row-major to blocked, or
  de-interleaving channels.
- **`RS_TRANSPOSE`**: the 64 bytes of each beat are transposed as an 8×8 matrix.
- **`RS_MAXPOOL`**: each beat is split into eight 64-bit vectors, and an eight-lane int8
  max unit takes one vector per cycle. Every `window` vectors produce one pooled vector,
  and eight pooled vectors are packed into one output beat. The In streamer's AGU decides
  which vectors fall into one window, which gives pooling windows and strides of any
  shape.

## Programming model

The control core writes 32-bit registers through `csr_we`, `csr_addr[7:0]` and
`csr_wdata`. `csr_rdata` returns any register combinationally.

### Register map

Streamer *s* (0 input, 1 weight, 2 psum, 3 output, 4 Q_Out, 5 reshuffler In,
6 reshuffler Out) owns registers `16·s` to `16·s+15`:

| Offset | Contents |
|---|---|
| +0 | base byte address |
| +1..+6 | bounds, dimension 0 first |
| +7..+12 | signed strides |
| +13 | channel stride |
| +14 | transpose enable (weight streamer) |

The remaining registers are:

| Address | Register |
|---|---|
| 0x70, 0x71, 0x72 | GEMM M/8, N/8, K/8 |
| 0x73 | GEMM flags: bit 0 `psum_en`, bit 1 `quant_en` |
| 0x78–0x7B | quantization multiplier, shift, zero point, ReLU |
| 0x7C, 0x7D | reshuffler mode, pooling window |
| 0x7E | START: writing a mask starts every unit whose bit is set |
| 0x7F | BUSY (read) |

Unit bits 0–6 are the streamers, bit 7 is the GEMM core and bit 8 is the reshuffler. A
unit is configured and started separately from the others, so a GEMM and a reshuffle can
run at once.

### Example: quantized GEMM

This example computes C = A·B, quantized, for row-major A (M×K bytes, pitch K) and
pre-blocked B tiles. MT, NT and KT are M/8, N/8 and K/8.

- **Input streamer**:
  - base A; `ch_stride` = K;
  - bounds {KT, NT, MT} with strides {8, 0, 8·K};
  - meaning: step along k, repeat for every n tile, then go to the next 8 rows.
- **Weight streamer**:
  - base B;
  - bounds {KT, NT, MT} with strides {64, 64·KT, 0};
  - meaning: the whole B once per row of tiles.
- **Q_Out streamer**:
  - base O; `ch_stride` = N;
  - bounds {NT, MT} with strides {8, 8·N};
  - meaning: each channel writes one output row.
- **Registers**: GEMM sizes MT, NT, KT; flags = 2; the quantization registers.
- **Start**: write START = input | weight | Q_Out | GEMM, then poll BUSY until it reads 0.

For an int32 result with partial sums, set flags = 1 and program the psum and output
streamers (bounds {NT, MT}, stride 256 bytes per tile) instead of Q_Out.

## Where this RTL departs from the chip, and what it assumes

These points follow the chip's description:

- the array shape and 32-bit accumulation;
- output stationarity and hardware-loop clearing;
- 32 × 64-bit banks and 128 KB of memory;
- the streamer structure (AGU, MICs, FIFOs);
- FIFO depths of 8 for input and weights and 1 for psum and output;
- the 512-bit super-bank weight channel and its transposer;
- the 6-D input AGU and 3-D weight AGU;
- the shared psum/output port group with psum priority;
- the 8-lane time-multiplexed quantizer;
- the reshuffler's maxpool and layout roles.

Everything else is this design's own choice. In particular:

- the byte orders inside tiles;
- the address split and the crossbar's round-robin arbitration and 80-port numbering;
- the channel-stride scheme and per-channel address queues;
- depth 2 for the Q_Out and reshuffler streamers;
- the quantization formula;
- the CSR map, the start/busy protocol and the result-routing flag;
- the maxpool packing.

Known differences and limits:

- **Quantizer output width.** The chip's diagram draws the quantizer as a 2048-to-512-bit
  parallel-to-serial converter. Its text describes eight lanes producing 64 results over
  eight cycles. This RTL follows the text: eight int32 values go in per cycle, and one
  512-bit beat comes out per tile.
- **Control core, instruction cache, DMA, peripherals and off-chip memory are absent.**
  - The CSR port and DMA port take their place.
  - The DMA's multi-dimensional transfers belong to that engine. One of the chip's
    evaluated features, a DMA that writes straight into the memory in the blocked layout,
    is therefore outside this RTL. The DMA port reaches the banks with the same
    priority as every other port.
- **No clock gating, power domains or SRAM macros.** The banks are plain arrays that a
  synthesis flow would map to macros. The chip runs at 300–800 MHz on 16 nm. The RTL has
  no timing constraints, and the combinational crossbar grant is the likely critical
  path.
- **Sizes are limited to multiples of 8.** The core handles only M, N and K that are
  multiples of 8. Other sizes need software padding, and a matrix-vector product (token
  decode in an LLM) uses one row of eight.
- **Maxpool packing.** In maxpool mode, the number of pooled vectors per run must be a
  multiple of 8.

## Workloads that fit

A dense GEMM fits entirely in the memory when A (M·K bytes) plus B (K·N bytes) plus the
result (M·N·4 bytes as int32, or M·N as int8) stays under 128 KB:

| GEMM | Memory needed (with int32 result) |
|---|---|
| 96×96×96 | 54 KB |
| 32×32×32 | 6 KB |
| 80×80×80 | 37.5 KB |
| M×K×N = 24×1024×64 | 94 KB |

One attention head of a BERT-Base-sized model with 64 tokens also fits when its
intermediate results are kept as int8. The memory then holds, at most:

- X (64×768) = 48 KB;
- one 768×64 weight = 48 KB;
- a few 4 KB results.

Full networks (CNNs, vision transformers, LLM layers) must be tiled layer by layer by
software, with the DMA moving tiles in and out.

### Operand placement decides the utilization

Operand placement in the memory matters as much as the hardware. `tb_voltra_gemm_workloads`
runs the four GEMM sizes above end to end. It reports *temporal utilization*: k steps
divided by the cycles the GEMM core was busy.

In the tested placement, A and B are both stored as blocked 8×8 tiles of 64 bytes. The
test loads A row-major, and the reshuffler, in copy mode, produces the blocked A. Its In
streamer gathers eight rows through the channel stride. This takes about 1.5 cycles per
tile. At K = 1024 it takes 4.5 cycles per tile, because a 1024-byte row pitch puts all
eight rows in one bank. The
tile rows are padded to a multiple of four tiles, and B starts two super banks away from
A. The A tile and the B tile read in the same cycle then never share a super bank. The
measured utilization is:

| GEMM | Temporal utilization |
|---|---|
| 32×32×32 | 77.1 % |
| 80×80×80 | 90.7 % |
| 96×96×96 | 92.2 % |
| 24×1024×64 | 99.1 % |

The small case is dominated by pipeline fill. The remaining loss in the others comes from
the output writes, which take all 32 banks for a cycle.

With A left row-major instead, read through the channel stride, the eight A words of a
step sweep across the banks. They then collide with the weight super bank about a
quarter of the time, and the same square GEMMs reach only 63–67 %. The shallow FIFOs
cannot recover a cycle lost to a conflict unless the array is stalled for some other
reason. A good layout is therefore the job of the reshuffler (row-major to blocked) or
of the DMA.

## Simulating

Each block has a self-checking testbench in `tb/` named `tb_<block>`. Each one:

- prints `TB_RESULT checks=<n> failures=<n>`;
- stops itself through a watchdog if the design hangs.

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/voltra_pkg.sv tb/tb_gemm_core.sv --top-module tb_gemm_core
    ./obj_dir/Vtb_gemm_core

Verilator finds the other modules through `-Irtl`. Replace `gemm_core` with any block
name, or use `voltra_top` for the end-to-end test.

`tb_voltra_gemm_workloads` (about 40 s) runs the four dense GEMMs described above,
each preceded by a reshuffle of A, and checks every result.

`tb_voltra_conv2d` runs two 3×3 convolutions through the implicit-im2col input
pattern and compares every output with a direct convolution.

`tb_voltra_top` runs the whole accelerator at its default sizes. It takes about half a
minute. Its steps are:

1. Load operands through the DMA port: A 16×32, B 32×24, int32 partial sums, and a
   reshuffle source.
2. Run a quantized GEMM while the reshuffler max-pools in parallel.
3. Run a second GEMM with transposed weights, partial-sum accumulation and int32 output,
   while the reshuffler transposes.
4. Read every result back through the DMA port and compare it with a reference model
   written in the testbench.

The test also counts how often each mechanism happened, and it fails if any count is
zero. The mechanisms are:

- crossbar bank conflicts;
- prefetch run-ahead in the input FIFOs;
- deferred output writes;
- partial-sum loads;
- GEMM stalls.

Each run also uses a different result path (int8 through the quantizer, int32 through
the output streamer) and a different reshuffler mode (maxpool, then transpose). The
reshuffler's copy mode runs end to end in the workload test.

Every block-level testbench was also run against a deliberately broken copy of its block,
and each reported failures.
