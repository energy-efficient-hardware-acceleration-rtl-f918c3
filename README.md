# IMAX lane for FP16 dot products: RTL of a coarse-grained linear-array (CGLA) speech-recognition accelerator

Most of the run time of Whisper speech recognition goes into dot products, in
the attention and feed-forward layers. The weights are FP16 and the vectors are
a few hundred to a few thousand elements long. This design offloads those dot
products to a linear-array accelerator. Each *lane* of the accelerator is a
chain of 64 processing elements (PEs). Every PE sits next to its own 32 KB
local memory module (LMM). A lane works like this:

1. A DMA engine streams operand vectors from DRAM into the LMMs.
2. A stream of *tokens* flows through the PE chain, one PE per clock.
3. Each PE does one small step of the kernel: load, widen FP16 to FP32, or
   multiply-accumulate.
4. The partial sums are stored in the LMMs.
5. A second DMA engine writes the partial sums back to DRAM, and the host adds
   them up.

The arithmetic is FP32 throughout. Two FP32 fused multiply-adds share each
64-bit datapath (2x32-bit SIMD). Four logical threads take turns on one
pipelined FPU, so the FPU is busy every cycle even though its result needs
four cycles to come back round.

The RTL is SystemVerilog (IEEE 1800-2017). The defaults are:
- 2 lanes;
- 64 PEs and 64 LMMs of 32 KB (4096 x 64 bits) per lane;
- 64-bit words;
- bursts of 16 FP16 elements;
- 4 threads per FPU.

## Block structure

```
imax_top (NUM_LANES = 2)
 └─ per lane
     ├─ axi_dma_read    AXI4 read master -> 64-bit valid/ready stream
     ├─ imax_lane
     │   ├─ lane_ctrl   walks the command stream, runs the phases
     │   ├─ pe x 64     token pipeline stage + ALU + FPU
     │   │   ├─ fp16_to_fp32 x 4
     │   │   └─ fma_simd_mt  (2 x fp32_fma, 4 thread accumulators)
     │   └─ lmm x 64    32 KB, two ports
     └─ axi_dma_write   stream -> AXI4 write master
```

The host CPU, the on-chip network and DRAM are outside the design. Each lane
brings out its own AXI4 master port (40-bit addresses, 64-bit data).

## The command stream

The host does the following for each lane:
- packs everything the lane needs densely into one buffer in DRAM, with no
  alignment padding;
- starts the lane with the buffer's address and length in words, and a result
  address.

The read DMA streams the buffer into `lane_ctrl`. The buffer is a sequence of
items. Each item starts with a 64-bit header (`imax_pkg::hdr_t`):

| bits    | field      | meaning |
|---------|------------|---------|
| 63:60   | `tag`      | CONF 1, REGV 2, LOAD 3, EXEC 4, DRAIN 5, END 6 |
| 59:54   | `id`       | PE or LMM number |
| 53:42   | `addr`     | LMM word address (CONF: LDA/LDB base) |
| 41:29   | `len`      | word count (LOAD, DRAIN, EXEC) |
| 28:17   | `aux_addr` | CONF: where an FMA PE stores its accumulators |
| 16:13   | `aux_op`   | CONF: PE operation |
| 12:0    | reserved   | |

| item  | lane action | phase counted |
|-------|-------------|---------------|
| CONF  | write PE `id`'s configuration (operation, base, store address) | CONF |
| REGV  | the next stream word becomes PE `id`'s register value | REGV |
| LOAD  | decode the range (1 cycle), then write the next `len` words into LMM `id` from `addr` on | RANGE, LOAD |
| EXEC  | clear the accumulators; inject `len` tokens into PE 0, one per cycle; wait until the array is idle | EXEC |
| DRAIN | decode the range, then send LMM `id` words `addr..addr+len-1` to the write DMA, the last one flagged | RANGE, DRAIN |
| END   | pulse `done` | – |

`lane_ctrl` counts the cycles it spends in each phase (`phase_cycles`). This
gives the same kind of execution-time breakdown as the one used to judge how
compute-bound the accelerator is. The phase named REFILL in that breakdown is
not implemented: nothing in the available description says what it does.

## Tokens and the PE chain

A token (`imax_pkg::token_t`) holds:
- `valid`, `last`;
- a 12-bit word index `idx`;
- a 2-bit thread number `tid`;
- two raw 64-bit operands `a` and `b`;
- two 64-bit FP32 pairs `c` and `d`.

EXEC injects the tokens `idx = 0 .. len-1` with `tid = idx mod 4`. Each PE
registers the token and passes it on the next cycle, so a token reaches PE *k*
*k* cycles after it enters. A PE's configuration decides what it does to the
token:

| op        | effect |
|-----------|--------|
| `NOP`     | pass the token on |
| `LDA/LDB` | read LMM word `base+idx` of the PE's own LMM into `a` / `b` (the read is issued when the token arrives; the data is merged one cycle later, as the token leaves) |
| `CVT_LO`  | `c`,`d` = the low two FP16 lanes of `a`,`b`, widened exactly to FP32 |
| `CVT_HI`  | the same for the high two FP16 lanes |
| `FMA`     | `acc[tid] += c*d` in both SIMD halves; after the `last` token, store the 4 accumulators at LMM `st_addr..st_addr+3` |

FP16 to FP32 widening is a PE operation, so there is no converter in front of
the FPU. It handles zeros, subnormals (normalised by a leading-one search),
infinities and NaNs.

### The FP16 dot-product mapping

A dot product uses a *unit* of six consecutive PEs, 6u to 6u+5:

```
 6u    LDA     a = x[idx]         (4 FP16 of x, from LMM 6u)
 6u+1  LDB     b = y[idx]         (4 FP16 of y, from LMM 6u+1)
 6u+2  CVT_LO  c,d = x0,x1 / y0,y1 as FP32
 6u+3  FMA     acc[tid] += c*d    -> partial sums in LMM 6u+3
 6u+4  CVT_HI  c,d = x2,x3 / y2,y3 as FP32
 6u+5  FMA     acc[tid] += c*d    -> partial sums in LMM 6u+5
```

- A lane of 64 PEs holds 10 such units. All ten consume the same token
  stream, so ten dot products advance by four elements per cycle each.
- A unit's result is 4 threads x 2 SIMD halves x 2 FMA PEs = 16 FP32 partial
  sums. Two DRAIN items of 4 words each send them back, and the host adds
  them.
- The REGV value of an FMA PE seeds accumulator 0. A vector longer than one
  LMM can therefore be split over several offloads that carry the running sum.
- EXEC lengths must be a multiple of 4 words (one burst of 16 FP16 elements).
  The host computes the leftover elements itself; an assertion checks the
  rule.

### Why four threads: the FMA loop

`fp32_fma` is a fused multiply-add with a 3-stage pipeline:
1. exact 24x24-bit product, plus the special cases;
2. alignment on a 98-bit grid with a sticky bit, then add or subtract;
3. leading-one normalisation and round to nearest even.

`fma_simd_mt` writes the result back into the thread's accumulator one edge
after it leaves the pipeline. An accumulation therefore takes exactly 4
cycles from issue until the updated sum can be read again. Tokens arrive one
per cycle with `tid` cycling 0,1,2,3. So each thread issues every fourth
cycle, just as its previous sum is written back. The FPU starts a new
operation every cycle and never waits. An assertion fires if a thread is
issued while its previous operation is still in flight.

Departures from IEEE 754 (choices of this design):
- subnormal FP32 inputs and results are flushed to zero;
- every NaN result is the canonical quiet NaN `0x7FC00000`.

A sum of products in this order is not bit-identical to a sequential FP32
loop, because each thread accumulates every fourth word.

## Memories and DMA

- `lmm` is a two-port RAM with synchronous reads.
  - Port A belongs to the PE: LDA/LDB reads and accumulator stores.
  - Port B is the lane's memory path: LOAD writes and DRAIN reads. It is
    shared by all 64 LMMs and selected by the header's `id`.
  - In silicon each LMM would be an SRAM macro; here it is an array.
- `axi_dma_read` issues INCR bursts:
  - at most 16 beats of 8 bytes;
  - one burst outstanding at a time;
  - never across a 4 KB boundary.
  - R data goes straight to the lane (`rready = m_ready`).
- `axi_dma_write` collects up to 16 words into a buffer, then sends the burst.
  - A burst is closed early at the stream's `last` word or at a 4 KB boundary.
  - `words_written` counts words that have been acknowledged.
  - It is started together with the read DMA and waits for the lane's DRAIN
    output.

## Timing summary

| event | cycles |
|-------|--------|
| CONF item | 2 (header + write) |
| REGV item | 2 |
| LOAD of *n* words | 2 + *n* at full stream rate |
| EXEC of *n* words | 1 + *n* + the time for the last token to pass the 64 PEs, plus the final FMA and accumulator store (about 68 with 64 PEs) |
| DRAIN of *n* words | 1 + *n* + 2 at full rate |
| PE token latency | 1 per PE |
| FMA latency | 3, plus 1 for write-back |

In the full-size test these come out as follows:

| lane | dot products | elements each | LOAD cycles | EXEC cycles |
|------|--------------|---------------|-------------|-------------|
| 0 | 10 | 384 | 2953 | 165 |
| 1 | 10 | 1536 | 11897 | 453 |

LOAD dominates because every unit loads its own copy of both vectors through
one 64-bit stream, and the memory model stalls at random.

## Where this departs from the description it is based on

- **Unit count.** 10 FP16 units per lane of 64 PEs. The original kernel packs
  22 units per lane with a PE operation set that was not published. The PE
  operations here are this design's own.
- **Q8_0 kernel.** Not built. It comes from earlier work and is not
  described.
- **REFILL phase.** Not built.
- **Wrap-around path.** The lane drawing shows a line along the array edge
  joining the last PE row to the first. It is not built, because the
  dot-product kernel never uses it.
- **Reduction on the host.** Only partial sums come back. The host reduces
  the 16 partial sums per dot product and computes the residual elements.
- **Off-chip parts.** The network-on-chip, the platform DMA controllers, DRAM
  and the host CPU are outside the design.
- **LMM size.** 64 KB LMMs (`LMM_BYTES = 65536` in `imax_pkg`) would be needed
  for the larger base and small models. The header fields and address widths
  follow that parameter, but only 32 KB has been simulated.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp16_to_fp32` | all 65536 FP16 codes against a real-number reference |
| `tb_fp32_fma` | directed special cases and 20000 random FMAs against a reference with a single rounding; latency of 3 |
| `tb_fma_simd_mt` | 4-thread round-robin accumulation, clear/init, SIMD halves |
| `tb_lmm` | both ports, read latency, the whole address range |
| `tb_pe` | every operation, token timing, the accumulator store |
| `tb_lane_ctrl` | header decoding, phase sequence, token stream, drain flow control, phase cycle counts |
| `tb_imax_lane` | a 12-PE lane running two dot-product jobs |
| `tb_axi_dma_read`, `tb_axi_dma_write` | against a behavioural AXI memory with random stalls: data order, burst length, 4 KB splits, early close on `last` |
| `tb_imax_top` | end to end at default parameters (see below) |
| `tb_whisper_tiny_kernels` | default parameters, the tiny model's dot-product shapes: 1500 elements split into 1488 on the lane plus 12 on the host (host total within 1e-5 of exact), and 64- and 384-element jobs back to back in one buffer; lane 0's EXEC took 441 cycles for 372 words |

`tb_imax_top` runs both lanes concurrently, each on its own command buffer.
- It compares each of the 160 drained words bit for bit with a model of the
  FMA order. Lane 1 seeds its accumulators through REGV, so those results
  also check REGV seeding.
- It prints the relative error of the host-side sum of the partials against
  the exact dot product.
- It counts each mechanism, and fails if one never happened: every phase on
  both lanes, AXI read and write stalls, bursts split at a 4 KB boundary,
  and both lanes busy at the same time.
- It also checks that EXEC lasts between one cycle per word plus one, and
  that plus the array depth plus 12.
- It takes about 12,900 cycles.

`tb/axi_mem_model.sv` is the behavioural AXI4 memory. It checks burst legality
and inserts random stalls. `tb/tb_fp_pkg.sv` and `tb/tb_imax_pkg.sv` hold the
floating-point reference functions and the command-buffer builder.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/imax_pkg.sv tb/tb_fp_pkg.sv tb/tb_imax_pkg.sv tb/tb_imax_top.sv \
    --top-module tb_imax_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_imax_top` with any other testbench name.
