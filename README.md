# A near-memory NPU built from shared-operand dot-product engines

This is a neural-network accelerator for edge inference. It gets high utilisation from little
interconnect. The approach is to move as few bytes as possible per operation. It does not try to
maximise peak TOPS.

Each compute engine is a row of M = 16 pipelined dot-product units. Each unit multiplies two
16-byte vectors per clock. All sixteen units share one of the two vectors: the *data operand*, for
example sixteen input channels of one pixel. Each unit keeps its own *weight vector* stationary.

The 32-bit accumulators never leave the engine. Every unit has A = 32 of them in a local
scratchpad, one per pixel in flight. So a weight vector, once loaded, is reused for up to 32
pixels, while the data operand is reused by all 16 units.

With these two kinds of reuse, one engine at full rate needs only:

- one 128-bit data word per clock;
- one weight word per unit every npix clocks, where npix is the number of pixels per group;
- one result word per pixel.

Each engine therefore has just three 128-bit buses: data in, parameters in, results out.

Four engines sit around a banked on-chip memory (the *TCM*, tightly coupled memory, 1 MiB). The
subsystem peaks at 4 × 2 × 16 × 16 = 2048 operations per clock, which is 2 TOPS at 1 GHz. A DMA
engine moves tiles between the TCM and system DRAM. A small controller processor, not part of
this RTL, programs everything through memory-mapped registers.

The memory banks have no arbitration. Software must place data so that two masters never touch
the same bank in the same cycle. A bank-remapping table lets software relocate banks between
layers.

The remaining sections describe the pieces from the inside out. They give the most space to the
engine's job model and to how the four engines cooperate, which are the least obvious parts.

## The dot-product unit and the two-cycle 16-bit trick

`dot_product_unit` multiplies the shared operand `a` (16 bytes) element-wise with the unit's
weights `b` (16 signed bytes). It then sums the products in a binary adder tree.

- **Pipeline.** One register stage holds the products and one follows each tree level, so the
  latency is 1 + log2(16) = 5 clocks. A new dot product can start every clock.
- **16-bit data.** The multipliers are 8 × 8 bits. A 16-bit data operand is fed in two
  consecutive clocks:
  1. the low bytes, as unsigned numbers;
  2. the high bytes, as signed numbers shifted left by 8 before the tree.

  Both partial sums go into the same accumulator, so the total is the full 8 × 16-bit product.
- **Tree widths.** Because of the shift, the tree inputs are 24 bits wide rather than the 16 that
  8 × 8 products need. Each level adds one bit up to a 27-bit output.
- **Limit.** 16 shifted products of (−128) × (−128) would sum to exactly 2^26. That one value
  does not fit 27 signed bits and wraps. The constraint is inherent to a 24-in/27-out tree.

`dot_product_engine` puts 16 of these units side by side, with one operand bus and the
accumulator scratchpad (`acc_scratchpad`, 16 × 32 × 32 bits). An operation carries a pixel index
and two flags:

| Flag | Effect |
|------|--------|
| `op_clear` | Start this pixel's accumulator from zero (first reduction chunk). |
| `op_last` | Emit the finished 32-bit row once this operation is added (last chunk). |

The accumulate step is a read-modify-write in the scratchpad, five clocks after the operation
enters, so the result row appears six clocks after the operation.

The weights are double-buffered:

- Every unit has an active weight register and a shadow register.
- The shadow fills over the parameter bus while the active copy is in use.
- `w_swap` copies the shadow to the active register in one clock.

## The engine's job model

A *job* is one register-programmed run of `compute_engine`. It computes 16 output channels for
`ng` groups of `npix` ≤ 32 pixels, reducing over `nk` chunks of 16 input bytes:

```
out[g][p][m] = act( Σ_k Σ_i data(g,p,k)[i] · w[k][m][i] + bias[m] )
```

This single form covers a wide range of layers:

- **Convolution.** The data engine's address loops produce im2col order: for each chunk k, the
  16 channels of one filter tap.
- **Fully-connected layers and matrix products.**
- **Wider layers** are split over several jobs or engines, each producing 16 output channels.

Inside a job, four parts work concurrently:

1. **Parameter loader.** It reads the 4 bias words (16 × 32 bit), then the 16 weight words of
   each chunk into the shadow registers.
   - Parameter layout in memory: `p_base + 0..3` hold the biases; `p_base + 4 + k·16 + m` holds
     the weights of output channel m for chunk k.
   - With `use_cache`, the first pixel group also writes the weights into the 8 KiB
     `weight_cache`. Every later group reads them from the cache instead of the bus.
   - If a layer's weights (nk·16 words) exceed the cache, only the first 32 chunks are cached.
     The remaining chunks are streamed again for each group.
2. **Data engine** (`data_engine`). This is a prefetcher that walks five loops: group, three
   nested chunk loops, and pixel. The chunk index k is split as
   k = (k3·`K_MID` + kmid)·`K_IN` + kin. The word address is
   `d_base + g·str_g + k3·str_k3 + kmid·str_k2 + kin·str_k + p·str_pix`.
   - On a contiguous HWC tensor, a 3 × 3 convolution uses two chunk levels. The inner loop runs
     over the channel words of three neighbouring pixels (one filter row); the next loop steps a
     line down.
   - On a tensor left *fragmented* by a depth-parallel layer (channel word c of every pixel in
     its own bank), all three levels are used:
     - the inner loop rotates among the fragments, one bank apart;
     - the middle loop steps a pixel;
     - the outer loop steps a line.
   - In both cases, the whole layer tile is one job.
   - `K_IN` = 0 gives a single chunk loop; `K_MID` = 0 gives two levels.
   - It stores each fetched operand as a row of a small two-dimensional register file: 8 rows of
     two words each.
   - *Byte scrolling*: a row holds two words when the 16 wanted bytes start at a byte offset
     (`SCROLL`) inside the word, or when the data is 16-bit. The output stage then shifts the
     two-word row by that many bytes. This lets a filter window slide by one pixel of fewer than
     16 channels without re-laying out memory.
   - It keeps up to 8 reads in flight, which hides bus latency.
3. **Issuer.** It pairs each operand vector with the current weights and issues one operation
   per clock. The swap to the next chunk's weights happens in the same clock as the current
   chunk's last operation, so a job streams without bubbles.
   - It does not issue a last-chunk operation until the output queue has reserved room for its
     result (a credit counter). A slow result bus therefore stalls the engine instead of losing
     rows.
4. **Activation and writer** (`activation_unit`). Each 32-bit row goes through three stages:
   1. add the bias and multiply by `MULT`;
   2. round-shift right by `SHIFT`, add the zero point `ZP`, and clamp to `[min, max]`;
   3. optionally map the 8-bit values through a 256-entry lookup table, which can hold any
      nonlinear function such as ReLU6, Swish or Mish. Optionally, take the minimum or maximum
      over `POOL` consecutive pixels.

   Results are 8-bit (one word per pixel) or 16-bit (two words). The writer stores row n at
   `o_base + n·o_str`.

**Overlapped programming.** Registers may be rewritten while a job runs. Writing CTRL = 1 while
busy turns the current register contents into a *pending* job, which starts the clock after the
running one ends. The controller thus programs job n+1 while job n computes.

**Measured rate.** In `tb_compute_engine` a job of 1024 dot products (32 pixels × 4 chunks × 8
groups, weights from the cache) takes 1066 clocks, including pipeline fill and drain. The memory
model has latency and random stalls.

### Engine registers (word offsets in an engine window)

| Offset | Name | Meaning |
|---|---|---|
| 0 | CTRL | write 1: start (or queue as pending); read: {pending, busy} |
| 1–3 | NPIX, NK, NG | pixels per group (1..32), chunks, groups |
| 4–7 | D_BASE, D_STR_PIX, D_STR_K, D_STR_G | data address loops (128-bit word units) |
| 8 | P_BASE | parameter base (biases, then weights) |
| 9 | MODE | bit 0 16-bit data, 1 16-bit output, 2 use weight cache, 3 lookup table, 4 max (not min) pooling |
| 10 | SCROLL | byte offset 0..15 of the data window |
| 11–12 | O_BASE, O_STR | output address and stride |
| 13–17 | MULT, SHIFT, ZP, CLAMP, POOL | requantisation, clamp {max, min}, pooling window 1..4 |
| 18–21 | K_IN, D_STR_K2, K_MID, D_STR_K3 | inner chunk-loop count (0 = no split), middle loop stride, middle loop count (0 = none), outer loop stride |
| 256–511 | LUT | lookup-table entries |

## The subsystem: TCM, bus fabric, DMA

`neutron_npu` is the top level. It connects:

- four `compute_engine`s;
- the `bus_fabric`;
- the `tcm`;
- the `dma`;
- a register decoder for the controller.

### TCM

`tcm` holds 16 banks of 4096 × 128-bit words (1 MiB). The bank is chosen by the upper four bits
of the 16-bit word address. Ten read ports and six write ports are all served in the same cycle
when they hit different banks. Read data returns one clock later.

There is deliberately no arbiter. If two ports hit one bank in one cycle:

- the lower-numbered port wins;
- the other access is dropped;
- a conflict pulse fires and a counter counts it.

Software is expected to plan placement so that this never happens. The counter exists to prove
that it did not.

A *V2P table* (virtual-to-physical bank table, 16 entries) translates the bank field of every
address. Software uses it to move a tensor's banks between layers without copying. It can only be
written while every engine and the DMA are idle. A write at any other time is refused and
reported.

### Bus fabric and sharing mode

`bus_fabric` gives each engine's three buses TCM ports of their own, with a register stage each
way. The fabric also implements *sharing mode*: when the data (or parameter) stream of all engines
is the same, only engine 0's requests reach the TCM, and its responses are broadcast to all four.

Sharing mode supports the two ways of splitting a layer over four engines:

- **Depth parallelism (share data).** Every engine reads the same input pixels and computes its
  own 16 output channels. Each engine writes its own output bank. The layer's output is then
  split into fragments along the channel dimension. The next layer reads these fragments
  directly: the data engine's innermost loop rotates among the banks. Alternatively, the DMA
  gathers them into one interleaved tensor.
- **Line parallelism (share parameters).** Every engine uses the same weights on different
  output lines. Each engine's input lines must lie in banks of its own. The DMA's TCM-to-TCM copy
  first duplicates the overlapping lines: a 3-row filter needs two lines of overlap between
  neighbours.

Broadcasting works only if the engines run in exact lockstep. To achieve that:

- The controller programs them through the *all engines* register window.
- It starts them with a single write.
- The layers are partitioned into equal parts, padded if necessary.

If the engines' request patterns ever diverge while sharing, a lockstep-error flag is raised.

### DMA

`dma` moves `cnt0 × cnt1 × cnt2` words. The source and the destination each run a three-level
address loop with strides of their own. Either side is the TCM or the system-memory port, so the
same engine can:

- fetch tiles from DRAM;
- push results back to DRAM;
- copy inside the TCM;
- rearrange a layout (for example interleave four channel fragments) on the way.

A FIFO with reserved space keeps up to 8 reads in flight against DRAM latency.

### System register map (`cfg_addr[15:12]`)

| Window | Target |
|---|---|
| 0–3 | engine 0..3 |
| 4 | all engines (write only) |
| 5 | DMA: 0 CTRL {dst is DRAM, src is DRAM, start}, 1 SRC_BASE, 2–4 SRC_STR0..2, 5 DST_BASE, 6–8 DST_STR0..2, 9–11 CNT0..2 |
| 6 | V2P table: entry v = physical bank of virtual bank v |
| 7 | 0 sharing bits {params, data}; 1 status {V2P refused seen, lockstep error seen, DMA busy, engine busy[3:0]}; 2 bank-conflict count |

Other top-level ports:

- `irq_eng[3:0]` and `irq_dma` pulse when a job ends.
- `host_req`/`host_rsp` give the controller one TCM port.
- `ext_*` is the DMA's system-memory port: a valid/ready request with in-order read data.

## What is specified and what is chosen here

The following come from the published architecture:

- 16 × 16 dot-product units per engine, one shared operand, 32 accumulators per unit,
  output-stationary flow;
- the 8 × 16 two-cycle scheme with its 24/27-bit tree;
- the 8 KiB parameter cache reused after the first pixels;
- the prefetcher with multi-dimensional loops, a 2D register file and byte scrolling;
- rescaling to 8 or 16 bits, an arbitrary nonlinear function, min/max pooling;
- three 128-bit buses per engine, four engines, 1 MiB of banked and non-arbitrated TCM, V2P
  remapping only when idle;
- data or parameter broadcast in lockstep, global or per-engine programming, overlapped
  next-job programming;
- a DMA with strided and TCM-to-TCM transfers.

The following are this design's own choices, since the architecture does not give them:

- the register maps;
- the loop nests (five levels in the data engine, three in the DMA);
- the parameter memory layout;
- the split of a 16-bit operand into an unsigned low and a signed high byte;
- the requantisation arithmetic;
- the 256-entry table as the nonlinear function, which applies to 8-bit output only;
- the pooling along consecutive pixels;
- 16 banks with fixed-priority conflict handling;
- a single pipeline stage in the fabric;
- the register-file and FIFO depths;
- the simple valid/ready memory protocol. A real integration would put an AXI bridge on `ext_*`.

Known departures and limits:

- The controller processor, its firmware and the compiler are not included. They decide the
  tiling, the placement in banks, the per-tick job schedule and the V2P updates. The testbenches
  play the controller's part by writing registers directly.
- Depthwise convolutions, element-wise additions and additions of a constant have no dedicated
  mode. They run as dense jobs whose weights are zero off the diagonal, at 1/16 of the
  dot-product rate. An element-wise addition is one job whose two chunks point at the two
  inputs. `tb_workload_mobilenet` runs both cases.
- An element-wise product of two tensors does not map to this datapath, because one factor
  would have to be a weight.
- A conflicting TCM access is dropped, not delayed.

## Simulating

Every module has its own self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, checks cycle counts where a rate is defined, and has a watchdog.
The `dram_model` and `rd_mem_model` files are behavioural memories with latency and random stalls,
for testbench use only.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/neutron_pkg.sv rtl/*.sv \
  tb/dram_model.sv tb/rd_mem_model.sv tb/tb_neutron_npu.sv --top-module tb_neutron_npu
obj_dir/Vtb_neutron_npu +verilator+rand+reset+2
```

The package must come first. `-Wno-fatal` keeps Verilator's width and style warnings in the
testbench code from stopping the build.

`tb_neutron_npu` runs the whole subsystem at its default size, in about ten seconds. The run is:

1. The DMA fetches inputs and parameters from DRAM.
2. A depth-parallel job runs on four engines in data-sharing mode, with a second job (16-bit
   output, max pooling) queued as pending while the first runs.
3. During that job, a V2P update is refused and the controller port causes bank conflicts on
   purpose.
4. The DMA gathers the four fragments into DRAM.
5. A TCM-to-TCM copy of overlapping lines prepares a line-parallel 3 × 1 convolution. It runs in
   parameter-sharing mode with a lookup-table activation, and its result is pushed.
6. A bank remap is done in idle mode.

Every result is compared with a reference model in the testbench. Each of these mechanisms is
counted and must occur at least once.

### A workload tile

`tb_workload_resnet_conv` runs one tile of a ResNet-50 3 × 3 convolution (64 → 64 channels) on the
full-size subsystem. The tile is two output lines of 32 pixels. The run is:

1. The DMA fetches the input lines, splitting the 64 channels into four single-word fragments in
   four banks, as a previous depth-parallel layer would leave them. It also fetches four
   parameter sets.
2. The four engines split the output channels, sharing the input stream in lockstep. The data
   engine rotates among the fragments at word level.
3. The DMA interleaves the result in DRAM, where it is compared with a reference convolution.

The 576 weight words per engine exceed the cache, so the partial-caching path is exercised. The
compute phase takes 2345 cycles for 2304 cycles of dot products per engine, which is 98% of peak.

`tb_workload_mobilenet` covers the two MobileNet-V2 layer types that are not dense convolutions.
Both run on one engine with diagonal weights:

- a 3 × 3 depthwise convolution over a 32-pixel line, taking 329 cycles for 288 dot products;
- a residual addition with per-input scales.
