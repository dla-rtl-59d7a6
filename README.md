# A DLA-style neural-network overlay in SystemVerilog

This is a programmable inference engine in the style of the DLA overlay
described in "DLA: Compiler and FPGA Overlay for Neural Network Inference
Acceleration". The hardware does not change from one network to the next.
A network is split into *subgraphs*: one convolution (or matrix product),
plus the element-wise work that follows it. For each subgraph a short block
of 32-bit VLIW instructions programs every kernel, and the kernels then run
the subgraph out of on-chip buffers. Reprogramming happens while the
previous subgraph is still computing, so it costs a few cycles rather than a
pipeline drain. New element-wise functions are added as kernels on a
run-time-routed interconnect (the *Xbar*), and no other block changes.

The RTL covers the whole on-chip accelerator: the instruction network, the
convolution engine, the buffers, the Xbar and its pool and LSTM kernels, and
the DMA engines. The RTL does not include the following:
- the local response normalisation (LRN) kernel, whose arithmetic the source
  does not give (its Xbar connection is a set of ports on the top);
- the external DRAM;
- the graph compiler that produces the instruction streams.

## One subgraph, end to end

```
 external memory ──feature DMA──┐                   ┌── filter loader ── external memory
                                ▼                   ▼ (idle bank)
                        ┌───────────────┐   ┌──────────────────────────────┐
                        │ stream buffer │──►│ conv sequencer ─► PE0 ─► PE1 ─► … ─► PE(K-1) │
                        └───────────────┘   └──────────────────────────────┘
                                ▲                            │ results of all PEs
                                │                            ▼
                          stream writer ◄──── Xbar ◄──── drain (rescale, ReLU)
                                               │  ▲
                                  pool, LSTM, LRN (external) kernels
```

1. The **stream buffer** holds the subgraph's input tensor. It is one large
   on-chip scratchpad. Each word holds `C_VEC` channels of one pixel.
2. The **convolution sequencer** walks the output tensor. It reads
   `P_VEC × S_VEC` stream-buffer words per cycle, through as many read ports.
   Together they form a patch of `P_VEC` output rows by `S_VEC` filter taps
   (or `S_VEC` output columns in 1x1 mode).
3. The patch enters a **1D systolic chain of `K_VEC` PEs**. Each PE works on
   one output channel and reads its weights from its own **filter cache**.
   The patch moves one PE per cycle down the chain.
4. When a group of outputs is complete, the **drain** takes the
   accumulators of all PEs at once. It rescales and saturates them, applies
   ReLU if enabled, and emits them as a stream of `C_VEC`-channel words.
   Each word carries its tensor coordinate.
5. The **Xbar** sends that stream through the auxiliary kernels chosen for
   this subgraph, in the order chosen for it, or past all of them.
6. The **stream writer** stores each arriving word at the address given by
   its coordinate, normally in a free region of the same stream buffer. The
   output of one subgraph is therefore the input of the next, and no data
   goes off chip.

Two engines work in the background, each programmed like a kernel:
- The **filter loader** fills the *other* bank of every filter cache with
  the next subgraph's weights.
- The **feature DMA** moves tensor slices between external memory and the
  stream buffer. It is used when a tensor is too large for the stream buffer
  (slicing) or has to be spilled.

## Mapping a convolution onto the PE array

This section holds most of what is not obvious in the RTL.

**Vectorisation.**
- `C_VEC` (8): input channels per dot product.
- `S_VEC` (3): filter columns handled per step.
- `P_VEC` (2): output rows per PE.
- `K_VEC` (32): PEs, so output channels computed at once.

Each cycle, every PE computes `P_VEC × S_VEC` dot products of `C_VEC` terms:
`P_VEC·S_VEC·C_VEC = 48` multiply-adds per PE and 1536 for the array. There
are `P_VEC` accumulators per PE (`P_VEC × S_VEC` in 1x1 mode, see below).

**Loop order.** With `CB = ceil(Cin / C_VEC)` input channel blocks,
`SC = ceil(S / S_VEC)` filter column segments, `R` filter rows and
`KG = ceil(Cout / K_VEC)` output groups, the sequencer runs these loops,
outermost first:

```
for kg in 0..KG-1                         output group: K_VEC output channels
  for oh0 in 0..OH-1 step P_VEC           output rows
    for ow0 in 0..OW-1 step 1 (S_VEC in 1x1 mode)
      for r in 0..R-1, sc in 0..SC-1, cb in 0..CB-1      one step per cycle
        feature word (cb, oh0*stride + p*stride + r - pad,
                          ow0*stride + sc*S_VEC + s - pad)  for p < P_VEC, s < S_VEC
        filter word  ((kg*R + r)*SC + sc)*CB + cb          in every PE
```

- Reads that fall into the padding return zero.
- The first step of a group clears the accumulators, and the last step marks
  the group complete.
- A group takes `R·SC·CB` cycles. The array therefore produces
  `K_VEC × P_VEC` (or `× S_VEC` in 1x1 mode) outputs every `R·SC·CB`
  cycles.

**Filter layout.** Each filter-cache word holds `S_VEC × C_VEC` weights:
weight `(s, c)` is in lane `s·C_VEC + c`. PE `k` holds output channel
`kg·K_VEC + k` at word `((kg·R + r)·SC + sc)·CB + cb`. The filter loader
copies `words_per_pe` consecutive external words into each PE in turn, so
this layout is also the layout in external memory. Column positions past the
filter width are zero.

**1x1 mode.** A 1x1 filter has a single column, so two of the three taps of
each dot product would have nothing to do. In 1x1 mode the sequencer reads
`S_VEC` *neighbouring output columns* instead of `S_VEC` filter columns. Each
PE multiplies all of them by one slot of the filter word and keeps `S_VEC`
separate accumulators per row. The multipliers stay fully used, and the
output advances `S_VEC` columns per group.

The filter words are packed so that the loader's bandwidth is used as well.
A 1x1 filter word holds the weights of `S_VEC` consecutive channel blocks,
one block per tap slot: channel block `cb` of output group `kg` sits in word
`kg·⌈CB/S_VEC⌉ + cb/S_VEC`, slot `cb mod S_VEC`. The sequencer sends the
slot number with each step. So a 1x1 layer needs a third of the filter
words (and load cycles) of the unpacked layout.

**Timing through the array.**
- A step moves one PE per cycle.
- The complete group is available `K_VEC + 2` cycles after its last step
  entered the array.

**Drain and the drain stall.**
- The drain holds one group: `K_VEC × P_VEC × S_VEC` accumulators.
- It emits the group as `P_VEC × (1 or S_VEC) × K_VEC/C_VEC` words, one per
  cycle while the Xbar accepts. Words outside the real output size are
  dropped.
- If the sequencer reaches the last step of a new group while the drain
  still holds the previous one, it stalls that last step. Group results are
  never overwritten.
- The stall matters for layers with small filters. A 1x1 layer with few
  input channels finishes a group in fewer cycles than the drain needs to
  empty one. The top counts these cycles in `conv_stall_cycles`.

**Output order.** Output words leave in order of group, then rows, then
columns, then channel block, and each carries its `(cb, h, w)` coordinate.
Everything downstream places data by coordinate, not by arrival order.

## Number format

- Activations and weights are signed 16-bit fixed point with 8 fraction bits
  (`dla_pkg::DATA_W`, `FRAC`).
- Products are summed in 48-bit accumulators.
- The drain shifts the sum right by 8 and saturates it to 16 bits.

The original work supports several floating-point formats and does not
discuss its numerics. Fixed point is this design's own choice. Changing the
format means changing `dla_pkg`, the PE multiply and the drain's rescale.

## Programming: the instruction ring and the subgraph barrier

**Ring.** The instructions travel on an 8-bit unidirectional ring:

```
reader → conv → filter loader → DMA → pool → LSTM → Xbar → writer → LRN(port) → reader
```

The **VLIW reader** is started by the host with a base address and a word
count. It fetches 32-bit words from instruction memory and sends them onto
the ring low byte first. Each **transport** on the ring forwards every byte
through one register. It also parses the stream:

| bytes          | meaning                                                     |
|----------------|-------------------------------------------------------------|
| `0x00`         | one-byte no-op (padding)                                    |
| `id`           | header: the kernel id (`dla_pkg::kid_e`) this packet is for |
| `n`            | number of 32-bit instructions that follow                   |
| `4·n` bytes    | the instructions, low byte first                            |

A transport whose id matches assembles the bytes into 32-bit instructions
and queues them (`FIFO_DEPTH` = 32). When its queue is full, it holds the
ring, and everything behind it waits; `ring_stall_cycles` counts these
cycles. The ring's last byte goes back to the reader. When all the bytes it
sent have returned, the reader pulses `prog_done`.

**Instruction blocks.** A kernel's instructions are not decoded. They are
loop bounds and flags, loaded into registers in order. Bit 0 of instruction 0
enables the kernel for the subgraph.

| kernel (id)      | n  | instructions, in order |
|------------------|----|------------------------|
| conv (1)         | 13 | {ReLU b2, 1x1 b1, en b0}, input base, H, W, CB, OH, OW, KG, output channel blocks, R, SC, stride, pad |
| filter (2)       | 4  | en, external base, words per PE, number of PEs |
| DMA (3)          | 4  | {store b1, en}, external address, stream-buffer address, words |
| pool (4)         | 12 | {average b1, en}, H, W, channel blocks per group, total channel blocks, OH, OW, window H, window W, stride, pad, 65536/(window area) |
| LSTM (5)         | 2  | {clear cell state b1, en}, hidden units |
| Xbar (6)         | 5  | en, source of pool, of LSTM, of LRN, of writer (`xsrc_e`: drain 0, pool 1, LSTM 2, LRN 3, none 7) |
| writer (7)       | 5  | en, base, OH, OW, words to write |
| LRN (8)          | any| passed unchanged to the `lrn_instr_*` ports |

**Barrier.** Every subgraph carries one block for each of the seven internal
kernels, disabled or not. Each kernel loads its block and then waits. When
all seven are loaded, they all start in the same cycle, and the subgraph ends
when all have finished. At that moment:
- every kernel returns to loading its next block, which is usually already
  queued in its transport;
- the filter-bank parity flips, so the PE array reads the filters the loader
  has just written.

A subgraph's filters must therefore be loaded by the filter instructions of
the *previous* subgraph. Loading costs one cycle per instruction (13 for the
convolution) on top of the barrier.

## Auxiliary kernels and the Xbar

- **Xbar.** Each consumer has a multiplexer whose source comes from the Xbar
  instructions, so every consumer can pick any producer:
  - Consumers: pool, LSTM, LRN, writer.
  - Producers: drain, pool, LSTM, LRN.

  Max-pool before LRN, LRN before max-pool, or no auxiliary kernel at all is
  chosen per subgraph. A producer should feed only one consumer.
- **Width adapters.** The LRN port is `LRN_VEC` (2) lanes wide. A width
  adapter splits each 8-channel word into four beats, and another one puts
  the beats back together, so a rarely used kernel can be built narrow and
  cheap.
- **Pool kernel.**
  - It collects one output group of the convolution (`K_VEC/C_VEC` channel
    blocks × H × W words, placed by coordinate) in a `POOL_DEPTH`-word
    buffer.
  - It then walks every output window, reading one position per cycle, and
    emits max or average words.
  - Average pooling multiplies the window sum by the programmed reciprocal;
    padding counts as zero.
  - While computing, it back-pressures the drain.
- **LSTM kernel.** The compiler merges the LSTM's eight matrix products into
  one matrix. It interleaves the rows so that the gates of each hidden unit
  come out next to each other, in the order i, g, f, o. One drain word
  therefore holds two complete units, and the kernel computes the cell as the
  words stream past:
  - `c = σ(f)·c_prev + σ(i)·tanh(g)`
  - `h = σ(o)·tanh(c)`

  It keeps `c` in a 2048-unit memory for the next time step and packs the `h`
  values into output words. σ and tanh are piecewise-linear with power-of-two
  slopes: breakpoints at |x| = 1, 2.375 and 5, and tanh(x) = 2σ(2x) − 1.
- **LRN.** External. The top brings out its instruction stream and its
  narrow data stream, both in and out, with valid/ready handshakes.

## Interfaces of the top (`dla_top`)

| group | ports | protocol |
|---|---|---|
| host | `prog_start/base/words`, `prog_busy`, `prog_done` | start pulse; done pulse when the program has run round the ring |
| instruction memory | `im_req/addr/gnt`, `im_rvalid/rdata` (32 bit) | request held until `gnt`; read data returned in order |
| filter memory | `fm_*`, data `S_VEC·C_VEC·16` bits | same |
| feature memory | `xm_rd_*`, `xm_wr_*`, data `C_VEC·16` bits | same; writes complete on `gnt` |
| LRN kernel | `lrn_instr_*`, `lrn_i_*` (with beat number `lrn_i_sub`), `lrn_o_*` | valid/ready |
| status | `subgraphs_done`, `conv_stall_cycles`, `drain_bp_cycles`, `dma_wait_cycles`, `ring_stall_cycles`, `words_written` | free-running counters |

The stream buffer has a single write port, and the stream writer has
priority on it. The DMA waits while the writer writes, and
`dma_wait_cycles` counts these cycles.

## Parameters

| parameter | default | origin |
|---|---|---|
| `P_VEC`, `K_VEC` | 2, 32 | the source's GoogLeNet configuration |
| `S_VEC` | 3 | the source's 1x1-filter discussion (three filter-width taps) |
| `C_VEC` | 8 | own choice; not given for that configuration |
| `FC_DEPTH` | 512 words per bank | own choice |
| `SB_DEPTH` | 65536 words (8 Mbit) | own choice |
| `POOL_DEPTH` | 16384 words | own choice |
| `LSTM_UNITS` | 2048 | the source's LSTM workload (hidden size 2048) |
| `LRN_VEC` | 2 | own choice |
| `FIFO_DEPTH` | 32 instructions | own choice |

At these defaults the design holds about 23 Mbit of memory. Most of it is
the stream buffer (8 Mbit), the filter caches (32 PEs × 2 banks × 512 × 384
bits ≈ 12.6 Mbit) and the pool buffer (2 Mbit).

## What fits

With the default sizes, ordinary ImageNet CNNs (GoogLeNet, SqueezeNet) run
once their early, large layers are cut into two to four row slices by the
feature DMA. The same holds for AlexNet. Its first fully connected layer
fits only because of the 1x1 filter packing: one output group needs 1,152
channel blocks, which pack into 384 filter words of a 512-word bank.
High-resolution ResNet-101 needs heavy slicing. Its
element-wise additions must be folded into convolutions by concatenating the
two branches' inputs and filters along depth, because the design has no
element-wise add kernel. A 2048-unit LSTM layer fits:
- The input vector takes 512 words.
- Each PE needs 171 packed filter words per output group, so one bank holds
  two output groups.
- The layer runs as 128 subgraphs per time step, limited by filter
  bandwidth.

## Where this design departs from or goes beyond the source

Not built:
- floating-point formats;
- Winograd transforms;
- the element-wise add, LRN and other auxiliary kernels;
- a second feature dimension `Q_VEC` (fixed at 1).

The Xbar is a single fixed instance with all kernels present. In the source,
the Xbar is generated per network.

Specified here because the source leaves it open:
- the number format;
- the ring packet format;
- the barrier between subgraphs;
- tensor and filter layouts;
- the sequencer's loop order;
- the drain stall rule;
- the pool and LSTM kernels' internals;
- the piecewise-linear activation curves.

The source reports throughput for a tuned FPGA build (about 900 frames/s on
GoogLeNet). No such number is claimed here: timing closure and FPGA mapping
were not attempted.

## Files

- `rtl/`: one module or package per file. Each file begins with a
  description of what it does, how, its timing, and what is taken from the
  source versus chosen here.
  - `dla_pkg.sv`: types and arithmetic helpers.
  - `sync_fifo.sv`, `kernel_ctrl.sv`: helpers.
  - All other modules: the blocks above, with `dla_top.sv` at the top.
- `tb/`: one self-checking testbench per block, plus two for the whole top.
  Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
  after a fixed number of cycles if something hangs.
  - `tb_dla_top` runs a six-subgraph program at reduced size (`C_VEC`=4,
    `K_VEC`=8):
    1. a DMA load;
    2. a 3x3 convolution with ReLU, into max-pool, while the next filters
       preload;
    3. a 1x1-mode convolution through a halving stand-in for the LRN kernel,
       while the DMA spills the previous result;
    4. and 5. two time steps of an LSTM fed by a fully connected layer;
    6. a final DMA store.

    Every result is checked against a reference computed in the testbench.
    The testbench also counts that each mechanism actually occurred: the
    drain stall, Xbar back-pressure, the DMA waiting for the writer,
    ring stalls, 1x1 mode, filter preload during compute, LRN narrow beats,
    LSTM state carry-over, and all six Xbar routes.
  - `tb_dla_top_full` is the same test with the top at its default sizes.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/dla_pkg.sv tb/tb_dla_top.sv \
          --top-module tb_dla_top -Mdir obj_dla_top -o sim && ./obj_dla_top/sim
```

Replace `tb_dla_top` with any other testbench name. The full-size top takes
about two minutes to build and well under a second to run.
