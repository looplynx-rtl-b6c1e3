# LoopLynx in SystemVerilog

Generating text with a large language model is a long chain of
matrix-vector products. Each new token passes through every transformer
block once. Every weight is read from off-chip memory once per token and
used for a single multiply. A pure instruction-driven accelerator leaves most
of its hardware idle. A fully spatial one, with one pipeline stage per
operator, runs out of chip area.

LoopLynx sits between the two. Each kind of operator gets one large
*macro dataflow kernel*. Inside a kernel everything streams through FIFOs,
so memory reads, arithmetic and result write-back overlap. A small scheduler
then reuses the kernels one after another for every stage of every
transformer block. Several such accelerator *nodes* share one model:

- The weights of every linear layer are split by output rows.
- The attention heads are split by head.
- A simplex ring all-gathers each partial result into every node's buffer
  while the next part is being computed.

This repository is synthesizable SystemVerilog for that architecture. It
covers the cluster of nodes on a ring, one node with its kernels, scheduler,
shared buffer and router, and self-checking testbenches for every block and
for the whole cluster. The default parameters are the main configuration the
LoopLynx paper evaluates:

- GPT-2 (345M): 24 blocks, embedding 1024, FFN 4096, 16 heads of 64.
- Four nodes, i.e. two Alveo U50 boards with two nodes each.
- W8A8 integer arithmetic.

## The datapack

Everything that moves is a **datapack**: 32 int8 values in 256 bits.
32 is the paper's `n_group`, the number of MAC units per matrix slice and
the burst unit of the DMA engines. The same unit is used everywhere:

- one HBM beat,
- one word of the on-chip buffer,
- one flit on the ring,
- one output of the quantiser.

Vectors live in the buffer as runs of datapacks: a 1024-element embedding is
32 consecutive words. `looplynx_pkg` holds the datapack type and the shared
encodings.

## One node

```
             HBM: 8 weight channels        HBM: K cache, V cache
                   |  (DMA each)                 |        |
               +---v-------------+       +-------v--------v------+
               | fused MP kernel |       |  fused MHA kernel     |
               | 8 slices x 32   |       |  scores|mask|softmax  |
               | MAC, MUX, quant |       |  token mixing         |
               +-------+---------+       +----------+------------+
                       | FIFO                       |
                       +-------------+--------------+
                                     v
   ring in  ------------------>  router  ------------------> ring out
                                     | writes every node's part
   +------------ shared on-chip buffer (1 write, 2 read ports) ---------+
        ^ fused LN&Res kernel      ^ SFU (activation)      ^ host port
                     scheduler: starts one kernel at a time
```

The kernels never talk to each other. Each reads its operands from the
shared buffer and leaves its result there. MP and MHA results go through the
router, so they land in *every* node's buffer.

The buffer map is fixed, in words, with EW = L_EMBED/32 and FW = L_FFN/32:

| region | start | holds |
|---|---|---|
| X | 0 | residual stream (the host writes the token embedding here) |
| H | EW | layer-norm output (the node's output after the last block) |
| Q, K, V | 2EW, 3EW, 4EW | projections, all heads |
| ATT | 5EW | attention output, all heads |
| O | 6EW | output projection |
| F1, A, F2 | 7EW, 7EW+FW, 7EW+2FW | FFN hidden, after activation, FFN output |

That is 8EW + 2FW = 512 words at the defaults. At most one kernel writes at
a time, so the buffer ports are shared by a fixed priority: router, then
LN&Res, then SFU, then host. Assertions check that two kernels never drive a
port together.

## The schedule

For every transformer block the scheduler (`scheduler.sv`) walks through
these stages:

| stage | kernel | reads | writes |
|---|---|---|---|
| 1 LN | LN&Res | X (+ F2 of the previous block) | X, H |
| 2-4 Q, K, V | MP + router | H | Q, K, V |
| 5 Atten | MHA + router | Q, K, V, KV cache | ATT, KV cache |
| 6 O | MP + router | ATT | O |
| 7 LN | LN&Res | X + O | X, H |
| 8 FFN | MP + router | H | F1 |
| 9 Act | SFU | F1 | A |
| 10 FFN | MP + router | A | F2 |

After the last block, one more residual add plus layer norm (GPT-2's final
norm) leaves the node's output in H.

A stage starts by pulsing the kernel's `start` together with its operands:

- buffer regions,
- the HBM address of the weights,
- lengths,
- the router's slot layout.

The stage ends when the kernel and the router are idle again. The scheduler
adds at most three idle cycles between stages.

## Fused MP kernel

`fused_mp_kernel` computes y = W·x for the node's share of the rows of one
linear layer. It is built from these parts:

- **MP slices.** There are `N_CHANNEL` slices (`mp_slice`). Each is fed by
  its own HBM channel through a burst DMA engine (`dma_engine`). Each holds
  32 MAC units (`mac_unit`), one per output row of a 32-row strip.
- **Blocks.** Together the slices compute a *block* of N_CHANNEL×32 rows.
- **Input stream.** The input vector is streamed from the buffer one element
  per cycle and broadcast to every slice. All slices step together, and only
  when every slice has its weight datapack.
- **Weight layout.** In channel c, block b of a layer is k_len weight beats
  (beat j holds W[row][j] for the 32 rows of the strip), followed by 4 beats
  of int32 biases. Per layer the ops Q, K, V, O, FFN1 and FFN2 follow each
  other in every channel.
- **Overlap between blocks.** When a block's last element has been
  multiplied, each slice picks up its biases and copies its accumulators
  into an output bank. It then starts the next block at once, while a MUX
  feeds the banks one slice per cycle into the quantiser.
- **Quantiser.** `quant_unit` adds the biases and requantises each layer with
  its own (mult, shift):
  `y = sat8(((acc + bias)·mult + 2^(shift-1)) >>> shift)`.
- **Output order.** Datapacks leave in row order towards the router: pack p
  of block b holds rows b·N_CHANNEL·32 + p·32 … +31.

One block takes k_len cycles when HBM keeps up, plus four cycles for the
biases. At the defaults each node runs 8×32 = 256 MACs per cycle. The
paper's resource table gives 522 DSPs for the MP kernels of a dual-node
board, so one DSP per MAC. If HBM or the ring falls behind, the slices stall
and `stall_o` reports it.

## The ring all-gather

Node i sends to node (i−1) mod N and receives from node (i+1) mod N. This
direction matches the FIFO contents drawn in the paper's routing figure.

Results are synchronised in **tiles**. A tile is one MP block (N_CHANNEL
datapacks) or one attention head (HEAD_DIM/32 datapacks). Each tile takes N
rounds of n datapacks:

- **Round 0.** The router sends its own n local datapacks to its successor.
- **Rounds 1 … N−1.** It forwards what it receives. Round t carries the tile
  of node (id+1+t) mod N, so in the last round a node's own datapacks come
  back to it.
- **Writing.** Every received datapack goes into the buffer at
  `out_base + origin·node_stride + tile·n + p`.
- **Result.** Each router starts writing at the slot of node (id+1) and
  wraps round. After N rounds all buffers hold the same full vector in the
  same order.

The MP kernel moves on to the next block while the router synchronises the
previous tile. Only the last tile's synchronisation is exposed. A node's
`rt_busy` keeps the scheduler from starting the next stage before every
slot has been written.

## Fused MHA kernel and the head-wise pipeline

The KV cache is split by head. With 16 heads on 4 nodes, each node owns 4
heads, one K-cache channel and one V-cache channel. For the token at
position `pos`, `fused_mha_kernel` works in two phases.

**1. Append.** It writes the token's k and v of each local head into the
caches at
`((layer·heads_per_node + head)·MAX_SEQ + pos)·HEAD_DIM/32 + beat`.

**2. Head-wise pipeline.** Two stages run on different heads at the same
time:

- **Stage A (head h).**
  - The first MAC hardware streams the cached keys (HEAD_DIM/32 beats per
    key) and forms q·k with 32 products per cycle.
  - `mask_unit` marks keys beyond `pos`.
  - `softmax_unit` turns each score into an exponent, stores it in the EXP
    buffer and adds it to the head's sum.
- **Stage B (head h−1).** Once that head's sum has been divided, the second
  MAC hardware streams the cached values and accumulates p_t·v_t. It then
  sends HEAD_DIM/32 output datapacks to the router.

The EXP buffer has two banks, one per head parity. Head h's exponents can
therefore be written while head h−1's reciprocal is computed and its weights
are read. The 41-cycle divider and stage B of one head hide behind stage A
of the next. Keys are fetched in groups of 8, so bursts stay whole; the
spare keys beyond `pos` are masked to weight 0.

Softmax number formats (this design's own):

- **Exponent.** z = clamp((s·sm_mult) >>> sm_shift, ±16) in Q.8 is a
  base-2 exponent. e = (1 + frac z)·2^int z in Q.16. Masked keys get e = 0.
  There is no max subtraction; the clamp bounds the range instead.
- **Reciprocal.** r = ⌊2^40 / Σe⌋, by a restoring divider with one bit per
  cycle.
- **Weight.** p = (e·r) >> 32 in Q0.8, so the weights of a head sum to 1.0
  (256) within rounding.
- **Output.** out = sat8((Σ p·v + 128) >>> 8) keeps the scale of v.

## Fused LN&Res kernel

The residual add and the layer norm lie on the critical path between the
matrix products. `fused_ln_res_kernel` handles a full datapack (32 lanes)
per cycle and overlaps the two:

| step | work | time |
|---|---|---|
| pass 1 | x' = sat8(x + y), written back over X; Σx' and Σx'² in the same cycle | n_words cycles |
| statistics | mean; variance in Q.8 from L·Σx'² − (Σx')²; std = √(var + 1.0) by a 16-step integer square root; inv = 2^20/std | about 40 cycles |
| pass 2 | h = sat8(((x' − mean)·inv·γ + 2^15) >>> 16 + β) | n_words cycles |

γ and β are int8 with 5 fractional bits (so γ = 32 is 1.0). They sit in a
parameter RAM inside the kernel that the host loads through `prm_wr_*`:

- layer norm i uses words 2i·EW … for γ, then the next EW words for β;
- index 2l is the first norm of block l, 2l+1 the second, and 2L the final
  norm.

A call takes 2·n_words + 42 cycles, i.e. 106 cycles for a 1024-element
vector. L must be a power of two.

## SFU

GPT-2's activation is GELU. The `sfu` uses a hard-sigmoid form of
x·σ(1.702x):

`hs = clamp(128 + ((x·act_k) >>> 8), 0, 256)`, `y = (x·hs + 128) >>> 8`.

Here act_k = round(0.4255·s·2^16) for an activation scale s. It processes
one datapack per cycle. This is the one unit the paper only names. Its
arithmetic is entirely this design's choice.

## Using the cluster

`looplynx_top` joins `N_NODES` nodes with one FIFO per ring hop.

Host writes, parameter loads and commands are broadcast to all nodes. Each
node keeps the whole residual stream, because the ring gives every node
every result. To run a token:

1. Load the layer-norm parameters once (`prm_wr_*`).
2. Set `qcfg_i[op]` (requantisation of Q, K, V, O, FFN1, FFN2), `sm_mult_i`,
   `sm_shift_i` and `act_k_i` from the model's quantisation scales.
3. Write the token embedding into words 0 … EW−1 (`host_wr_*`) while the
   cluster is idle.
4. Pulse `start_i` with `pos_i`. `done_o` pulses when all nodes are done.
5. Read the output from words EW … 2EW−1 of any node (`host_rd_*`,
   one-cycle latency, one word per node).

Weights and the KV cache live in HBM. They are reached through the
`w_rd_*`, `k_*` and `v_*` channel ports of each node: read requests of
(beat address, length), a stream of returned beats, and a write port for KV
appends. Prompt tokens are processed one at a time through the same path as
generated tokens.

## Sizes

| parameter | default | origin |
|---|---|---|
| N_NODES | 4 | the paper's largest configuration (two boards) |
| n_group | 32 | the paper |
| N_CHANNEL | 8 | inferred from the paper's MP DSP count (about 261 per node) |
| L_EMBED, L_FFN, N_HEAD, HEAD_DIM, N_LAYER | 1024, 4096, 16, 64, 24 | GPT-2 345M |
| MAX_SEQ | 1024 | GPT-2 context length |
| buffer | 512 words (16 KiB) | all intermediate vectors of one block |
| HBM address | 23-bit beat address (256 MiB per channel) | one U50 pseudo-channel |

With these sizes:

- One MP channel holds 295,776 beats of weights (9.0 MiB) at 4 nodes.
- A K or V channel holds 196,608 beats of cache.
- The [prefill:decode] lengths the paper evaluates, up to 128 + 512 = 640
  tokens, fit the 1024-entry cache.

The same RTL runs with 1 or 2 nodes by changing `N_NODES`.

## Timing measured in simulation

At full size the HBM channel model delivers one beat per cycle, with 7% of
the beats dropped at random. That is 8.49 GB/s at 285 MHz, the per-channel
bandwidth the paper assumes. Under that model a token at position 0 takes
**353,263 cycles = 1.24 ms at 285 MHz** on four nodes. The paper reports
2.55 ms for this configuration.

The difference comes from what the models leave out. The ring hops are
plain FIFOs with no network latency, and the HBM model has a fixed 8-cycle
latency with pipelined requests. Attention grows with position: each cached
key costs 2 cycles per head per block in stages A and B.

The reduced end-to-end test (2 nodes, 2 channels, embedding 256, 2 blocks)
takes about 15,250 cycles per token.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against
an independent reference model and prints
`TB_RESULT checks=<n> failures=<n>`.

**Block testbenches.**

- `tb_mac_unit`, `tb_quant_unit`, `tb_mask_unit`, `tb_sync_fifo`,
  `tb_onchip_buffer`: exhaustive or random sequences against software
  models.
- `tb_dma_engine`: burst sizes, addresses and the one-beat-per-cycle rate.
- `tb_mp_slice`, `tb_fused_mp_kernel`: matrix-vector products with biases
  and requantisation against HBM contents, the k_len-cycles-per-block rate,
  and stalls under back-pressure.
- `tb_router`: four routers in a ring with random gaps. Every buffer ends
  identical, and router 0 writes each tile from slot 1 first.
- `tb_softmax_unit`: every weight, sums of 1.0, the 42-cycle divider
  latency, and overlap of two heads.
- `tb_fused_mha_kernel`: full attention against a reference, KV appends,
  masked-key counts, the head-wise overlap and a latency bound.
- `tb_fused_ln_res_kernel`: residual, normalisation, the
  2·n_words + 42-cycle call time, and unit mean-square output.
- `tb_sfu`: every lane and the one-datapack-per-cycle rate.
- `tb_scheduler`: stage order, every operand, no overlapping kernels, and
  scheduling overhead.

**Node and cluster testbenches.**

- `tb_accel_node` runs a one-node ring on a small model. After each stage
  it checks the buffer against a reference of that stage.
- `tb_looplynx_top` decodes three tokens on a 2-node cluster with HBM
  bandwidth gaps. It checks:
  - that nodes agree,
  - that output is not degenerate,
  - the Q projection against a reference,
  - the token latency against the paper's.

  It also counts every mechanism (each stage, MP stalls, router forwards
  and tiles, head overlap, masked keys, KV writes) and fails on any that
  never happened.
- `tb_looplynx_top_full` runs the same test on the default-size cluster,
  with no parameter overrides, for two tokens.

`tb/hbm_channel_model.sv` is a behavioural HBM pseudo-channel, not part of
the design. `tb/tb_util_pkg.sv` generates the pseudo-random weights that
both the model and the references use.

To run a testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/looplynx_pkg.sv tb/tb_util_pkg.sv \
          tb/tb_router.sv --top-module tb_router
./obj_dir/Vtb_router
```

The full-size test compiles in under a minute and runs in about 10 seconds.

## Where this design departs from, or adds to, the paper

**Taken from the paper:**

- the node's kernel set, the shared buffer and the scheduler;
- the stage order;
- the MP kernel's organisation: DMA per channel, slices of 32 MACs, MUX,
  bias-and-quantise unit, FIFOs between units, next block during drain;
- the router's simplex rounds and node-ID offset;
- the MHA kernel's two MAC hardwares, mask, softmax and head-wise pipeline;
- the fusion of residual add with the layer-norm statistics pass;
- the ring of model-parallel nodes and 285 MHz as the target clock.

**This design's own choices:**

- every number format and rounding rule;
- the HBM weight layout with in-band biases;
- the KV-cache layout, with one K and one V channel per node;
- the buffer map, port sharing and start/busy handshake;
- the base-2 softmax without max subtraction;
- the integer square root and dividers of the layer norm;
- the GELU approximation;
- the final layer norm;
- N_CHANNEL = 8, derived from the resource table rather than stated;
- a single register, rather than the drawn FIFO, between the router and
  the buffer write port (the buffer always accepts a write);
- one K-cache and one V-cache channel per node, where the figure stacks
  several MAC/DMA copies behind the caches.

**Not designed here:**

- the HBM stacks and controllers;
- the host, PCIe and token embedding;
- the AXI-Stream links between boards.

The top brings their signals out as ports. Timing closure at 285 MHz has not
been attempted: some datapaths, such as the 32-lane LN pass-2 multiplies and
the softmax exponent, are single-cycle and would need pipelining on an FPGA.
