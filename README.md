# AccelTran in SystemVerilog: a sparsity-aware transformer accelerator

Transformer inference is dominated by matrix multiplications, most of whose operands are
close to zero. AccelTran is an accelerator that makes this sparsity pay: it
**prunes small activations and weights at run time**, in one clock cycle per tile, using a
magnitude threshold (the *DynaTran* method). It keeps every operand in a **zero-free format**
(only the non-zero values plus a one-bit-per-position mask), and it runs only **matched
non-zero operand pairs** through its multipliers. Around this datapath sit dedicated
softmax and layer-norm units and a control block. The control block schedules the tiled
operations of the transformer. It staggers attention heads so that MAC hardware and softmax
hardware work at the same time, and it reuses weight tiles already held in a processing
element.

This repository holds a synthesizable RTL implementation of the accelerator tier in its
*edge* configuration: 64 processing elements (PEs), each with 16 MAC lanes of 16
multipliers, 4 softmax units and one layer-norm unit, plus 4 MB activation, 8 MB weight and
1 MB mask buffers. Self-checking testbenches are included. The host processor and the main
memory (LP-DDR3 or monolithic-3D RRAM) are outside the design; their signals are ports of
the top module.

## 1. Numbers and words

Every activation and weight is a signed fixed-point number: 4 integer bits and 16 fraction
bits (20 bits; range -8 to +8, resolution 2^-16). Products and sums use 40 bits with 32
fraction bits. Results are brought back to 20 bits by an arithmetic shift (truncation) and
saturation.

The unit of storage and transfer is a **word**: one row of a 16-wide tile, stored as

```
sword_t = { mask[15:0], data[15:0] of 20-bit elements }
```

- `mask[p] = 1` means position `p` is zero (ineffectual).
- The non-zero values are packed towards `data[0]` in position order, and the rest of
  `data` is zero.

`acceltran_pkg::expand` restores the position-aligned view, and `collapse` packs it again.
These two functions are the filter and the zero-collapsing shifter from which all the
sparsity hardware is built. A word is 336 bits.

Main memory holds words already in this format. The DMA engine writes a word's data into
the activation or weight buffer and its mask into the mask buffer. The mask of activation
word `a` goes to mask address `a`, and the mask of weight word `w` goes to
`ACT_WORDS + w`. One shared port reads or writes a whole word (data plus mask) per cycle.

## 2. Tiles and the MAC schedule

Matrix products are cut into 16 x 16 tiles, which are processed in the order b, i, j, k
(k innermost). One `OP_MAC` instruction multiplies one weight tile W (sent as 16 *row* words
`W[i,:]`) by one activation tile A (sent as 16 *column* words `A[:,j]`). Inside the PE:

1. The 16 A words and 16 W words are collected from the PE's activation and weight FIFOs.
   If the PE already holds the weight tile, the W words are not sent at all (weight reuse).
2. **DynaTran** prunes all 32 words in one cycle. See section 3.
3. For 16 cycles, row `i` of W meets every column: lane `j` gets the word pair
   (`W[i,:]`, `A[:,j]`). It passes through that lane's **pre-compute sparsity** module,
   which keeps only the positions where both are non-zero and packs them into matched pairs.
   The lane's 16 multipliers and 4-level adder tree produce the dot product. The lane adds
   the partial sum of `O[i,j]` from the previous k tile. The PE keeps the 16 x 16 partial
   sums between k tiles, so all k tiles of one output tile must run on the same PE. The
   control block enforces this.
4. On the last k tile, each lane's sum is rescaled to 20 bits. GeLU is applied when the
   instruction is a feed-forward one. The 16 output rows then pass through the
   **post-compute sparsity** module (zero test plus collapse) into the PE's output FIFO.

A lane produces one output element per cycle whatever the sparsity. Multipliers whose slot
holds no matched pair are gated off, so sparsity saves switching energy but not cycles in
this implementation. A MAC instruction takes 16 (load) + 2 (prune) + 16 (compute) + about
3 cycles once its words are in the FIFOs.

GeLU is the hard-sigmoid form `x * clamp(1/2 + 3x/8, 0, 1)`. It is cheap (two shifts, one
add, one multiply) and within about 0.1 of the exact GeLU on the inputs that matter.

## 3. DynaTran: one-cycle threshold pruning

`dynatran` compares the magnitude of every element of a tile with a threshold tau. It keeps
the element when `|x| >= tau`, and otherwise sets its mask bit and removes it from the word.
The user does not give tau directly. An instruction carries a *desired sparsity* rho (0 to 1,
16 fraction bits). A small register file holds a 16-point transfer curve (rho_n, tau_n),
written by `OP_CURVE` instructions and profiled offline for the model. The threshold
calculator picks the tau of the first point whose rho_n >= rho, or the last point if none
is. Expand, compare and collapse are all combinational, with one register at the output, so
a whole 32-word tile is pruned in exactly one clock cycle. The testbench checks this latency.

Only MAC operands are pruned here. Softmax and layer-norm inputs are not.

## 4. Pre- and post-compute sparsity

Two words `a` and `w` meet in `pre_sparsity`:

- `common = ~a.mask & ~w.mask` (the AND gate) marks the positions where both are non-zero.
- `a_filter = ~a.mask ^ common` and `w_filter = ~w.mask ^ common` (the two XOR gates) mark
  the positions that are non-zero in only one of the two.
- Each word is expanded, its filtered positions are dropped, and the rest is collapsed.
  The result is two packed words whose slot `s` holds a matching pair, plus `count` =
  number of pairs.

Stored masks use 1 = zero, while the gates above work on the inverted (non-zero) masks.
`post_sparsity` does the inverse on results: it builds the mask of zero outputs and
collapses the rest, one cycle.

## 5. Softmax and layer-norm units

`softmax_unit` handles one row of up to 32 words (512 scores), 16 elements per cycle:

| Step | Work |
|------|------|
| LOAD | scale by 1/sqrt(h) and track the row maximum |
| EXP  | `e^(x-max) = 2^((x-max) * log2 e)`: a shift for the integer part, `1 + f(0.6565 + 0.3435 f)` for the fraction (error < 0.2 %), sum accumulated |
| DIV  | one 40-cycle reciprocal of the sum |
| OUT  | multiply, one word per cycle |

Each PE has four of them (one per row of an `OP_SMX` instruction, running in parallel).

`layernorm_unit` handles one row of up to 48 words (768 elements, BERT-Base's hidden size).
It optionally adds the residual word first, then computes the mean, the variance, a bit-serial
square root and a reciprocal, and outputs `(x - mean) / std`. There are no learned scale and
shift parameters.

Both units are iterative. They take a few dozen cycles per row besides the one-word-per-cycle
passes. In the testbenches their outputs are within 0.004 + 1 % (softmax) and 0.01 + 0.5 %
(layer-norm) of exact real-number results.

## 6. The control block: instructions, tags, stalls and staggered heads

The host sends a stream of `instr_t` instructions (`acceltran_pkg`):

| op | meaning | main fields |
|----|---------|-------------|
| `OP_LOAD` | main memory -> buffer | `m_addr`, `o_addr`, `len`, `buf_sel` |
| `OP_STORE` | activation buffer -> main memory | `a_addr`, `m_addr`, `len` |
| `OP_MAC` | one W x A tile | `w_addr`, `a_addr`, `o_addr`, `acc_first`, `acc_last`, `gelu`, `prune`, `arg` = rho |
| `OP_SMX` | softmax of `rows` rows of `len` words | `a_addr`, `o_addr`, `arg` = scale |
| `OP_LN` | (residual +) layer-norm | `a_addr`, `w_addr` = residual, `o_addr`, `residual` |
| `OP_CURVE` | write curve point `len` | `arg` = rho_n, `m_addr` = tau_n |

Every instruction also has a `head` number and three **tags**: two sources (`src0`, `src1`)
and one destination (`dst`). Tag 0 means none.

**Dependencies.** Instructions pass through a 16-deep queue into a window of 4 slots. A tag
becomes "not ready" when its producer enters the window, which happens in program order. It
becomes "ready" again when the producer has finished: the DMA transfer is done, or the PE is
done and all its result words are in the activation buffer. Consequently a tag number may be
reused only after the consumers of its previous value have issued.

**Issue rule.** Each cycle, at most one slot issues. A slot may issue when:

- its source tags are ready;
- it is the oldest slot of its head (program order within a head); and
- its resource is free. For LOAD and STORE that is the DMA. For a MAC it is the PE holding
  its open chain, or an idle PE. For SMX and LN it is an idle PE without an open chain.

Among the slots that may issue, the **lowest head number wins**. One head therefore runs
ahead, and when it waits (for example, softmax waiting for its scores), the next head's MAC
tiles fill the MAC lanes. This is the *staggered* schedule. Issuing a slot that is not the
oldest in the window is counted in `n_stagger`, and cycles with both MAC and softmax work
active are counted in `n_overlap`.

**Stalls.** A cycle in which nothing issues is counted:

- as a **memory stall** when a waiting LOAD or STORE is halted (the DMA engine is busy, or
  the tile to be stored is not computed yet), when a compute instruction needs the busy feed
  path, or when the feed path is refused the buffer port;
- otherwise as a **compute stall**: a compute instruction's source tile is not ready yet, or
  no PE is free.

**Weight reuse.** A first-k MAC prefers an idle PE that already holds the same weight tile
(same `w_addr`). It then tells the PE to reuse it, and no weight words are sent. The PE holds
the tile as pruned by its last MAC.

**Feed and drain.** The control block moves operand words from the buffers into the chosen
PE's FIFOs (activation stream from `a_addr`; weight or residual stream from `w_addr`), and
moves result words from PE output FIFOs to the activation buffer at `o_addr`. It shares the
single buffer port with the DMA engine through a round-robin arbiter, and draining has
priority over feeding.

**Power.** Each PE's `pe_gate` output is high while the PE is idle: an enable for the
power-gating cells of a physical implementation. With `lp_mode` high, only the lower half
of the PEs receive work (the low-power mode runs half the compute hardware).

## 7. Top level

`acceltran_top` connects the control block, DMA engine, arbiter, three `sram_buffer`
arrays and `NPE` PEs. It has one clock (700 MHz in the original evaluation) and an
active-low asynchronous reset.

Ports:

- the host instruction stream (`instr_valid`/`instr_ready`/`instr`, `idle`);
- a main-memory read port (`mem_rd_*`: one request per cycle, in-order data `mem_rsp_*` any
  number of cycles later, at most 8 outstanding);
- a write port (`mem_wr_*`, valid/ready);
- `lp_mode` and `pe_gate`;
- six 32-bit event counters: `n_compute_stall`, `n_memory_stall`, `n_stagger`, `n_reuse`,
  `n_overlap`, `n_issued`.

Parameters and their defaults: `NPE = 64`, `NLANE = 16`, `NSMX = 4`,
`ACT_BYTES = 4 MiB`, `WGT_BYTES = 8 MiB`, `MASK_BYTES = 1 MiB`, `SMXB = 32` words per softmax
row, `LNB = 48` words per layer-norm row.

## 8. What fits

At the default size the design holds, tile by tile, the two BERT models it was designed for:

- **BERT-Tiny** (hidden size 128, 2 heads): rows of 8 words, one layer's weights about 0.5 MB.
- **BERT-Base** (hidden 768, 12 heads, sequences up to 512 tokens): layer-norm rows of
  exactly 48 words, softmax rows of exactly 32 words.
  - A 768 x 768 weight matrix (1.5 MB) fits the weight buffer, but a whole layer does not.
    The host streams it matrix by matrix.
  - One head's 512 x 512 attention scores (0.66 MB) fit the activation buffer.

The head field has 4 bits (16 heads), and there are 63 tags in flight.

The server configuration of the original work (512 PEs, each with 32 MAC lanes and 32
softmax units, 32/64/8 MB buffers) is **not** provided. `NPE`, `NSMX` and the buffer sizes
scale, but the PE's MAC schedule covers a single 16-column tile, so lanes beyond 16 would
only repeat columns.

## 9. Departures and simplifications

- **Sparsity does not shorten the MAC schedule.** It gates multipliers (energy) but does not
  compact work across lanes.
- **One shared buffer port** serves the control block and the DMA, instead of independent
  ports per buffer and PE. Contention for it is the memory stall.
- **Dataflow is fixed by the instruction stream.** The host emits tiles in [b,i,j,k] order
  and the hardware does not choose among dataflows. It exploits the reuse that the order
  offers: partial sums stay in the PE along k, and weight tiles are reused across MACs.
- **No eviction policy.** Buffer space is managed by the host through addresses and tags;
  there is no hardware eviction.
- **Arithmetic choices.** GeLU, the exponential, the square root and the divisions are this
  design's own approximations. Layer-norm has no gamma/beta.
- **DynaTran comparison.** The rule is `|x| >= tau` (keep on equality).
- **Not modelled.** Power gating is an enable signal only. Monolithic-3D integration and the
  memories' physical models are outside the RTL.

## 10. Files

`rtl/` (one module or package per file):

| file | contents |
|------|----------|
| `acceltran_pkg.sv` | number format, word and instruction types, `expand`/`collapse`, GeLU, saturation |
| `acceltran_top.sv` | top level |
| `control_block.sv` | instruction window, tag scoreboard, issue, feed/drain, counters |
| `dma_controller.sv` | LOAD/STORE engine |
| `buf_arbiter.sv` | buffer-port arbiter |
| `sram_buffer.sv` | single-port synchronous RAM, one-cycle read |
| `pe.sv` | processing element |
| `dynatran.sv`, `pre_sparsity.sv`, `post_sparsity.sv` | sparsity datapath |
| `mac_lane.sv` | 16 multipliers, adder tree, accumulate, GeLU |
| `softmax_unit.sv`, `layernorm_unit.sv`, `seq_div.sv` | row units and their shared restoring divider |
| `sync_fifo.sv` | FIFO used for PE FIFOs and queues |

`tb/`: one self-checking testbench per block (`tb_<module>.sv`), plus:

- `acceltran_e2e.sv`: the end-to-end test body;
- `tb_acceltran_top.sv`: that test at 4 PEs with 1,024-word buffers;
- `tb_acceltran_full.sv`: the same test at every default size;
- `main_memory_model.sv`: a behavioural main memory with latency and random stalls (not part
  of the design).

## 11. Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb --top-module tb_pe \
    rtl/acceltran_pkg.sv tb/tb_pe.sv
./obj_dir/Vtb_pe
```

Replace `tb_pe` with any testbench name. Each prints `TB_RESULT checks=N failures=M`.

The end-to-end program (`acceltran_e2e`) does the following:

1. Writes the DynaTran curve.
2. Runs two interleaved attention heads on random data. Each head does:
   - loads;
   - a two-tile MAC chain with pruning;
   - a GeLU MAC that reuses the held weight tile;
   - softmax and residual layer-norm on the results;
   - stores.
3. Runs one head again in low-power mode.

It compares everything that reaches main memory with a reference computed in the testbench
(MAC results bit-exact). It also fails if any of these never occurs: a compute stall, a
memory stall, a staggered issue, weight reuse, MAC/softmax overlap, pruning of a non-zero
operand, a GeLU-changed output, a power-gated PE, or a low-power run.

At full size (64 PEs, 4/8/1 MB buffers) the build takes about 7 minutes and the run a few
seconds. The reduced run builds in under a minute.

Every block testbench was also run against a deliberately broken copy of its module and
reported failures.
