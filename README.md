# Ouroboros: a wafer of SRAM compute-in-memory cores running LLMs token by token

Large language model inference is limited by moving weights and KV cache between
memory and compute. This design removes that traffic: every weight, every activation
and the whole KV cache live in SRAM arrays that also compute. A 12-inch wafer is
tiled with 9 x 7 stitched dies, each a 13 x 17 grid of cores. Each core has
32 digital compute-in-memory (CIM) crossbars of 1024 x 1024 bitcells, so the wafer
holds about 54 GB. A model is laid out across the cores so that each core owns a
slice of one layer. A token travels through the layers as a packet over the on-wafer
mesh, and the next token follows one stage behind it. This is *token-grained
pipelining*: many tokens are in flight at once, each in a different core.

This repository holds synthesizable SystemVerilog for the digital parts of that
machine: from the adder tree inside one crossbar column up to a (scaled) wafer of
dies, plus the KV-cache management logic.

## The crossbar: multiplying inside the SRAM (`cim_crossbar`)

One crossbar stores a 1024 x 128 matrix of signed int8 weights, one weight per
8 bitcells of a row.

**Banks.** The 1024 rows are split into 32 banks of 32 rows. Each cycle, one row
from each bank is active, so 1/32 of the array is read at a time. Reading only
that fraction keeps the cell array dense, because the column periphery is shared
by 32 rows.

**Bit-serial inputs.** Activations enter one bit-plane at a time, most significant
plane first.

**Column datapath.** For every column, the active weight bytes are ANDed with the
current activation bit of their rows. The 32 products are summed by a five-level
adder tree (`cim_adder_tree`), whose width grows 8 → 13 bits. A 32-bit shift
accumulator (`cim_shift_adder`) folds the planes together. It shifts its value
left once per new plane and subtracts the sign plane, because activations are
two's complement.

**Timing.** A full matrix-vector product takes 8 planes × 32 row steps = 256
cycles. It leaves 128 32-bit partial sums; `done` pulses one cycle later.

**Row and column masks (`xb_ctrl`).** These gate the rows and columns that hold
valid data. In an attention layer, the crossbar stores KV cache instead of weights:

- *K mode*: one token per column.
- *V mode*: one token per row.

The 1024 rows form 8 logical blocks of 128 rows. The *free block table* is 8
counters holding how many slots of each block are filled. An append returns the
next slot, or reports that the block is full. The masks follow the counters, so
empty slots never contribute to a sum.

## Inside a core (`cim_core`)

```
 router ──► ping-pong input buffer (2 × 64 KB) ──► broadcast ──► 32 crossbars
                                                                    │ H-tree (1024 b)
 router ◄── output buffer (32 KB) ◄── requantise ◄── SFU (64 lanes) ◄┘
```

**H-tree (`htree_noc`, `htree_node`).** The 32 crossbars hang off a 1024-bit
binary tree. Each node is configured to do one of two things:

- *reduce*: add its two children lane by lane, for a layer split along its input
  channels;
- *concatenate*: pass the left child's packet and then the right child's, for a
  layer split along its outputs.

A mapping can therefore combine crossbars in any tree-shaped mix of the two. The
choice is a per-node configuration register.

**SFU (`sfu`).** 64 lanes of element-wise add, multiply and exp, a reduction add
tree, a reciprocal and a square root, with a 10 KB buffer. Values are Q16.16
fixed point. Softmax takes two passes:

1. `EXP_ACC` writes exp(x) into the buffer and sums it.
2. `NORM` computes the reciprocal of the sum with a 49-cycle restoring divider
   (2^48/sum, 32 fraction bits), then streams the buffer out multiplied by it.

exp is computed as 2^(x·log2 e) with a linear fractional part; its error is below
6 %. `SQACC` and `SQRT` give the statistics for layer/RMS normalisation.

**Control (`core_ctrl`).** It runs two independent loops:

- *Receive loop*: writes an incoming packet into the free half of the input buffer.
  On the last flit it marks that half full, counts the token, and switches to the
  other half. This is what lets token *n+1* arrive while token *n* computes (the
  overlap counter records it).
- *Pipeline loop*: broadcasts a full half to the crossbars and starts them. It
  packs H-tree flits in pairs into 64-lane SFU vectors and issues the configured
  SFU operation (plus `NORM` for softmax). It requantises the results to int8
  (arithmetic shift by `qshift`, saturate), then sends the output buffer as one
  packet to the configured next core.

Configuration registers hold the destination, shift, SFU operation and scalar,
each crossbar's mode / input segment / block mask, and each H-tree node's mode.
The register map is in the `core_ctrl` header. Weights and KV block commands enter
through a side-band programming port (`prog_*`).

## The network (`mesh_router`, `die_mesh`, `wafer_top`)

**Router.** Every core sits on a 5-port router with 256-bit links. It has 4-deep
input FIFOs and wormhole output locking with round-robin arbitration. Routing is
X-then-Y.

**Faulty links.** Each router has a `link_down` mask. If a packet's X-direction
link is marked down and it still has Y distance to cover, it turns to Y first.
This is how the mesh is reconfigured around a failed link without a routing table.

**Addressing and dies.** A die is a grid of cores and routers whose boundary links
become ports. Coordinates are global (die origin plus local index), so dies placed
edge to edge form one continuous wafer mesh. `wafer_top` stitches DX × DY dies
this way and brings the wafer's own boundary links out as ports. In the real
system those ports carry the optical links to other wafers.

## KV cache management

A sequence's KV cache is found in three steps.

1. **`kv_page_table`.** Maps (sequence, head) to a core. Each sequence gets a run
   of consecutive cores on a ring of KV cores, one per head; allocation walks
   around the ring.
2. **`kv_bitmap`** (per core). A 256 × 256 bitmap of which sequence owns which
   logical block.
   - Allocation prefers other crossbars for K, so K grows across output columns.
   - It prefers the same crossbar for V, so V grows down the rows.
   - A fullness threshold flags a core that should stop taking sequences.
3. **The crossbar's free block table**, described above.

**`kv_scheduler`.** First-come-first-served admission. When the KV cache is full,
it evicts the most recently admitted request back to the head of the queue, and
admits no new requests until one completes.

## Sizes in this RTL

Every parameter default is the architecture's number except the grid sizes:

| module | parameter | default | architecture |
|---|---|---|---|
| `die_mesh` | CX × CY | 2 × 1 | 13 × 17 |
| `wafer_top` | DX × DY dies of CX × CY | 2 × 1 of 1 × 1 | 9 × 7 of 13 × 17 |

The reason is elaboration cost. A full-size core (32 crossbars, 4 MB of weights)
alone takes about 2.3 GB in Verilator's lint, and a 2 × 2 die about 9 GB, so the
13 923-core wafer is far beyond any workstation. Two cores per top-level default
keep several elaborations running side by side within 32 GB. The largest top-level size
simulated is 2 × 2 dies of one core with reduced cores (2 crossbars of 64 × 64
int8, 8 banks). No simulation runs the top at its defaults. The single full-size
crossbar (1024 × 128, 32 banks, 256-cycle MVM) and the full-size SFU are
simulated on their own.

What a wafer at the architecture's size holds (int8 weights; parameter counts are
the models' public sizes):

| model | weights | fits in 54.4 GB? |
|---|---|---|
| BERT-large | 0.34 GB | yes |
| T5-11B | 11.3 GB | yes |
| LLaMA-13B | 13.0 GB | yes |
| Baichuan-13B | 13.3 GB | yes |
| LLaMA-32B | 32.5 GB | yes |
| Qwen-32B | 32.8 GB | yes |
| LLaMA-65B | 65.2 GB | no: it needs two wafers |

The space left over holds the KV cache.

## Where this RTL departs from the architecture, or fills gaps

- **Router.** One virtual channel per port. The evaluated network uses eight
  virtual channels of depth four and deadlock-avoidance rules that are not
  specified.
- **Fault handling.** Only link faults are handled, by the Y-first detour. Moving
  the work of a failed core to its neighbours is a mapping decision made in
  software.
- **Mapping.** Computed offline. It appears here only as configuration: segment
  selects, H-tree node modes, destinations and link masks.
- **Number formats.** Q16.16 SFU arithmetic, the exp approximation, the
  shared-reciprocal division and int8 requantisation by a shift are this design's
  choices.
- **Programming.** Weights are loaded over a side-band bus, not through the
  network.
- **Core sequencing.** A core handles one token at a time. It does not overlap the
  send of token *n* with the MVM of token *n+1*, but it does overlap the
  *receive*.
- **Not modelled.** Bitcells, sense amplifiers, clocking (300 MHz CIM / 1 GHz
  logic) and the inter-wafer optical ports. A single clock drives everything.

## Testbenches

Each `tb/tb_<module>.sv` is self-checking and prints
`TB_RESULT checks=N failures=M`. Each has a watchdog, and each checks cycle
counts where the architecture fixes them:

- 256-cycle MVM;
- 49-cycle reciprocal;
- token latency and output interval of the core and the pipeline.

`tb_wafer_top` maps four layers onto four cores on four dies, including a
concatenating stage, a reducing stage, a multiply stage and a softmax stage. It
marks a link faulty on the route and sends four tokens back to back. It then
checks the final outputs against a reference model of the whole chain. It counts
each mechanism and fails if any never happened: reduce, concatenate, softmax,
multiply, the detour, die crossings, ping-pong overlap, pipelined tokens, KV
append and KV block full.

To run one:

```
verilator --binary --timing --assert -Irtl rtl/ouro_pkg.sv tb/tb_wafer_top.sv \
          --top-module tb_wafer_top -Mdir obj && obj/Vtb_wafer_top
```

## Lint notes

Verilator reports several things that do not need changing:

- *SYNCASYNCNET* on `rst_n`: registers use asynchronous reset, while the
  concurrent assertions use the same net as a synchronous disable.
- *unused bits*: status outputs of the SFU (accumulator, scalar result) and high
  address bits that the core does not need at a given size.
- *FLIT_W*: a package constant kept for users of the flit type.
