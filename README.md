# Multilayer dataflow array for butterfly-sparse attention

Butterfly sparsity replaces a dense N×N weight or attention matrix by log2(N)
sparse factors. Each factor pairs element k with element k ± 2^s and mixes
the two. This is the butterfly matrix product (BPMM) of learned linear
layers, and it has the same structure as an FFT. The arithmetic is cheap:
O(N log N) instead of O(N²). The data movement is awkward: every stage
shuffles the whole vector with a different stride. On a cache machine each
stage becomes a pass through memory with poor locality.

This design keeps the shuffles out of memory. A butterfly of N points is
written as a multilayer dataflow graph (DFG):

- One layer per butterfly stage.
- One graph node per group of points.
- An edge for each pair of points that must meet.

The graph is laid out on a 4×4 array of processing elements (PEs) so that:

- Every node of every layer that owns the same points sits on the same PE.
- An edge either stays inside a PE or crosses the mesh to the PE that owns
  the partner points.
- Edges at distance 1, 2, 4 and 8 go to other PEs.
- Edges at distance 16 and beyond wrap back to the same PE (PE p pairs with
  PE (p+16) mod 16 = p), so late stages never touch the network.

Data is loaded from the scratchpad (SPM) once at the first layer. It flows
PE to PE through all layers, and is stored once at the last layer.
Independent vectors (batch, head and hidden slices) stream through the
graph as *iterations*. A PE therefore always has some node of some layer
with work to do.

## Array and networks

`mldf_top` holds the following:

- **16 PEs** in a 4×4 mesh. PE p sits at x = p mod 4, y = p / 4, and row 0
  is the top row.
- **Data network.** One `noc_router` per PE with 5 ports (local, N, E, S,
  W) and XY routing: first along the row to the target column, then along
  the column. It carries four kinds of packet:
  - load requests;
  - load responses;
  - stores;
  - Flow vectors, which are one PE's output going to a node on another PE.

  The north port of each router in row 0 leads to one port of the SPM, so a
  PE reaches the SPM through the port above its column.
- **Req/ack network.** A second mesh of the same router, narrow, that
  carries credit returns (acks) from consumer nodes back to their
  producers. Keeping acks on their own network means they cannot be stuck
  behind data they are meant to release.
- **Context path.** `context_memory` sits at the west edge and holds a
  program image written by the host. On `cm_go` it streams `cm_count`
  words from `cm_base` into the row of the target PE. In each row, a chain
  of `context_router`s passes a word east until it reaches the PE it names.
  A word does one of four things:
  - writes a node-table entry;
  - writes an instruction;
  - writes a SIMD register (static weights);
  - starts the PE with a node count.
- **SPM** (`spm`): 4 MB, with four network ports (one per column) and one
  external port for the host or a DMA engine. The external port has
  priority.

A PE stops issuing as soon as its program has finished. The words of the
next program can therefore be loaded in any order, and take effect only at
that program's start word.

`done` rises when all of the following hold:

- the context stream has ended;
- every PE has finished all iterations of all its nodes;
- every router and context router is empty;
- the SPM has nothing queued.

The host uses `done` as the barrier between the stages of a long vector
(see *Long vectors* below).

## Inside a PE: decoupled units and block scheduling

A PE (`pe`) has four function units, each a small sequencer over the
instruction RAM:

| unit | instructions | work |
|---|---|---|
| Load (`load_unit`) | `LDN`, `LDC` | sends SPM load requests (row- or column-wise); the responses are written into the SIMD RAM by the network port |
| Cal (`cal_unit`) | `MADD`, `MUL`, `ADD`, `SUB` | 16 fp16 lanes (`fp16_madd`), operands read from the SIMD RAM |
| Flow (`flow_unit`) | `COPY_I`, `COPY_T` | `COPY_I` copies a register inside the PE (an edge that stays local); `COPY_T` sends a register to register rd of node `tnode` on PE `tpe` |
| Store (`store_unit`) | `STN`, `STC` | sends SPM stores (row- or column-wise) |

**Code blocks.** The compiler cuts a node's program into up to four *micro
code blocks*, one per unit. The node table (`node_info_t`) holds one entry
per block, giving its head and length in the instruction RAM. A unit
executes one whole block for one iteration of one node, then reports
`done`.

**The block scheduler** (`control_unit` with `block_scheduler`). The
scheduler decides which block each free unit runs next. For each unit,
every node whose next block for that unit is *ready* is a candidate. It
picks the candidate with the smallest {layer index, iteration index}. That
rule drains older layers first and keeps the pipeline short.

**Readiness.** A block is ready when the following hold. Here i is the
node's iteration for that unit.

1. **Order inside a node.** The blocks of a node run in the order Load →
   Cal → Flow → Store. A block of iteration i waits for the node's previous
   block of iteration i.
2. **Local input.** The first block of node n waits for the Flow block of
   node n−1, for iteration i, when n−1 feeds n inside the PE
   (`down_local`).
3. **Remote input.** If node n receives `arr_per_iter` vectors per
   iteration from another PE, its first block waits until that many
   arrivals have been counted for iteration i.
4. **Register slot.** Registers are addressed relative to the iteration's
   slot, i mod 4 (see below). Iteration i of a node therefore cannot start
   until the node has finished iteration i − 4.
5. **Consumer credit.** A Flow block of iteration i waits until its
   consumers have finished iteration i − 4:
   - a local consumer (node n+1) by its finish counter;
   - a remote consumer by the acks it has returned.

When the last block of a node that receives remote data finishes an
iteration, the control unit sends one ack to the producer (`up_pe`,
`up_node`). Rules 3 to 5 are the whole flow control of the array. They
need no handshake per vector, only one counter per node.

**Register slots.** The SIMD RAM (`simd_ram`) holds 128 vectors of 16 fp16
values. An 8-bit register field is read in one of two ways:

- bit 7 set: an absolute index (weights, constants);
- bit 7 clear: relative, giving the physical register {i mod 4, reg[4:0]}.

With four slots, up to four iterations of the same node can be in flight,
as rules 4 and 5 allow. The compiler must keep absolute registers clear of
the relative fields used in each slot.

**SIMD RAM arbitration.** The SIMD RAM has four slices (the register's two
low bits) and five ports in fixed priority:

0. network writes (load responses and arriving Flow vectors);
1. context writes;
2. Flow;
3. Cal;
4. Store.

Each slice serves one port per cycle. Port 0 is always granted, so the
network never backs up into the mesh. An assertion in `pe` checks this.

**Data injection.** Flow, Store and Load share the PE's network injection
port, in that priority.

## SPM: one array, two access patterns

A long butterfly is split into stages (below). One stage reads the data by
columns of a matrix and the next by rows. The SPM supports both without a
transpose:

- **Geometry.** 4 banks × 8 lines × 4096 rows of 256-bit entries (16 fp16).
- **Address mapping.** An entry address splits into bank = a[1:0],
  line = a[4:2] and row = a[16:5].
- **Row-wise (`LDN`/`STN`).** Moves one whole entry.
- **Column-wise (`LDC`/`STC`).** Gathers or scatters lane `lane` of 16
  entries: element e comes from bank (b + e/8) mod 4, line e mod 8, where b
  is the address's bank. A column access therefore occupies two banks for
  one cycle.

The four network ports are served in round robin. Two requests whose banks
overlap cannot be served in the same cycle, and `conflict` reports that
case. Each port has one request register and one response register, so a
port takes a new request only once its last response has left.

## Long vectors

The array holds at most one DFG of 512 points for BPMM (real) or 256
points for FFT (complex). A longer vector of length L = R·C is handled
with the Cooley–Tukey split:

1. Reshape the vector into an R×C matrix.
2. Run an R-point DFG on the columns. This uses row-wise loads, with the 16
   SIMD lanes taking 16 columns.
3. Wait at a barrier (`done`).
4. Multiply by the twiddle factors as an element-wise layer (FFT only).
5. Run a C-point DFG on the rows. This uses column-wise loads.

The host sequences the stages by reloading the context memory. The
end-to-end test does this at small size: a BPMM stage, the `done` barrier,
then an element-wise column-wise stage.

## Number format

Everything is IEEE binary16 (`fp16_pkg`). The rounding rules are:

- Results round to nearest, ties to even.
- Subnormal inputs and results are flushed to zero (keeping the sign).
- Exponent 31 is read as infinity.
- NaN is never produced. Overflow saturates to infinity with the right
  sign.
- `MADD` (c + a·b) rounds the product and then the sum. It is not fused.

## Where this follows the paper and where it does not

The paper gives the following, and the RTL follows it:

- 4×4 PE mesh with mesh NoC;
- per-PE context router, control unit, instruction block RAM, SIMD RAM
  with conflict arbitration, and the four decoupled units Load / Cal /
  Flow / Store;
- block-level scheduling by smallest {Layer_idx, Iter_idx};
- separate data and req/ack networks;
- 4 MB SPM with 4 interleaved banks of 8 lines, and the column-gather
  mapping e0 → b0 l0 … e8 → b1 l0 … e15 → b1 l7;
- SIMD16 entry width;
- the 512/256-point DFG limits;
- multi-stage division with a barrier between stages.

These are this design's own choices, because the paper does not give them:

- the instruction encoding and opcode list;
- the node-table fields;
- the 4-slot relative register scheme and the exact credit rules;
- XY routing, 2-deep router FIFOs and round-robin output arbitration;
- the SIMD RAM port priority;
- the SPM port registers and round-robin service;
- the context word format and row-chain delivery;
- the fp16 corner cases listed above;
- all depths (128 SIMD registers, 256 instructions, 16 nodes per PE, 1024
  context words).

One departure from the paper: its hardware table lists the function units
as SIMD32, but its SPM section says SIMD16 matches the PE's calculation
width. The RTL uses 16 lanes throughout (`SIMD` in `mldf_pkg`). This halves
the paper's 512 MAC lanes to 256.

The following are not built:

- the DDR controller and DMA engine. The SPM's external port is where they
  would connect.
- the host-side DFG compiler. The testbench builds its programs by hand, in
  SystemVerilog.

Workloads that need more than 4 MB at once therefore cannot run end to
end:

- BERT attention with 64K tokens;
- the 64K-point vector;
- batch-streamed transformer layers.

The paper's speed and energy figures are not reproduced.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=N failures=M`. The packages must be read first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fp16_pkg.sv rtl/mldf_pkg.sv tb/tb_fp_pkg.sv -y rtl -y tb \
  tb/tb_mldf_top.sv --top-module tb_mldf_top -o sim
./obj_dir/sim
```

`tb_mldf_top` runs the whole array at its default size (4 MB SPM,
16 PEs). It runs in two stages.

**Stage 1.** A 32-point BPMM, 5 butterfly layers deep, over 8 iterations
(vectors of 16 lanes each). It exercises:

- row-wise loads;
- remote Flow to partners at distance 1, 2, 4 and 8;
- local `COPY_I` edges;
- acks;
- absolute weight registers;
- stores.

**Stage 2.** After the `done` barrier, an element-wise layer with
column-wise loads and stores.

The testbench checks every output element against a real-number fp16
model of the same graph. It counts each mechanism and fails if one never
happened:

- each packet kind;
- acks;
- SIMD RAM slice conflicts;
- SPM bank conflicts;
- overlap of iterations.

The unit testbenches drive each block with random stimulus against
independent models:

- `tb_spm`: memory model and column mapping.
- `tb_control_unit`: behavioural units; checks every readiness rule at
  every issue.
- `tb_pe`: a looped-back single PE.

For speed, `tb_spm` uses a reduced `ROWS`. All other testbenches use the
defaults.
