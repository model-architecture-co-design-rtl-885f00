# Temporal GNN inference accelerator (TGN-attn) in SystemVerilog

This is RTL for an FPGA accelerator that runs inference on a memory-based
temporal graph neural network (TGN with an attention embedding). It follows
the design in "Model-Architecture Co-Design for High Performance Temporal GNN
Inference on FPGA". It is not by that paper's authors. Where the paper names a
block or gives its function but not its insides, the simplest structure that
does the job was chosen. Every such choice is listed below.

## What the design computes

A dynamic graph arrives as a stream of edges e(u, v, f_e, t). Each vertex
keeps four rows in external memory:

- a memory vector s (M = 100 values) and the time it was last updated;
- a cached message (mailbox), s_u || s_v || f_e, from its last interaction;
- a row of its N = 10 most recent neighbours (vertex id and time);
- static node features (FF = 200).

For each new edge, both endpoints are processed:

1. **Memory update (GRU).** The new memory is s' = GRU([mail || time
   encoding(dt)], s), with dt = t - last update time. The time encoding comes
   from a look-up table of 128 dt intervals. Each LUT row already holds the
   encoding multiplied by the GRU input weights, so it is simply added to the
   gate pre-activations.
2. **Embedding (simplified attention).** Each stored neighbour j gets the logit
   a_j + W_t · dt. Only the `budget` (1..K, K = 6) largest logits are kept
   (neighbour pruning). A softmax over the kept ones gives alpha_j. The
   embedding is h = W_o (Σ alpha_j [s_j || f_j] + [s' || f]) + b_o +
   Σ alpha_j LUT_e(dt_j).
3. **Update.** New memories, new messages (s'_u || s'_v || f_e for u, the mirror
   for v) and the neighbour rows (the partner pushed in at the front) are
   written back.

## Block structure

```
 s_* (DMA words) -> edge_parser -> data_loader --job--> computation_unit x NCU
                                      ^   |                 (memory_update_unit,
                     table reads ----+   +--prefetch-->     embedding_unit)
                                                                  |
            tw_* <- updater <- neighbor_sampler <- round collector <-+
                                                      \-> emb_* (embeddings)
```

| Module | Role |
|---|---|
| `tgnn_pkg` | Q8.8 fixed-point type, 40-bit accumulator, saturation, piecewise-linear sigmoid/tanh, table ids of the configuration bus, neighbour entry struct, default sizes |
| `edge_parser` | Turns 32-bit words into edges. A packet is src, dst, t, then two 16-bit features per word (even index in bits 15:0). `s_last` on a packet's last word ends a batch. |
| `data_loader` | For each edge, reads memory+time, mailbox, neighbour row and features of u, then of v. Hands the edge to the CUs in round-robin order. Serves the CUs' neighbour prefetch requests, which take priority over new edges. |
| `computation_unit` | One memory update unit and one embedding unit. Takes one edge, produces s'_u, s'_v, both messages, both embeddings and the old neighbour rows. |
| `memory_update_unit` | GRU. Stage A: LUT look-up plus the r and z gate products on [mail || s]. Stage B: the candidate n (input and hidden parts in one block-diagonal product), then s' = n + z(s - n). Two vertices can be in flight, one per stage. |
| `mac_array` | Tiled y = W x + b with an S_g x S_g multiply-accumulate tile, one tile per cycle. Weights live in an on-chip array. |
| `time_lut` | 127 ascending thresholds and 128 entries; registered output one cycle after the request. |
| `attention_module` | Logits, top-k selection (ties go to the lower slot), exponent by shift-and-linear approximation, one reciprocal, normalisation. |
| `feature_aggregation_module` | Σ alpha_k x_k with S_FAM = 16 lanes. |
| `embedding_unit` | Sequences attention → time-LUT sum → prefetch → aggregation → W_o product (S_FTM = 8x8 tile). Attention and prefetch run while the GRU is still working. |
| `neighbor_sampler` | Combinational FIFO push of (partner, t) into a neighbour row. |
| `updater` | Fully associative write-back cache (`LINES` = 32). Each cycle one group of up to 2·NCU records is written at rotating write pointers. A newer record for the same vertex invalidates the older line. A commit pointer scans SCAN = 3 lines per cycle and writes the first valid one out; a window with none valid is skipped in one cycle. |
| `tgnn_top` | Wires the above together and adds the batch controller. |

Learned tables (GRU weights and biases, both LUTs, a, W_t, W_o, b_o) are
loaded through one broadcast configuration bus `cfg` (`we`, table id, row,
column, 32-bit data). Each table is a plain array inside the block that uses
it.

### Batches

A batch ends at an edge marked by `s_last`, or after `BATCH_MAX` = 16 edges.
The top works through each batch in three phases:

- **LOAD:** edges are read and computed.
- **DRAIN:** wait until every result has entered the updater.
- **COMMIT:** the updater writes back until it is empty, then `batch_done`
  pulses.

So all reads in a batch see the tables as they were before it. When a vertex
appears twice in one batch, the later record wins in the write-back. Results
are gathered one round at a time (one edge per CU, in hand-out order), which
keeps the updater's input in time order. A batch with an odd number of edges
ends with a partial round.

### External interfaces

Each table read channel (`vm`, `ml`, `nb`, `ft`) is a request/response pair
with valid/ready on the request. The single write channel `tw_*` carries a
vertex's memory, time, mailbox and neighbour row together, with
back-pressure. The DMA engine, DDR controller, DDR and FPGA shell are outside
the design. Only their signals appear as ports.

## Number format

Everything is Q8.8 signed 16-bit with 40-bit accumulators. Products are
shifted right by 8 and saturated on write-back. Sigmoid is clamp(x/4 + 1/2, 0,
1) and tanh is clamp(x, -1, 1). The paper's accelerator computes in 32-bit
floating point, so results here are not bit-equal to a float model. Expect
accuracy loss unless the model is retrained or calibrated for this format.
Softmax uses e^-d ≈ (1 - f/2)·2^-i, where i and f are the integer and
fraction parts of d·log2(e); the reciprocal of the sum is taken once.

## Where this departs from the paper

- **No overlap between batches.** The paper pipelines the load, compute and
  update periods of consecutive batches. Here a batch's write-back finishes
  before the next batch loads. This is the main part of the paper's design
  that is missing.
- **Fixed point instead of float32**, as described above.
- **One edge per CU job**, and the CU accepts its next job only after its
  result is taken. The paper only says that edges are assigned round robin.
- **Designer's choices:** the updater's size (32 lines), `BATCH_MAX`, the
  memory and embedding widths (M = E = 100), the packet format and all
  interface layouts.
- **Not modelled:** multi-die placement and the inter-die FIFOs.
- **Known interpretation:** the paper calls the eq. (6) gate "update gate"
  and the eq. (7) gate "reset gate". The RTL names them r and z after their
  position in the equations, and uses them as the equations do.

## Workloads

These sizes are from the paper: Wikipedia and Reddit have 172 edge features
and no node features; GDELT has 200 node features and no edge features. All
use 10 stored neighbours and keep 6/4/2 of them under the NP(L/M/S) pruning
levels. All of these fit the defaults (FE = 172, FF = 200, N = 10, K = 6); an
unused feature width is zero-filled. Vertex and edge counts only size the
external tables, which are addressed by 32-bit vertex ids.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

- **Arithmetic blocks** (`mac_array`, `time_lut`, `attention_module`,
  `feature_aggregation_module`, `memory_update_unit`) are compared bit-exactly
  against reference models written in the testbenches with the package
  functions.
- **`tb_computation_unit`** and **`tb_tgnn_top`** use GRU weight matrices set
  to zero (biases and LUTs random). This keeps the reference short while still
  exercising every datapath.
- **`tb_tgnn_top`** runs 23 edges in 4 batches against the behavioural table
  memory `tb_table_mem`, which has 3-cycle reads and random write stalls. It
  checks every embedding and every table row after each batch. It also
  requires each of these to happen at least once: prefetch, pruning, updater
  invalidation, skipped commit window, partial and full rounds, a batch closed
  by the size limit, write back-pressure, and input stalled during drain.
- **`tb_tgnn_top_full`** runs the top at its default sizes with no parameter
  overrides: 10 edges in 2 batches. It takes about 285k cycles, most of them
  loading the learned tables; this is about 35 s in Verilator.

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert rtl/tgnn_pkg.sv $(ls rtl/*.sv | grep -v tgnn_pkg) \
    tb/tb_table_mem.sv \
    tb/tb_tgnn_top.sv --top-module tb_tgnn_top -Mdir obj && ./obj/Vtb_tgnn_top
```

The package must come first on the command line. Start with `+verilator+rand+reset+2` to get
random initial values.
