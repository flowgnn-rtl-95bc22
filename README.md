# FlowGNN-style dataflow accelerator for GIN inference

Graph neural networks with edge embeddings do not reduce to sparse-times-dense
matrix products. The message a node sends along an edge depends on the edge,
so it has to be computed once per edge, not once per node. This design
follows the dataflow idea of FlowGNN instead of a matrix-product engine:

- A **node transformation (NT)** stage computes each node's new embedding.
- A **message passing (MP)** stage takes that embedding and, for every
  out-edge, builds the edge's message and adds it straight into the
  destination's running aggregate.

Both stages run at the same time. NT streams a node's first embedding
elements to MP while it is still computing the rest. Several NT units and
several MP units work in parallel. An adapter between them sends each piece
of an embedding only to the MP units that own an edge out of that node.

The SystemVerilog in `rtl/` implements this architecture for one concrete
model, GIN with edge embeddings, for graph-level prediction:

    x_i^(l+1) = FC_l( (1 + eps_l) * x_i^l  +  sum_{j -> i} ReLU(x_j^l + e_ji^l) )
    y         = w . mean_i(x_i^L) + b

Defaults: 5 GIN layers, embedding dimension 100, two NT units, four MP units.
FC_l is a fully connected layer followed by ReLU, except in the last layer.
The graphs it targets are small ones that stream in one after another, such
as molecules with 10 to 100 nodes. Each graph is handled entirely on chip.

## Block map

```
 edge stream (COO) ──► graph_loader ──► per-bank CSR tables ──────────────┐
                            │ bank masks                                   │
 host x^0 ──► node_embedding_buffer (P_node banks)                         │
                 │ x          ▲ x^(l+1)                                    │
                 ▼            │                                            ▼
 weight_buffer ─► nt_array (P_node × nt_unit) ─► nt_mp_adapter ─► node_queue ×P_edge
                 ▲ messages                       (re-batch,          │
                 │                                 multicast)         ▼
           message_buffer ◄──────────── accumulate ───────────── mp_unit ×P_edge
           (2 buffers × P_edge banks)                                  ▲
                                                        edge_embedding_table
 last layer: nt_array ─► graph_head (mean pooling + linear) ─► res_data
```

| file | role |
|---|---|
| `flowgnn_pkg.sv` | Defaults, number format (16-bit Q8.8 data, 24-bit messages, 40-bit accumulators), load-port struct, saturation and ReLU. |
| `graph_loader.sv` | Turns the streamed edge list into one CSR table per MP bank, with a counting sort on chip. |
| `node_embedding_buffer.sv` | Node embeddings, one bank per NT unit. |
| `weight_buffer.sv` | Per-layer FC weights, biases and epsilon, shared by all NT units. |
| `nt_unit.sv` | One NT unit: input-stationary FC layer, with ping-pong accumulators. |
| `nt_array.sv` | P_node NT units in lockstep. Forms the GIN input `(1+eps)x + m`. |
| `nt_mp_adapter.sv` | Re-batches P_apply into P_scatter elements. Multicasts to the MP queues. |
| `node_queue.sv` | FIFO in front of each MP unit. |
| `mp_unit.sv` | One MP unit: per edge, `ReLU(x + e)` added into the destination's message. |
| `edge_embedding_table.sv` | Learned edge embedding per layer and edge category. |
| `message_buffer.sv` | Two message buffers that swap roles every layer, banked per MP unit. |
| `graph_head.sv` | Global mean pooling and the linear output layer. |
| `flowgnn_top.sv` | Wiring and the layer sequencer. |

## How one graph flows through

The host does four things:

1. Loads the model parameters through `ld`. These are tagged words for
   weights, biases, epsilon, edge embeddings and head parameters, and can be
   written any time the core is idle.
2. Writes the input node embeddings with `x_ld_*`.
3. Pulses `g_start` with the node and edge counts.
4. Streams the edges `(src, dst, attr)` with a valid/ready handshake.

**Loading.** `graph_loader` sorts the edges by bank, where the bank is the
destination id mod P_edge, and within a bank by source node. It works in
four phases:

1. clear the counters;
2. count out-edges per (bank, source);
3. exclusive prefix sum;
4. place each edge a second time at its slot.

Step 4 needs the edge list again, so the loader keeps it in a small staging
memory.

Each bank ends up with a row-pointer array and an edge array. An edge entry
holds the destination's local address inside the bank and the attribute. A
node's *bank mask* says which MP units hold at least one out-edge of the
node. The loader computes it from the row pointers of all banks.

**Passes.** A graph with L layers takes L+1 passes over its nodes:

| pass | NT does | messages read from | messages written to | NT output goes to |
|---|---|---|---|---|
| 0 | identity (x^0 unchanged) | – | buffer 0, edge emb. layer 0 | MP |
| p = 1..L-1 | GIN layer p-1 | buffer (p-1) mod 2 | buffer p mod 2, edge emb. layer p | MP, and write-back of x^p |
| L | GIN layer L-1 | buffer (L-1) mod 2 | – | pooling head |

A pass ends only when:

- NT has output every node, and
- the adapter, every queue and every MP unit are empty.

The next layer therefore never reads an incomplete message. NT reads each
message word *and clears it* in the same access. That leaves the buffer
zeroed for the layer after next, which accumulates into it again. After
reset, a sweep zeroes both buffers once. `g_ready` stays low until the sweep
is done.

## NT: input-stationary FC with ping-pong accumulators

An NT unit keeps two DIM-wide accumulator buffers. Each cycle it takes
P_apply elements of the node's input vector h, together with the matching
P_apply columns of the weight matrix. Every one of the DIM outputs then
performs P_apply multiply-adds ("each input element updates the whole
output vector").

After DIM/P_apply steps the buffer is full. The output process then:

1. adds the bias;
2. applies ReLU, except in the last layer;
3. saturates the result to 16 bits;
4. streams it out P_apply elements per cycle, with a valid/ready handshake.

Meanwhile the other buffer already accumulates the next node.

`nt_array` runs P_node units on a batch of P_node consecutive nodes. Node n
goes to unit n mod P_node, which is also the node-embedding bank that holds
it. The units of a batch step together, so one weight read per step is
broadcast to all of them. The batch advances only when every active unit
can accept a step. For each element it builds `h = x + ((eps*x) >>> 8) + m`.
The new embedding is written back into the node-embedding buffer as it is
output. This is safe because a node's old embedding is fully read before
its first output beat.

## Adapter: re-batching and multicast

Each NT output stream feeds a small gearbox. The gearbox collects P_apply
elements per beat until it holds a *chunk* of P_scatter elements, which is
word `c` of node `n`. P_scatter must be a multiple of P_apply. At the
defaults (2 and 2) the gearbox just passes chunks through.

A chunk goes to every MP queue set in the node's bank mask, all in the same
cycle. It waits while any of those queues is full. A chunk whose mask is
zero (a node with no out-edges) is dropped. When chunks from several NT
streams want the same queue in the same cycle, a rotating priority decides.
The loser stalls, and through it its NT unit. That stall is the adapter's
back-pressure.

Chunks carry their node id and word index. MP therefore never needs a whole
embedding, and chunks from different nodes may interleave in a queue.

## MP: one edge per cycle into its own bank

An MP unit takes the chunk at the head of its queue and walks the node's
out-edges in its bank's CSR table, one edge per cycle. For each edge it
reads the edge embedding (layer, attribute, word), forms
`ReLU(sat(x + e))` on P_scatter lanes, and does a read-modify-write of the
destination's message word in its own message-buffer bank.

Two cases take exactly one cycle:

- the chunk is popped together with its last edge;
- a chunk with no edge in this bank is dropped.

Banks are disjoint, so the MP units never conflict with each other. NT only
reads the *other* message buffer, so NT and MP never conflict either.
Messages are 24-bit wrap-around sums. The result therefore does not depend
on the order in which messages arrive, and that order does vary with the
stalls.

## Readout

In the last pass, the NT output is summed column by column into 32-bit
accumulators. When the pass ends, `graph_head` takes one cycle per element
to form `dot = sum_o w_o * colsum_o`. It then divides by the node count,
truncating toward zero (restoring divider, 64 cycles), shifts right by 8
and adds the bias. `res_data` is a signed 32-bit value with 8 fraction bits,
flagged by a one-cycle `res_valid`.

## Where this departs from the FlowGNN description, and what is own choice

- **Model.** Only the GIN kernel is built. FlowGNN also defines kernels for
  GCN, GAT (which uses the reverse gather-then-transform dataflow with a
  CSC layout), PNA, DGN and GIN with a virtual node. None of those are here.
  The GIN MLP is one FC layer per GIN layer. The input node encoder is not
  built: the host writes x^0 directly.
- **Parallelism.** P_node = 2 and P_edge = 4 are the published main
  configuration. P_apply = P_scatter = 2 is the largest point of the
  published apply/scatter ablation. The main configuration's own value is
  not published.
- **Bank assignment.** The FlowGNN example gives each MP unit a contiguous
  range of destination ids. Here banks interleave by `dst mod P_edge`.
  Nodes are likewise interleaved over NT units.
- **Sequencing.** Layers are separated by a full drain: within a layer, NT
  and MP overlap fully; across layers they do not. Loading of the next graph
  is not overlapped with computing the current one.
- **Number format, sizes, handshakes.** These are all own choices:
  - Q8.8 data with saturation, 24-bit messages and 40-bit accumulators;
  - capacity of 512 nodes and 8192 edges per graph;
  - 16 edge categories and 16-entry queues;
  - read-and-clear of messages;
  - the counting-sort loader;
  - the divide-after-dot-product head.
- **Not built.** The host link, PCIe and off-chip memory of the FPGA card.
  The top exposes plain load and stream ports in their place.

## Capacity against the evaluated datasets

At the defaults, one graph may have up to 512 nodes and 8192 edges.

- **Fit:** the molecular datasets. MolHIV averages 25.3 nodes and 55.6
  edges; MolPCBA averages 27.0 nodes and 59.3 edges. Their largest
  molecules have a few hundred atoms.
- **Average graph fits, largest unknown:** HEP graphs (49.1 nodes and 785.3
  edges on average). Their continuous edge features would need an edge
  encoder that is not built.
- **Do not fit:** the single large graphs Cora (2708 nodes), CiteSeer,
  PubMed and Reddit.

## Timing

One edge per MP unit per cycle, and DIM/P_apply accumulate cycles per batch
of P_node nodes in NT. At the defaults, NT needs 50 cycles per pair of nodes
per layer. The full-size test graphs (25 nodes and 56 edges; 22 nodes and 51
edges) take about 7600 and 6400 cycles from the end of loading to the
result. Most of that time is in NT, which matches where FlowGNN's own
design-space study puts the bottleneck for small molecules.

## Verification

Each block has a self-checking testbench in `tb/` against an integer model
written independently of the RTL. Each testbench prints
`TB_RESULT checks=N failures=M`.

| testbench | checks |
|---|---|
| `tb_node_queue` | random push/pop against a queue model |
| `tb_weight_buffer`, `tb_edge_embedding_table`, `tb_node_embedding_buffer` | random write and read-back |
| `tb_message_buffer` | clear sweep, accumulate, read-and-clear, buffer alternation |
| `tb_graph_loader` | CSR tables and bank masks against a sort of the edge list |
| `tb_nt_unit` | FC results, modes, and that accumulate overlaps output |
| `tb_nt_array` | all three modes, write-back, every message cleared once, done pulse |
| `tb_nt_mp_adapter` | every chunk reaches exactly its mask's queues, never into a full queue |
| `tb_mp_unit` | message sums, and the one-edge-per-cycle cycle count |
| `tb_graph_head` | pooled linear output, including saturated inputs and a one-node graph |
| `tb_flowgnn_top` | reduced size (DIM 8, 2 layers, P_apply 1, P_scatter 2, 2-deep queues) on three graphs |
| `tb_flowgnn_full` | every parameter at its default, on two molecule-sized graphs |

The two end-to-end testbenches share `tb_flowgnn_body.svh`. They compare
the output value and every final node embedding with a bit-exact model.
They also count each mechanism and fail if one never happened:

- multicast to several banks;
- adapter stalls on a full queue;
- re-batching;
- ping-pong overlap;
- NT/MP overlap;
- dropped chunks;
- message clears;
- each NT mode.

Simulate with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/flowgnn_pkg.sv \
        tb/tb_flowgnn_full.sv --top-module tb_flowgnn_full
    ./obj_dir/Vtb_flowgnn_full

The full-size run takes well under a minute.
