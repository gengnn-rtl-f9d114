# GenGNN message-passing accelerator (GIN / GIN with virtual node)

This is synthesizable SystemVerilog for a graph neural network (GNN) inference engine.
It follows the GenGNN architecture (Abi-Karam et al., "GenGNN: A Generic FPGA
Framework for Graph Neural Network Acceleration").

The engine takes a small graph exactly as a producer emits it: a list of node feature
vectors and an unordered list of edges (source, destination, edge attribute). It needs
no sorting, partitioning or other preprocessing on a host. The edges are turned into a
compressed adjacency structure on chip. Then several graph isomorphism network (GIN)
layers run, followed by average pooling and a linear head. The output is one
prediction per task for the whole graph, as in molecular property prediction.

The central idea is that a GNN layer splits into two very different jobs:

* **Node embedding (NE).** A dense per-node MLP. It costs the same for every node.
* **Message passing (MP).** Walks a node's edges. Its cost is proportional to the
  node's degree, which can vary by orders of magnitude, for example for a virtual node
  connected to everything.

Two processing elements (PEs) do these jobs. A short FIFO of finished nodes joins them.
NE keeps producing while MP is stuck on a high-degree node, and MP catches up on the
low-degree ones. Neither PE waits for the other at node boundaries.

## How one graph is processed

For each graph, `gengnn_ctrl` steps through four phases.

1. **Load.**
   * Node features stream into the node embedding buffer, one 32-bit element per
     beat, node-major.
   * At the same time the edges stream into the COO-to-CSR converter.
   * Both must finish before anything else starts.
2. **Prologue.**
   * The NE PE runs in *bypass* mode: it pushes every node's input features into the
     node queue unchanged.
   * The MP PE scatters the resulting layer-0 messages into message buffer 0.
3. **Layers 0 … NUM_LAYERS-1.** For each layer l:
   * The NE PE reads message buffer `l % 2` and computes the new embedding of every
     node.
   * It writes each embedding back in place.
   * Except in the last layer, it also pushes each finished node into the queue. The
     MP PE pops it and scatters the next layer's messages into the other buffer.
   * A layer is over when three things hold: NE has finished, the queue is empty, and
     MP is idle. A 3-cycle settle lets the last accumulations land.
   * Then the buffers swap roles.
4. **Head.**
   * During the last layer, every finished real node is added into pooling registers.
   * The head divides by the node count and applies one linear layer per task.

The passes of one graph never overlap: layer l+1 needs every message of layer l. NE
and MP overlap *within* each pass. That overlap is where the time is saved.

## The NE/MP streaming pipeline

### Node queue

Each node queue entry holds a node id and its complete new embedding (EMB_DIM words),
so the MP PE never has to read the node embedding buffer.

The queue is 10 entries deep. That is the depth the original design reports as
enough. It is a plain first-word-fall-through FIFO with valid/ready on both sides.

NE stalls when the queue is full, and MP idles when it is empty. The end-to-end test
bench counts both events and checks that each happens.

### Cost per node

| stage | cycles per node |
|---|---|
| NE, compute mode | `HID + 5` in steady state (`HID = 2*EMB_DIM`); first node about `EMB_DIM + HID + 5` |
| NE, bypass mode | `EMB_DIM + 1` |
| MP | `2 + deg * (EMB_DIM + 2)` |

Notes on these costs:

* **NE.** The staging copy of the next node overlaps the MLP of the current one.
* **MP.** Two cycles read the node's degree and offset. Each edge then costs one
  neighbor/attribute read, one edge-embedding read, and EMB_DIM element updates.
* **Throughput.** With `EMB_DIM = 100`, a node of out-degree 2 costs MP about 206
  cycles and NE about 205. In molecules, most nodes are of that size.
* **Overlap.** The two PEs are naturally close in cost. With the queue,
  a layer takes roughly the larger of the two sums rather than their total.
* **Measured example.** The full-size test graph (26 nodes, 54 edges, 5 layers) takes
  37,440 cycles. NE alone needs at least 26,520. Running NE and MP back to back would
  take about 54,000.
* **MP-bound example.** A 222-atom molecule with a virtual node (223 nodes, 906
  directed edges, average out-degree about 4) takes 534,212 cycles. NE alone needs
  227,460, and the serial schedule about 691,750. MP dominates here, because each
  node costs it about twice the NE time. The queue still hides NE almost entirely.
  Widening the MP datapath is the lever for such graphs.

### Virtual node

When `vn_en` is set, the converter appends node N with an edge in each direction to
every real node. Its edge attribute is `EDGE_TYPES-1`.

The virtual node's scatter is by far the longest of any node. So the NE PE always
processes it first in every layer. MP then spends its long scatter while NE is busy
with the other nodes, instead of running it at the end with NE idle.

The virtual node is excluded from the graph pooling.

## Buffers

* **Node embedding buffer** (`node_emb_buffer`).
  * One 32-bit word per access, one read and one write port.
  * Size MAX_NODES × EMB_DIM.
  * It is updated in place, node by node. No banking or partitioning is applied, so
    the buffer scales with the graph size rather than with the datapath width.
* **Message buffers** (`msg_buffers`). Two arrays of the same size.
  * `rd_bank` names the read-only one. The NE PE reads its messages there, and every
    read clears the element, so the bank is zero by the time it becomes the
    accumulating bank again.
  * The other bank takes one accumulate request per cycle as a two-stage
    read-modify-write. Forwarding makes back-to-back requests to the same address
    correct.
  * After reset, a sweep clears both banks. `init_busy` is high during the sweep, and
    no graph may start until it drops.
* **CSR tables** (`csr_table`). These hold, per node, the degree and the offset of its
  first edge, and, per edge, the neighbor and the edge attribute. The offset table
  saves summing degrees at run time.

## COO-to-CSR converter

The converter (`coo_to_csr`) is a counting sort.

1. While edges stream in, it counts each source's out-degree and keeps the edges in a
   local store. Virtual-node edges are added after the last input edge.
2. A prefix sum over the counts gives each node's offset. Degrees and offsets are
   written to the CSR tables.
3. The stored edges are replayed, and each is written to its source's next free slot.

Edges of one source keep their arrival order. It runs once per graph and costs about
`2*E + 2*N` cycles, overlapped with the feature load.

## GIN datapath

The NE PE (`ne_pe`) has three parts:

* **Loader.** Reads a node's embedding and its aggregated message, one element per
  cycle, and forms `(1+eps)*x + m` into a staging register.
* **MLP PE.** Holds that vector while it runs.
* **Writer.** Stores the result back and pushes it to the queue, one element per cycle.

Staging and writer form the ping-pong pair that hides the copy time behind the MLP.

The MLP PE (`mlp_pe`) computes `act(W2 · relu(W1 · h + b1) + b2)`:

* The input and output vectors are fully parallel registers.
* The hidden layer is produced one element per cycle. Each cycle computes one
  EMB_DIM-wide dot product for hidden element j and adds `W2[:, j] * hidden[j]` into
  all EMB_DIM outputs at once.
* A run takes `HID + 4` cycles from `start` to `done`.
* The output activation is ReLU in every layer except the last.

The MP PE (`mp_pe`) forms each message element as `relu(x_src[k] + E[layer][attr][k])`.
It adds the element into the destination's entry of the accumulating message buffer.
`E` is a learned table per layer and edge attribute.

## Number format

All values are 32-bit two's-complement fixed point with 16 fractional bits.

* A multiply takes the 64-bit product and keeps bits [47:16], truncating.
* Additions wrap at 32 bits with no saturation. Sums therefore do not depend on the
  order in which messages arrive, so results are bit-exact against a software model
  whatever the NE/MP interleaving.
* The mean in the head truncates toward zero.

## Interface of `gengnn_top`

| signal | meaning |
|---|---|
| `param_wr` | weight write bundle (`en`, `sel`, `layer`, `row`, `vec[EMB_DIM]`) that fills every weight table; `sel` is `PS_W1` (row = hidden unit), `PS_W2T` (row = hidden unit, a column of W2), `PS_B1`, `PS_B2`, `PS_EPS`, `PS_EDGE` (row = edge attribute), `PS_HEAD_W`, `PS_HEAD_B` (row = task) |
| `start`, `num_nodes`, `num_edges`, `vn_en` | begin one graph |
| `nf_valid/ready/data` | node features, `(num_nodes+vn_en)*EMB_DIM` elements, the virtual node's last |
| `e_valid/ready/src/dst/attr` | the COO edge list, any order |
| `busy`, `done`, `result[NUM_TASKS]`, `cycles` | status, output and latency of the last graph |
| `init_busy` | message-buffer clear after reset |

### Parameters and their defaults

| parameter | default | origin |
|---|---|---|
| `EMB_DIM` | 100 | published configuration |
| `NUM_LAYERS` | 5 | published configuration |
| `QUEUE_DEPTH` | 10 | published configuration |
| `MAX_NODES` | 512 | this design's choice |
| `MAX_EDGES` | 2048 | this design's choice |
| `EDGE_TYPES` | 16 | this design's choice |
| `NUM_TASKS` | 1 | this design's choice |

MAX_NODES and MAX_EDGES are enough for any molecule of the common OGB molecular
benchmarks, including a virtual node.

## Where this design departs from, or goes beyond, the published one

* Only the GIN and GIN-with-virtual-node model family is built. The published
  framework also covers:
  * GCN, GAT, PNA and DGN;
  * a large-graph mode that keeps buffers in DRAM and adds a degree prefetcher and
    packed 16-bit transfers.
* The published work was written in high-level synthesis. Here the following are this
  design's own choices:
  * the pipeline depths and handshakes;
  * the per-node offset table;
  * the read-and-clear message buffers;
  * the hidden width of 2×EMB_DIM;
  * the message weights (both 1);
  * the virtual node's edge attribute;
  * the bypass prologue that creates the first layer's messages.
* The converter produces only CSR (out-edges), which the scatter-style GIN dataflow
  needs. The published converter can also produce CSC (in-edges) for models that
  gather.
* The fixed-point split (16.16) is assumed. The published design states only that
  the numbers are 32-bit fixed point.
* The node encoder (mapping raw atom types to EMB_DIM features) is not included.
  Features arrive already embedded.
* Host transfer (PCIe/AXI/OpenCL in the published system) is replaced by valid/ready
  streams.

## Files

| file | content |
|---|---|
| `rtl/gengnn_pkg.sv` | types, default sizes, fixed-point helpers, weight-write bundle |
| `rtl/gengnn_top.sv` | the accelerator |
| `rtl/gengnn_ctrl.sv` | phase sequencer |
| `rtl/coo_to_csr.sv`, `rtl/csr_table.sv` | edge conversion and adjacency storage |
| `rtl/node_emb_buffer.sv`, `rtl/msg_buffers.sv` | the O(N) buffers |
| `rtl/node_queue.sv` | NE→MP FIFO |
| `rtl/ne_pe.sv`, `rtl/mlp_pe.sv` | node embedding PE and its MLP |
| `rtl/mp_pe.sv` | message passing PE |
| `rtl/graph_head.sv` | pooling and linear head |
| `tb/tb_<module>.sv` | one self-checking bench per module |
| `tb/tb_gengnn_full.sv` | default-size runs of a mean-sized and a largest-sized MolHIV-like molecule, the latter with a virtual node |

## Simulation

Every bench prints `TB_RESULT checks=N failures=M`, stops itself with a watchdog, and
draws its stimulus from `$urandom`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/gengnn_pkg.sv rtl/*.sv \
    tb/tb_gengnn_top.sv --top-module tb_gengnn_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace the bench name to run another one. `tb_gengnn_top` runs the whole accelerator
at reduced sizes (8-wide embeddings, 3 layers) on three graphs:

* a random graph;
* a graph with a virtual node;
* a star graph with one hub.

It compares the result and every final node embedding bit for bit with a software
model inside the bench. It also checks that each of these happened at least once:

* queue-full stalls;
* MP idle periods;
* NE/MP overlap;
* buffer swaps;
* bypass prologues;
* virtual-node processing;
* conversions.

`tb_gengnn_full` uses the top at its default sizes and checks the prediction and the
latency bounds.
