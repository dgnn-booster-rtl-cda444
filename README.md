# DGNN-Booster in SystemVerilog: an RTL appendix

A dynamic graph neural network (DGNN) runs a graph network (here GCN) on each
snapshot of a graph that changes over time, and a recurrent network (LSTM) that
carries state from one snapshot to the next. On an FPGA the two halves would
naturally run one after the other and leave most of the chip idle. DGNN-Booster
keeps both busy. It has two dataflows:

* **V1, for EvolveGCN.** The RNN does not act on node embeddings. It evolves the
  GCN *weight matrix*: W_{t+1} = LSTM(W_t). The weights for step t+1 therefore
  do not depend on graph t. The RNN for step t+1 runs at the same time as the
  GNN of step t, and the two use a ping-pong pair of weight buffers. Loading
  the next snapshot overlaps the GNN in the same way, through a ping-pong pair
  of embedding buffers.
* **V2, for GCRN-M2.** The LSTM gates are graph convolutions of the input X_t
  and of the hidden state H_{t-1}. The GNN and RNN sit in one time step. Node
  queues (FIFOs) link them, so the LSTM works on node v while the GNNs already
  work on node v+1.

In both, the four LSTM stages of the RNN stream data to one another through
FIFOs. The host slices the raw edge stream into snapshots. It renumbers each
snapshot's nodes to 0..n-1 and keeps a renumbering table (local id to raw id).
The FPGA converts each snapshot's COO edge list into CSC on chip.

This RTL implements both engines behind one top, `dgnn_booster`. It computes in
IEEE-754 single precision throughout.

## The snapshot as the FPGA sees it

The host prepares everything in DRAM. The engine reads only through one
in-order read port and writes through one write port. Each port moves one
512-bit word per transfer.

| item | where | layout |
|---|---|---|
| descriptor of snapshot s | `desc_base + s` | `snap_desc_t`: n_nodes, n_edges, edge_base, renum_base, ne_base, out_base, c_base (32 bits each, n_nodes in bits 31:0) |
| COO edge k | `edge_base + k` | `coo_edge_t`: src[15:0], dst[31:16], FP32 edge value[63:32]; src and dst are local ids |
| renumbering entry v | `renum_base + v` | raw id of local node v, bits 31:0 |
| embedding of raw node r | `ne_base + r` | F FP32 values, feature i in bits 32i+31:32i |
| V1 output / V2 hidden state | `out_base + r` | same row format |
| V2 cell state | `c_base + r` | same row format |

The embedding tables are indexed by **raw** id. The graph loader (`graph_loader`)
reads the renumbering table first, then fetches row `ne_base + raw[v]` for
v = 0..n-1. It stores the rows densely at local addresses. All later accesses
are contiguous, and results go back to `out_base + raw[v]`. This is what makes
a snapshot of a few hundred nodes out of a much larger raw graph cheap to hold
on chip.

While the embeddings are still loading, `coo2csc` sorts the edges by
destination. It uses a counting sort of four passes, each handling one item
per cycle:

1. clear the counts;
2. count in-degrees;
3. take a prefix sum, which gives the column pointers;
4. scatter the edges.

The sort is stable, so each column keeps the COO order. The sort takes
2n + 2e + 4 cycles.

## Arithmetic

`dgnn_pkg` holds FP32 multiply and add as functions. Both round to nearest
even. Subnormals flush to zero and overflow goes to infinity. `fp32_mac` and
`act_unit` wrap these functions as blocks, and the PEs call them directly.

The activations are piecewise-linear:

* **Sigmoid (PLAN):**
  * 0.25|x| + 0.5 below |x| = 1;
  * 0.125|x| + 0.625 up to |x| = 2.375;
  * 0.03125|x| + 0.84375 up to |x| = 5;
  * 1 above |x| = 5;
  * for negative x, 1 minus the value at |x|.
* **tanh:** tanh(x) = 2·sigmoid(2x) − 1.
* **ReLU:** ends the GCN layer in V1.

These are this design's own choices. Replacing `fp_sigmoid`/`fp_tanh` in the
package changes every user at once.

The operators are written as single-cycle combinational logic. A 100 MHz
implementation would pipeline them. The controllers would then need deeper
accumulators, or interleaving over several output lanes.

## GNN: message passing streaming into node transformation

`gcn_mp` walks the CSC. For node v it reads `col_ptr[v]` and `col_ptr[v+1]`.
For each edge slot it reads the source id and edge value, fetches the source
embedding (one registered read), and adds `val * x_src` into F accumulators.
That is one edge per cycle with F MACs in parallel. A node with degree d takes
d + 5 cycles (4 for an isolated node).

The finished sum goes over valid/ready to `gcn_nt`. There it is multiplied by
the weight matrix one weight row per cycle, with FO MACs, which takes F + 2
cycles per node. The host is expected to fold any GCN normalisation into the
edge values.

## V1 (`dgnn_v1`): the weight-evolving LSTM and the two overlaps

### The RNN PE (`rnn_weight_pe`)

The PE has four stages, named as in the paper's V1 figure:

1. input gate;
2. forget gate;
3. cell update;
4. output gate.

FIFOs of depth 2 join the stages. A token is one row of the matrix. Stage g
computes one row of `A_g · W_t + B_g`, where A_g = W_g + U_g. The host adds
the input and recurrent matrices beforehand, because in EvolveGCN's weight
LSTM the input and the hidden state are both W_t. Stage g then applies its
activation and passes the row on:

* the forget stage applies the cell state;
* the cell update stage forms and stores c_t;
* the output stage writes the row of W_{t+1} = o ⊙ tanh(c_t).

Each stage reads W_t through its own read port of the weight buffer.
Streaming rows makes one evolution step cost (F+2)(F+3)+1 cycles. Running
the stages one after another would cost 4F(F+2).

### The schedule

The controller runs a three-part schedule:

```
weight load (9F words: W_0, A_i,f,c,o, B_i,f,c,o)
prologue:  GL(0)            || RNN: W_0 -> W_1
phase A:   MP(s)            || RNN: W_{s+1} -> W_{s+2}   (skipped after the last step)
phase B:   NT(s) + write    || GL(s+1)
```

The phases use the two ping-pong pairs as follows:

* **Weight buffers:** weight bank k%2 holds W_k. NT(s) reads bank (s+1)%2.
  The RNN reads that same bank and writes the other.
* **Embedding buffers:** snapshot s loads into embedding and renumbering bank
  s%2, so GL(s+1) writes one bank while MP and NT of s read the other.

`gcn_mp` streams straight into `gcn_nt`. The controller keeps the two in
separate phases: the converter's CSC arrays are single-buffered, and GL(s+1)
refills them. MP(s) must therefore finish before GL(s+1) begins.

## V2 (`dgnn_v2`): two GNNs, two node queues, one LSTM

V2 loads 8F + 8 words of weights once:

* W_x and W_h, each F rows of 4H outputs;
* the gate bias;
* the peephole weights.

For each snapshot, the graph loader gathers three tables per node through the
renumbering table: X, H and C. It loads them into three local buffers.

Two GNNs then start on the same CSC: GNN1 on X and GNN2 on H. Each is
`gcn_mp` streaming into `gcn_nt`, without ReLU and with 4H outputs (the
gates). Each pushes its results into its own node queue, a `sync_fifo` of
depth 4.

`tp_pe` pops both queues. An assertion checks that both queue heads carry the
same node. The PE adds bias and both products, then computes the peephole
LSTM:

```
i = σ(pre_i + p_i ⊙ c_{t-1})
f = σ(pre_f + p_f ⊙ c_{t-1})
c_t = f ⊙ c_{t-1} + i ⊙ tanh(pre_g)
o = σ(pre_o + p_o ⊙ c_t)
h_t = o ⊙ tanh(c_t)
```

It writes h_t and c_t back to `out_base + raw` and `c_base + raw`. The GNNs
read H from the on-chip copy, so writing back in place is safe.

When the writes are back-pressured, the queues fill and the GNNs stall. This
is counted as a mechanism in the top-level test.

## Top (`dgnn_booster`)

The top has these ports:

* `clk`, `rst_n`;
* `start`, `mode` (0 = V1, 1 = V2), `n_snap`, `desc_base`, `wparam_base`;
* `busy`, `done`;
* the DRAM read and write ports.

`mode` is sampled at `start` and routes the DRAM port to one engine. An
assertion checks that the engines never run together. The paper builds the
two dataflows as separate FPGA images. Putting both behind one port is this
design's choice. It lets a single simulation check both engines and the
switch between them.

Default sizes are set in `dgnn_pkg`:

* `FEAT` = 16. The paper gives no feature size.
* `MAX_NODES` = 1024 and `MAX_EDGES` = 2048. These hold the largest snapshot
  of both datasets the paper evaluates (578 nodes / 1686 edges and
  501 / 1534).
* `DRAM_W` = 512.

## Where this departs from the paper

* **V1 RNN type.** The text calls EvolveGCN's RNN a GRU, but the V1 figure
  labels the stages input gate, forget gate, cell update and output gate.
  The RTL follows the figure and builds an LSTM.
* **PE count.** V2 has one PE per GNN and one LSTM PE. The paper's figure
  draws several parallel PEs per stage. Node-level parallelism within a stage
  is therefore missing; the GNN/RNN overlap is present.
* **V2 graph loading.** In V2, loading snapshot s+1 is not overlapped with
  computing snapshot s.
* **Edge embeddings.** Edge embeddings are one scalar per edge (the GCN edge
  weight).
* **Arithmetic.** Rounding, the activation approximations, the descriptor
  layout and the DRAM handshake are all this design's own.
* **Timing.** The arithmetic is not pipelined, so 100 MHz timing has not been
  attempted.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values come
from an independent model in double precision (`tb_fp_pkg`), compared with
relative and absolute tolerances.

`dgnn_harness` is the end-to-end bench used by `tb_dgnn_v1`, `tb_dgnn_v2`
(F = 4, 64 nodes) and `tb_dgnn_booster`. The last runs at the top's default
sizes. The harness does the following:

* builds three random snapshots with renumbered node subsets of a 41-node raw
  graph;
* adds self loops and random signed edges;
* loads the snapshots into a DRAM model whose reads and writes are randomly
  refused;
* compares every output row with a model of the same network.

It also counts, and fails on any that never occurs:

* MP overlapping the RNN;
* NT overlapping GL;
* weight evolutions;
* RNN stages 1 and 4 busy together;
* TP PE busy while a GNN is busy;
* renumbered gathers;
* a GNN stalled by a full node queue;
* COO-to-CSC conversions;
* DRAM back-pressure on reads and on writes.

To run a bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/dgnn_pkg.sv tb/tb_fp_pkg.sv tb/tb_dgnn_booster.sv --top-module tb_dgnn_booster
./obj_dir/Vtb_dgnn_booster
```

The full-size top run (V1 then V2, three snapshots each) takes about a
minute, most of it compile time.
