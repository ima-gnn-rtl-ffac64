# IMA-GNN device: graph traversal in CAMs, aggregation and feature extraction in crossbars

A graph neural network (GNN) layer does two things for every node. First it
gathers the feature vectors of the node's neighbours, each scaled by the weight
of its edge, and adds them up (aggregation). Then it passes the sum through a
small dense layer (feature extraction). On a conventional processor the first
step is slow. It is a sparse, data-dependent walk over the graph, and every
neighbour costs a memory fetch.

IMA-GNN does both steps inside memory arrays. The graph is held in compressed
sparse row (CSR) form in two content-addressable memories (CAMs). One CAM search
and one CAM compare per edge find the neighbours of a node without walking any
pointers. The node features are stored as the cells of a resistive crossbar.
Each neighbour's edge weight is applied to that neighbour's crossbar row, and
the column currents then sum the weighted features, so the whole aggregation is
one matrix-vector multiplication (MVM) done in the array. A second, smaller
crossbar holds the layer weights and does the dense layer the same way. In the
paper the arrays are RRAM, a resistive memory, and the device is meant as an
edge accelerator. It runs either as one large central device for a whole graph
or as one small device per node of a distributed graph.

This RTL describes one device at the size the paper gives for the distributed
(decentralized) setting:

| part | size |
|---|---|
| search CAM, scan CAM | 512 rows x 32 bits each |
| aggregation crossbar | 512 x 512 cells |
| feature-extraction crossbar | 128 x 128 cells |

The analog parts are replaced by their ideal digital function. These are the
resistive cells, the DACs, the sample-and-hold and ADC stages, and the
match-line sense amplifiers. So the RTL is cycle-accurate and bit-exact
with respect to an ideal array, but it says nothing about the analog
behaviour: noise, ADC precision, device variation.

## Dataflow through the device

```
 host ──hw_*──► buffer_array (2 banks: CI, E, RP, features, weights)
                    │ one row per cycle while programming   (1)
        ┌───────────┼──────────────────────┬──────────────────────┐
        ▼           ▼                      ▼                      ▼
  traversal_core: search CAM (CI)   mvm_core "aggregation"   mvm_core "feature
                  scan CAM (RP), E   512x512, features         extraction" 128x128,
        │ (src, weight) per edge          ▲   │                 weights  ▲   │
        ▼                          (3)    │   ▼                     (4)  │   ▼
  vector_gen_sched ──input vector─────────┘  activation_unit (shared) ───┘  results
                  (2)                         port 0: aggregation, port 1: FE
```

1. **Program.** `controller` copies the active bank of `buffer_array` into the
   arrays, one row per cycle: the CAMs, the edge-weight array and both
   crossbars.
2. **Traverse.** For each destination node, `traversal_core` produces its
   incoming edges as (source, weight) beats. `vector_gen_sched` turns them into
   an input vector for the aggregation crossbar.
3. **Aggregate.** The aggregation core computes
   `z[f] = sum over edges s->d of E(s,d) * x_s[f]` for all 128 features at once.
   The shared activation unit applies ReLU, shifts right by `agg_shift` and
   saturates to 4 bits.
4. **Extract.** The feature-extraction core computes `o[j] = sum_f z'[f] * W[f][j]`
   for 32 outputs. The activation unit (with `fe_shift`) produces the node's 32
   output features on `res_*`.

Steps 3 and 4 work on different nodes at the same time. While the
feature-extraction core handles node *n*, the aggregation core already works on
node *n+1*, and the traversal core is gathering node *n+2*.

## Finding incoming edges with two CAMs

This is the least obvious part of the design. Take the 8-node example graph
below. A row is a source node, a column is a destination node, and a non-zero
entry is an edge weight. Node ids count from 0 in the RTL.

```
        0 1 2 3 4 5 6 7
   0  [ 2 . 1 . . . . . ]        CSR arrays (edge positions 0..10):
   1  [ . . . 2 . . . . ]          E  = 2 1 2 1 2 1 1 2 3 1 1   edge weight
   2  [ . . . . . . . . ]          CI = 0 2 3 0 4 2 0 4 6 6 7   destination column
   3  [ 1 . . . 2 . . . ]          RP end pointers per row:
   4  [ . . 1 . . . . . ]             2 3 3 5 6 7 9 11
   5  [ 1 . . . . . . . ]
   6  [ . . . . 2 . 3 . ]
   7  [ . . . . . . 1 1 ]
```

The **search CAM** holds CI, one edge per row. Searching it for destination
`d = 4` raises the match lines of every edge that ends in node 4: positions 4
and 7. This replaces a scan over the whole edge list.

Each position `e` must then be mapped to the row (source node) it belongs to.
The **scan CAM** holds, in row `n`, the end pointer of source node `n`: the
number of edges in rows 0..n. For this it uses its *compare* operation: a row
matches when its stored value is `>= key`. With `key = e + 1`, the rows that
match are exactly those whose edge list ends at or after `e`. Because the end
pointers never decrease, the matching rows are a contiguous tail of the CAM,
and its first row is the source node. For `e = 4`, the rows holding
5, 6, 7, 9, 11 match, and the first of them is row 3: edge 4 runs from node 3.
For `e = 7`, the first match is row 6.

A node without outgoing edges (row 2) repeats the previous end pointer. A lower
row with the same value always matches first, so row 2 is never reported.
Unprogrammed CAM rows never match. The edge weight is read from a small array
at the same position `e`.

The traversal core handles the matching positions lowest first with a
priority encoder. Each one costs 2 cycles: issue the compare, then take the
result. The first beat of a destination comes 3 cycles after the destination
is accepted. A destination with no incoming edges gives a single beat marked
`ev_none` after 2 cycles.

The CAM cells are ternary: each bit has a care bit. The traversal core always
programs care = 1. The don't-care ability is there, and it is tested in
`cam_crossbar`, but this dataflow does not use it.

## In-memory multiply: bit slices, bit-serial inputs, shift & add

Every crossbar cell stores one bit. A 4-bit stored value (a node feature, or a
layer weight) takes 4 neighbouring columns, least significant bit first. So a
512-column aggregation row holds 128 features. That matches the 128 input rows
of the feature-extraction crossbar, and its 128 columns give 32 outputs.

Inputs are applied one bit per cycle through 1-bit DACs, LSB first. In a
compute cycle, source line `c` returns `sum_r in_bit[r] AND cell[r][c]`, which
is at most the number of rows. The ADC is modelled as lossless, with
`clog2(ROWS+1)` bits. `shift_add` weights column slice `s` by `2^s` and the input
bit `b` by `2^b`, and accumulates into 24-bit signed registers.

Node features are unsigned. Layer weights are signed two's complement: the top
slice of each weight is subtracted instead of added (`SIGNED_W = 1`). Edge
weights and activations are unsigned 4-bit values, so ReLU is needed after
the signed layer only. A job of one input vector takes 4 compute cycles; its
result appears 6 cycles after the vector is accepted.

The activation unit is shared by both cores. It takes one vector per cycle and
grants port 1 (feature extraction) when both want it in the same cycle. An
aggregation result is granted only when the feature-extraction core's input
buffer is free, which is how the two cores are kept in step.

## Handshakes and timing

Every link between units is a valid/ready pair: destination stream, edge
beats, input vectors and core results. The only exception is the activation
unit's output, which is valid for one cycle and is always taken.
`vector_gen_sched` has two vector slots. One destination is gathered while the
previous vector waits for the aggregation core. When both slots are full, the
traversal core stalls (`ev_stall`).

Rough cost, from the end-to-end test (random graph, 512 nodes, 512 edges):

- Programming takes 514 cycles per run.
- After that, about 8 cycles per destination node. The limit is the
  aggregation core (7 cycles per job including hand-over), or the traversal
  core for nodes with many in-edges (2 cycles per edge).

Reset (`rst_n`, asynchronous, active low) clears all control state and the CAM
valid bits. The array contents are not reset; they are defined by programming.

## Using the device

1. Write the CSR arrays, the node features and the layer weights of a graph
   with `hw_en/hw_sel/hw_addr/hw_data`. Writes go to the shadow bank:
   - `SEL_CI`, `SEL_E`: one entry per edge.
   - `SEL_RP`: one end pointer per node.
   - `SEL_FEAT`: one 512-bit row per node, feature `f` in bits `4f+3:4f`.
   - `SEL_WGT`: one 128-bit row per input feature, output `j` in bits `4j+3:4j`.
2. Pulse `swap` while idle to make that bank active.
3. Pulse `start` with `num_nodes`, `num_edges`, `first_dst`, `dst_count`,
   `agg_shift` and `fe_shift`. `busy` stays high until `done` pulses.
4. One `res_valid` cycle comes per destination, with `res_node` and
   `res_feat[0..31]`. Results arrive in destination order.
5. The next graph may be written during the run (double buffering). Each such
   write is flagged on `ev_host_overlap`.

Each CSR row must have at most one entry per column: the vector generator
stores, rather than adds, a weight per source row.

## Parameters

The package `ima_pkg` holds the sizes. `ima_gnn_top` exposes `ROWS` (nodes,
edges and CAM rows, 512), `CAM_WIDTH` (32), `AGG_COLS` (512) and `FE_COLS` (128).
The feature-extraction crossbar always has `AGG_COLS/4` rows. Every parameter
defaults to the per-device size given in the paper.

The paper's central configuration uses many crossbars per core:

| core | crossbars | crossbar size |
|---|---|---|
| traversal | 2K | 512x32 |
| aggregation | 1K | 512x512 |
| feature extraction | 256 | 128x128 |

This RTL has one crossbar per core (one search and one scan CAM), so it cannot
hold the paper's large graphs in one piece. A neighbourhood of up to 511
neighbours with up to 128 features of 4 bits fits. In the distributed setting this is
enough for the neighbourhood of a typical node. A run for one node takes 514
cycles of programming plus a few cycles per neighbour: 550 cycles for 9
neighbours, 1058 for 263. The paper does not say how
graphs and features larger than one crossbar are split across crossbars. That
split is not implemented.

## Where this RTL follows the paper and where it chooses

Taken from the paper:
- The three cores and the buffer array, controller, shared activation unit and
  vector generator & scheduler.
- CSR storage: CI in the search CAM, RP in the scan CAM.
- Search followed by compare to find source nodes.
- Aggregation as an MVM with node features stored in the crossbar.
- A feature-extraction crossbar of another size.
- Double buffering of graph and feature data.
- Aggregation and feature extraction running in parallel.
- The crossbar sizes.

Chosen here, because the paper does not specify them:
- 1-bit cells and 1-bit DACs, with a lossless ADC.
- All data widths are 4 bits.
- Signed weights by a negative top slice.
- The scan CAM stores end pointers, and its compare means "stored >= key". The
  paper's figure lists the start pointers without the repeated entry of an
  empty row. With the rule above, the source node is simply the index of the
  first matching row.
- ReLU, re-quantisation and round-robin arbitration in the activation unit. The
  paper gives only the unit's name.
- All handshakes, the controller's states, the two-slot scheduler, the bank
  swap and the host interface.
- One crossbar per core, although the figure draws two.

Not built:
- The high-bandwidth bus between the cores. Its protocol is not described;
  here the cores are wired point to point.
- The radio links between edge devices.
- Any analog behaviour.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares against a
reference model written in the testbench and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_cam_crossbar` | the example graph's search, ternary search and compare against a model, `clr` |
| `tb_mvm_crossbar` | full 512x512 array, random data, every column sum |
| `tb_shift_add` | unsigned and signed weights, idle cycles in a job |
| `tb_mvm_core` | both core configurations, results, 6-cycle latency, back-pressure |
| `tb_activation_unit` | grants, alternation on ties, ReLU/shift/saturate per lane |
| `tb_traversal_core` | every destination of the example graph in order; random graphs with empty rows and back-pressure; cycle timing |
| `tb_vector_gen_sched` | random edge streams, vector contents and tags, stalls |
| `tb_buffer_array` | bank isolation, swap, writes during reads |
| `tb_controller` | programming walk and write strobes, destination stream, `done` |
| `tb_ima_gnn_top` | the whole device at full size on two random graphs (512 nodes / 512 edges, then 100 / 300) against a software GNN layer |
| `tb_workload_neighbourhoods` | one device holding the neighbourhood of one node, as in the distributed setting: 9, 263, 4 and 2 neighbours, the average neighbour counts of the LiveJournal, Collab, Cora and Citeseer graphs (features cut to 128) |

`tb_ima_gnn_top` also requires that each of these happens at least once:

- a stall;
- a wait for the activation unit;
- both cores busy together;
- a host write during a run;
- a node without in-edges;
- an empty CSR row;
- a bank swap.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/ima_pkg.sv tb/tb_ima_gnn_top.sv \
          --top tb_ima_gnn_top -Mdir obj && ./obj/Vtb_ima_gnn_top
```

Replace the testbench name to run another one. The full-size end-to-end test
finishes in well under a second of simulation time. Assertions check three
rules:

- the scan CAM always finds a source for an edge;
- no crossbar is reprogrammed while it computes;
- an activated aggregation vector always finds the feature-extraction core
  free.

The MVM crossbar is written as a plain nested loop over rows and columns. It
elaborates and simulates quickly. A generic synthesis flow unrolls it into
about 262k adders, so synthesising the 512x512 array as logic is slow and may
hit loop-unroll limits. In silicon this array is the analog crossbar, not logic.
