# A scatter-gather GNN accelerator for SAR target recognition

Synthetic-aperture-radar target chips are mostly dark. Only a small set of
pixels belongs to the vehicle. This design exploits that sparsity. The host
turns a 128 x 128 SAR image into a graph: every pixel is a vertex joined to its
four neighbours, and every pixel dimmer than a threshold (0.1 on a 0..8 scale)
is dropped together with its edges. A small graph neural network then
classifies the graph. Its layers are GraphSAGE layers (mean aggregation
followed by a weight update), 2 x 2 graph pooling, attention modules and a
final MLP. Its weight matrices are heavily pruned, with 1 % to 33 % of the
entries non-zero.

The accelerator in `rtl/` runs every layer of such a model on one datapath.
The observation behind it is that both kinds of work in the network reduce to
the same loop over edges:

    for each edge <src, dst, w>:   u      = Scatter(row[src], w)
                                   row[dst] = Gather(row[dst], u)

- **Aggregation kernels (VAK)**: neighbour aggregation and pooling. The edges
  are the graph's edges, and a row holds the features of one vertex. This is
  the *vertex-major* layout.
- **Update kernels (VUK)**: a sparse weight matrix times the feature vectors
  of a batch of vertices. Each non-zero `W[src][dst]` becomes an edge. A row
  holds *one feature of Q vertices*, the *feature-major* layout. Scatter
  multiplies that row by the weight and Gather accumulates it into output
  feature `dst` of the same Q vertices. Zero weights simply have no edge, so
  the pruned matrix costs only its non-zeros.

Data moves between the two layouts through a transpose unit, and a short
kernel table sequences the whole model without the host.

The architecture (8 pipelines of 16 FP32 processing elements, the butterfly
network, buffer roles, the PE contents, the piecewise-linear sigmoid) follows
a published FPGA design for the Xilinx ZCU104. That publication describes the
blocks and their function but not their insides. The control, the encodings,
the buffer sizes, the switch design and the layout conventions below are this
implementation's own. Section "Where this departs from the reference" lists
them.

## Datapath

```
           host (processor + DMA: outside this RTL, plain ports)
             |  edges/weights        | feature rows        | kernel table
             v                       v                     v
   Weight/Edge Buffer           Input Buffer  <---+    sgp_controller
   (P lanes)                    (P read ports)    |
        | edge, lane l               | row[src]   |  write-back:
        v                            v            |  direct, or through
   Scatter Unit l  (Q multipliers, bypass)        |  the MTU (transpose)
        | update <dst bank, dst row, Q values>    |
        v                                         |
   butterfly routing network, P x P, log2 P stages|
        | to the Gather Unit owning the bank      |
        v                                         |
   Gather Unit b  (Q x: accumulate | max, then ReLU | sigmoid)
        | one-cycle read-modify-write             |
        v                                         |
   Result Buffer bank b  ---------------------------+--> host read
```

P = 8 pipelines and Q = 16 lanes of 32-bit floating point give 512-bit rows
and 512-bit network ports. All of these are constants in `sgp_pkg`.

| block | file | what it does |
|---|---|---|
| Scatter Unit | `scatter_unit.sv` | Q FP32 multipliers. `S_MUL`: weight x row, used for aggregation with edge weights and for update kernels. `S_BYPASS`: the row unchanged, used for pooling. A *bias edge* emits the weight itself. One register stage, valid/ready. |
| routing network | `routing_network.sv`, `butterfly_switch.sv` | Butterfly of 2x2 switches. Stage s sets bit s of the position to bit s of the destination bank. Each switch output has one register. On a collision one input waits, and the priority alternates. Backpressure reaches the Scatter Units. |
| Gather Unit | `gather_unit.sv` | Owns one Result Buffer bank. Applies an update in the cycle it arrives: `G_ACC` adds it to the row, `G_MAX` keeps the maximum, and a row not yet written takes the update as it is. A later sweep replaces every written row by ReLU(row) or sigmoid(row). |
| sigmoid | `sigmoid_pla.sv` | Piecewise linear, power-of-two slopes (see below). |
| Result Buffer | `result_buffer.sv` | P banks x 2048 rows with one valid bit per row. One-cycle clear. A row never written reads as zero on the second port. |
| Input Buffer | `input_buffer.sv` | 32768 rows. P combinational read ports (one per Scatter Unit) and one write port. |
| Weight/Edge Buffer | `weight_edge_buffer.sv` | P lanes x 16384 edges, one read port per lane. |
| MTU | `mtu.sv` | Transposes Q x Q tiles of FP32: it loads 16 rows, then emits 16. |
| controller | `sgp_controller.sv` | Kernel table and phase sequencing, including the write-back. |
| top | `sar_gnn_accel.sv` | Wires the blocks together and muxes host and write-back access to the Input Buffer. |
| FP32 | `fp32_pkg.sv` | Multiply, add, max and ReLU functions, round to nearest even. |

The four buffers hold about 4 MB: 2 MB of Input Buffer, 1 MB of Result Buffer
and 1 MB of Weight/Edge Buffer. The target FPGA has 4.8 MB of on-chip memory.

## Edges, rows and addresses

An edge (`edge_t`, 62 bits) is:

| field | bits | meaning |
|---|---|---|
| `src` | 15 | Input Buffer row of the source |
| `dst_bank` | 3 | destination bank = Gather Unit = routing output port |
| `dst_addr` | 11 | row within that bank |
| `bias` | 1 | ignore the source row and contribute `weight` in all Q lanes |
| `weight` | 32 | FP32 edge weight or matrix element |

The destination of an edge is a *logical* Result Buffer row
`L = dst_addr * P + dst_bank`. Write-back copies logical rows `L = 0, 1, 2, ...`
in that order. So consecutive logical rows are spread over the banks, and
placing destinations is how the host balances the pipelines.

Layout conventions used by the test program, which any host software can
follow:

- **Vertex-major** region at base B: row `B + v` holds features 0..15 of
  vertex v. A VAK kernel with more than 16 features repeats its edge list once
  per 16-feature chunk (`n_pass`, with the strides set to the chunk spacing).
- **Feature-major** region at base B: vertices are grouped in tiles of 16.
  Row `B + 16 t + f` holds feature f of vertices `16t .. 16t+15`, vertex
  `16t+i` in lane i. An update kernel stores each non-zero once, with
  `src = B + f` and a destination of logical row `16 t + d` for t = 0 (bank
  `d mod 8`, row `d div 8`). It runs `n_pass = ceil(|V|/16)` passes with
  `src_stride = 16` and `dst_stride = 2`, one pass per vertex batch.
- **MTU write-back** transposes each aligned 16-row tile in place. Writing the
  feature-major result of an update kernel through the MTU therefore gives
  vertex-major rows, and the other way round. Transposing twice returns the
  original.

A GraphSAGE layer `h' = ReLU(z Wn + bn || h Ws + bs)` becomes:

1. a VAK with edge weight `1/(deg(v)+1)` over the neighbours and v itself
   (mean aggregation), written back through the MTU as feature-major `z`;
2. one VUK whose edge list holds the non-zeros of `Wn` (sources in `z`), of
   `Ws` (sources in a feature-major copy of `h`, with destinations offset by
   the width of the first half, which gives the concatenation) and the two
   bias vectors as bias edges. It ends with a ReLU sweep, and writing back
   through the MTU gives vertex-major `h'`.

A 2 x 2 pooling layer is a VAK in `S_BYPASS`/`G_MAX` with one edge from every
surviving vertex to its pooled vertex. Pruned vertices send nothing, so the
maximum runs only over the vertices present. The valid bits make this work
without a -inf fill.

## The kernel table

The host writes up to 64 descriptors (`desc_t` in `sgp_pkg`) and pulses
`start`. For each descriptor the controller runs these phases:

| phase | cycles | action |
|---|---|---|
| LOAD | 1 | fetch the descriptor |
| CLEAR | 1 if `clear` | invalidate every Result Buffer row |
| EDGES | max over lanes of `n_edges[l] * n_pass` (with no stalls) | lane l issues edges `edge_base .. edge_base + n_edges[l] - 1`, `n_pass` times. Pass k adds `k*src_stride` to `src` and `k*dst_stride` to `dst_addr`. |
| DRAIN | 1 + log2 P | wait for the Scatter registers and the network to empty |
| FINAL | `n_out` if `act != A_NONE` | activation sweep of rows `0 .. n_out-1` in every bank |
| WB | `wb_count` (direct) or about 2 `wb_count` (MTU) | copy logical rows `0 .. wb_count-1` to Input Buffer rows `wb_base ..` |

`last` ends the run and pulses `done`. A descriptor with no edges and
`clear = 0` only writes back. The test uses one to make a second,
transposed copy of a result. A kernel with `clear = 0` accumulates onto the
previous kernel's result, which gives residual sums such as the
`h + h' + h''` of the attention module.

Timing follows the reference's performance model when nothing collides:
`ceil(|E|/p) * ceil(c/q)` cycles for an aggregation kernel and
`ceil(|V|/q) * ceil(nnz/p)` for an update kernel, plus 1 + log2 P cycles of
drain. The end-to-end test checks this to the cycle on a collision-free update
kernel. Collisions in the butterfly add stall cycles. `route_conflicts` and
`stall_cycles` count them, and `edge_cycles` / `kernel_cycles` report the
last kernel's time.

Collisions are the price of arbitrary destinations. Two edges in the same
cycle towards one bank, or crossing in one switch, serialise. The reference
leaves load balance to the host: aggregation destinations are spread so that
every bank gets the same number of vertices of each degree (0 to 4), and
weight matrices are split along `dst` by longest-processing-time-first
partitioning. This RTL does nothing to reorder traffic. Edge order and lane
placement are entirely the host's choice.

## Arithmetic

All data is IEEE-754 single precision. Multiply and add round to nearest even.
Subnormals are flushed to zero, overflow goes to infinity and NaNs are not
handled. Unit testbenches compare against exactly rounded results.

The sigmoid is the PLAN approximation, with every slope a power of two:

| \|x\| | y |
|---|---|
| >= 5 | 1 |
| 2.375 .. 5 | \|x\|/32 + 0.84375 |
| 1 .. 2.375 | \|x\|/8 + 0.625 |
| 0 .. 1 | \|x\|/4 + 0.5 |

For x < 0, y = 1 - y(\|x\|). The unit evaluates it in 24-bit fixed point.
Its error against the true sigmoid stays below 0.02.

## Where this departs from the reference

- **Own choices where the reference gives only the function.** The descriptor
  format and the phase sequence. The edge encoding. Buffer depths (the
  reference states only memory totals). The butterfly switch with one register
  and alternating priority. The activation applied as a separate sweep. The
  MTU as an in-place 16 x 16 tile transpose. Bias terms as flagged edges. The
  sigmoid segments (the reference uses a piecewise-linear sigmoid without
  giving the segments).
- **Write-back is one row per cycle.** It is not part of the reference's
  performance model, and here it dominates. On the 128 x 128 test image it is
  about two thirds of the 32k-cycle run. Wider write-back would need more
  Input Buffer write ports.
- **Not mapped: the element-wise products of the attention module.** Channel
  attention scales every vertex by a score vector F_ch, and spatial attention
  scales vertex i by alpha_i, both computed at run time. This datapath
  multiplies only by weights stored in the Weight/Edge Buffer, and the
  reference does not say how a computed value becomes a multiplier operand.
  The score computations themselves (an MLP, a GNN layer with sigmoid) and the
  final sum do run.
- **Not mapped: the flattening in front of the last MLP.** All vertex features
  are concatenated into one vector there. In the feature-major layout the 16
  lanes are 16 vertices, so a single sample's flattened vector would need one
  value per row. The reference gives no layout for it. The MLP's weight
  product itself is an ordinary update kernel.
- The host, its DMA and DRAM controller are outside. Their accesses are plain
  ports of `sar_gnn_accel`, usable while `busy` is low.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
The packages must come first on the command line:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fp32_pkg.sv rtl/sgp_pkg.sv tb/fp_ref_pkg.sv tb/gnn_e2e.sv \
    tb/tb_sar_gnn_accel.sv --top-module tb_sar_gnn_accel -o sim
./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_sigmoid_pla` | segment boundaries and random points in [-8, 8] against the PLAN formula and the true sigmoid |
| `tb_scatter_unit` | multiply, bypass and bias against exact FP32 products; backpressure; one edge per cycle |
| `tb_routing_network` | random traffic with and without backpressure: delivery, order and no loss; conflict-free patterns at full rate with log2 P latency |
| `tb_gather_unit` | accumulate and max against a per-step-rounded reference, first-write rule, ReLU and sigmoid sweeps |
| `tb_result_buffer`, `tb_input_buffer`, `tb_weight_edge_buffer` | port behaviour, clear, zero read of unwritten rows |
| `tb_mtu` | transposition with gaps and backpressure, 2Q cycles per tile |
| `tb_sgp_controller` | edge issue with passes and strides, empty lanes, stalls, sweep, both write-backs, cycle count |
| `tb_sar_gnn_accel` | whole accelerator on an 8 x 8 image (below) |
| `tb_sar_gnn_accel_full` | the same program on a 128 x 128 image, all sizes at their defaults, under a minute |

The end-to-end testbenches (`gnn_e2e.sv`) act as the host. They build the
pruned grid graph and random sparse weights, load the buffers, and run six
kernels:

1. GNN-layer aggregation;
2. GraphSAGE update with ReLU;
3. 2 x 2 max pooling;
4. a transposing copy;
5. aggregation on the pooled grid;
6. a sigmoid score kernel of the spatial-attention kind.

They then compare the scores, pooled features, hidden features and aggregates
against a model computed in double precision. They also count each mechanism
and fail if one never occurred:

- both kernel kinds and the switches between them;
- multiply and bypass scatter;
- accumulate and max gather;
- ReLU and sigmoid;
- bias edges;
- direct and MTU write-back;
- multi-pass kernels;
- routing conflicts and Scatter stalls;
- zero-padded partial tiles.

To change the machine, edit `P`, `Q` or the address widths in `sgp_pkg` and
the depth parameters of `sar_gnn_accel`. P must be a power of two. The MTU
and the feature-major conventions assume tiles of Q rows.
