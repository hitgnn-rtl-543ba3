# HitGNN accelerator: per-FPGA GNN training datapath in SystemVerilog

Mini-batch training of a graph neural network (GNN) spends most of its time
in two steps per layer. *Aggregation* sums the features of each vertex's
sampled neighbours. *Update* multiplies each sum by the layer's weight matrix
and applies a nonlinearity. HitGNN spreads this work over a CPU and several
FPGAs. The host CPU samples mini-batches, schedules them onto FPGAs, averages
gradients and keeps the graph. Each FPGA runs one accelerator with an
aggregate kernel and an update kernel, fed from its own DDR memory. Features
that are not in that DDR come from the host over PCIe, never from another
FPGA.

This repository holds the RTL of that per-FPGA accelerator (`hitgnn_accel`)
for one GNN layer computation:

    h_v = sigma( ( sum over sampled edges (u,v) of c_uv * h_u ) * W )

It also holds the weight store and the weight update applied after the host
has averaged the gradients. The default size is the configuration picked by
the original design-space exploration for one FPGA die:

- n = 8 scatter/gather processing elements in the aggregate kernel;
- m = 2048 multiply-accumulate units in the update kernel (a 16 x 128 array);
- 512-bit data paths, which carry 16 lanes of 32 bits.

Host software is not part of the RTL. That covers the sampler, the two-stage
task scheduler, graph partitioning, gradient averaging, the design-space
exploration, and the loss and back-propagation. The DDR and PCIe controllers
are vendor IP and are not part of it either. They appear as ports, and the
testbenches model them.

## One layer, slice by slice

A feature vector is generally wider than the 16 lanes of the bus. The Reddit
input features, for example, have 602 values. The accelerator therefore works
on **slices** of 16 features. A layer with `f_in` input features takes
`num_slices = ceil(f_in/16)` *passes*. In pass k:

1. the mini-batch reader (outside this RTL) streams the layer's source-vertex
   list and the edge groups once;
2. the feature loader fetches slice k of every source vertex;
3. the aggregate kernel sums slice k of every destination vertex into one of
   two result banks;
4. the update kernel takes the finished bank vertex by vertex and multiplies
   slice k by rows 16k..16k+15 of W, adding into per-vertex partial results.

After the last pass the update kernel's accumulators hold `a_v * W`. The
layer's outputs stream out with ReLU and a column mask applied. Cutting W
into 16-row strips this way means the array never needs the whole aggregated
vector at once. Vertex memories therefore stay 512 bits wide whatever `f_in`
is.

### Overlap of aggregation and update

The gather memories are doubled (two banks). Slice k is accumulated into bank
k mod 2. While the aggregate kernel sums slice k+1 into one bank, the update
kernel drains slice k from the other. The drain is a read-and-clear, so a
bank is zero again once the update has passed over it. `layer_controller`
runs the two sides as two state machines that pass tokens through a pair of
"bank full" flags:

- aggregation: clear every word once at layer start, then for each slice:
  wait for a free bank, pulse `pass_start`, count `src_done` up to `num_src`,
  wait until the kernels are empty, mark the bank full;
- update: for each slice: wait for a full bank and an empty array, load 16
  weight rows (16 cycles), stream `num_dst` vertices (one per cycle), mark
  the bank free. After the last slice, wait for the array to drain, then
  stream the outputs.

A slice then costs about max(aggregation time, update time), which is the
pipelining the performance model of the original design assumes. The
`ev_overlap` output is high in every cycle in which both sides work.

## Where features come from

`feature_loader` takes one `vtx_entry_t {vid, local_hit, row}` per source
vertex.

- When `local_hit` is set, the host has stored this vertex's feature in the
  FPGA's DDR. Slice k is the 512-bit word at `row + k`.
- Otherwise the loader sends `{vid, slice}` to the host port. The host
  answers with the slice.

Requests go out at up to one per cycle on whichever port is due. Each port
has its own response FIFO and credit counter, and the number of requests in
flight never exceeds the FIFO depth. A 1-bit order FIFO records which port
every request used. Slices therefore leave in vertex order even though the
two ports have different latencies. Both ports must answer in the order they
were asked. `ev_local_fetch` and `ev_remote_fetch` count the two cases. The
ratio between them is what the host's feature-placement strategy (PaGraph,
P3, DistDGL) decides.

## The aggregate kernel

    feature slice --> feature duplicator --> N scatter PEs --> butterfly --> N gather PEs <-> 2 banks each
    edge group  ----^ (one edge per PE)

- **Feature duplicator.** An edge group has up to N edges of the current
  source vertex (`grp_edge`, `grp_mask`, and `grp_last` on the source's last
  group). The duplicator hands the source's slice plus one edge to every
  enabled scatter PE. It fires only when all of them can take it. The slice
  is released after the last group, and then `src_done` pulses. A vertex
  with no out-edges is sent as one group with an empty mask.
- **Scatter PE.** Computes the 16 products `c_uv * h_u[j]` and registers
  them with the destination index. One update per cycle, latency 1.
- **Routing network.** A butterfly of log2(N) stages of 2x2 switches
  (`route_switch`). Stage s steers on bit s of the destination index, so an
  update reaches gather PE `dst mod N` after log2(N) register stages. Each
  switch output is a one-entry register with valid/ready. When both inputs
  want the same output, one is granted, the other waits, and `conflict`
  pulses. The grant alternates so that neither input starves. Stalls
  propagate back to the scatter PEs and the duplicator. Nothing is dropped.
- **Gather PE.** Owns destinations `v` with `v mod N = j`, at word `v / N` of
  its two banks (`agg_bank`: write-synchronous, read-combinational, 512 bits
  wide). An incoming update is read, added and written back in the same
  cycle, so one update per cycle per PE with no read-after-write hazard. The
  drain port reads a word of the other bank and clears it in the same cycle.
  `clr_en` zeroes one word of both banks; the controller uses it once per
  layer.

Peak rate: N edges x 16 features per cycle. Every update needs its own
network path, so edge groups whose destinations collide in the butterfly
take more than one cycle.

## The update kernel: a weight-stationary systolic array

`update_kernel` is a grid of SIMD x COLS = 16 x 128 PEs. PE (r,c) holds
W[16k+r][c] for the current slice k. The slice of one vertex enters row r
after r cycles of skew. Activations move one column right per cycle and
partial sums move one row down per cycle. The bottom of column c gives
`sum_r a[16k+r]*W[16k+r][c]` SIMD + c cycles after the vertex entered.

A tag pipeline carries `{valid, vertex index, first}` alongside the data.
Each column has its own accumulator memory (MAX_DST words). When the sum for
vertex v reaches the bottom of column c, that memory adds it to word v, or
overwrites word v on slice 0. After the last slice, word v of column c holds
output c of vertex v.

Timing:

- The array takes one vertex slice per cycle.
- After the last vertex of a slice enters, `busy` stays high for
  SIMD + COLS - 1 cycles (143 at the default size). The testbench checks
  this number.
- Weights are loaded one 16 x 128 row strip at a time, one PE row per cycle,
  and only while the array is empty. The controller loads rows at and beyond
  `f_in` as zeros, so a partly filled last slice adds nothing.

The output port reads vertex `rd_vidx` combinationally. It sets negative
values to zero when `relu` is set, and forces columns at and beyond `f_out`
to zero. The array can thus serve any output width up to 128: 128 hidden
features, or the 41 to 107 classes of the evaluation datasets.

## Weights and the weight update

`weight_buffer` holds W of every layer as rows of COLS words, 1024 rows by
default. The two layers of a 602-128-41 model use 602 + 128 = 730 rows. A
layer finds its matrix at `cfg.w_base`.

The host writes rows through `w_wr_*`. After every synchronous SGD iteration
it sends the averaged gradient row by row (`grad_*`). `weight_update`
computes `W[row] -= grad >>> lr_shift` in a single cycle. The learning rate
is a power of two. Gradient rows and host writes are refused while a layer
runs (`grad_ready` low), so the weights of a running layer never change.
`ev_weight_update` pulses once per updated row.

## Number format

The original kernels use 32-bit floating point. This RTL uses 32-bit
two's-complement fixed point with 16 fraction bits (Q16.16) in the same
lanes:

- a product is the 64-bit product shifted right by 16 and truncated;
- sums wrap at 32 bits.

This choice keeps the lane count (512/32 = 16) and the memory sizes
unchanged. It also makes accumulation exact and independent of order, which
matters because the routing network reorders updates. The testbenches rely
on that: they compare every output bit-exactly against a reference model.
Moving to floating point would mean replacing `fx_mul`, `fvec_add` and the
adders in `update_kernel`. The adders would then need pipelining, and the
gather PE's single-cycle read-add-write would need forwarding.

## Top-level interface (`hitgnn_accel`)

| group | signals | protocol |
|---|---|---|
| control | `cfg` (`layer_cfg_t`), `start`, `busy`, `done` | `start` for one cycle; `cfg` held until `done` |
| mini-batch reader | `pass_start`, `pass_slice`, `vtx_*`, `grp_*` | on each `pass_start`, stream `num_src` vertices and all edge groups (valid/ready) |
| local DDR | `ddr_req_*`, `ddr_resp_*` | one 512-bit read per request, answered in order |
| host (PCIe) | `host_req_*` (`{vid, slice}`), `host_resp_*` | same, for features not held locally |
| layer output | `out_valid`, `out_vidx`, `out_vec`, `out_ready` | vertices 0..`num_dst`-1 in order, COLS words each |
| weights | `w_wr_*`, `grad_*`, `lr_shift` | only while `busy` is low |
| events | `ev_local_fetch`, `ev_remote_fetch`, `ev_conflict`, `ev_overlap`, `ev_weight_update` | one-cycle pulses for counters |

`layer_cfg_t` holds:

- `num_src`: sources streamed per pass;
- `num_dst`: destination vertices, at most MAX_DST;
- `num_slices`;
- `f_in`, `f_out`;
- `w_base`;
- `relu`.

Destination indices in the edge groups are local to the layer (0..num_dst-1).
All resets are synchronous and active low.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | scatter PEs, gather PEs, butterfly width (power of two) |
| `COLS` | 128 | systolic array columns; 16 x 128 = 2048 MACs |
| `MAX_DST` | 16384 | destination vertices per layer |
| `W_ROWS` | 1024 | weight rows |
| `FIFO_DEPTH` | 16 | feature-loader requests in flight per port |
| `SIMD` (package) | 16 | lanes per 512-bit word |

The design-space exploration fixes N and the MAC count. The original design
does not state the rest. They are sized for its evaluation setup: two
layers, 1024 target vertices per mini-batch, fanouts 25 and 10, hidden size
128. Layer 1 then has at most 1024 x 11 = 11,264 destinations, which fits
in 16,384. The widest input, 602 features, is 38 slices, against a limit of
64. All four evaluation graphs fit:

| graph | vertices | edges | features (in/hidden/out) |
|---|---|---|---|
| Reddit | 232,965 | 23.2 M | 602/128/41 |
| Yelp | 716,847 | 14.0 M | 300/128/100 |
| Amazon | 1,569,960 | 264 M | 200/128/107 |
| ogbn-products | 2,449,029 | 61.9 M | 100/128/47 |

The fit depends on one assumption: GraphSAGE is run in the
one-matrix-per-layer form, with the vertex itself sent as an extra edge. A
concatenating GraphSAGE on Reddit would need 1,332 weight rows.

## Departures and limits

- Q16.16 fixed point instead of fp32 (see above).
- The aggregation function is a weighted sum. Mean aggregation is a weighted
  sum with `c_uv = 1/deg(v)`, computed by the host. Max-pooling aggregators
  are not supported.
- ReLU is the only nonlinearity.
- Backward propagation and the loss are not implemented. The original design
  says only that backward propagation runs the same kernels in reverse
  order. The weight update takes finished gradient rows from the host.
- Destination indices arrive already local to the layer. The original
  generated code subtracts a layer offset from global indices inside the
  accumulation loop. Here the host does that subtraction when it writes the
  edge groups.
- The partition of one layer's work into edge groups, and the order of the
  vertex list, are left to the host. They must follow the conventions above:
  one or more groups per source, in the same order as the vertex list.
- The butterfly can block internally: two updates with different
  destinations can still meet at a switch. The resulting stalls are counted
  as conflicts. A design with more buffering per switch could reduce them.

## Verifying and simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.
Each testbench computes its expected values on its own, with the same
fixed-point rules. The main ones:

- `tb_update_kernel` compares a three-slice matrix product and checks the
  SIMD + COLS - 1 drain latency;
- `tb_routing_network` checks that every update arrives exactly once at the
  right PE;
- `tb_layer_controller` checks the full pass/bank/weight-load protocol
  against stub kernels;
- `tb_hitgnn_accel` runs two layers end to end at reduced size (N = 4, 8
  columns), with a gradient step between them. It also requires each
  mechanism to occur at least once: local and host fetch, routing conflict,
  overlap, weight-row update, ReLU clipping, column masking, zero-padded
  weight rows, and output backpressure;
- `tb_hitgnn_accel_full` runs with every parameter at its default. It
  first repeats the small two-layer test. It then runs the output layer of
  the evaluated 2-layer models at real size, once per graph: 1024 targets,
  each with 10 sampled neighbours and a self edge (4096 distinct sources,
  11,264 edges), and 128 input features. The output widths are 41, 100, 107
  and 47. Each of these layers takes about 55,000 cycles, or 0.18 ms at
  300 MHz. The compute bound is 8 slices x 4096 sources = 32,768 cycles. The
  difference comes from the test's random gaps in the input streams, its
  DDR and host latencies, and routing conflicts.

The input layers of the evaluated models were not simulated. Reddit's has
602 features and up to about 290,000 sources, so a single layer would take
some 11 million cycles.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/hitgnn_pkg.sv \
        tb/tb_hitgnn_accel.sv --top-module tb_hitgnn_accel -Mdir obj
    obj/Vtb_hitgnn_accel

The reduced end-to-end test builds and runs in under a minute. The
full-size one takes about five minutes to compile and a few seconds to run.
