# HP-GNN accelerator: scatter-gather aggregation and MAC-array update, one kernel pair per die

Training a graph neural network on sampled mini-batches is dominated by two
very different kinds of work. **Aggregation** is sparse and irregular: each
destination vertex sums the feature vectors of its sampled neighbours, scaled
by edge weights. **Update** is dense: every aggregated vector is multiplied by
a weight matrix, a bias is added and an activation is applied. This RTL
builds one engine for each, following the architecture of the HP-GNN
CPU-FPGA training framework:

* the **aggregate kernel** runs the scatter-gather scheme. Edges arrive sorted
  by source vertex, so each source feature is fetched once and shared by all
  edges that use it. Scatter PEs multiply the feature by the edge weight. A
  butterfly network routes each product to the gather PE that owns the
  destination, where it is added to an on-chip partial sum;
* the **update kernel** is a P x P multiply-accumulate array. It computes
  `h = sigma(a W + b)` for a tile of P vertices, one P-column block of `W` at
  a time;
* the top, `hpgnn_accel`, places one pair of kernels on each of the four dies
  of a multi-die FPGA. The destination vertices of a layer are split into four
  equal ranges, one per die.

The host CPU does the sampling, the loss, the weight update and the moving of
data. DDR, PCIe and the die-to-DDR interconnect sit between the host and the
kernels. None of these are part of this RTL: every stream a die uses is a
port of the top, indexed by die.

Default parameters (the values the original design reports for its Alveo
U250 build at 300 MHz): 4 dies, `N_PE = 4` scatter/gather PEs per aggregate
kernel, 16 feature words handled per PE per cycle, and `P = 16` (256 MACs)
per update kernel.

## Number format

All data are 32-bit signed **Q16.16 fixed point** (`hpgnn_pkg::data_t`). The
original design computes in FP32; fixed point keeps every multiplier and adder
a plain integer unit, which simulates exactly and synthesises anywhere.
`fx_mul` forms the 64-bit product and shifts it right by 16 (rounding toward
minus infinity). `fx_add` wraps on overflow. Results therefore match a
floating-point model only to about 2^-16 per product and within the Q16.16
range (+-32768). This is the largest departure from the original design.

A feature vector travels as 16-word slices (`vec_t`, 512 bits), matching the
16-wide inner loop of the original design's scatter and gather functions. A feature of `f` words takes
`ceil(f/16)` aggregation passes; see below.

## Aggregate kernel (`aggregate_kernel`)

### Data flow

```
 feat_* ──► feature_duplicator ──broadcast──► scatter_pe x N_PE ──► routing_network
 edge_*[i] ──► sync_fifo (lane i) ──────────────┘                      │ (butterfly)
                                                                        ▼
 wb_* ◄── write-back sweep ◄── gather_pe + agg_mem (bank i) ◄── raw_resolver  x N_PE
```

One pass aggregates **one 16-word slice** for every destination vertex in
`[cfg_dst_offset, cfg_dst_offset + cfg_num_dst)`:

    a[dst] += val * h[src]     for every edge (src, dst, val) of the pass

* **Edge lanes.** Each of the `N_PE` lanes has an edge FIFO (`LANE_FIFO = 16`
  entries). Within a lane, edges must be in non-decreasing source order. Any
  edge may go to any lane, so the host can simply deal them round-robin.
* **Feature duplicator.** It holds the current source feature and broadcasts
  it to every scatter PE. It moves to the next feature only when every lane
  has *passed* the current one. A lane has passed when its head edge has a
  different source, or when the lane is empty and the host has said there
  are no more edges. Features must arrive in increasing source order (an
  assertion checks this). A feature that no edge needs is skipped in one
  cycle.
* **Scatter PE.** When the head edge of its lane matches the broadcast
  source, the PE pops the edge and emits the update
  `(dst - dst_offset, val * feature)` on a registered output. The feature is
  loaded once and reused by every edge with that source. This is the
  memory-traffic saving of the scatter-gather scheme.
* **Routing network.** This is a log2(N_PE)-stage butterfly of 2x2 switches
  (`bfly_switch`). Stage `s` steers on bit `log2(N_PE)-1-s` of the local
  destination. Each switch output is a register with valid/ready. When both
  inputs want the same output, a per-output round-robin pointer picks the
  winner and the loser waits (a *conflict*). Updates leave on output
  `dst mod N_PE`, so bank `i` owns the local destinations `i, i+N_PE, ...`.
  The latency is log2(N_PE) cycles when there is no conflict.
* **RAW resolver.** The gather PE reads a partial sum, adds, and writes it
  back two cycles later. A second update to the same address inside that
  window would read a stale value. The resolver keeps the addresses of the
  last `HAZ_WIN = 2` accepted updates and holds back an update that matches
  one of them. The original design resolves these read-after-write hazards
  by stalling; this is that stall, done with an exact address compare.
* **Gather PE and bank.** This is a three-stage pipeline: read from
  `agg_mem`, add (`vec_add`), write. The bank is `DEPTH = 2048` entries of 16
  words, with a registered read port and one write port.

### Protocol and timing

1. After reset the kernel spends `DEPTH` cycles clearing its banks, with
   `busy` high.
2. `start` with `cfg_dst_offset` and `cfg_num_dst` (at most
   `N_PE * DEPTH` = 8192) begins a pass. The host then streams features on
   `feat_*` and edges on `edge_*[i]`, all valid/ready. After the last edge
   has been accepted, the host pulses `edges_done`.
3. Once all lanes are empty and the network and gather pipelines have
   drained, the kernel writes back every slot in index order on `wb_*`:
   `wb.dst` is the global vertex id and `wb.val` the 16-word sum. Each read
   also clears the slot, so the banks are zero for the next pass. Write-back
   runs at one vertex every two cycles and obeys `wb_ready`. `done` pulses
   when the last vertex has been accepted.

**Throughput.** Each scatter PE takes one edge per cycle while its source
matches, which is `N_PE x 16` multiply-adds per cycle per die. A change of
source costs one cycle. The aggregation time of a pass is therefore about
`max_lane_edges + sources + pipeline depth` cycles, plus
`2 x cfg_num_dst` cycles of write-back. The block testbench measures a pass
and checks it against such a bound.

## Update kernel (`update_kernel`)

```
 ib_wr_* ─► input_buffer ─ a_col (P words) ─┐
                                            ├─► mac_array (P x P mac_unit, sigma) ─► result_buffer ─► out_*
 wt_wr_* ─► weight_buffer ─ w_row, bias ────┘
```

* **Input buffer.** This holds one tile of up to `P` vertices, each with up to
  `MAX_FIN = 1280` words, written as 16-word slices at `(row, kblk)`. Row `r`
  has its own memory. A read of feature index `k` returns word `k` of every
  row, which is one column of the tile. For GraphSAGE the host writes `h_v`
  into the first slices and the neighbour mean after it, so the buffer holds
  the concatenation `h_v || mean`.
* **Weight buffer.** This holds `W` (`f_in x f_out`, `f_out <= MAX_FOUT = 256`)
  as rows of P-column blocks at address `k * (MAX_FOUT/P) + cb`, plus one bias row per
  block (written with `wt_wr_bias`).
* **MAC array.** Cell `(r, c)` accumulates `a[r][k] * W[k][c]` over `k`. Row
  `r` shares the input word; column `c` shares the weight and the bias. At
  the first `k` the bias is taken in place of the accumulator. At the last
  `k`, sigma is applied: ReLU or identity, chosen per run by `cfg_act`.
  Operands are broadcast in the same cycle to the whole row or column,
  rather than skewed through the array.
* **Result buffer.** It captures the whole P x P block in one cycle. It then
  sends it out one vertex row per handshake (`out_row`, `out_cb`,
  `out_data`), while the array already works on the next column block. The
  next block can be captured only once the buffer is empty. Until then, the
  kernel holds the last `k` of the next block.

**Protocol.** Fill the buffers while the kernel is idle (an assertion checks
this). Then pulse `start` with `cfg_fin` (1..MAX_FIN), `cfg_fout` (a multiple
of P), `cfg_rows` (1..P) and `cfg_act`. Outputs appear block by block and row
by row. `done` pulses after the last row.

**Timing.** Buffer reads are registered, so control is delayed one cycle to
line up with the data. A tile takes about `ceil(f_out/P) x f_in + 8` cycles
when `out_ready` keeps up, which is `P x P` MACs per cycle. This matches the
original design's model `t = |B| f_in f_out / (m freq)` with `m = P^2`.

## Top (`hpgnn_accel`)

The top has `NUM_DIES` copies of the pair, with no logic between them. A
layer runs as follows:

1. The host splits the layer's destination vertices into `NUM_DIES` ranges
   and sends each die its range's edges.
2. Each die aggregates its range slice by slice. The host stores the
   write-back in DDR.
3. The host loads tiles of the results into each die's update kernel,
   together with `W` and `b`, and collects `h`.

Every port of a kernel appears on the top as an unpacked array indexed by
die. `agg_edge` is indexed `[die][lane]`.

**Capacity at default parameters.** Each die holds 8192 destination slices.
Across the four dies that is 32768 destinations per pass. With the
neighbour-sampling setting of the original evaluation (1024 targets, 25 then
10 neighbours), the widest layer has 25600 destinations and so fits in one
sweep per slice. Input widths up to 1280 cover GraphSAGE's concatenated
input for the 602-wide Reddit features. Output widths up to 256 cover the
hidden size used there. On-chip storage after synthesis is about 61 Mbit of
memory, mostly the weight buffers.

## Departures from the original design

* Q16.16 fixed point instead of FP32 (see above).
* The scatter and gather functions are fixed: multiply by the edge weight,
  then add. Sigma is fixed to ReLU or identity. The original framework
  generates these from user-defined functions; this RTL does not.
* The original design does not describe how its kernels are sequenced. In
  this RTL, one aggregation pass handles one 16-word slice, and write-back
  clears the banks. The host signals the end of edges with `edges_done`.
* The MAC array broadcasts its operands instead of passing them through a
  systolic skew. The arithmetic and the rate are the same, but wires are
  longer at large P.
* The update kernel has one tile buffer, with no double buffering. The host
  loads the next tile while the kernel is idle.
* The bias lives in the weight buffer. The bias, ReLU and identity modes
  cover the forward pass. Back-propagation-specific operators, such as the
  ReLU derivative, are not built.
* Not built: the host program, DDR, PCIe, the vendor interconnect, and the
  design-space-exploration and code generators.

## Files

`rtl/` has one module or package per file:

* `hpgnn_pkg`: types and fixed-point functions
* aggregation: `sync_fifo`, `feature_duplicator`, `scatter_pe`,
  `bfly_switch`, `routing_network`, `raw_resolver`, `agg_mem`, `gather_pe`,
  `aggregate_kernel`
* update: `input_buffer`, `weight_buffer`, `mac_unit`, `mac_array`,
  `result_buffer`, `update_kernel`
* top: `hpgnn_accel`

Each file opens with a description of its interface and timing. Resets are
synchronous and active low (`rst_n`). Memories are not reset.

`tb/` has one self-checking testbench per module, `tb_<module>`. Each drives
random traffic and back-pressure against a reference model. Each ends by
printing `TB_RESULT checks=N failures=M` and has a watchdog. Several also
count how often each mechanism happened, and treat a mechanism that never
happened as a failure. Those mechanisms are RAW stalls, routing conflicts,
feature reuse, FIFO back-pressure, write-back back-pressure and
result-buffer holds.

`tb_hpgnn_accel` runs the top at its default size. All four dies aggregate a
random 64-vertex mean-aggregation layer in parallel. The results then go
through the update kernels as a GraphSAGE layer (`f_in = 32`, `f_out = 32`,
ReLU), followed by a second run in identity mode. Every word is compared
against a reference model.

### Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    -Irtl -Itb rtl/hpgnn_pkg.sv tb/tb_aggregate_kernel.sv --top-module tb_aggregate_kernel
./obj_dir/Vtb_aggregate_kernel
```

Replace the module name to run another testbench. The full-size top
testbench builds in well under a minute and runs in a fraction of a second.
To change sizes, override the parameters of the top: `NUM_DIES`, `N_PE` (a
power of two), `DEPTH`, `P`, `MAX_FIN`, `MAX_FOUT` (a multiple of `P`).
