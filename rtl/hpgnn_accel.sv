// hpgnn_accel -- GNN training accelerator: NUM_DIES copies of an aggregate
// kernel and an update kernel, one pair per die.
//
// Large FPGAs are built from several dies with few wires between them, so
// every die gets its own kernel pair, and a layer's destination vertices are
// split into NUM_DIES equal ranges, one per pair (the host gives each
// aggregate kernel its range with cfg_dst_offset / cfg_num_dst and each
// update kernel the matching tiles). The kernels exchange data only through
// the board's DDR channels: aggregation results are written back
// (agg_wb_*) and later read into the update kernel's input buffer
// (upd_ib_*). The DDR channels, the all-to-all interconnect between dies and
// channels, and the PCIe link from the host are outside this module; each
// die's streams are ports, indexed by die. Per die the ports are those of
// aggregate_kernel (prefix agg_) and update_kernel (prefix upd_), see there
// for protocol and timing. Partitioning and kernel replication follow the
// original design; the port-level split is this design's choice.
module hpgnn_accel
  import hpgnn_pkg::*;
#(
  parameter int unsigned NUM_DIES  = 4,
  parameter int unsigned N_PE      = 4,
  parameter int unsigned DEPTH     = 2048,
  parameter int unsigned P         = 16,
  parameter int unsigned MAX_FIN   = 1280,
  parameter int unsigned MAX_FOUT  = 256,
  localparam int unsigned NCB  = MAX_FOUT / P,
  localparam int unsigned KB   = (MAX_FIN + VEC - 1) / VEC,
  localparam int unsigned RW   = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned KBW  = (KB > 1) ? $clog2(KB) : 1,
  localparam int unsigned KW   = $clog2(MAX_FIN + 1),
  localparam int unsigned CBW  = (NCB > 1) ? $clog2(NCB) : 1,
  localparam int unsigned WAW  = $clog2(MAX_FIN * NCB),
  localparam int unsigned FOW  = $clog2(MAX_FOUT + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // ---- aggregate kernels ----
  input  logic            agg_start        [NUM_DIES],
  input  vid_t            agg_dst_offset   [NUM_DIES],
  input  vid_t            agg_num_dst      [NUM_DIES],
  input  logic            agg_feat_valid   [NUM_DIES],
  input  feat_t           agg_feat         [NUM_DIES],
  output logic            agg_feat_ready   [NUM_DIES],
  input  logic            agg_edge_valid   [NUM_DIES][N_PE],
  input  edge_t           agg_edge         [NUM_DIES][N_PE],
  output logic            agg_edge_ready   [NUM_DIES][N_PE],
  input  logic            agg_edges_done   [NUM_DIES],
  output logic            agg_wb_valid     [NUM_DIES],
  output upd_t            agg_wb           [NUM_DIES],
  input  logic            agg_wb_ready     [NUM_DIES],
  output logic            agg_busy         [NUM_DIES],
  output logic            agg_done         [NUM_DIES],
  // ---- update kernels ----
  input  logic            upd_ib_wr_en     [NUM_DIES],
  input  logic [RW-1:0]   upd_ib_wr_row    [NUM_DIES],
  input  logic [KBW-1:0]  upd_ib_wr_kblk   [NUM_DIES],
  input  vec_t            upd_ib_wr_data   [NUM_DIES],
  input  logic            upd_wt_wr_en     [NUM_DIES],
  input  logic            upd_wt_wr_bias   [NUM_DIES],
  input  logic [WAW-1:0]  upd_wt_wr_addr   [NUM_DIES],
  input  data_t [P-1:0]   upd_wt_wr_data   [NUM_DIES],
  input  logic            upd_start        [NUM_DIES],
  input  logic [KW-1:0]   upd_fin          [NUM_DIES],
  input  logic [FOW-1:0]  upd_fout         [NUM_DIES],
  input  logic [RW:0]     upd_rows         [NUM_DIES],
  input  act_e            upd_act          [NUM_DIES],
  output logic            upd_out_valid    [NUM_DIES],
  output logic [RW-1:0]   upd_out_row      [NUM_DIES],
  output logic [CBW-1:0]  upd_out_cb       [NUM_DIES],
  output data_t [P-1:0]   upd_out_data     [NUM_DIES],
  input  logic            upd_out_ready    [NUM_DIES],
  output logic            upd_busy         [NUM_DIES],
  output logic            upd_done         [NUM_DIES]
);
  for (genvar d = 0; d < NUM_DIES; d++) begin : g_die
    aggregate_kernel #(.N_PE(N_PE), .DEPTH(DEPTH)) u_agg (
      .clk, .rst_n,
      .start(agg_start[d]), .cfg_dst_offset(agg_dst_offset[d]), .cfg_num_dst(agg_num_dst[d]),
      .feat_valid(agg_feat_valid[d]), .feat(agg_feat[d]), .feat_ready(agg_feat_ready[d]),
      .edge_valid(agg_edge_valid[d]), .edge_in(agg_edge[d]), .edge_ready(agg_edge_ready[d]),
      .edges_done(agg_edges_done[d]),
      .wb_valid(agg_wb_valid[d]), .wb(agg_wb[d]), .wb_ready(agg_wb_ready[d]),
      .busy(agg_busy[d]), .done(agg_done[d])
    );

    update_kernel #(.P(P), .MAX_FIN(MAX_FIN), .MAX_FOUT(MAX_FOUT)) u_upd (
      .clk, .rst_n,
      .ib_wr_en(upd_ib_wr_en[d]), .ib_wr_row(upd_ib_wr_row[d]),
      .ib_wr_kblk(upd_ib_wr_kblk[d]), .ib_wr_data(upd_ib_wr_data[d]),
      .wt_wr_en(upd_wt_wr_en[d]), .wt_wr_bias(upd_wt_wr_bias[d]),
      .wt_wr_addr(upd_wt_wr_addr[d]), .wt_wr_data(upd_wt_wr_data[d]),
      .start(upd_start[d]), .cfg_fin(upd_fin[d]), .cfg_fout(upd_fout[d]),
      .cfg_rows(upd_rows[d]), .cfg_act(upd_act[d]),
      .out_valid(upd_out_valid[d]), .out_row(upd_out_row[d]), .out_cb(upd_out_cb[d]),
      .out_data(upd_out_data[d]), .out_ready(upd_out_ready[d]),
      .busy(upd_busy[d]), .done(upd_done[d])
    );
  end
endmodule
