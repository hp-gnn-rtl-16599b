// aggregate_kernel -- scatter-gather feature aggregation for one die.
//
// One pass aggregates one 16-word slice of the feature of every destination
// vertex in [dst_offset, dst_offset + num_dst) that this kernel owns:
//   a[dst] = sum over edges (src, dst, val) of val * h[src].
// Structure: N_PE edge lanes, each a FIFO feeding a scatter PE; a feature
// duplicator broadcasting the current source feature to all scatter PEs;
// a butterfly routing network delivering each update to the gather PE of
// bank dst mod N_PE; one RAW resolver and one gather PE (with its on-chip
// bank) per lane. This arrangement follows the original design.
//
// Protocol (controller states are this design's choice):
//  * After reset the kernel clears its banks (DEPTH cycles, busy high).
//  * start (with cfg_dst_offset, cfg_num_dst; num_dst <= N_PE*DEPTH) begins a
//    pass. The host then streams features in increasing source order on
//    feat_* and edges, sorted by source, on the N_PE edge lanes (any edge may
//    go to any lane), and raises edges_done (a pulse suffices) after the last
//    edge has been handed over.
//  * Once all lanes are empty and the pipelines drained, the kernel writes
//    back every destination slice in index order on wb_* (dst is the global
//    vertex index), one every two cycles, clearing the banks as it reads.
//    done pulses when the last one is accepted. Features still unsent at that
//    point are not needed and must not be sent.
// Throughput: each scatter PE takes one edge per cycle while its source
// matches, i.e. N_PE x 16 multiply-adds per cycle.
// Lint notes: cur_src, rn_conflicts and raw_stall are observation points
// (current source, routing conflicts, RAW stalls per lane) kept for
// monitoring; no logic reads them, so a linter reports them unused.
module aggregate_kernel
  import hpgnn_pkg::*;
#(
  parameter int unsigned N_PE      = 4,
  parameter int unsigned DEPTH     = 2048,
  parameter int unsigned LANE_FIFO = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  vid_t  cfg_dst_offset,
  input  vid_t  cfg_num_dst,
  // feature stream from local memory
  input  logic  feat_valid,
  input  feat_t feat,
  output logic  feat_ready,
  // edge lanes from the host
  input  logic  edge_valid [N_PE],
  input  edge_t edge_in    [N_PE],
  output logic  edge_ready [N_PE],
  input  logic  edges_done,
  // write-back stream to local memory
  output logic  wb_valid,
  output upd_t  wb,
  input  logic  wb_ready,
  output logic  busy,
  output logic  done
);
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LOGN = (N_PE > 1) ? $clog2(N_PE) : 0;

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_RUN, S_WB} state_e;
  state_e state;

  vid_t          dst_offset, num_dst;
  logic          edges_done_q;
  logic [AW-1:0] clr_addr;
  vid_t          rd_idx, sent;
  logic          rd_pend;
  localparam int unsigned BNK_W = (LOGN > 0) ? LOGN : 1;
  logic [BNK_W-1:0] rd_bank_q;

  // ---- edge lanes and scatter PEs -----------------------------------------
  logic  lane_empty [N_PE];
  logic  lane_full  [N_PE];
  edge_t lane_head  [N_PE];
  logic  lane_pop   [N_PE];
  logic  [N_PE-1:0] lane_passed;
  logic  cur_valid, bcast_load;
  vid_t  cur_src;
  feat_t bcast_feat;
  logic  run;

  logic  sc_valid [N_PE];
  upd_t  sc_upd   [N_PE];
  logic  sc_ready [N_PE];

  assign run = (state == S_RUN);

  feature_duplicator #(.N_PE(N_PE)) u_dup (
    .clk, .rst_n, .run, .flush(start && state == S_IDLE),
    .feat_valid, .feat, .feat_ready,
    .lane_passed, .cur_valid, .cur_src, .bcast_load, .bcast_feat
  );

  for (genvar i = 0; i < N_PE; i++) begin : g_lane
    sync_fifo #(.WIDTH($bits(edge_t)), .DEPTH(LANE_FIFO)) u_fifo (
      .clk, .rst_n,
      .push(edge_valid[i] && edge_ready[i]), .din(edge_in[i]), .full(lane_full[i]),
      .pop(lane_pop[i]), .dout(lane_head[i]), .empty(lane_empty[i])
    );
    assign edge_ready[i] = !lane_full[i];

    scatter_pe u_sc (
      .clk, .rst_n, .dst_offset,
      .load(bcast_load), .feat_in(bcast_feat), .feat_valid(cur_valid),
      .edge_valid(run && !lane_empty[i]), .edge_in(lane_head[i]),
      .edge_pop(lane_pop[i]), .lane_done(edges_done_q),
      .passed(lane_passed[i]),
      .upd_valid(sc_valid[i]), .upd(sc_upd[i]), .upd_ready(sc_ready[i])
    );
  end

  // ---- routing network ------------------------------------------------------
  logic rn_valid [N_PE];
  upd_t rn_upd   [N_PE];
  logic rn_ready [N_PE];
  logic rn_busy;
  logic [$clog2(N_PE*N_PE+1)-1:0] rn_conflicts;

  routing_network #(.N_PE(N_PE)) u_net (
    .clk, .rst_n,
    .in_valid(sc_valid), .in_upd(sc_upd), .in_ready(sc_ready),
    .out_valid(rn_valid), .out_upd(rn_upd), .out_ready(rn_ready),
    .busy(rn_busy), .conflicts(rn_conflicts)
  );

  // ---- RAW resolvers and gather PEs ---------------------------------------
  logic          g_valid [N_PE];
  upd_t          g_upd   [N_PE];
  logic          g_busy  [N_PE];
  logic          raw_stall [N_PE];
  vec_t          g_rdata [N_PE];
  logic          g_rd_en [N_PE];
  logic [AW-1:0] rd_addr;

  for (genvar i = 0; i < N_PE; i++) begin : g_gather
    raw_resolver #(.HAZ_WIN(2)) u_raw (
      .clk, .rst_n,
      .in_valid(rn_valid[i]), .in_upd(rn_upd[i]), .in_ready(rn_ready[i]),
      .out_valid(g_valid[i]), .out_upd(g_upd[i]), .out_ready(1'b1),
      .stall(raw_stall[i])
    );
    gather_pe #(.N_PE(N_PE), .BANK(i), .DEPTH(DEPTH)) u_ga (
      .clk, .rst_n,
      .upd_valid(g_valid[i]), .upd(g_upd[i]),
      .rd_en(g_rd_en[i]), .rd_addr(rd_addr), .rd_data(g_rdata[i]),
      .clr_en(state == S_INIT), .clr_addr(clr_addr),
      .busy(g_busy[i])
    );
  end

  // ---- controller -----------------------------------------------------------
  logic lanes_idle, pipe_idle, rd_issue, rd_last;

  always_comb begin
    lanes_idle = edges_done_q;
    pipe_idle  = !rn_busy;
    for (int i = 0; i < N_PE; i++) begin
      lanes_idle &= lane_empty[i];
      pipe_idle  &= !sc_valid[i] && !g_busy[i] && !rn_valid[i];
    end
    rd_issue = (state == S_WB) && (rd_idx < num_dst) && !rd_pend && (!wb_valid || wb_ready);
    rd_addr  = AW'(rd_idx >> LOGN);
    for (int i = 0; i < N_PE; i++)
      g_rd_en[i] = rd_issue && ((rd_idx % N_PE) == i);
    rd_last  = wb_valid && wb_ready && (sent + 1 == num_dst);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_INIT;
      clr_addr     <= '0;
      dst_offset   <= '0;
      num_dst      <= '0;
      edges_done_q <= 1'b0;
      rd_idx       <= '0;
      sent         <= '0;
      rd_pend      <= 1'b0;
      rd_bank_q    <= '0;
      wb_valid     <= 1'b0;
      wb           <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_INIT: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == AW'(DEPTH - 1)) state <= S_IDLE;
        end
        S_IDLE: if (start) begin
          dst_offset   <= cfg_dst_offset;
          num_dst      <= cfg_num_dst;
          edges_done_q <= 1'b0;
          rd_idx       <= '0;
          sent         <= '0;
          state        <= S_RUN;
        end
        S_RUN: begin
          if (edges_done) edges_done_q <= 1'b1;
          if (lanes_idle && pipe_idle) state <= (num_dst == 0) ? S_IDLE : S_WB;
          if (lanes_idle && pipe_idle && num_dst == 0) done <= 1'b1;
        end
        S_WB: begin
          if (rd_issue) begin
            rd_idx    <= rd_idx + 1'b1;
            rd_bank_q <= BNK_W'(rd_idx % N_PE);
            wb.dst    <= dst_offset + rd_idx;
          end
          rd_pend <= rd_issue;
          if (rd_pend) begin
            wb_valid <= 1'b1;
            wb.val   <= g_rdata[rd_bank_q];
          end else if (wb_valid && wb_ready) begin
            wb_valid <= 1'b0;
          end
          if (wb_valid && wb_ready) sent <= sent + 1'b1;
          if (rd_last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_capacity: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (cfg_num_dst <= N_PE * DEPTH));
  a_wb_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (wb_valid && !wb_ready) |=> (wb_valid && $stable(wb)));
endmodule
