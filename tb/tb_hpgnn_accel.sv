// tb_hpgnn_accel -- end-to-end run of one GraphSAGE layer on the full
// accelerator, every parameter at its default (4 dies, 4 scatter/gather PEs
// per die, 16 x 16 MACs per die).
//
// Workload: 64 source vertices with 16-word features, 64 destination vertices
// (destination v is also source v), random sampled edges with weight
// 1/in-degree (mean aggregation), partitioned by destination into four
// ranges of 16, one per die. Each die
//   1. aggregates its range (features streamed in source order, edges sorted
//      by source over its 4 lanes, the features held back at first so that
//      the edge FIFOs fill), writing the means back to a local-memory model;
//   2. loads the tile h_v || mean(v) (f_in = 32) into its update kernel with
//      W (32 x 32) and b, runs it with ReLU and checks h = ReLU(a W + b);
// then die 0 reruns the tile with the identity operator (mode switch).
// All results are compared with a real-arithmetic reference. The run counts
// each mechanism and fails if one never happened: RAW stalls, routing
// conflicts, feature reuse by several edges, features passed with no edge in
// a lane, edge FIFO back-pressure, write-back back-pressure, result-buffer
// holds, ReLU clipping and the identity mode.
module tb_hpgnn_accel;
  import hpgnn_pkg::*;
  localparam int ND = 4, N = 4, P = 16, MFIN = 1280, MFOUT = 256, NCB = MFOUT / P;
  localparam int NSRC = 64, NDST = 64, PER = NDST / ND, NE = 320, FIN = 32, FOUT = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  agg_start [ND];
  vid_t  agg_dst_offset [ND], agg_num_dst [ND];
  logic  agg_feat_valid [ND], agg_feat_ready [ND];
  feat_t agg_feat [ND];
  logic  agg_edge_valid [ND][N], agg_edge_ready [ND][N];
  edge_t agg_edge [ND][N];
  logic  agg_edges_done [ND];
  logic  agg_wb_valid [ND], agg_wb_ready [ND], agg_busy [ND], agg_done [ND];
  upd_t  agg_wb [ND];
  logic  upd_ib_wr_en [ND];
  logic [3:0] upd_ib_wr_row [ND];
  logic [6:0] upd_ib_wr_kblk [ND];
  vec_t  upd_ib_wr_data [ND];
  logic  upd_wt_wr_en [ND], upd_wt_wr_bias [ND];
  logic [14:0] upd_wt_wr_addr [ND];
  data_t [P-1:0] upd_wt_wr_data [ND];
  logic  upd_start [ND];
  logic [10:0] upd_fin [ND];
  logic [8:0]  upd_fout [ND];
  logic [4:0]  upd_rows [ND];
  act_e  upd_act [ND];
  logic  upd_out_valid [ND], upd_out_ready [ND], upd_busy [ND], upd_done [ND];
  logic [3:0] upd_out_row [ND];
  logic [3:0] upd_out_cb [ND];
  data_t [P-1:0] upd_out_data [ND];

  hpgnn_accel dut (.*);

  int checks = 0, failures = 0;
  int m_raw = 0, m_conf = 0, m_reuse = 0, m_pass_empty = 0, m_fifo_full = 0;
  int m_loads = 0, m_pops = 0;
  int m_wb_hold = 0, m_rb_hold = 0, m_relu_clip = 0, m_identity = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- handshake sampling and mechanism counters ----
  logic e_fired [ND][N];
  logic f_fired [ND];
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      f_fired[d] = agg_feat_valid[d] && agg_feat_ready[d];
      for (int i = 0; i < N; i++) begin
        e_fired[d][i] = agg_edge_valid[d][i] && agg_edge_ready[d][i];
        if (rst_n && agg_edge_valid[d][i] && !agg_edge_ready[d][i]) m_fifo_full++;
      end
      if (agg_wb_valid[d] && !agg_wb_ready[d]) m_wb_hold++;
    end
  end

  for (genvar d = 0; d < ND; d++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      m_conf += int'(dut.g_die[d].u_agg.rn_conflicts);
      for (int i = 0; i < N; i++) begin
        if (dut.g_die[d].u_agg.raw_stall[i]) m_raw++;
        if (dut.g_die[d].u_agg.lane_pop[i]) m_pops++;
      end
      if (dut.g_die[d].u_agg.bcast_load) m_loads++;
      // a feature leaves while some lane never matched it
      if (dut.g_die[d].u_agg.cur_valid && (&dut.g_die[d].u_agg.lane_passed) &&
          !dut.g_die[d].u_agg.lane_empty[0] &&
          dut.g_die[d].u_agg.lane_head[0].src != dut.g_die[d].u_agg.cur_src) m_pass_empty++;
      if (int'(dut.g_die[d].u_upd.state) == 1 && dut.g_die[d].u_upd.is_last &&
          !dut.g_die[d].u_upd.issue) m_rb_hold++;
    end
  end

  // ---- workload and reference ----
  vec_t  X [NSRC];
  edge_t E [NE];
  int    deg [NDST];
  longint aggref [NDST][VEC];
  vec_t  ddr_agg [NDST];          // local-memory model of aggregation results
  data_t W [FIN][FOUT];
  data_t Bv [FOUT];

  function automatic data_t rmul(data_t x, data_t y);
    return data_t'(longint'($floor(real'(x) * real'(y) / 65536.0)));
  endfunction

  function automatic data_t a_of(int v, int k);   // a_v = h_v || mean
    return (k < VEC) ? X[v][k] : ddr_agg[v][k - VEC];
  endfunction

  function automatic data_t href(int v, int c, act_e act);
    data_t s = Bv[c];
    for (int k = 0; k < FIN; k++) s = data_t'(s + rmul(a_of(v, k), W[k][c]));
    if (act == ACT_RELU && s < 0) s = 0;
    return s;
  endfunction

  // ---- per-die aggregation pass ----
  task automatic agg_pass(int d);
    int lane_cnt [N];
    int lane_e [N][NE];
    int sent [N];
    int fi = 0, got = 0, cyc = 0;
    bit fin = 0;
    for (int i = 0; i < N; i++) begin lane_cnt[i] = 0; sent[i] = 0; end
    for (int e = 0; e < NE; e++)
      if (int'(E[e].dst) / PER == d) begin
        int l = lane_cnt[0] + lane_cnt[1] + lane_cnt[2] + lane_cnt[3];
        lane_e[l % N][lane_cnt[l % N]++] = e;
      end
    @(negedge clk);
    agg_start[d] = 1; agg_dst_offset[d] = vid_t'(d * PER); agg_num_dst[d] = vid_t'(PER);
    @(negedge clk); agg_start[d] = 0;
    while (!fin) begin
      for (int i = 0; i < N; i++) begin
        if (e_fired[d][i]) sent[i]++;
        agg_edge_valid[d][i] = sent[i] < lane_cnt[i];
        if (agg_edge_valid[d][i]) agg_edge[d][i] = E[lane_e[i][sent[i]]];
      end
      if (f_fired[d]) fi++;
      agg_feat_valid[d] = (fi < NSRC) && cyc > 30 && ($urandom_range(0, 4) != 0);
      if (fi < NSRC) begin agg_feat[d].src = vid_t'(fi); agg_feat[d].val = X[fi]; end
      agg_edges_done[d] = 1;
      for (int i = 0; i < N; i++) if (sent[i] < lane_cnt[i]) agg_edges_done[d] = 0;
      agg_wb_ready[d] = ($urandom_range(0, 3) != 0);
      #1;
      @(posedge clk);
      if (agg_wb_valid[d] && agg_wb_ready[d]) begin
        ddr_agg[agg_wb[d].dst] = agg_wb[d].val;
        checks++;
        if (int'(agg_wb[d].dst) != d * PER + got) failures++;
        got++;
      end
      @(negedge clk);
      cyc++;
      if (agg_done[d]) fin = 1;
    end
    for (int i = 0; i < N; i++) agg_edge_valid[d][i] = 0;
    agg_feat_valid[d] = 0; agg_edges_done[d] = 0;
    checks++; if (got != PER) failures++;
  endtask

  // ---- per-die update tile ----
  task automatic upd_tile(int d, act_e act);
    int got = 0;
    for (int r = 0; r < PER; r++)
      for (int kb = 0; kb < FIN / VEC; kb++) begin
        @(negedge clk);
        upd_ib_wr_en[d] = 1; upd_ib_wr_row[d] = 4'(r); upd_ib_wr_kblk[d] = 7'(kb);
        for (int i = 0; i < VEC; i++) upd_ib_wr_data[d][i] = a_of(d * PER + r, kb * VEC + i);
      end
    for (int k = 0; k < FIN; k++)
      for (int cb = 0; cb < FOUT / P; cb++) begin
        @(negedge clk);
        upd_ib_wr_en[d] = 0;
        upd_wt_wr_en[d] = 1; upd_wt_wr_bias[d] = 0; upd_wt_wr_addr[d] = 15'(k * NCB + cb);
        for (int j = 0; j < P; j++) upd_wt_wr_data[d][j] = W[k][cb * P + j];
      end
    for (int cb = 0; cb < FOUT / P; cb++) begin
      @(negedge clk);
      upd_wt_wr_en[d] = 1; upd_wt_wr_bias[d] = 1; upd_wt_wr_addr[d] = 15'(cb);
      for (int j = 0; j < P; j++) upd_wt_wr_data[d][j] = Bv[cb * P + j];
    end
    @(negedge clk);
    upd_wt_wr_en[d] = 0; upd_wt_wr_bias[d] = 0;
    upd_start[d] = 1; upd_fin[d] = 11'(FIN); upd_fout[d] = 9'(FOUT); upd_rows[d] = 5'(PER);
    upd_act[d] = act;
    @(negedge clk); upd_start[d] = 0;
    while (!upd_done[d]) begin
      upd_out_ready[d] = ($urandom_range(0, 3) == 0);
      #1;
      if (upd_out_valid[d] && upd_out_ready[d]) begin
        int r = got % PER, cb = got / PER;
        checks++;
        if (int'(upd_out_row[d]) != r || int'(upd_out_cb[d]) != cb) failures++;
        for (int j = 0; j < P; j++) begin
          data_t e = href(d * PER + r, cb * P + j, act);
          checks++;
          if (upd_out_data[d][j] != e) begin
            failures++;
            if (failures < 6) $display("die %0d v %0d c %0d: %0d want %0d", d, d*PER+r, cb*P+j, upd_out_data[d][j], e);
          end
          if (act == ACT_RELU && e == 0) m_relu_clip++;
          if (act == ACT_NONE && e < 0) m_identity++;
        end
        got++;
      end
      @(negedge clk);
    end
    checks++; if (got != PER * FOUT / P) failures++;
  endtask

  initial begin
    for (int d = 0; d < ND; d++) begin
      agg_start[d] = 0; agg_dst_offset[d] = 0; agg_num_dst[d] = 0; agg_feat_valid[d] = 0;
      agg_feat[d] = '0; agg_edges_done[d] = 0; agg_wb_ready[d] = 0;
      for (int i = 0; i < N; i++) begin agg_edge_valid[d][i] = 0; agg_edge[d][i] = '0; end
      upd_ib_wr_en[d] = 0; upd_ib_wr_row[d] = 0; upd_ib_wr_kblk[d] = 0; upd_ib_wr_data[d] = '0;
      upd_wt_wr_en[d] = 0; upd_wt_wr_bias[d] = 0; upd_wt_wr_addr[d] = 0; upd_wt_wr_data[d] = '0;
      upd_start[d] = 0; upd_fin[d] = 0; upd_fout[d] = 0; upd_rows[d] = 0; upd_act[d] = ACT_NONE;
      upd_out_ready[d] = 0;
    end
    // workload: random features, edges sorted by source, weight 1/in-degree
    for (int s = 0; s < NSRC; s++) for (int i = 0; i < VEC; i++)
      X[s][i] = data_t'($signed($urandom_range(0, 2**19)) - 2**18);
    for (int v = 0; v < NDST; v++) deg[v] = 0;
    for (int e = 0; e < NE; e++) begin
      E[e].src = vid_t'((e * NSRC) / NE);
      // a few hot destinations create read-after-write hazards
      E[e].dst = vid_t'(($urandom_range(0, 4) == 0) ? (e % ND) * PER : $urandom_range(0, NDST - 1));
      deg[E[e].dst]++;
    end
    for (int e = 0; e < NE; e++) E[e].val = data_t'(65536 / deg[E[e].dst]);
    for (int v = 0; v < NDST; v++) for (int i = 0; i < VEC; i++) aggref[v][i] = 0;
    for (int e = 0; e < NE; e++) for (int i = 0; i < VEC; i++)
      aggref[E[e].dst][i] = longint'(data_t'(aggref[E[e].dst][i] + longint'(rmul(X[E[e].src][i], E[e].val))));
    for (int k = 0; k < FIN; k++) for (int c = 0; c < FOUT; c++)
      W[k][c] = data_t'($signed($urandom_range(0, 2**17)) - 2**16);
    for (int c = 0; c < FOUT; c++) Bv[c] = data_t'($signed($urandom_range(0, 2**16)) - 2**15);

    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!agg_busy[0] && !agg_busy[1] && !agg_busy[2] && !agg_busy[3]);

    // 1. aggregation on all dies in parallel
    fork
      agg_pass(0);
      agg_pass(1);
      agg_pass(2);
      agg_pass(3);
    join
    for (int v = 0; v < NDST; v++) for (int i = 0; i < VEC; i++) begin
      checks++;
      if (longint'(ddr_agg[v][i]) != aggref[v][i]) begin
        failures++;
        if (failures < 6) $display("agg v %0d word %0d: %0d want %0d", v, i, ddr_agg[v][i], aggref[v][i]);
      end
    end
    // 2. update on all dies in parallel, ReLU
    fork
      upd_tile(0, ACT_RELU);
      upd_tile(1, ACT_RELU);
      upd_tile(2, ACT_RELU);
      upd_tile(3, ACT_RELU);
    join
    // 3. mode switch: identity on die 0
    upd_tile(0, ACT_NONE);

    // each feature is loaded once per die and shared by all edges using it
    m_reuse = m_pops - m_loads;
    checks++; if (m_loads != ND * NSRC) failures++;
    $display("mechanisms: raw_stall=%0d routing_conflict=%0d feature_reuse=%0d feature_passed_lane=%0d",
             m_raw, m_conf, m_reuse, m_pass_empty);
    $display("            edge_fifo_full=%0d wb_backpressure=%0d result_buffer_hold=%0d relu_clip=%0d identity_neg=%0d",
             m_fifo_full, m_wb_hold, m_rb_hold, m_relu_clip, m_identity);
    checks++; if (m_raw == 0) failures++;
    checks++; if (m_conf == 0) failures++;
    checks++; if (m_reuse == 0) failures++;
    checks++; if (m_pass_empty == 0) failures++;
    checks++; if (m_fifo_full == 0) failures++;
    checks++; if (m_wb_hold == 0) failures++;
    checks++; if (m_rb_hold == 0) failures++;
    checks++; if (m_relu_clip == 0) failures++;
    checks++; if (m_identity == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
