// tb_aggregate_kernel -- runs whole aggregation passes on a small kernel
// (4 lanes, 32 entries per bank) and checks every written-back slice against
// a reference sum of edge.val * feature computed in real arithmetic.
//   pass 0: random graph with hot destinations (RAW stalls, routing
//           conflicts), sources without edges, random stalls on every input
//           and on the write-back;
//   pass 1: full capacity (128 destinations) at another offset, which also
//           checks that the previous pass left the banks cleared;
//   pass 2: conflict-free traffic fed at full rate, to check the edge rate:
//           the scatter phase must take at most |E|/4 + (#sources) + 16
//           cycles (one edge per lane per cycle plus one cycle per feature
//           change).
module tb_aggregate_kernel;
  import hpgnn_pkg::*;
  localparam int N = 4, D = 32, MAXE = 1024, MAXS = 128;
  logic clk = 0, rst_n = 0;
  logic start, feat_valid, feat_ready, edges_done, wb_valid, wb_ready, busy, done;
  vid_t cfg_dst_offset, cfg_num_dst;
  feat_t feat;
  logic edge_valid [N], edge_ready [N];
  edge_t edge_in [N];
  upd_t wb;

  int checks = 0, failures = 0;
  int raw_stalls = 0, conflicts = 0, reuse = 0, wb_holds = 0;

  aggregate_kernel #(.N_PE(N), .DEPTH(D), .LANE_FIFO(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic e_fired [N];
  logic f_fired;
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) e_fired[i] = edge_valid[i] && edge_ready[i];
    f_fired = feat_valid && feat_ready;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (dut.raw_stall[i]) raw_stalls++;
      if (dut.lane_pop[i] && !dut.bcast_load) reuse++;
    end
    conflicts += int'(dut.rn_conflicts);
    if (wb_valid && !wb_ready) wb_holds++;
  end

  // ---------------- workload ----------------
  edge_t edges [MAXE];
  int    ne;
  vec_t  fv [MAXS];
  int    ns;
  real   ref_sum [256][VEC];
  longint ref_int [256][VEC];

  function automatic data_t rmul(data_t a, data_t b);
    return data_t'(longint'($floor(real'(a) * real'(b) / 65536.0)));
  endfunction

  // sort edges by source (insertion sort, small lists)
  function automatic void sort_edges();
    for (int i = 1; i < ne; i++) begin
      edge_t k = edges[i];
      int j = i - 1;
      while (j >= 0 && edges[j].src > k.src) begin edges[j+1] = edges[j]; j--; end
      edges[j+1] = k;
    end
  endfunction

  function automatic void make_ref(int off, int nd);
    for (int d = 0; d < nd; d++) for (int i = 0; i < VEC; i++) ref_int[d][i] = 0;
    for (int e = 0; e < ne; e++) begin
      int d = int'(edges[e].dst) - off;
      for (int i = 0; i < VEC; i++)
        ref_int[d][i] = longint'(data_t'(ref_int[d][i] + longint'(rmul(fv[edges[e].src][i], edges[e].val))));
    end
  endfunction

  int run_cycles;
  int sent_e [N];
  int lane_cnt [N];
  int lane_idx [N][MAXE];
  int fi, got;
  bit fin;

  task automatic run_pass(int off, int nd, bit random_stall);
    // distribute edges over lanes round robin
    for (int i = 0; i < N; i++) lane_cnt[i] = 0;
    for (int e = 0; e < ne; e++) begin
      int l = random_stall ? $urandom_range(0, N-1) : e % N;
      lane_idx[l][lane_cnt[l]++] = e;
    end
    make_ref(off, nd);
    @(negedge clk);
    start = 1; cfg_dst_offset = vid_t'(off); cfg_num_dst = vid_t'(nd);
    @(negedge clk);
    start = 0;
    for (int i = 0; i < N; i++) begin sent_e[i] = 0; e_fired[i] = 0; end
    f_fired = 0;
    fi = 0; got = 0; fin = 0; run_cycles = 0;
    fork
      begin : feeder
        while (!fin) begin
          // edges
          for (int i = 0; i < N; i++) begin
            if (e_fired[i]) sent_e[i]++;
            edge_valid[i] = (sent_e[i] < lane_cnt[i]) && (!random_stall || $urandom_range(0, 3) != 0);
            if (edge_valid[i]) edge_in[i] = edges[lane_idx[i][sent_e[i]]];
          end
          if (f_fired) fi++;
          feat_valid = (fi < ns) && (!random_stall || $urandom_range(0, 3) != 0);
          if (fi < ns) begin feat.src = vid_t'(fi); feat.val = fv[fi]; end
          edges_done = 1'b1;
          for (int i = 0; i < N; i++) if (sent_e[i] < lane_cnt[i]) edges_done = 1'b0;
          wb_ready = !random_stall || ($urandom_range(0, 2) != 0);
          #1;
          @(posedge clk);
          if (dut.run) run_cycles++;
          #1;
          @(negedge clk);
          if (done) fin = 1;
        end
      end
      begin : collector
        while (!fin) begin
          @(posedge clk);
          if (wb_valid && wb_ready) begin
            checks++;
            if (int'(wb.dst) != off + got) failures++;
            for (int i = 0; i < VEC; i++) begin
              checks++;
              if (longint'(wb.val[i]) != ref_int[got][i]) begin
                failures++;
                if (failures < 5) $display("dst %0d word %0d: %0d want %0d", wb.dst, i, wb.val[i], ref_int[got][i]);
              end
            end
            got++;
          end
        end
      end
    join
    for (int i = 0; i < N; i++) edge_valid[i] = 0;
    feat_valid = 0; edges_done = 0;
    checks++;
    if (got != nd) begin failures++; $display("wrote back %0d of %0d", got, nd); end
  endtask

  initial begin
    start = 0; feat_valid = 0; edges_done = 0; wb_ready = 1; feat = '0;
    cfg_dst_offset = 0; cfg_num_dst = 0;
    for (int i = 0; i < N; i++) begin edge_valid[i] = 0; edge_in[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!busy);

    // pass 0: random graph, hot destinations
    ns = 60; ne = 300;
    for (int s = 0; s < ns; s++) for (int i = 0; i < VEC; i++) fv[s][i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
    for (int e = 0; e < ne; e++) begin
      edges[e].src = vid_t'($urandom_range(0, ns - 1) & ~32'h3 | 32'h1);  // some sources unused
      edges[e].dst = vid_t'(1000 + (($urandom_range(0, 3) == 0) ? $urandom_range(0, 3) : $urandom_range(0, 99)));
      edges[e].val = data_t'($signed($urandom_range(0, 2**17)) - 2**16);
    end
    sort_edges();
    run_pass(1000, 100, 1);

    // pass 1: full capacity at offset 5 (banks must be clear)
    ns = 40; ne = 200;
    for (int s = 0; s < ns; s++) for (int i = 0; i < VEC; i++) fv[s][i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
    for (int e = 0; e < ne; e++) begin
      edges[e].src = vid_t'($urandom_range(0, ns - 1));
      edges[e].dst = vid_t'(5 + $urandom_range(0, N*D - 1));
      edges[e].val = data_t'($signed($urandom_range(0, 2**17)) - 2**16);
    end
    sort_edges();
    run_pass(5, N*D, 1);

    // pass 2: rate check, 32 sources x 8 edges, each lane to its own bank
    ns = 32; ne = 256;
    for (int s = 0; s < ns; s++) for (int i = 0; i < VEC; i++) fv[s][i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
    for (int e = 0; e < ne; e++) begin
      edges[e].src = vid_t'(e / 8);
      edges[e].dst = vid_t'(((e / 4) % 32) * 4 + (e % 4));
      edges[e].val = data_t'($signed($urandom_range(0, 2**17)) - 2**16);
    end
    run_pass(0, 128, 0);
    checks++;
    if (run_cycles > ne / N + ns + 16) begin
      failures++;
      $display("scatter phase took %0d cycles", run_cycles);
    end

    $display("rate pass: %0d edges, %0d sources, scatter phase %0d cycles", ne, ns, run_cycles);
    $display("mechanisms: raw_stalls=%0d conflicts=%0d reused_features=%0d wb_holds=%0d",
             raw_stalls, conflicts, reuse, wb_holds);
    checks++; if (raw_stalls == 0) failures++;
    checks++; if (conflicts == 0) failures++;
    checks++; if (reuse == 0) failures++;
    checks++; if (wb_holds == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
