// tb_routing_network -- random traffic from all inputs with random output
// back-pressure. Every update carries a unique tag; checks that each arrives
// exactly once, on lane dst mod N, that updates from one input to one output
// keep their order, and that conflicts happened. Also checks the no-conflict
// latency of log2(N) cycles.
module tb_routing_network;
  import hpgnn_pkg::*;
  localparam int N = 8;
  localparam int TOTAL = 3000;
  logic clk = 0, rst_n = 0;
  logic in_valid [N], in_ready [N], out_valid [N], out_ready [N];
  upd_t in_upd [N], out_upd [N];
  logic busy;
  logic [$clog2(N*N+1)-1:0] conflicts;
  int checks = 0, failures = 0, sent = 0, recv = 0, conf_cycles = 0;
  int last_seq [N][N];
  bit seen [TOTAL*N];

  routing_network #(.N_PE(N)) dut (.*);

  function automatic bit pending();
    for (int i = 0; i < N; i++) if (in_valid[i]) return 1;
    return 0;
  endfunction
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tag: val[0] = unique id, val[1] = input lane, val[2] = per-input sequence
  logic fired [N];
  always @(posedge clk) for (int i = 0; i < N; i++) fired[i] = in_valid[i] && in_ready[i];

  always @(posedge clk) if (rst_n) begin
    if (conflicts != 0) conf_cycles++;
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int id, src, seq;
      id = out_upd[o].val[0]; src = out_upd[o].val[1]; seq = out_upd[o].val[2];
      recv++;
      checks++; if (int'(out_upd[o].dst % N) != o) failures++;
      checks++; if (seen[id]) begin failures++; if (failures < 5) $display("%0t dup id %0d out %0d src %0d seq %0d", $time, id, o, src, seq); end
      seen[id] = 1;
      checks++; if (seq <= last_seq[src][o]) failures++;
      last_seq[src][o] = seq;
    end
  end

  initial begin
    int seqn [N];
    for (int i = 0; i < N; i++) begin
      in_valid[i] = 0; in_upd[i] = '0; out_ready[i] = 1; seqn[i] = 0;
      for (int o = 0; o < N; o++) last_seq[i][o] = -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency without conflicts: one update from input 0 to output 5
    @(negedge clk);
    in_valid[0] = 1; in_upd[0].dst = 5; in_upd[0].val[0] = TOTAL*N - 1; in_upd[0].val[1] = 0; in_upd[0].val[2] = 0;
    seqn[0] = 1;
    @(negedge clk); in_valid[0] = 0;
    begin
      int lat = 1;
      while (!out_valid[5]) begin @(negedge clk); lat++; end
      checks++; if (lat != $clog2(N)) begin failures++; $display("latency %0d", lat); end
    end
    sent = 1;
    while (sent < TOTAL || pending()) begin
      @(negedge clk);
      for (int o = 0; o < N; o++) out_ready[o] = ($urandom_range(0, 4) != 0);
      for (int i = 0; i < N; i++) begin
        if (!in_valid[i] && sent < TOTAL && $urandom_range(0, 2) != 0) begin
          in_valid[i] = 1;
          in_upd[i].dst = vid_t'($urandom_range(0, 1000));
          in_upd[i].val[0] = sent; in_upd[i].val[1] = i; in_upd[i].val[2] = seqn[i];
          seqn[i]++; sent++;
        end
      end
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (fired[i]) in_valid[i] = 0;
    end
    for (int o = 0; o < N; o++) out_ready[o] = 1;
    repeat (50) @(posedge clk);
    checks++; if (recv != TOTAL) begin failures++; $display("recv %0d of %0d", recv, TOTAL); end
    checks++; if (conf_cycles == 0) failures++;
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
