// tb_scatter_pe -- loads source features and offers sorted edges; checks
// that only edges whose source matches the held feature are consumed, that
// each produces dst - offset and edge.val * feature (reference computed in
// real arithmetic), that the output holds under back-pressure, and the
// passed flag.
module tb_scatter_pe;
  import hpgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  vid_t dst_offset;
  logic load, feat_valid, edge_valid, edge_pop, lane_done, passed, upd_valid, upd_ready;
  feat_t feat_in;
  edge_t edge_in;
  upd_t upd;
  int checks = 0, failures = 0, produced = 0, stalls = 0;
  upd_t expq [$];

  scatter_pe dut (.*);
  always #5 clk = ~clk;

  function automatic data_t rmul(data_t a, data_t b);
    return data_t'(longint'($floor(real'(a) * real'(b) / 65536.0)));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && upd_valid && upd_ready) begin
    upd_t e;
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      e = expq.pop_front();
      if (upd != e) begin
        failures++;
        if (failures < 4) $display("got dst %0d want %0d", upd.dst, e.dst);
      end
    end
  end
  always @(negedge clk) upd_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (upd_valid && !upd_ready) stalls++;

  initial begin
    feat_t f;
    dst_offset = 100;
    load = 0; feat_valid = 0; edge_valid = 0; lane_done = 0; feat_in = '0; edge_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      // load feature of source s
      @(negedge clk);
      f.src = s;
      for (int i = 0; i < VEC; i++) f.val[i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
      feat_in = f; load = 1; edge_valid = 0;
      @(posedge clk); #1; load = 0; feat_valid = 1;
      // a few edges of this source, then one of the next source
      for (int e = 0; e < int'($urandom_range(0, 4)); e++) begin
        @(negedge clk);
        edge_in.src = s; edge_in.dst = 100 + $urandom_range(0, 500);
        edge_in.val = data_t'($signed($urandom_range(0, 2**17)) - 2**16);
        edge_valid = 1;
        #2;
        checks++; if (passed) failures++;
        while (!edge_pop) begin @(negedge clk); #2; end
        begin
          upd_t u;
          u.dst = edge_in.dst - 100;
          for (int i = 0; i < VEC; i++) u.val[i] = rmul(f.val[i], edge_in.val);
          expq.push_back(u); produced++;
        end
        @(posedge clk);
      end
      @(negedge clk);
      edge_in.src = s + 1; edge_valid = 1;
      #1;
      checks++; if (!passed || edge_pop) failures++;
      @(posedge clk);
      @(negedge clk); edge_valid = 0; lane_done = 0;
      #1; checks++; if (passed) failures++;
      lane_done = 1;
      #1; checks++; if (!passed) failures++;
      lane_done = 0;
    end
    upd_ready = 1;
    repeat (5) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    checks++; if (produced < 50 || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
