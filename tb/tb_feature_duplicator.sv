// tb_feature_duplicator -- drives a feature stream and per-lane "passed"
// flags. Checks that a feature is taken only when none is held or all lanes
// have passed, that the broadcast carries the feature taken, that cur_src
// follows it, and that nothing is taken outside run or after flush.
module tb_feature_duplicator;
  import hpgnn_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic run, flush, feat_valid, feat_ready, cur_valid, bcast_load;
  feat_t feat, bcast_feat;
  vid_t cur_src;
  logic [N-1:0] lane_passed;
  int checks = 0, failures = 0, loads = 0;
  logic exp_cv; vid_t exp_src;

  feature_duplicator #(.N_PE(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run = 0; flush = 0; feat_valid = 0; feat = '0; lane_passed = '0;
    exp_cv = 0; exp_src = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // not running: nothing taken
    @(negedge clk);
    feat_valid = 1; feat.src = 5;
    #1; checks++; if (feat_ready) failures++;
    feat_valid = 0;
    run = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      feat_valid  = ($urandom_range(0, 3) != 0);
      lane_passed = N'($urandom);
      if ($urandom_range(0, 3) == 0) lane_passed = '1;
      #1;
      checks++;
      if (feat_ready != (!exp_cv || (&lane_passed))) failures++;
      checks++;
      if (bcast_load != (feat_valid && feat_ready)) failures++;
      if (bcast_load) begin
        checks++;
        if (bcast_feat != feat) failures++;
      end
      @(posedge clk); #1;
      if (feat_valid && (!exp_cv || (&lane_passed))) begin
        exp_cv = 1; exp_src = feat.src; loads++;
        feat.src = feat.src + vid_t'($urandom_range(1, 3));
        for (int i = 0; i < VEC; i++) feat.val[i] = data_t'($urandom);
      end else if (exp_cv && (&lane_passed)) exp_cv = 0;
      checks++;
      if (cur_valid != exp_cv || (exp_cv && cur_src != exp_src)) failures++;
    end
    // flush drops the held feature
    @(negedge clk); lane_passed = '0; feat_valid = 0; flush = 1;
    @(posedge clk); #1; flush = 0;
    checks++; if (cur_valid) failures++;
    checks++; if (loads < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
