// tb_raw_resolver -- a stream of updates to a few destinations with random
// downstream readiness. Checks that two updates to one destination never
// pass less than HAZ_WIN+1 cycles apart, that an update with no hazard is
// never held, that stall flags exactly the held-by-hazard cycles, and that
// order and contents are kept.
module tb_raw_resolver;
  import hpgnn_pkg::*;
  localparam int W = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, stall;
  upd_t in_upd, out_upd;
  int checks = 0, failures = 0, stalls = 0, passed = 0;
  longint cyc = 0;
  longint last_fire [8];

  raw_resolver #(.HAZ_WIN(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    bit haz;
    cyc++;
    haz = (last_fire[in_upd.dst] >= cyc - W);
    if (in_valid) begin
      checks++;
      if (in_ready != (out_ready && !haz)) failures++;
      checks++;
      if (stall != haz) failures++;
      checks++;
      if (out_valid != !haz || out_upd != in_upd) failures++;
      if (stall) stalls++;
      if (in_ready) begin
        last_fire[in_upd.dst] = cyc;
        passed++;
      end
    end
  end

  initial begin
    for (int i = 0; i < 8; i++) last_fire[i] = -100;
    in_valid = 0; in_upd = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (passed < 2000) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 5) != 0);
      if (!in_valid || $urandom_range(0, 1) == 0) begin
        // keep the update until it passes
      end
      #2;
      if (!in_valid) begin
        in_valid = ($urandom_range(0, 4) != 0);
        in_upd.dst = vid_t'($urandom_range(0, 3));
        for (int i = 0; i < VEC; i++) in_upd.val[i] = data_t'($urandom);
      end
      @(posedge clk);
      #1;
      if (last_fire[in_upd.dst] == cyc && in_valid) in_valid = 0;
    end
    checks++; if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
