// tb_agg_mem -- random writes and reads against an array model; checks the
// one-cycle read latency and read-old-data on a same-address collision.
module tb_agg_mem;
  import hpgnn_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  logic re, we;
  logic [5:0] raddr, waddr;
  vec_t rdata, wdata;
  vec_t model [D];
  int checks = 0, failures = 0;

  agg_mem #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t expd;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a);
      for (int i = 0; i < VEC; i++) wdata[i] = data_t'($urandom);
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      re = 1; raddr = 6'($urandom_range(0, D-1));
      we = ($urandom_range(0, 1) == 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 6'($urandom_range(0, D-1));
      for (int i = 0; i < VEC; i++) wdata[i] = data_t'($urandom);
      expd = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != expd) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
