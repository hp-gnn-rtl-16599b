// tb_sync_fifo -- random pushes and pops against a queue model; checks the
// head, empty and full flags every cycle and that DEPTH entries fit.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0, cycles = 0;
  logic [W-1:0] q [$];
  bit saw_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0)) begin failures++; if (failures < 4) $display("t=%0d empty=%0d size=%0d", t, empty, q.size()); end
      checks++;
      if (full != (q.size() == D)) failures++;
      if (full) saw_full = 1;
      if (!empty) begin
        checks++;
        if (dout != q[0]) failures++;
      end
      // bias toward filling in the first half, draining in the second
      push = ($urandom_range(0, 99) < ((t % 1000) < 500 ? 80 : 30));
      pop  = ($urandom_range(0, 99) < ((t % 1000) < 500 ? 30 : 80));
      push = push && !full;   // the FIFO asserts on overflow and underflow
      pop  = pop && !empty;
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (!saw_full) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
