// tb_result_buffer -- captures random 4 x 4 blocks and drains them under
// random back-pressure; checks row order, contents, column-block tag, the
// number of rows sent (1..4) and the full flag.
module tb_result_buffer;
  import hpgnn_pkg::*;
  localparam int P = 4, CBW = 3;
  logic clk = 0, rst_n = 0;
  logic [2:0] rows;
  logic cap, full, out_valid, out_ready;
  logic [CBW-1:0] cap_cb, out_cb;
  data_t res [P][P];
  logic [1:0] out_row;
  data_t [P-1:0] out_data;
  int checks = 0, failures = 0;

  result_buffer #(.P(P), .CBW(CBW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t blk [P][P];
    cap = 0; cap_cb = 0; out_ready = 0; rows = 4;
    for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) res[r][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int got = 0;
      @(negedge clk);
      checks++; if (full || out_valid) failures++;
      rows = 3'($urandom_range(1, P));
      cap = 1; cap_cb = CBW'(t);
      for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) begin
        res[r][c] = data_t'($urandom); blk[r][c] = res[r][c];
      end
      @(negedge clk); cap = 0;
      for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) res[r][c] = data_t'($urandom);
      while (full) begin
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (out_ready) begin
          checks++;
          if (out_row != 2'(got) || out_cb != CBW'(t)) failures++;
          for (int c = 0; c < P; c++) begin
            checks++; if (out_data[c] != blk[got][c]) failures++;
          end
          got++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      checks++; if (got != int'(rows)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
