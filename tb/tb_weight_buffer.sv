// tb_weight_buffer -- writes a 40 x 16 weight matrix and bias in 4-column
// blocks and reads every (k, block); checks W[k][4cb .. 4cb+3] and the
// block's bias one cycle after the read.
module tb_weight_buffer;
  import hpgnn_pkg::*;
  localparam int P = 4, FIN = 40, FOUT = 16, NCB = FOUT / P;
  logic clk = 0;
  logic wr_en, wr_bias, rd_en;
  logic [$clog2(FIN*NCB)-1:0] wr_addr;
  data_t [P-1:0] wr_data, rd_w, rd_b;
  logic [$clog2(FIN+1)-1:0] rd_k;
  logic [1:0] rd_cb;
  data_t W [FIN][FOUT];
  data_t B [FOUT];
  int checks = 0, failures = 0;

  weight_buffer #(.P(P), .MAX_FIN(FIN), .MAX_FOUT(FOUT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_bias = 0; rd_en = 0; wr_addr = 0; wr_data = '0; rd_k = 0; rd_cb = 0;
    for (int k = 0; k < FIN; k++) for (int c = 0; c < FOUT; c++) W[k][c] = data_t'($urandom);
    for (int c = 0; c < FOUT; c++) B[c] = data_t'($urandom);
    for (int k = 0; k < FIN; k++)
      for (int cb = 0; cb < NCB; cb++) begin
        @(negedge clk);
        wr_en = 1; wr_bias = 0; wr_addr = ($bits(wr_addr))'(k * NCB + cb);
        for (int j = 0; j < P; j++) wr_data[j] = W[k][cb*P + j];
      end
    for (int cb = 0; cb < NCB; cb++) begin
      @(negedge clk);
      wr_en = 1; wr_bias = 1; wr_addr = ($bits(wr_addr))'(cb);
      for (int j = 0; j < P; j++) wr_data[j] = B[cb*P + j];
    end
    @(negedge clk); wr_en = 0; wr_bias = 0;
    for (int k = 0; k < FIN; k++)
      for (int cb = 0; cb < NCB; cb++) begin
        @(negedge clk); rd_en = 1; rd_k = ($bits(rd_k))'(k); rd_cb = 2'(cb);
        @(negedge clk); rd_en = 0;
        for (int j = 0; j < P; j++) begin
          checks++; if (rd_w[j] != W[k][cb*P + j]) failures++;
          checks++; if (rd_b[j] != B[cb*P + j]) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
