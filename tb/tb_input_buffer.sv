// tb_input_buffer -- fills a 4-row buffer with random slices and reads
// every feature index; checks that column k returns word k mod 16 of slice
// k / 16 of every row, one cycle after the read.
module tb_input_buffer;
  import hpgnn_pkg::*;
  localparam int P = 4, FIN = 64, KB = FIN / VEC;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [1:0] wr_row;
  logic [1:0] wr_kblk;
  vec_t wr_data;
  logic [5:0] rd_k;
  data_t rd_col [P];
  data_t model [P][FIN];
  int checks = 0, failures = 0;

  input_buffer #(.P(P), .MAX_FIN(FIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; wr_kblk = 0; wr_data = '0; rd_k = 0;
    for (int r = 0; r < P; r++)
      for (int kb = 0; kb < KB; kb++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 2'(r); wr_kblk = 2'(kb);
        for (int i = 0; i < VEC; i++) begin
          wr_data[i] = data_t'($urandom);
          model[r][kb*VEC + i] = wr_data[i];
        end
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int k = (t < FIN) ? t : $urandom_range(0, FIN-1);
      @(negedge clk); rd_en = 1; rd_k = 6'(k);
      @(negedge clk); rd_en = 0;
      for (int r = 0; r < P; r++) begin
        checks++;
        if (rd_col[r] != model[r][k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
