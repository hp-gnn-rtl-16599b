// tb_mac_array -- a 4 x 4 array computes random blocks
// sigma(b + A W) for random f_in; checks every element against a real
// arithmetic reference and that res_valid pulses once per block.
module tb_mac_array;
  import hpgnn_pkg::*;
  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  logic en, first, last, res_valid;
  data_t a_col [P];
  data_t [P-1:0] w_row, bias;
  act_e act;
  data_t res [P][P];
  int checks = 0, failures = 0;

  mac_array #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  function automatic data_t rmul(data_t x, data_t y);
    return data_t'(longint'($floor(real'(x) * real'(y) / 65536.0)));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t exp_r [P][P];
    en = 0; first = 0; last = 0; act = ACT_RELU; w_row = '0; bias = '0;
    for (int r = 0; r < P; r++) a_col[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int fin = $urandom_range(1, 30);
      act = (t % 2 == 1) ? ACT_RELU : ACT_NONE;
      for (int c = 0; c < P; c++) bias[c] = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
      for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) exp_r[r][c] = bias[c];
      for (int k = 0; k < fin; k++) begin
        @(negedge clk);
        en = 1; first = (k == 0); last = (k == fin - 1);
        for (int r = 0; r < P; r++) a_col[r] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
        for (int c = 0; c < P; c++) w_row[c] = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
        for (int r = 0; r < P; r++) for (int c = 0; c < P; c++)
          exp_r[r][c] = data_t'(exp_r[r][c] + rmul(a_col[r], w_row[c]));
      end
      @(negedge clk); en = 0; first = 0; last = 0;
      checks++; if (!res_valid) failures++;
      for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) begin
        automatic data_t e = (act == ACT_RELU && exp_r[r][c] < 0) ? 0 : exp_r[r][c];
        checks++;
        if (res[r][c] != e) begin failures++; if (failures < 4) $display("t%0d fin %0d r%0d c%0d: %0d want %0d", t, fin, r, c, res[r][c], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
