// tb_mac_unit -- random dot products of random length; checks
// sigma(bias + sum a*w) for ReLU and identity against real arithmetic, the
// res_valid pulse, and that the accumulator holds while en is low.
module tb_mac_unit;
  import hpgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, first, last, res_valid;
  data_t a, w, bias, res;
  act_e act;
  int checks = 0, failures = 0, negs = 0;

  mac_unit dut (.*);
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
    en = 0; first = 0; last = 0; a = 0; w = 0; bias = 0; act = ACT_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int len = $urandom_range(1, 20);
      data_t acc;
      act  = ($urandom_range(0, 1) == 1) ? ACT_RELU : ACT_NONE;
      bias = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
      acc  = bias;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        // idle cycles in between must not disturb the sum
        if ($urandom_range(0, 3) == 0) begin en = 0; @(negedge clk); end
        en = 1; first = (k == 0); last = (k == len - 1);
        a = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
        w = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
        acc = data_t'(acc + rmul(a, w));
      end
      @(negedge clk); en = 0; first = 0; last = 0;
      checks++; if (!res_valid) failures++;
      if (acc < 0) negs++;
      if (act == ACT_RELU && acc < 0) acc = 0;
      checks++;
      if (res != acc) begin failures++; if (failures < 4) $display("res %0d want %0d", res, acc); end
      @(negedge clk);
      checks++; if (res_valid) failures++;
    end
    checks++; if (negs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
