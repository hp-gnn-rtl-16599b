// tb_hpgnn_pkg -- checks the fixed-point helpers of hpgnn_pkg against real
// arithmetic: fx_mul must equal floor(a*b / 2^16) for operands small enough
// that the real product is exact, fx_add the wrapped sum, and the vector
// helpers must apply them element by element.
module tb_hpgnn_pkg;
  import hpgnn_pkg::*;
  int checks = 0, failures = 0;

  function automatic longint ref_mul(longint a, longint b);
    real x;
    x = $floor((real'(a) * real'(b)) / 65536.0);
    return longint'(x);
  endfunction

  initial begin
    data_t a, b, r;
    vec_t va, vb, vr;
    for (int t = 0; t < 2000; t++) begin
      a = data_t'($signed($urandom_range(0, 2**22)) - 2**21);
      b = data_t'($signed($urandom_range(0, 2**22)) - 2**21);
      r = fx_mul(a, b);
      checks++;
      if (longint'(r) != ref_mul(longint'(a), longint'(b))) begin
        failures++;
        if (failures < 5) $display("fx_mul %0d*%0d = %0d, want %0d", a, b, r, ref_mul(longint'(a), longint'(b)));
      end
      checks++;
      if (fx_add(a, b) != data_t'(longint'(a) + longint'(b))) failures++;
    end
    // wrap-around of the adder
    checks++;
    if (fx_add(32'sh7fffffff, 32'sd1) != 32'sh80000000) failures++;
    // 1.5 * -2.25 = -3.375
    checks++;
    if (fx_mul(32'sd98304, -32'sd147456) != -32'sd221184) failures++;
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < VEC; i++) begin
        va[i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
        vb[i] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
      end
      a  = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
      vr = vec_scale(va, a);
      for (int i = 0; i < VEC; i++) begin
        checks++;
        if (longint'(vr[i]) != ref_mul(va[i], a)) failures++;
      end
      vr = vec_add(va, vb);
      for (int i = 0; i < VEC; i++) begin
        checks++;
        if (longint'(vr[i]) != longint'(va[i]) + longint'(vb[i])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
