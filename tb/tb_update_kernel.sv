// tb_update_kernel -- runs tiles through a small update kernel (4 x 4 MACs,
// f_in up to 64, f_out up to 16) and checks every output against
// sigma(b + a W) computed in real arithmetic.
//   tile 0: f_in 37, f_out 16, 4 rows, ReLU, output always accepted; the
//           run must take f_out/P * f_in cycles plus at most P + 8;
//   tile 1: f_in 2, f_out 8, 3 rows, identity, random output stalls, so the
//           last feature index is held back while the result buffer drains;
//   tile 2: f_in 64 (the maximum), f_out 16, 4 rows, ReLU, random stalls.
module tb_update_kernel;
  import hpgnn_pkg::*;
  localparam int P = 4, MFIN = 64, MFOUT = 16, NCB = MFOUT / P;
  logic clk = 0, rst_n = 0;
  logic ib_wr_en, wt_wr_en, wt_wr_bias, start, out_valid, out_ready, busy, done;
  logic [1:0] ib_wr_row;
  logic [1:0] ib_wr_kblk;
  vec_t ib_wr_data;
  logic [$clog2(MFIN*NCB)-1:0] wt_wr_addr;
  data_t [P-1:0] wt_wr_data, out_data;
  logic [$clog2(MFIN+1)-1:0] cfg_fin;
  logic [$clog2(MFOUT+1)-1:0] cfg_fout;
  logic [2:0] cfg_rows;
  act_e cfg_act;
  logic [1:0] out_row;
  logic [1:0] out_cb;
  int checks = 0, failures = 0, holds = 0;

  update_kernel #(.P(P), .MAX_FIN(MFIN), .MAX_FOUT(MFOUT)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk)
    if (int'(dut.state) == 1 && dut.is_last && !dut.issue) holds++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t A [P][MFIN];
  data_t W [MFIN][MFOUT];
  data_t B [MFOUT];

  function automatic data_t rmul(data_t x, data_t y);
    return data_t'(longint'($floor(real'(x) * real'(y) / 65536.0)));
  endfunction

  function automatic data_t expect_h(int r, int c, int fin, act_e act);
    data_t s = B[c];
    for (int k = 0; k < fin; k++) s = data_t'(s + rmul(A[r][k], W[k][c]));
    if (act == ACT_RELU && s < 0) s = 0;
    return s;
  endfunction

  task automatic run_tile(int fin, int fout, int rows, act_e act, bit stalls);
    int got, cycles;
    for (int r = 0; r < P; r++) for (int k = 0; k < MFIN; k++)
      A[r][k] = data_t'($signed($urandom_range(0, 2**20)) - 2**19);
    for (int k = 0; k < MFIN; k++) for (int c = 0; c < MFOUT; c++)
      W[k][c] = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
    for (int c = 0; c < MFOUT; c++) B[c] = data_t'($signed($urandom_range(0, 2**18)) - 2**17);
    // fill the input buffer (slices of 16) and the weight buffer
    for (int r = 0; r < rows; r++)
      for (int kb = 0; kb < (fin + VEC - 1) / VEC; kb++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_row = 2'(r); ib_wr_kblk = 2'(kb);
        for (int i = 0; i < VEC; i++) ib_wr_data[i] = A[r][(kb*VEC + i) % MFIN];
      end
    @(negedge clk); ib_wr_en = 0;
    for (int k = 0; k < fin; k++)
      for (int cb = 0; cb < fout / P; cb++) begin
        @(negedge clk);
        wt_wr_en = 1; wt_wr_bias = 0; wt_wr_addr = ($bits(wt_wr_addr))'(k * NCB + cb);
        for (int j = 0; j < P; j++) wt_wr_data[j] = W[k][cb*P + j];
      end
    for (int cb = 0; cb < fout / P; cb++) begin
      @(negedge clk);
      wt_wr_en = 1; wt_wr_bias = 1; wt_wr_addr = ($bits(wt_wr_addr))'(cb);
      for (int j = 0; j < P; j++) wt_wr_data[j] = B[cb*P + j];
    end
    @(negedge clk); wt_wr_en = 0; wt_wr_bias = 0;
    start = 1; cfg_fin = ($bits(cfg_fin))'(fin); cfg_fout = ($bits(cfg_fout))'(fout);
    cfg_rows = 3'(rows); cfg_act = act;
    @(negedge clk); start = 0;
    got = 0; cycles = 1;
    while (!done) begin
      out_ready = !stalls || ($urandom_range(0, 2) == 0);
      #1;
      if (out_valid && out_ready) begin
        int r = got % rows, cb = got / rows;
        checks++;
        if (int'(out_row) != r || int'(out_cb) != cb) failures++;
        for (int j = 0; j < P; j++) begin
          checks++;
          if (out_data[j] != expect_h(r, cb*P + j, fin, act)) begin
            failures++;
            if (failures < 4) $display("row %0d col %0d: %0d want %0d", r, cb*P+j, out_data[j], expect_h(r, cb*P+j, fin, act));
          end
        end
        got++;
      end
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (got != rows * fout / P) begin failures++; $display("got %0d rows", got); end
    if (!stalls) begin
      checks++;
      if (cycles < fout / P * fin || cycles > fout / P * fin + P + 8) begin
        failures++;
        $display("tile took %0d cycles for %0d", cycles, fout / P * fin);
      end
      $display("tile f_in=%0d f_out=%0d: %0d cycles (ideal %0d)", fin, fout, cycles, fout / P * fin);
    end
    checks++; if (busy) failures++;
  endtask

  initial begin
    ib_wr_en = 0; wt_wr_en = 0; wt_wr_bias = 0; start = 0; out_ready = 1;
    ib_wr_row = 0; ib_wr_kblk = 0; ib_wr_data = '0; wt_wr_addr = 0; wt_wr_data = '0;
    cfg_fin = 0; cfg_fout = 0; cfg_rows = 0; cfg_act = ACT_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(37, 16, 4, ACT_RELU, 0);
    run_tile(2, 8, 3, ACT_NONE, 1);
    run_tile(64, 16, 4, ACT_RELU, 1);
    checks++; if (holds == 0) failures++;
    $display("result-buffer holds: %0d", holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
