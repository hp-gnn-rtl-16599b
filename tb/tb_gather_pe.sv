// tb_gather_pe -- clears the bank, sends updates (spaced as the RAW resolver
// would allow) and checks every entry against a model of
// v[dst] += u.val, then checks that reading clears an entry and that busy
// covers the pipeline. Bank 1 of 4: destinations are 4*a + 1.
module tb_gather_pe;
  import hpgnn_pkg::*;
  localparam int N = 4, BANKI = 1, D = 32;
  logic clk = 0, rst_n = 0;
  logic upd_valid, rd_en, clr_en, busy;
  upd_t upd;
  logic [4:0] rd_addr, clr_addr;
  vec_t rd_data;
  vec_t model [D];
  longint last_use [D];
  int checks = 0, failures = 0;
  longint cyc = 0;

  gather_pe #(.N_PE(N), .BANK(BANKI), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; rd_en = 0; clr_en = 0; upd = '0; rd_addr = 0; clr_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); clr_en = 1; clr_addr = 5'(a);
      model[a] = '0; last_use[a] = -10;
    end
    @(negedge clk); clr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      int a;
      @(negedge clk);
      a = $urandom_range(0, D-1);
      if (last_use[a] >= cyc - 2 || $urandom_range(0, 4) == 0) begin
        upd_valid = 0;
      end else begin
        upd_valid = 1;
        upd.dst = vid_t'(a * N + BANKI);
        for (int i = 0; i < VEC; i++) upd.val[i] = data_t'($signed($urandom_range(0, 2000)) - 1000);
        model[a] = vec_add(model[a], upd.val);
        last_use[a] = cyc + 1;
      end
    end
    @(negedge clk); upd_valid = 0;
    #1; checks++; if (!busy) failures++;
    repeat (3) @(posedge clk);
    #1; checks++; if (busy) failures++;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 4) $display("entry %0d: %0d want %0d", a, rd_data[0], model[a][0]);
      end
    end
    // entries are cleared by the read
    for (int a = 0; a < D; a += 7) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
