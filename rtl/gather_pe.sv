// gather_pe -- gather processing element with its on-chip result bank.
//
// Accumulates updates into the bank: v_ft[dst] += u.val (the gather
// function). The bank entry is dst / N_PE; the routing network guarantees
// dst mod N_PE == BANK. Pipeline: cycle 0 accepts the update and reads the
// entry, cycle 1 adds, cycle 2 writes the sum back. A second update to the
// same entry must therefore wait until cycle 3, which the raw_resolver in
// front enforces (window 2). Besides updates the PE serves two maintenance
// operations from the kernel controller, never at the same time as updates:
// rd_en reads an entry (rd_data valid next cycle) and clears it to zero for
// the next pass; clr_en writes zero. busy is high while an update is inside
// the pipeline. Read-add-write accumulation follows the original design;
// the clear-on-read and the pipeline depth are this design's choice.
module gather_pe
  import hpgnn_pkg::*;
#(
  parameter int unsigned N_PE  = 4,
  parameter int unsigned BANK  = 0,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          upd_valid,
  input  upd_t          upd,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output vec_t          rd_data,
  input  logic          clr_en,
  input  logic [AW-1:0] clr_addr,
  output logic          busy
);
  localparam int unsigned LOGN = (N_PE > 1) ? $clog2(N_PE) : 0;

  logic          s1_v, s2_v;
  logic [AW-1:0] s1_a, s2_a;
  vec_t          s1_val, s2_sum;
  logic          re, we;
  logic [AW-1:0] raddr, waddr;
  vec_t          rdata, wdata;
  logic [AW-1:0] upd_addr;

  assign upd_addr = AW'(upd.dst >> LOGN);

  always_comb begin
    re    = upd_valid || rd_en;
    raddr = upd_valid ? upd_addr : rd_addr;
    we    = s2_v || rd_en || clr_en;
    waddr = s2_v ? s2_a : (rd_en ? rd_addr : clr_addr);
    wdata = s2_v ? s2_sum : '0;
  end

  agg_mem #(.DEPTH(DEPTH)) u_mem (
    .clk, .re, .raddr, .rdata, .we, .waddr, .wdata
  );

  assign rd_data = rdata;
  assign busy    = s1_v || s2_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
      s1_a <= '0;
      s2_a <= '0;
      s1_val <= '0;
      s2_sum <= '0;
    end else begin
      s1_v   <= upd_valid;
      s1_a   <= upd_addr;
      s1_val <= upd.val;
      s2_v   <= s1_v;
      s2_a   <= s1_a;
      s2_sum <= vec_add(rdata, s1_val);
    end
  end

  a_bank:     assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid |-> (upd.dst % N_PE == BANK));
  a_no_mix:   assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid |-> !(rd_en || clr_en));
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid |-> ((upd.dst >> LOGN) < DEPTH));
endmodule
