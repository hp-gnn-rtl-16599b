// routing_network -- butterfly network from the scatter PEs to the gather PEs.
//
// Delivers every update to the gather PE that owns its destination, lane
// dst mod N_PE (dst is the kernel-local index). N_PE must be a power of two.
// The network has log2(N_PE) stages of bfly_switch; stage s pairs lanes that
// differ in bit b = log2(N_PE)-1-s and sets that bit of the lane index to
// the same bit of dst, so after the last stage the lane index equals
// dst mod N_PE. Latency is log2(N_PE) cycles without conflicts; a conflict in
// a switch holds the losing update for at least one cycle and the hold
// propagates back to the scatter PE through the ready signals. The butterfly
// topology follows the original design; switches, arbitration and buffering
// are this design's choice. conflicts counts the switches that saw a
// conflict this cycle.
module routing_network
  import hpgnn_pkg::*;
#(
  parameter int unsigned N_PE = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [N_PE],
  input  upd_t in_upd    [N_PE],
  output logic in_ready  [N_PE],
  output logic out_valid [N_PE],
  output upd_t out_upd   [N_PE],
  input  logic out_ready [N_PE],
  output logic busy,                 // an update is inside the network
  output logic [$clog2(N_PE*N_PE+1)-1:0] conflicts
);
  localparam int unsigned LOG = (N_PE > 1) ? $clog2(N_PE) : 1;
  localparam int unsigned NST = (N_PE > 1) ? $clog2(N_PE) : 0;

  // Stage k holds the lanes entering stage k (k = NST: network outputs).
  for (genvar k = 0; k <= NST; k++) begin : g_st
    logic v [N_PE];
    upd_t d [N_PE];
    logic r [N_PE];
    logic cf [N_PE];   // conflict flag of the switch whose low lane is i
  end

  for (genvar i = 0; i < N_PE; i++) begin : g_io
    assign g_st[0].v[i]   = in_valid[i];
    assign g_st[0].d[i]   = in_upd[i];
    assign in_ready[i]    = g_st[0].r[i];
    assign out_valid[i]   = g_st[NST].v[i];
    assign out_upd[i]     = g_st[NST].d[i];
    assign g_st[NST].r[i] = out_ready[i];
    assign g_st[NST].cf[i] = 1'b0;
  end

  for (genvar s = 0; s < NST; s++) begin : g_stage
    localparam int unsigned B = LOG - 1 - s;
    for (genvar i = 0; i < N_PE; i++) begin : g_lane
      if (((i >> B) & 1) == 0) begin : g_sw
        localparam int unsigned J = i | (1 << B);
        logic iv [2]; upd_t iu [2]; logic ir [2];
        logic ov [2]; upd_t ou [2]; logic orr [2];
        assign iv[0] = g_st[s].v[i];   assign iv[1] = g_st[s].v[J];
        assign iu[0] = g_st[s].d[i];   assign iu[1] = g_st[s].d[J];
        assign g_st[s].r[i] = ir[0];   assign g_st[s].r[J] = ir[1];
        assign g_st[s+1].v[i] = ov[0]; assign g_st[s+1].v[J] = ov[1];
        assign g_st[s+1].d[i] = ou[0]; assign g_st[s+1].d[J] = ou[1];
        assign orr[0] = g_st[s+1].r[i]; assign orr[1] = g_st[s+1].r[J];
        bfly_switch #(.BIT(B)) u_sw (
          .clk, .rst_n,
          .in_valid(iv), .in_upd(iu), .in_ready(ir),
          .out_valid(ov), .out_upd(ou), .out_ready(orr),
          .conflict(g_st[s].cf[i])
        );
        assign g_st[s].cf[J] = 1'b0;
      end
    end
  end

  logic any_v [NST+1][N_PE];
  logic cfa   [NST+1][N_PE];
  for (genvar k = 0; k <= NST; k++) begin : g_flat
    for (genvar i = 0; i < N_PE; i++) begin : g_l
      assign any_v[k][i] = g_st[k].v[i];
      assign cfa[k][i]   = g_st[k].cf[i];
    end
  end

  always_comb begin
    busy = 1'b0;
    conflicts = '0;
    for (int k = 1; k <= NST; k++)
      for (int i = 0; i < N_PE; i++) busy |= any_v[k][i];
    for (int k = 0; k < NST; k++)
      for (int i = 0; i < N_PE; i++) conflicts += cfa[k][i];
  end

  for (genvar i = 0; i < N_PE; i++) begin : g_chk
    a_lane: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[i] |-> (out_upd[i].dst % N_PE == i));
  end
endmodule
