// bfly_switch -- 2x2 switch of the butterfly routing network.
//
// Input i asks for output port in_upd[i].dst[BIT]. Each output port has a
// register that is loaded when it is empty or being drained. When both inputs
// ask for the same port, a per-port round-robin pointer picks the winner and
// the other input is held (in_ready low) until a later cycle. Latency is one
// cycle; each port passes one update per cycle. Arbitration and buffering are
// this design's choice.
module bfly_switch
  import hpgnn_pkg::*;
#(
  parameter int unsigned BIT = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [2],
  input  upd_t in_upd    [2],
  output logic in_ready  [2],
  output logic out_valid [2],
  output upd_t out_upd   [2],
  input  logic out_ready [2],
  output logic conflict           // both inputs asked for one port this cycle
);
  logic want  [2];
  logic can   [2];
  logic rr    [2];     // 0: input 0 has priority on that port
  logic grant [2][2];  // grant[port][input]

  always_comb begin
    for (int i = 0; i < 2; i++) want[i] = in_upd[i].dst[BIT];
    for (int p = 0; p < 2; p++) begin
      logic r0, r1;
      can[p] = !out_valid[p] || out_ready[p];
      r0 = in_valid[0] && (want[0] == p[0]);
      r1 = in_valid[1] && (want[1] == p[0]);
      grant[p][0] = can[p] && r0 && (!r1 || !rr[p]);
      grant[p][1] = can[p] && r1 && (!r0 ||  rr[p]);
    end
    for (int i = 0; i < 2; i++) in_ready[i] = grant[0][i] || grant[1][i];
    conflict = in_valid[0] && in_valid[1] && (want[0] == want[1]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        out_valid[p] <= 1'b0;
        out_upd[p]   <= '0;
        rr[p]        <= 1'b0;
      end
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (can[p]) begin
          out_valid[p] <= grant[p][0] || grant[p][1];
          if (grant[p][1])      out_upd[p] <= in_upd[1];
          else if (grant[p][0]) out_upd[p] <= in_upd[0];
        end
        if (grant[p][0] && in_valid[1] && (want[1] == p[0])) rr[p] <= 1'b1;
        if (grant[p][1] && in_valid[0] && (want[0] == p[0])) rr[p] <= 1'b0;
      end
    end
  end
endmodule
