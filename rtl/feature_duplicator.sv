// feature_duplicator -- fans one source-vertex feature slice out to every
// scatter PE of an aggregate kernel.
//
// Features arrive from local memory in increasing source order, one slice per
// source vertex. The duplicator holds the source index of the feature that the
// scatter PEs currently keep in their registers (cur_src, cur_valid). The next
// feature is taken (feat_ready) when no feature is held, or when every lane
// reports lane_passed: its head edge has another source, or it has no more
// edges. Taking a feature raises bcast_load for that cycle with the slice on
// bcast_feat, and the PEs copy it at the same clock edge, so the new feature
// is usable one cycle after the handshake. Because edges are sorted by
// source, a feature is loaded once and reused by every edge leaving that
// vertex. The broadcast follows the original design; the rule for when to
// advance is this design's own. bcast_feat is the input feature wired
// straight through (the scatter PEs register it on bcast_load), so a
// synthesis report lists those output bits as idle.
module feature_duplicator
  import hpgnn_pkg::*;
#(
  parameter int unsigned N_PE = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,        // kernel is in its scatter-gather phase
  input  logic            flush,      // drop the held feature (start of a pass)
  input  logic            feat_valid,
  input  feat_t           feat,
  output logic            feat_ready,
  input  logic [N_PE-1:0] lane_passed,
  output logic            cur_valid,
  output vid_t            cur_src,
  output logic            bcast_load,
  output feat_t           bcast_feat
);
  logic advance;

  assign advance    = cur_valid && (&lane_passed);
  assign feat_ready = run && (!cur_valid || advance);
  assign bcast_load = feat_valid && feat_ready;
  assign bcast_feat = feat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur_src   <= '0;
    end else if (flush) begin
      cur_valid <= 1'b0;
    end else if (bcast_load) begin
      cur_valid <= 1'b1;
      cur_src   <= feat.src;
    end else if (advance) begin
      cur_valid <= 1'b0;
    end
  end

  // Sources must arrive in increasing order within a pass.
  a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
    (bcast_load && cur_valid) |-> (feat.src > cur_src));
endmodule
