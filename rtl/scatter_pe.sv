// scatter_pe -- scatter processing element of the aggregate kernel.
//
// Keeps the broadcast source feature slice in a register (loaded on load, the
// same cycle the feature duplicator takes it) and consumes the edges of its
// lane. An edge whose source equals the held feature's source produces one
// update: destination = edge.dst - dst_offset (an index local to the
// kernel), value = edge.val * feature, element by element (the scatter
// function msg.val = edge.val * feat[edge.src]). The update is registered and
// offered with a valid/ready handshake, so the PE takes one edge per cycle
// while its output is free. passed tells the duplicator that this lane no
// longer needs the held feature: its head edge has another source, or the
// lane is exhausted (lane_done). Scatter function and per-PE feature register
// follow the original design; subtracting the offset here rather than in the
// gather PE is this design's choice, so that routing can use the local index.
module scatter_pe
  import hpgnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  vid_t  dst_offset,
  // feature broadcast
  input  logic  load,
  input  feat_t feat_in,
  input  logic  feat_valid,   // a feature is held (from the duplicator)
  // edge lane
  input  logic  edge_valid,
  input  edge_t edge_in,
  output logic  edge_pop,
  input  logic  lane_done,
  output logic  passed,
  // update output
  output logic  upd_valid,
  output upd_t  upd,
  input  logic  upd_ready
);
  feat_t feat_q;
  logic  match, can_load;

  assign match    = feat_valid && edge_valid && (edge_in.src == feat_q.src);
  assign can_load = !upd_valid || upd_ready;
  assign edge_pop = match && can_load;
  assign passed   = (edge_valid && (edge_in.src != feat_q.src)) || (!edge_valid && lane_done);

  always_ff @(posedge clk) begin
    if (load) feat_q <= feat_in;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      upd_valid <= 1'b0;
      upd       <= '0;
    end else if (can_load) begin
      upd_valid <= edge_pop;
      if (edge_pop) begin
        upd.dst <= edge_in.dst - dst_offset;
        upd.val <= vec_scale(feat_q.val, edge_in.val);
      end
    end
  end

  // An edge whose source lies behind the held feature can never be served.
  a_edge_order: assert property (@(posedge clk) disable iff (!rst_n)
    (feat_valid && edge_valid) |-> (edge_in.src >= feat_q.src));
endmodule
