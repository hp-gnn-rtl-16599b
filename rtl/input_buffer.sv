// input_buffer -- holds the aggregation results of one tile of P vertices
// for the update kernel and turns them into columns.
//
// Local memory delivers a vertex's aggregated feature as 16-word slices, but
// the MAC array consumes one feature index k of all P vertices per cycle. The
// buffer therefore has one bank per tile row (vertex); entry kb of bank r
// holds words 16*kb .. 16*kb+15 of vertex r. A read of feature index rd_k
// returns word rd_k mod 16 of entry rd_k / 16 of every bank, valid the
// cycle after rd_en (the entry is registered, the word mux follows it).
// Writes: one slice per cycle at (wr_row, wr_kblk). For GraphSAGE the host
// writes h_v into slices 0.. and the mean of the neighbours after it, which
// forms the concatenation h_v || mean.
// The buffer is part of the original design; the banking is this design's.
module input_buffer
  import hpgnn_pkg::*;
#(
  parameter int unsigned P       = 16,
  parameter int unsigned MAX_FIN = 1280,
  localparam int unsigned KB  = (MAX_FIN + VEC - 1) / VEC,
  localparam int unsigned RW  = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned KBW = (KB > 1) ? $clog2(KB) : 1,
  localparam int unsigned KW  = $clog2(KB * VEC)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [RW-1:0]  wr_row,
  input  logic [KBW-1:0] wr_kblk,
  input  vec_t           wr_data,
  input  logic           rd_en,
  input  logic [KW-1:0]  rd_k,
  output data_t          rd_col [P]
);
  localparam int unsigned VW = $clog2(VEC);

  logic [KBW-1:0] rkb;
  logic [VW-1:0]  rword, rword_q;
  assign rkb   = KBW'(rd_k >> VW);
  assign rword = rd_k[VW-1:0];

  // one single-port-write, single-port-read memory per tile row; the whole
  // 16-word entry is read and the word is picked after the register
  for (genvar r = 0; r < P; r++) begin : g_row
    vec_t mem [KB];
    vec_t rd_q;
    always_ff @(posedge clk) begin
      if (wr_en && wr_row == RW'(r)) mem[wr_kblk] <= wr_data;
      if (rd_en) rd_q <= mem[rkb];
    end
    assign rd_col[r] = rd_q[rword_q];
  end

  always_ff @(posedge clk)
    if (rd_en) rword_q <= rword;
endmodule
