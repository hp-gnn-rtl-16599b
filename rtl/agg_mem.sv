// agg_mem -- one on-chip memory bank for aggregation results.
//
// DEPTH entries of one 16-word feature slice. One read port with a registered
// output (rdata is valid the cycle after re) and one write port; a read and a
// write of the same address in the same cycle return the old contents. The
// array has no reset; the gather PE clears it with writes. The bank itself is
// the on-chip storage of intermediate results of the original design; its
// size is this design's choice.
module agg_mem
  import hpgnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output vec_t          rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  vec_t          wdata
);
  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
