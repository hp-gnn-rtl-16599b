// result_buffer -- holds a finished P x P output block and sends it out.
//
// cap copies the whole block from the MAC array in one cycle (only allowed
// while full is low), together with its column-block index. The block then
// leaves one vertex row per handshake on out_* (out_row = 0 .. rows-1, P
// words each), while the MAC array already works on the next block. full
// drops after the last row is accepted. The buffer is part of the original
// design; row-by-row draining is this design's choice.
module result_buffer
  import hpgnn_pkg::*;
#(
  parameter int unsigned P   = 16,
  parameter int unsigned CBW = 4,
  localparam int unsigned RW = (P > 1) ? $clog2(P) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [RW:0]    rows,       // valid rows of the tile, 1..P
  input  logic           cap,
  input  logic [CBW-1:0] cap_cb,
  input  data_t          res [P][P],
  output logic           full,
  output logic           out_valid,
  output logic [RW-1:0]  out_row,
  output logic [CBW-1:0] out_cb,
  output data_t [P-1:0]  out_data,
  input  logic           out_ready
);
  data_t buf_q [P][P];
  logic [RW:0] row;

  assign out_valid = full;
  assign out_row   = RW'(row);
  always_comb
    for (int c = 0; c < P; c++) out_data[c] = buf_q[row[RW-1:0]][c];

  always_ff @(posedge clk) begin
    if (cap && !full) buf_q <= res;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full   <= 1'b0;
      row    <= '0;
      out_cb <= '0;
    end else if (cap && !full) begin
      full   <= 1'b1;
      row    <= '0;
      out_cb <= cap_cb;
    end else if (full && out_ready) begin
      if (row + 1'b1 >= rows) full <= 1'b0;
      row <= row + 1'b1;
    end
  end

  a_cap_free: assert property (@(posedge clk) disable iff (!rst_n) cap |-> !full);
endmodule
