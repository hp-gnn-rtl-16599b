// mac_array -- P x P grid of mac_units computing one P x P output block.
//
// Element (r, c) computes h[r][c] = sigma(b[c] + sum_k a[r][k] * W[k][c]) for
// the P vertices r of a tile and P output features c of a column block. Each
// cycle the input buffer supplies column k of the tile (a_col, one value per
// row, shared by the row) and the weight buffer supplies row k of the block
// (w_row, one value per column, shared by the column), so P*P MACs work per
// cycle. A dot product of length f_in takes f_in cycles; res holds the block
// from the cycle res_valid pulses until the next block finishes.
// Output-stationary dataflow with broadcast operands is this design's reading
// of the original's "systolic array" whose weights are broadcast.
module mac_array
  import hpgnn_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic          last,
  input  data_t         a_col [P],
  input  data_t [P-1:0] w_row,
  input  data_t [P-1:0] bias,
  input  act_e          act,
  output data_t         res [P][P],
  output logic          res_valid
);
  logic rv [P][P];

  for (genvar r = 0; r < P; r++) begin : g_row
    for (genvar c = 0; c < P; c++) begin : g_col
      mac_unit u_mac (
        .clk, .rst_n, .en, .first, .last,
        .a(a_col[r]), .w(w_row[c]), .bias(bias[c]), .act,
        .res(res[r][c]), .res_valid(rv[r][c])
      );
    end
  end

  assign res_valid = rv[0][0];
endmodule
