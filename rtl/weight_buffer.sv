// weight_buffer -- on-chip store of the layer weights W (f_in x f_out) and
// bias b of the update kernel.
//
// W is kept in column blocks of P outputs: entry k*NCB + cb holds
// W[k][cb*P .. cb*P+P-1], where NCB = MAX_FOUT / P. The bias has its own NCB
// entries (written with wr_bias). A read of (rd_k, rd_cb) returns that row
// of the block and the block's bias, registered (valid the cycle after
// rd_en); the row is broadcast to the P columns of the MAC array. Keeping W
// on chip and broadcasting it follows the original design; the layout and
// holding the bias here are this design's choice.
module weight_buffer
  import hpgnn_pkg::*;
#(
  parameter int unsigned P        = 16,
  parameter int unsigned MAX_FIN  = 1280,
  parameter int unsigned MAX_FOUT = 256,
  localparam int unsigned NCB   = MAX_FOUT / P,
  localparam int unsigned DEPTH = MAX_FIN * NCB,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned CBW   = (NCB > 1) ? $clog2(NCB) : 1,
  localparam int unsigned KW    = $clog2(MAX_FIN + 1)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic           wr_bias,
  input  logic [AW-1:0]  wr_addr,
  input  data_t [P-1:0]  wr_data,
  input  logic           rd_en,
  input  logic [KW-1:0]  rd_k,
  input  logic [CBW-1:0] rd_cb,
  output data_t [P-1:0]  rd_w,
  output data_t [P-1:0]  rd_b
);
  data_t [P-1:0] wmem [DEPTH];
  data_t [P-1:0] bmem [NCB];

  logic [AW-1:0] raddr;
  assign raddr = AW'(rd_k * NCB + rd_cb);

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bias) wmem[wr_addr] <= wr_data;
    if (wr_en &&  wr_bias) bmem[CBW'(wr_addr)] <= wr_data;
    if (rd_en) begin
      rd_w <= wmem[raddr];
      rd_b <= bmem[rd_cb];
    end
  end
endmodule
