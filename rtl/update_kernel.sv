// update_kernel -- feature update h = sigma(a W + b) for a tile of vertices.
//
// Blocks: input_buffer (aggregated features a of up to P vertices), weight
// buffer (W and b on chip), a P x P mac_array (m = P*P MACs, each followed
// by sigma) and a result_buffer. After the host has filled the buffers,
// start (with cfg_fin = f_in, cfg_fout = f_out, a multiple of P, cfg_rows =
// vertices in the tile, cfg_act = sigma) runs the tile: for each column block
// cb of f_out, feature index k runs 0 .. f_in-1, one per cycle, streaming
// column k of a into the array while row k of W is broadcast. The block's
// results go to the result buffer and drain (one vertex row of P outputs per
// cycle on out_*) while the next block computes. The last feature index of
// a block is held back while the result buffer is still draining the
// previous block, which costs cycles only when f_in < rows + 2.
// Timing: start to done takes f_out/P * f_in cycles plus a few cycles of
// pipeline and the drain of the last block, i.e. |B| f_in f_out / m cycles
// per tile, the update time of the original performance model. Double
// buffering of the input buffer is not provided: the host loads the next
// tile after done. The blocks follow the original design; the dataflow, the
// tile protocol and the bias handling are this design's choices.
module update_kernel
  import hpgnn_pkg::*;
#(
  parameter int unsigned P        = 16,
  parameter int unsigned MAX_FIN  = 1280,
  parameter int unsigned MAX_FOUT = 256,
  localparam int unsigned NCB  = MAX_FOUT / P,
  localparam int unsigned KB   = (MAX_FIN + VEC - 1) / VEC,
  localparam int unsigned RW   = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned KBW  = (KB > 1) ? $clog2(KB) : 1,
  localparam int unsigned IKW  = $clog2(KB * VEC),
  localparam int unsigned KW   = $clog2(MAX_FIN + 1),
  localparam int unsigned CBW  = (NCB > 1) ? $clog2(NCB) : 1,
  localparam int unsigned WAW  = $clog2(MAX_FIN * NCB),
  localparam int unsigned FOW  = $clog2(MAX_FOUT + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // input buffer fill
  input  logic           ib_wr_en,
  input  logic [RW-1:0]  ib_wr_row,
  input  logic [KBW-1:0] ib_wr_kblk,
  input  vec_t           ib_wr_data,
  // weight buffer fill
  input  logic           wt_wr_en,
  input  logic           wt_wr_bias,
  input  logic [WAW-1:0] wt_wr_addr,
  input  data_t [P-1:0]  wt_wr_data,
  // tile command
  input  logic           start,
  input  logic [KW-1:0]  cfg_fin,
  input  logic [FOW-1:0] cfg_fout,
  input  logic [RW:0]    cfg_rows,
  input  act_e           cfg_act,
  // results
  output logic           out_valid,
  output logic [RW-1:0]  out_row,
  output logic [CBW-1:0] out_cb,
  output data_t [P-1:0]  out_data,
  input  logic           out_ready,
  output logic           busy,
  output logic           done
);
  localparam int unsigned LOGP = (P > 1) ? $clog2(P) : 0;

  typedef enum logic [1:0] {U_IDLE, U_RUN, U_FLUSH} ustate_e;
  ustate_e state;

  logic [KW-1:0]  fin, k;
  logic [CBW:0]   ncb, cb;
  logic [RW:0]    rows;
  act_e           act;
  logic           issue, is_last, pend;
  logic           en_d1, first_d1, last_d1;
  logic [CBW-1:0] cb_d1, cb_d2;

  data_t          a_col [P];
  data_t [P-1:0]  w_row, bias;
  data_t          res [P][P];
  logic           res_valid, rb_full;

  assign is_last = (k == fin - 1'b1);
  assign pend    = last_d1 || res_valid;
  assign issue   = (state == U_RUN) && !(is_last && (rb_full || pend));
  assign busy    = (state != U_IDLE);

  input_buffer #(.P(P), .MAX_FIN(MAX_FIN)) u_ib (
    .clk, .wr_en(ib_wr_en), .wr_row(ib_wr_row), .wr_kblk(ib_wr_kblk),
    .wr_data(ib_wr_data), .rd_en(issue), .rd_k(IKW'(k)), .rd_col(a_col)
  );

  weight_buffer #(.P(P), .MAX_FIN(MAX_FIN), .MAX_FOUT(MAX_FOUT)) u_wb (
    .clk, .wr_en(wt_wr_en), .wr_bias(wt_wr_bias), .wr_addr(wt_wr_addr),
    .wr_data(wt_wr_data), .rd_en(issue), .rd_k(k), .rd_cb(CBW'(cb)),
    .rd_w(w_row), .rd_b(bias)
  );

  mac_array #(.P(P)) u_mac (
    .clk, .rst_n, .en(en_d1), .first(first_d1), .last(last_d1),
    .a_col, .w_row, .bias, .act, .res, .res_valid
  );

  result_buffer #(.P(P), .CBW(CBW)) u_rb (
    .clk, .rst_n, .rows, .cap(res_valid), .cap_cb(cb_d2), .res,
    .full(rb_full), .out_valid, .out_row, .out_cb, .out_data, .out_ready
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= U_IDLE;
      fin      <= '0;
      k        <= '0;
      ncb      <= '0;
      cb       <= '0;
      rows     <= '0;
      act      <= ACT_NONE;
      en_d1    <= 1'b0;
      first_d1 <= 1'b0;
      last_d1  <= 1'b0;
      cb_d1    <= '0;
      cb_d2    <= '0;
      done     <= 1'b0;
    end else begin
      done     <= 1'b0;
      en_d1    <= issue;
      first_d1 <= issue && (k == '0);
      last_d1  <= issue && is_last;
      cb_d1    <= CBW'(cb);
      if (last_d1) cb_d2 <= cb_d1;
      case (state)
        U_IDLE: if (start) begin
          fin   <= cfg_fin;
          ncb   <= (CBW+1)'(cfg_fout >> LOGP);
          rows  <= cfg_rows;
          act   <= cfg_act;
          k     <= '0;
          cb    <= '0;
          state <= U_RUN;
        end
        U_RUN: if (issue) begin
          if (is_last) begin
            k  <= '0;
            cb <= cb + 1'b1;
            if (cb + 1'b1 == ncb) state <= U_FLUSH;
          end else begin
            k <= k + 1'b1;
          end
        end
        U_FLUSH: if (!en_d1 && !pend && !rb_full) begin
          state <= U_IDLE;
          done  <= 1'b1;
        end
        default: state <= U_IDLE;
      endcase
    end
  end

  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == U_IDLE) |-> (int'(cfg_fin) >= 1 && int'(cfg_fin) <= int'(MAX_FIN) &&
      int'(cfg_fout) >= int'(P) && int'(cfg_fout) <= int'(MAX_FOUT) &&
      (int'(cfg_fout) % int'(P)) == 0 && int'(cfg_rows) >= 1 && int'(cfg_rows) <= int'(P)));
  a_no_fill_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(ib_wr_en || wt_wr_en));
endmodule
