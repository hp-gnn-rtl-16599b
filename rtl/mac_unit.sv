// mac_unit -- one multiply-accumulate element of the update kernel, followed
// by its element-wise operator sigma.
//
// While en is high it adds a*w to its accumulator; on the first term of a
// dot product (first) the accumulator starts from the bias instead of its old
// value. With last, the finished sum passes through sigma (ReLU or identity,
// chosen by act) into res, and res_valid pulses the next cycle. One term per
// cycle. The MAC followed by sigma is the original design's element; the bias
// preload is this design's choice.
module mac_unit
  import hpgnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  logic  last,
  input  data_t a,
  input  data_t w,
  input  data_t bias,
  input  act_e  act,
  output data_t res,
  output logic  res_valid
);
  data_t acc, sum;

  assign sum = fx_add(first ? bias : acc, fx_mul(a, w));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= en && last;
      if (en) begin
        acc <= sum;
        if (last) res <= (act == ACT_RELU && sum < 0) ? '0 : sum;
      end
    end
  end
endmodule
