// stoch_dot_product_unit: one stochastic convolution engine.
//
// Computes sign(x . w) for one 5x5 window, as in the paper: each pixel
// stream x_i is multiplied (AND gate) with the positive-weight stream
// w_pos_i and with the negative-weight stream w_neg_i; each set of 25
// products is summed by a TFF adder tree (value scaled by 1/32); the two
// sums are counted into binary, and a comparator gives the ternary sign.
//
// Timing: pulse clr for one cycle before a stream; then feed one bit per
// input per clock for 2^prec clocks. cnt_pos / cnt_neg and sign_o are valid
// in the cycle after the last stream bit, and hold until the next clr.
module stoch_dot_product_unit
  import snn_pkg::*;
#(
  parameter int unsigned TAPS_P = snn_pkg::TAPS,
  parameter int unsigned CW_P   = snn_pkg::CW,
  parameter logic        S0     = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic [TAPS_P-1:0] x,
  input  logic [TAPS_P-1:0] w_pos,
  input  logic [TAPS_P-1:0] w_neg,
  input  logic [CW_P-1:0]   thresh,
  output sign_e             sign_o,
  output logic [CW_P-1:0]   cnt_pos,
  output logic [CW_P-1:0]   cnt_neg
);

  logic [TAPS_P-1:0] prod_pos, prod_neg;
  logic              sum_pos, sum_neg;

  assign prod_pos = x & w_pos;   // unipolar SC multipliers
  assign prod_neg = x & w_neg;

  sc_adder_tree #(.N_IN(TAPS_P), .S0(S0)) u_tree_pos (
    .clk(clk), .rst_n(rst_n), .clr(clr), .in_bits(prod_pos), .sum_bit(sum_pos));
  sc_adder_tree #(.N_IN(TAPS_P), .S0(S0)) u_tree_neg (
    .clk(clk), .rst_n(rst_n), .clr(clr), .in_bits(prod_neg), .sum_bit(sum_neg));

  sc_counter #(.W(CW_P)) u_cnt_pos (
    .clk(clk), .rst_n(rst_n), .clr(clr), .x(sum_pos), .count(cnt_pos));
  sc_counter #(.W(CW_P)) u_cnt_neg (
    .clk(clk), .rst_n(rst_n), .clr(clr), .x(sum_neg), .count(cnt_neg));

  sign_comparator #(.W(CW_P)) u_cmp (
    .cnt_pos(cnt_pos), .cnt_neg(cnt_neg), .thresh(thresh), .sign_o(sign_o));

endmodule
