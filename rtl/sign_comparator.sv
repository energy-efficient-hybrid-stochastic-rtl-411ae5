// sign_comparator: ternary sign activation with soft threshold.
//
// The dot product is split into a positive-weight part and a negative-
// weight part, each counted separately; their difference d = cnt_pos -
// cnt_neg gives the neuron's sign. Following the paper, results close to
// zero are forced to zero ("soft thresholding"): sign_o is SIGN_ZERO when
// |d| <= thresh, SIGN_POS when d > thresh and SIGN_NEG when d < -thresh.
// thresh = 0 gives the plain sign function. Applying the threshold to the
// count difference is this design's choice. Purely combinational.
module sign_comparator
  import snn_pkg::*;
#(
  parameter int unsigned W = 9
) (
  input  logic [W-1:0] cnt_pos,
  input  logic [W-1:0] cnt_neg,
  input  logic [W-1:0] thresh,
  output sign_e        sign_o
);

  always_comb begin
    if (cnt_pos > cnt_neg) begin
      sign_o = ((cnt_pos - cnt_neg) > thresh) ? SIGN_POS : SIGN_ZERO;
    end else begin
      sign_o = ((cnt_neg - cnt_pos) > thresh) ? SIGN_NEG : SIGN_ZERO;
    end
  end

endmodule
