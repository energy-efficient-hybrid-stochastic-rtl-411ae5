// tb_sign_comparator: exhaustive over a grid of counts and thresholds:
// SIGN_POS when pos-neg > thresh, SIGN_NEG when neg-pos > thresh, else
// SIGN_ZERO.
module tb_sign_comparator;
  import snn_pkg::*;
  logic [8:0] cnt_pos, cnt_neg, thresh;
  sign_e sign_o;
  int checks = 0, failures = 0;

  sign_comparator #(.W(9)) dut (.cnt_pos, .cnt_neg, .thresh, .sign_o);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p <= 256; p += 3)
      for (int n = 0; n <= 256; n += 5)
        for (int th = 0; th < 12; th += 2) begin
          automatic int d = p - n;
          automatic logic [1:0] e = (d > th) ? 2'b01 : (-d > th) ? 2'b11 : 2'b00;
          cnt_pos = 9'(p); cnt_neg = 9'(n); thresh = 9'(th);
          #1;
          checks++;
          if (sign_o !== e) begin
            failures++;
            if (failures < 10) $display("FAIL p=%0d n=%0d th=%0d got %b exp %b", p, n, th, sign_o, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
