// tb_stoch_dot_product_unit: one engine with ramp pixel streams and
// van der Corput weight streams, as in the full design, at precisions 2..8.
// Each stream: counts and sign against the bit-level reference; the counts
// must be valid the cycle after the last bit (2^prec clocks after clr).
// Some runs use a non-zero soft threshold.
module tb_stoch_dot_product_unit;
  import snn_pkg::*;
  import sc_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [24:0] x = '0, w_pos = '0, w_neg = '0;
  logic [8:0] thresh = '0;
  sign_e sign_o;
  logic [8:0] cnt_pos, cnt_neg;
  int checks = 0, failures = 0;

  stoch_dot_product_unit dut (.clk, .rst_n, .clr, .x, .w_pos, .w_neg, .thresh,
                              .sign_o, .cnt_pos, .cnt_neg);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    automatic bit qp[] = new[31];
    automatic bit qn[] = new[31];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      automatic int prec = 2 + (s % 7);
      automatic int nb = 1 << prec;
      automatic int pix[25], mag[25];
      automatic bit neg[25];
      automatic int ep = 0, en = 0, d, th;
      th = (s % 3 == 0) ? $urandom_range(0, 6) : 0;
      thresh = 9'(th);
      for (int i = 0; i < 25; i++) begin
        pix[i] = $urandom_range(0, nb);       // ones at the head of the stream
        mag[i] = $urandom_range(0, nb - 1);
        neg[i] = $urandom_range(0, 1);
      end
      foreach (qp[i]) begin qp[i] = 0; qn[i] = 0; end
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int t = 0; t < nb; t++) begin
        automatic bit [63:0] pp = '0, pn = '0;
        for (int i = 0; i < 25; i++) begin
          automatic bit wb = (vdc(t, prec) < mag[i]);
          x[i]     = (t < pix[i]);
          w_pos[i] = wb & !neg[i];
          w_neg[i] = wb &  neg[i];
          pp[i] = x[i] & w_pos[i];
          pn[i] = x[i] & w_neg[i];
        end
        ep += tree_step(pp, 25, qp);
        en += tree_step(pn, 25, qn);
        @(negedge clk);
      end
      x = '0; w_pos = '0; w_neg = '0;
      chk("cnt_pos", int'(cnt_pos), ep);
      chk("cnt_neg", int'(cnt_neg), en);
      d = ep - en;
      chk("sign", int'(sign_o), (d > th) ? 1 : (-d > th) ? 3 : 0);
      // Results hold after the stream.
      @(negedge clk);
      chk("cnt_pos held", int'(cnt_pos), ep);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
