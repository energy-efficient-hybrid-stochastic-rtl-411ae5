// tb_weight_sng: for every precision 1..8 and random sign-magnitude
// weights, checks each stream bit against the van der Corput comparison,
// that each positive (negative) weight drives only w_pos (w_neg), that a
// stream of 2^prec bits carries exactly mag>>(8-prec) ones, that step
// restarts at 0 and wraps at 2^prec, and that any prefix of the stream is
// within 1 + prec/2 ones of its ideal share (the low-discrepancy property).
module tb_weight_sng;
  import sc_ref_pkg::*;

  logic clk = 0, rst_n = 0, restart = 0;
  logic [3:0] prec = 4'd8;
  logic [24:0][8:0] weights = '0;
  logic [24:0] w_pos, w_neg;
  logic [7:0] step;
  int checks = 0, failures = 0;

  weight_sng dut (.clk, .rst_n, .restart, .prec, .weights, .w_pos, .w_neg, .step);

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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 24; s++) begin
      automatic int p = 1 + (s % 8);
      automatic int nb = 1 << p;
      automatic int ones[25];
      automatic int magp[25];
      prec = 4'(p);
      for (int i = 0; i < 25; i++) begin
        weights[i] = 9'($urandom_range(0, 511));
        if (s == 0 && i == 0) weights[i] = 9'h0FF;     // largest positive
        if (s == 0 && i == 1) weights[i] = 9'h1FF;     // largest negative
        magp[i] = int'(weights[i][7:0]) >> (8 - p);
        ones[i] = 0;
      end
      @(negedge clk) restart = 1;
      @(negedge clk) restart = 0;
      for (int t = 0; t < nb; t++) begin
        chk("step", int'(step), t);
        for (int i = 0; i < 25; i++) begin
          automatic bit e = vdc(t, p) < magp[i];
          automatic bit ng = weights[i][8];
          chk("w_pos", int'(w_pos[i]), int'(e & !ng));
          chk("w_neg", int'(w_neg[i]), int'(e & ng));
          ones[i] += w_pos[i] | w_neg[i];
          // prefix discrepancy: ones in the first t+1 bits vs (t+1)*mag/nb
          checks++;
          if (real'(ones[i]) > real'((t + 1) * magp[i]) / nb + 1.0 + p / 2.0 ||
              real'(ones[i]) < real'((t + 1) * magp[i]) / nb - 1.0 - p / 2.0) begin
            failures++;
            if (failures < 20) $display("FAIL prefix %0d of %0d", ones[i], magp[i]);
          end
        end
        @(negedge clk);
      end
      chk("wrap", int'(step), 0);
      for (int i = 0; i < 25; i++) chk("ones", ones[i], magp[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
