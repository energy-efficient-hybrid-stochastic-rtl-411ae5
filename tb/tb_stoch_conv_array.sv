// tb_stoch_conv_array: a reduced 8x8 array (5x5 kernel, zero padding 2) fed
// with ramp-style pixel streams and van der Corput weight streams. For
// several random images, kernels and precisions, every engine's sign is
// compared with the reference engine applied to the window the testbench
// cuts out itself (out-of-image taps empty). Counts how many results were
// +1, -1 and 0, and fails if any kind never occurred.
module tb_stoch_conv_array;
  import snn_pkg::*;
  import sc_ref_pkg::*;
  localparam int S = 8;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [S-1:0][S-1:0] x_bits = '0;
  logic [24:0] w_pos = '0, w_neg = '0;
  logic [8:0] thresh = '0;
  logic [S-1:0][S-1:0][1:0] sign_map;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0;

  stoch_conv_array #(.IMG_P(S)) dut (.clk, .rst_n, .clr, .x_bits, .w_pos, .w_neg,
                                     .thresh, .sign_map);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 12; s++) begin
      automatic int prec = 3 + (s % 6);
      automatic int nb = 1 << prec;
      automatic int run[S][S];
      automatic int mag[25];
      automatic bit neg[25];
      automatic int th = (s % 4 == 3) ? 2 : 0;
      thresh = 9'(th);
      for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) run[r][c] = $urandom_range(0, nb);
      for (int i = 0; i < 25; i++) begin mag[i] = $urandom_range(0, nb - 1); neg[i] = $urandom_range(0, 1); end
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int t = 0; t < nb; t++) begin
        for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) x_bits[r][c] = (t < run[r][c]);
        for (int i = 0; i < 25; i++) begin
          automatic bit wb = vdc(t, prec) < mag[i];
          w_pos[i] = wb & !neg[i];
          w_neg[i] = wb & neg[i];
        end
        @(negedge clk);
      end
      for (int r = 0; r < S; r++)
        for (int c = 0; c < S; c++) begin
          automatic int win[25];
          automatic int cp, cn;
          automatic logic [1:0] e;
          for (int i = 0; i < 25; i++) begin
            automatic int pr = r + i / 5 - 2, pc = c + i % 5 - 2;
            win[i] = (pr >= 0 && pr < S && pc >= 0 && pc < S) ? run[pr][pc] : 0;
          end
          engine_counts(win, mag, neg, prec, cp, cn);
          e = sign_ref(cp, cn, th);
          checks++;
          if (sign_map[r][c] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL s%0d (%0d,%0d) got %b exp %b", s, r, c, sign_map[r][c], e);
          end
          case (e) 2'b01: n_pos++; 2'b11: n_neg++; default: n_zero++; endcase
        end
    end
    $display("results: +1 %0d, -1 %0d, 0 %0d", n_pos, n_neg, n_zero);
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
