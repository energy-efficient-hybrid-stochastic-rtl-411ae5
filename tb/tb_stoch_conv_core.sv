// tb_stoch_conv_core: the digital core at reduced size (8x8 image, 4
// kernels) with the ramp front end emulated in the testbench: after each
// ramp_restart, pixel (r,c) streams run[r][c] ones then zeros. Loads
// random kernels through the weight port, runs images at precisions 8, 5
// and 3 (one with a soft threshold), and checks: the pass notifications
// (kernels in order, one per pass), the image latency NKERN*(2^prec+2),
// and every stored plane against the reference engine.
module tb_stoch_conv_core;
  import snn_pkg::*;
  import sc_ref_pkg::*;
  localparam int S = 8, NK = 4;

  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] prec = 4'd8, prec_q;
  logic [8:0] thresh = '0;
  logic busy, done;
  logic wt_we = 0;
  logic [1:0] wt_kernel = '0, plane_kernel, buf_rd_kernel = '0;
  logic [4:0] wt_tap = '0;
  logic [8:0] wt_data = '0;
  logic [S-1:0][S-1:0] x_bits;
  logic ramp_restart, plane_valid;
  logic [S-1:0][S-1:0][1:0] buf_rd_plane;
  int checks = 0, failures = 0;

  int run[S][S];
  int wmag[NK][25];
  bit wneg[NK][25];
  int tstep;

  stoch_conv_core #(.IMG_P(S), .NKERN_P(NK)) dut (
    .clk, .rst_n, .start, .prec, .thresh, .busy, .done, .prec_q,
    .wt_we, .wt_kernel, .wt_tap, .wt_data, .x_bits, .ramp_restart,
    .plane_valid, .plane_kernel, .buf_rd_kernel, .buf_rd_plane);

  always #5 clk = ~clk;

  // Front-end emulation: a ramp step counter and one comparator per pixel.
  always @(posedge clk) tstep <= ramp_restart ? 0 : tstep + 1;
  always_comb
    for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) x_bits[r][c] = (tstep < run[r][c]);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  task automatic run_image(input int p, input int th);
    automatic int nb = 1 << p;
    automatic int cycles = 0, passes = 0;
    for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) run[r][c] = ($urandom_range(0, 255) * nb + 255) / 256;
    @(negedge clk) begin start = 1; prec = 4'(p); thresh = 9'(th); end
    @(negedge clk) start = 0;
    while (!done) begin
      if (plane_valid) begin
        chk("plane order", int'(plane_kernel), passes);
        passes++;
      end
      @(negedge clk);
      cycles++;
    end
    chk("passes", passes, NK);
    chk("latency", cycles, NK * (nb + 2));
    for (int k = 0; k < NK; k++) begin
      automatic int mg[25];
      automatic bit ng[25];
      @(negedge clk) buf_rd_kernel = 2'(k);
      @(negedge clk);
      for (int i = 0; i < 25; i++) begin mg[i] = wmag[k][i] >> (8 - p); ng[i] = wneg[k][i]; end
      for (int r = 0; r < S; r++)
        for (int c = 0; c < S; c++) begin
          automatic int win[25];
          automatic int cp, cn;
          for (int i = 0; i < 25; i++) begin
            automatic int pr = r + i / 5 - 2, pc = c + i % 5 - 2;
            win[i] = (pr >= 0 && pr < S && pc >= 0 && pc < S) ? run[pr][pc] : 0;
          end
          engine_counts(win, mg, ng, p, cp, cn);
          chk("plane", int'(buf_rd_plane[r][c]), int'(sign_ref(cp, cn, th)));
        end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NK; k++)
      for (int i = 0; i < 25; i++) begin
        wmag[k][i] = $urandom_range(0, 255);
        wneg[k][i] = $urandom_range(0, 1);
        @(negedge clk);
        wt_we = 1; wt_kernel = 2'(k); wt_tap = 5'(i); wt_data = {wneg[k][i], 8'(wmag[k][i])};
      end
    @(negedge clk) wt_we = 0;
    run_image(8, 0);
    run_image(5, 2);
    run_image(3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
