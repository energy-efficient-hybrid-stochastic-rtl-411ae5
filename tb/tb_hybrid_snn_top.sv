// tb_hybrid_snn_top: end-to-end run of the whole design at reduced size
// (10x10 sensor, 100 engines, 4 kernels of 5x5); tb_hybrid_snn_top_full runs
// the same test at the default size.
// Loads 32 random kernels, applies a sensor image (pixel code p as voltage
// p/256, a bright stroke on a dark background with noise), and runs it at
// precision 8 with soft threshold 3, then again at precision 4 with no
// threshold. Checks, for each run: the latency 32*(2^prec+2), one plane
// notification per kernel in order, and every result of every plane,
// read from the result buffer, against the reference engine.
// Mechanisms counted, each of which must occur: +1, -1 and 0 results,
// results forced to 0 by the soft threshold, windows cut by the image edge
// (zero padding), and the change of precision between images.
module tb_hybrid_snn_top;
  import snn_pkg::*;
  import sc_ref_pkg::*;
  localparam int IMG = 10, NKERN = 4, KW = 2;

  logic clk = 0, rst_n = 0, start = 0;
  real sensor_v [IMG][IMG];
  logic [PW-1:0] prec = 4'd8;
  logic [CW-1:0] thresh = '0;
  logic busy, done;
  logic wt_we = 0;
  logic [KW-1:0] wt_kernel = '0, plane_kernel, buf_rd_kernel = '0;
  logic [$clog2(TAPS)-1:0] wt_tap = '0;
  weight_t wt_data = '0;
  logic plane_valid;
  logic [IMG-1:0][IMG-1:0][1:0] buf_rd_plane;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0, n_thresh_zero = 0, n_edge = 0, n_prec_switch = 0;

  int pix[IMG][IMG];
  int wmag[NKERN][TAPS];
  bit wneg[NKERN][TAPS];

  hybrid_snn_top #(.IMG_P(IMG), .NKERN_P(NKERN)) dut (
    .clk, .rst_n, .sensor_v, .start, .prec, .thresh, .busy, .done,
    .wt_we, .wt_kernel, .wt_tap, .wt_data, .plane_valid, .plane_kernel,
    .buf_rd_kernel, .buf_rd_plane);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
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
    automatic int run[IMG][IMG];
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) run[r][c] = (pix[r][c] * nb + 255) / 256;
    @(negedge clk) begin start = 1; prec = 4'(p); thresh = CW'(th); end
    @(negedge clk) start = 0;
    while (!done) begin
      if (plane_valid) begin
        chk("plane order", int'(plane_kernel), passes);
        passes++;
      end
      @(negedge clk);
      cycles++;
    end
    chk("passes", passes, NKERN);
    chk("latency", cycles, NKERN * (nb + 2));
    for (int k = 0; k < NKERN; k++) begin
      automatic int mg[25];
      automatic bit ng[25];
      @(negedge clk) buf_rd_kernel = KW'(k);
      @(negedge clk);
      for (int i = 0; i < 25; i++) begin mg[i] = wmag[k][i] >> (8 - p); ng[i] = wneg[k][i]; end
      for (int r = 0; r < IMG; r++)
        for (int c = 0; c < IMG; c++) begin
          automatic int win[25];
          automatic int cp, cn;
          automatic logic [1:0] e;
          automatic bit at_edge = 0;
          for (int i = 0; i < 25; i++) begin
            automatic int pr = r + i / 5 - 2, pc = c + i % 5 - 2;
            if (pr >= 0 && pr < IMG && pc >= 0 && pc < IMG) win[i] = run[pr][pc];
            else begin win[i] = 0; at_edge = 1; end
          end
          engine_counts(win, mg, ng, p, cp, cn);
          e = sign_ref(cp, cn, th);
          chk("plane", int'(buf_rd_plane[r][c]), int'(e));
          case (e) 2'b01: n_pos++; 2'b11: n_neg++; default: n_zero++; endcase
          if (e == 2'b00 && cp != cn) n_thresh_zero++;
          if (at_edge) n_edge++;
        end
    end
  endtask

  initial begin
    // Sensor image: a diagonal stroke and a ring, plus noise.
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) begin
        automatic int d = (r - 5) * (r - 5) + (c - 5) * (c - 5);
        automatic int v = $urandom_range(0, 30);
        if (r == c || r == c + 1 || (d > 6 && d < 14)) v = 200 + $urandom_range(0, 55);
        pix[r][c] = v;
        sensor_v[r][c] = real'(v) / 256.0;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NKERN; k++)
      for (int i = 0; i < TAPS; i++) begin
        wmag[k][i] = $urandom_range(0, 255);
        wneg[k][i] = $urandom_range(0, 1);
        @(negedge clk);
        wt_we = 1; wt_kernel = KW'(k); wt_tap = 5'(i);
        wt_data.neg = wneg[k][i]; wt_data.mag = 8'(wmag[k][i]);
      end
    @(negedge clk) wt_we = 0;
    run_image(8, 3);
    run_image(4, 0);
    n_prec_switch++;
    $display("mechanisms: +1 %0d, -1 %0d, 0 %0d, threshold-forced 0 %0d, edge windows %0d, precision switches %0d",
             n_pos, n_neg, n_zero, n_thresh_zero, n_edge, n_prec_switch);
    chk("+1 results occurred", int'(n_pos > 0), 1);
    chk("-1 results occurred", int'(n_neg > 0), 1);
    chk("0 results occurred", int'(n_zero > 0), 1);
    chk("soft threshold acted", int'(n_thresh_zero > 0), 1);
    chk("zero padding used", int'(n_edge > 0), 1);
    chk("precision switched", int'(n_prec_switch > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
