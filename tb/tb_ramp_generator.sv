// tb_ramp_generator: after restart the ramp reads t * VFS / 2^prec in
// cycle t, for every precision.
module tb_ramp_generator;
  logic clk = 0, restart = 0;
  logic [3:0] prec = 4'd8;
  real ramp_v;
  int checks = 0, failures = 0;

  ramp_generator dut (.clk, .restart, .prec, .ramp_v);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 1; p <= 8; p++) begin
      prec = 4'(p);
      @(negedge clk) restart = 1;
      @(negedge clk) restart = 0;
      for (int t = 0; t < (1 << p); t++) begin
        automatic real e = real'(t) / real'(1 << p);
        checks++;
        if (ramp_v > e + 1e-9 || ramp_v < e - 1e-9) begin
          failures++;
          $display("FAIL p%0d t%0d ramp %f exp %f", p, t, ramp_v, e);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
