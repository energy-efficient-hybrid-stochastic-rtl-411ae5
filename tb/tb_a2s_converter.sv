// tb_a2s_converter: one pixel comparator fed by the ramp model; a pixel of
// code p (voltage p/256) must give a run of ceil(p*2^prec/256) ones followed
// by zeros in a stream of 2^prec bits.
module tb_a2s_converter;
  logic clk = 0, restart = 0;
  logic [3:0] prec = 4'd8;
  real ramp_v, sensor_v = 0.0;
  logic x;
  int checks = 0, failures = 0;

  ramp_generator u_ramp (.clk, .restart, .prec, .ramp_v);
  a2s_converter  dut (.sensor_v, .ramp_v, .x);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 60; s++) begin
      automatic int p = (s == 0) ? 0 : (s == 1) ? 255 : $urandom_range(0, 255);
      automatic int pr = 2 + (s % 7);
      automatic int nb = 1 << pr;
      automatic int exp_ones = (p * nb + 255) / 256;
      prec = 4'(pr);
      sensor_v = real'(p) / 256.0;
      @(negedge clk) restart = 1;
      @(negedge clk) restart = 0;
      for (int t = 0; t < nb; t++) begin
        checks++;
        if (x !== (t < exp_ones)) begin
          failures++;
          if (failures < 10) $display("FAIL p=%0d t=%0d x=%0b", p, t, x);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
