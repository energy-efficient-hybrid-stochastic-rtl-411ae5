// tb_tff_adder: checks the TFF adder against the worked examples and a
// bit-level reference.
//  1. The length-8 example with initial states 0 and 1: X=0100 1010 (3/8),
//     Y=0010 0010 (1/4) must give Z0=0010 0010 and Z1=0100 1010.
//  2. The length-20 example: X=0110 0011 0101 0111 1000,
//     Y=1011 1111 0101 0111 1111 must give Z=0110 1011 0101 0111 1101.
//  3. Random streams (and correlated ones): every output bit against the
//     reference, and the output count is floor/ceil of (cx+cy)/2.
// A clr between streams restarts the TFF.
module tb_tff_adder;
  import sc_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, x = 0, y = 0;
  logic z0, z1;
  int checks = 0, failures = 0;

  tff_adder #(.S0(1'b0)) dut0 (.clk, .rst_n, .clr, .x, .y, .z(z0));
  tff_adder #(.S0(1'b1)) dut1 (.clk, .rst_n, .clr, .x, .y, .z(z1));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  // Drive a stream of n bits (MSB first) and compare both outputs.
  task automatic run_stream(input int n, input logic [31:0] xs, input logic [31:0] ys,
                            input logic [31:0] e0, input logic [31:0] e1, input bit chk1);
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int i = n - 1; i >= 0; i--) begin
      x = xs[i]; y = ys[i];
      #1;
      check("z0", z0, e0[i]);
      if (chk1) check("z1", z1, e1[i]);
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Worked example with initial states 0 and 1.
    run_stream(8, 32'b0100_1010, 32'b0010_0010, 32'b0010_0010, 32'b0100_1010, 1);
    // Length-20 example with S0 = 0.
    run_stream(20, 32'b0110_0011_0101_0111_1000, 32'b1011_1111_0101_0111_1111,
               32'b0110_1011_0101_0111_1101, 32'b0, 0);
    // Random streams against the reference.
    for (int s = 0; s < 40; s++) begin
      automatic bit q0 = 0, q1 = 1;
      automatic int n = 16 << (s % 5);
      automatic int cx = 0, cy = 0, c0 = 0, c1 = 0;
      automatic int px = $urandom_range(0, 100), py = $urandom_range(0, 100);
      automatic bit corr = (s % 4 == 0);
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < n; i++) begin
        automatic bit e0, e1;
        x = ($urandom_range(0, 99) < px);
        y = corr ? x : ($urandom_range(0, 99) < py);
        cx += x; cy += y;
        e0 = tff_add_ref(x, y, q0);
        e1 = tff_add_ref(x, y, q1);
        #1;
        check("rand z0", z0, e0);
        check("rand z1", z1, e1);
        c0 += z0; c1 += z1;
        @(negedge clk);
      end
      check("count S0=0 is floor", c0 == (cx + cy) / 2, 1'b1);
      check("count S0=1 is ceil", c1 == (cx + cy + 1) / 2, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
