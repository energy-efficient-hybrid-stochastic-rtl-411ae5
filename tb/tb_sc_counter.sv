// tb_sc_counter: counts the ones of random streams up to 2^8 bits long,
// including an all-ones stream reaching 256, and checks that clr restarts
// the count at 0.
module tb_sc_counter;
  logic clk = 0, rst_n = 0, clr = 0, x = 0;
  logic [8:0] count;
  int checks = 0, failures = 0;

  sc_counter #(.W(9)) dut (.clk, .rst_n, .clr, .x, .count);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      automatic int exp = 0;
      automatic int dens = (s == 0) ? 100 : $urandom_range(0, 100);
      @(negedge clk) begin clr = 1; x = 1; end
      @(negedge clk) clr = 0;
      checks++;
      if (count != 0) begin failures++; $display("FAIL not cleared"); end
      for (int t = 0; t < 256; t++) begin
        x = ($urandom_range(0, 99) < dens);
        exp += x;
        @(negedge clk);
        checks++;
        if (count != 9'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL count %0d exp %0d", count, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
