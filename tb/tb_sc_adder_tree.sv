// tb_sc_adder_tree: checks a 25-input TFF adder tree (padded to 32 leaves)
// bit by bit against the procedural reference tree, for random streams of
// several lengths and densities, and checks that the output count stays
// within the rounding of the ideal value sum(counts)/32 (one count per
// tree level).
module tb_sc_adder_tree;
  import sc_ref_pkg::*;
  localparam int N = 25;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [N-1:0] in_bits = '0;
  logic sum_bit;
  int checks = 0, failures = 0;

  sc_adder_tree #(.N_IN(N)) dut (.clk, .rst_n, .clr, .in_bits, .sum_bit);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit q[] = new[31];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      automatic int n = 8 << (s % 6);
      automatic int total = 0, cnt = 0;
      automatic int dens = $urandom_range(0, 100);
      foreach (q[i]) q[i] = 0;
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int t = 0; t < n; t++) begin
        automatic bit e;
        for (int i = 0; i < N; i++) in_bits[i] = ($urandom_range(0, 99) < dens);
        for (int i = 0; i < N; i++) total += in_bits[i];
        e = tree_step(64'(in_bits), N, q);
        #1;
        checks++;
        if (sum_bit !== e) begin
          failures++;
          if (failures < 10) $display("FAIL stream %0d bit %0d: got %0b exp %0b", s, t, sum_bit, e);
        end
        cnt += sum_bit;
        @(negedge clk);
      end
      checks++;
      if (cnt > total / 32 + 5 || cnt + 5 < total / 32) begin
        failures++;
        $display("FAIL count %0d far from %0d/32", cnt, total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
