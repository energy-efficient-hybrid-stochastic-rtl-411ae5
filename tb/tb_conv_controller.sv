// tb_conv_controller: runs images at several precisions and checks the
// schedule cycle by cycle: per kernel one clr cycle, 2^prec streaming
// cycles, one write cycle with the kernel index, kernels 0..31 in order,
// done one cycle after the last write, NKERN*(2^prec+2) cycles in all;
// start is ignored while busy; prec 0 and 15 are clamped to 1 and 8.
module tb_conv_controller;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] prec = '0, prec_q;
  logic [4:0] kernel;
  logic clr, streaming, write, busy, done;
  int checks = 0, failures = 0;

  conv_controller dut (.clk, .rst_n, .start, .prec, .prec_q, .kernel, .clr,
                       .streaming, .write, .busy, .done);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
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

  task automatic run_image(input int p_in, input int p_eff);
    automatic int nb = 1 << p_eff;
    automatic int cycles = 0;
    @(negedge clk) begin start = 1; prec = 4'(p_in); end
    @(negedge clk) start = 0;
    chk("prec_q", int'(prec_q), p_eff);
    for (int k = 0; k < 32; k++) begin
      chk("clr", int'(clr), 1); chk("busy", int'(busy), 1); chk("kernel", int'(kernel), k);
      @(negedge clk); cycles++;
      for (int t = 0; t < nb; t++) begin
        chk("streaming", int'(streaming), 1); chk("no write", int'(write), 0);
        if (k == 3 && t == 1) start = 1;       // must be ignored
        @(negedge clk); cycles++;
        start = 0;
      end
      chk("write", int'(write), 1); chk("write kernel", int'(kernel), k);
      @(negedge clk); cycles++;
    end
    chk("done", int'(done), 1);
    chk("idle", int'(busy), 0);
    chk("cycles", cycles, 32 * (nb + 2));
    @(negedge clk);
    chk("done is a pulse", int'(done), 0);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 1; p <= 8; p++) run_image(p, p);
    run_image(0, 1);
    run_image(15, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
