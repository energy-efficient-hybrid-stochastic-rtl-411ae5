// tb_kernel_weight_store: writes all 32 x 25 weights in random order with
// random values, then reads every kernel back (one-cycle read latency),
// then overwrites some taps and checks the rest are unchanged.
module tb_kernel_weight_store;
  logic clk = 0, wr_en = 0;
  logic [4:0] wr_kernel = '0, rd_kernel = '0;
  logic [4:0] wr_tap = '0;
  logic [8:0] wr_data = '0;
  logic [24:0][8:0] rd_weights;
  logic [8:0] model [32][25];
  int checks = 0, failures = 0;

  kernel_weight_store dut (.clk, .wr_en, .wr_kernel, .wr_tap, .wr_data, .rd_kernel, .rd_weights);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int k, input int t, input logic [8:0] d);
    @(negedge clk);
    wr_en = 1; wr_kernel = 5'(k); wr_tap = 5'(t); wr_data = d;
    model[k][t] = d;
    @(negedge clk) wr_en = 0;
  endtask

  task automatic read_all();
    for (int k = 0; k < 32; k++) begin
      @(negedge clk) rd_kernel = 5'(k);
      @(negedge clk);
      for (int t = 0; t < 25; t++) begin
        checks++;
        if (rd_weights[t] !== model[k][t]) begin
          failures++;
          if (failures < 10) $display("FAIL k%0d t%0d got %h exp %h", k, t, rd_weights[t], model[k][t]);
        end
      end
    end
  endtask

  initial begin
    for (int k = 31; k >= 0; k--)
      for (int t = 0; t < 25; t++) write(k, t, 9'($urandom_range(0, 511)));
    read_all();
    for (int i = 0; i < 40; i++) write($urandom_range(0, 31), $urandom_range(0, 24), 9'($urandom_range(0, 511)));
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
