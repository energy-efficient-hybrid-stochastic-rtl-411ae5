// tb_intermediate_buffer: writes 32 random result planes, reads each back
// (one-cycle latency), rewrites a few planes and reads all again.
module tb_intermediate_buffer;
  import snn_pkg::*;
  logic clk = 0, wr_en = 0;
  logic [4:0] wr_kernel = '0, rd_kernel = '0;
  plane_t wr_plane, rd_plane;
  plane_t model [32];
  int checks = 0, failures = 0;

  intermediate_buffer dut (.clk, .wr_en, .wr_kernel, .wr_plane, .rd_kernel, .rd_plane);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int k);
    plane_t p;
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) p[r][c] = 2'($urandom_range(0, 3));
    @(negedge clk);
    wr_en = 1; wr_kernel = 5'(k); wr_plane = p; model[k] = p;
    @(negedge clk) wr_en = 0;
  endtask

  task automatic read_all();
    for (int k = 0; k < 32; k++) begin
      @(negedge clk) rd_kernel = 5'(k);
      @(negedge clk);
      for (int r = 0; r < IMG; r++) begin
        checks++;
        if (rd_plane[r] !== model[k][r]) begin
          failures++;
          if (failures < 10) $display("FAIL plane %0d row %0d", k, r);
        end
      end
    end
  endtask

  initial begin
    for (int k = 0; k < 32; k++) write(k);
    read_all();
    for (int i = 0; i < 8; i++) write($urandom_range(0, 31));
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
