// kernel_weight_store: register file holding the first layer's kernels.
//
// NKERN_P kernels of TAPS_P sign-magnitude weights ({neg, mag}, value
// (+/-)mag/2^PREC_MAX). Weights are written one at a time (wr_kernel,
// wr_tap) and read one whole kernel at a time, since all taps of a kernel
// drive the weight generators together. The paper only shows "convolution
// weights" entering the engine array; this storage and its ports are this
// design's choice.
//
// Timing: write at the rising edge when wr_en is high; read data is
// registered, rd_weights shows kernel rd_kernel one cycle after it is
// presented. A write and a read of the same kernel in one cycle return the
// old contents.
module kernel_weight_store
  import snn_pkg::*;
#(
  parameter int unsigned NKERN_P = snn_pkg::NKERN,
  parameter int unsigned TAPS_P  = snn_pkg::TAPS,
  parameter int unsigned WW_P    = snn_pkg::WW
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [$clog2(NKERN_P)-1:0]          wr_kernel,
  input  logic [$clog2(TAPS_P)-1:0]           wr_tap,
  input  logic [WW_P-1:0]                     wr_data,
  input  logic [$clog2(NKERN_P)-1:0]          rd_kernel,
  output logic [TAPS_P-1:0][WW_P-1:0]         rd_weights
);

  logic [TAPS_P-1:0][WW_P-1:0] mem [NKERN_P];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_tap) < TAPS_P)) mem[wr_kernel][wr_tap] <= wr_data;
    rd_weights <= mem[rd_kernel];
  end

endmodule
