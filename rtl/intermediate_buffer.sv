// intermediate_buffer: first-layer results handed to the binary back end.
//
// Holds one ternary result plane per kernel (NKERN_P planes of IMG_P x IMG_P
// two-bit sign codes), i.e. the whole 32x28x28 first-layer output of one
// image. The engine array writes a complete plane at the end of each kernel
// pass; the back end reads any plane by kernel index. The paper shows this
// data as "binary intermediary data" passed to the digital back end; the
// one-plane-per-word organisation is this design's choice.
//
// Timing: write at the rising edge when wr_en is high; read data is
// registered, rd_plane shows plane rd_kernel one cycle after it is presented.
module intermediate_buffer #(
  parameter int unsigned NKERN_P = snn_pkg::NKERN,
  parameter int unsigned IMG_P   = snn_pkg::IMG
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [$clog2(NKERN_P)-1:0]          wr_kernel,
  input  logic [IMG_P-1:0][IMG_P-1:0][1:0]    wr_plane,
  input  logic [$clog2(NKERN_P)-1:0]          rd_kernel,
  output logic [IMG_P-1:0][IMG_P-1:0][1:0]    rd_plane
);

  logic [IMG_P-1:0][IMG_P-1:0][1:0] mem [NKERN_P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_kernel] <= wr_plane;
    rd_plane <= mem[rd_kernel];
  end

endmodule
