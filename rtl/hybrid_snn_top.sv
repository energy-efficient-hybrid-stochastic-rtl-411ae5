// hybrid_snn_top: near-sensor hybrid stochastic-binary first layer.
//
// The pixel voltages of a 28x28 image sensor are converted straight into
// stochastic bit-streams by one comparator per pixel against a shared ramp
// (no ADC), and the stochastic convolution core computes the ternary sign of
// all 32 first-layer 5x5 kernels at every pixel, writing binary result
// planes for a binary back end. The ramp and the comparators are behavioural
// models (real-valued); everything after them is synthesizable RTL in
// stoch_conv_core. The photodiodes and the binary back end are outside:
// sensor_v comes in as ports and the result buffer read port goes out.
//
// IMG_P and NKERN_P default to the paper's 28 and 32; smaller values are
// for quick simulation.
//
// Timing: one image takes NKERN * (2^prec + 2) clocks after start; see
// stoch_conv_core for the control protocol.
module hybrid_snn_top
  import snn_pkg::*;
#(
  parameter int unsigned IMG_P   = snn_pkg::IMG,
  parameter int unsigned NKERN_P = snn_pkg::NKERN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  real                      sensor_v [IMG_P][IMG_P],
  input  logic                     start,
  input  logic [PW-1:0]            prec,
  input  logic [CW-1:0]            thresh,
  output logic                     busy,
  output logic                     done,
  input  logic                     wt_we,
  input  logic [$clog2(NKERN_P)-1:0] wt_kernel,
  input  logic [$clog2(TAPS)-1:0]  wt_tap,
  input  weight_t                  wt_data,
  output logic                     plane_valid,
  output logic [$clog2(NKERN_P)-1:0] plane_kernel,
  input  logic [$clog2(NKERN_P)-1:0] buf_rd_kernel,
  output logic [IMG_P-1:0][IMG_P-1:0][1:0] buf_rd_plane
);

  real      ramp_v;
  logic     ramp_restart;
  logic [IMG_P-1:0][IMG_P-1:0] x_bits;
  logic [PW-1:0] prec_q;

  ramp_generator u_ramp (
    .clk(clk), .restart(ramp_restart), .prec(prec_q), .ramp_v(ramp_v));

  for (genvar r = 0; r < IMG_P; r++) begin : g_row
    for (genvar c = 0; c < IMG_P; c++) begin : g_col
      a2s_converter u_a2s (.sensor_v(sensor_v[r][c]), .ramp_v(ramp_v), .x(x_bits[r][c]));
    end
  end

  stoch_conv_core #(.IMG_P(IMG_P), .NKERN_P(NKERN_P)) u_core (
    .clk(clk), .rst_n(rst_n),
    .start(start), .prec(prec), .thresh(thresh), .busy(busy), .done(done), .prec_q(prec_q),
    .wt_we(wt_we), .wt_kernel(wt_kernel), .wt_tap(wt_tap), .wt_data(wt_data),
    .x_bits(x_bits), .ramp_restart(ramp_restart),
    .plane_valid(plane_valid), .plane_kernel(plane_kernel),
    .buf_rd_kernel(buf_rd_kernel), .buf_rd_plane(buf_rd_plane));

endmodule
