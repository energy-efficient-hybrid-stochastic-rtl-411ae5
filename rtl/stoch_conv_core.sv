// stoch_conv_core: digital part of the hybrid stochastic-binary first layer.
//
// Takes the 784 pixel streams produced by the analog-to-stochastic front end
// and computes the ternary first-layer output of a 28x28 image for all 32
// kernels. Inside: a kernel weight store, the shared low-discrepancy weight
// stream generators, the 28x28 engine array, the pass controller and the
// result buffer read by the binary back end. The blocks and their roles
// follow the paper; ports, storage and the pass schedule are this design's.
//
// Use: load the weights through wt_*, set prec and thresh, pulse start.
// The core pulses ramp_restart at the start of each pass (the front end's
// ramp must be back at 0 V in the next cycle) and expects x_bits to be the
// comparator outputs for ramp step t in stream cycle t. After each pass
// plane_valid pulses with plane_kernel; done pulses after the last pass.
// Planes are read from the buffer with buf_rd_kernel (one-cycle latency).
// One image: NKERN * (2^prec + 2) cycles.
module stoch_conv_core
  import snn_pkg::*;
#(
  parameter int unsigned IMG_P      = snn_pkg::IMG,
  parameter int unsigned KSIZE_P    = snn_pkg::KSIZE,
  parameter int unsigned NKERN_P    = snn_pkg::NKERN,
  parameter int unsigned PREC_MAX_P = snn_pkg::PREC_MAX,
  parameter logic        S0         = 1'b0
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // control
  input  logic                                 start,
  input  logic [$clog2(PREC_MAX_P+1)-1:0]      prec,
  input  logic [PREC_MAX_P:0]                  thresh,
  output logic                                 busy,
  output logic                                 done,
  output logic [$clog2(PREC_MAX_P+1)-1:0]      prec_q,
  // weight load
  input  logic                                 wt_we,
  input  logic [$clog2(NKERN_P)-1:0]           wt_kernel,
  input  logic [$clog2(KSIZE_P*KSIZE_P)-1:0]   wt_tap,
  input  logic [PREC_MAX_P:0]                  wt_data,
  // analog front end
  input  logic [IMG_P-1:0][IMG_P-1:0]          x_bits,
  output logic                                 ramp_restart,
  // results
  output logic                                 plane_valid,
  output logic [$clog2(NKERN_P)-1:0]           plane_kernel,
  input  logic [$clog2(NKERN_P)-1:0]           buf_rd_kernel,
  output logic [IMG_P-1:0][IMG_P-1:0][1:0]     buf_rd_plane
);

  localparam int unsigned NT = KSIZE_P * KSIZE_P;
  localparam int unsigned CWL = PREC_MAX_P + 1;

  logic [$clog2(NKERN_P)-1:0]       kernel;
  logic                             clr, streaming, write;
  logic [NT-1:0][PREC_MAX_P:0]      weights;
  logic [NT-1:0]                    w_pos, w_neg;
  logic [PREC_MAX_P-1:0]            step;
  logic [IMG_P-1:0][IMG_P-1:0][1:0] sign_map;

  conv_controller #(.NKERN_P(NKERN_P), .PREC_MAX_P(PREC_MAX_P)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .prec(prec), .prec_q(prec_q),
    .kernel(kernel), .clr(clr), .streaming(streaming), .write(write),
    .busy(busy), .done(done));

  kernel_weight_store #(.NKERN_P(NKERN_P), .TAPS_P(NT), .WW_P(PREC_MAX_P+1)) u_wstore (
    .clk(clk), .wr_en(wt_we), .wr_kernel(wt_kernel), .wr_tap(wt_tap), .wr_data(wt_data),
    .rd_kernel(kernel), .rd_weights(weights));

  weight_sng #(.TAPS_P(NT), .PREC_MAX_P(PREC_MAX_P)) u_sng (
    .clk(clk), .rst_n(rst_n), .restart(clr), .prec(prec_q), .weights(weights),
    .w_pos(w_pos), .w_neg(w_neg), .step(step));

  stoch_conv_array #(.IMG_P(IMG_P), .KSIZE_P(KSIZE_P), .CW_P(CWL), .S0(S0)) u_array (
    .clk(clk), .rst_n(rst_n), .clr(clr), .x_bits(x_bits), .w_pos(w_pos), .w_neg(w_neg),
    .thresh(thresh), .sign_map(sign_map));

  intermediate_buffer #(.NKERN_P(NKERN_P), .IMG_P(IMG_P)) u_buf (
    .clk(clk), .wr_en(write), .wr_kernel(kernel), .wr_plane(sign_map),
    .rd_kernel(buf_rd_kernel), .rd_plane(buf_rd_plane));

  assign ramp_restart = clr;
  assign plane_valid  = write;
  assign plane_kernel = kernel;

  // The weight sequence and the ramp run in step with the stream counter.
  a_step_zero_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(streaming) |-> step == '0);

endmodule
