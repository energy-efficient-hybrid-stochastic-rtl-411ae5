// stoch_conv_array: the array of stochastic convolution engines.
//
// One stoch_dot_product_unit per output pixel (IMG_P x IMG_P = 784 in the
// paper's configuration) computes, in parallel with all others, the ternary
// sign of one kernel applied to the KSIZE_P x KSIZE_P window centred on its
// pixel. Every engine gets the same weight streams. Windows that reach past
// the image edge see constant-0 streams (zero padding of KSIZE_P/2), so the
// output plane has the input's size, as the LeNet-5 variant's 28x28x32 first
// layer output requires. Tap i of the window is pixel
// (r + i/KSIZE_P - KSIZE_P/2, c + i%KSIZE_P - KSIZE_P/2). Padding and tap
// order are this design's choice.
//
// Timing: that of stoch_dot_product_unit; sign_map is valid the cycle after
// the last stream bit.
module stoch_conv_array
  import snn_pkg::*;
#(
  parameter int unsigned IMG_P   = snn_pkg::IMG,
  parameter int unsigned KSIZE_P = snn_pkg::KSIZE,
  parameter int unsigned CW_P    = snn_pkg::CW,
  parameter logic        S0      = 1'b0
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clr,
  input  logic [IMG_P-1:0][IMG_P-1:0]          x_bits,
  input  logic [KSIZE_P*KSIZE_P-1:0]           w_pos,
  input  logic [KSIZE_P*KSIZE_P-1:0]           w_neg,
  input  logic [CW_P-1:0]                      thresh,
  output logic [IMG_P-1:0][IMG_P-1:0][1:0]     sign_map
);

  localparam int unsigned NT  = KSIZE_P * KSIZE_P;
  localparam int          PAD = int'(KSIZE_P / 2);

  for (genvar r = 0; r < IMG_P; r++) begin : g_row
    for (genvar c = 0; c < IMG_P; c++) begin : g_col
      logic [NT-1:0] win;
      sign_e         s;
      logic [CW_P-1:0] cp, cn;  // counts, not used by the array
      for (genvar i = 0; i < NT; i++) begin : g_tap
        localparam int PR = r + int'(i / KSIZE_P) - PAD;
        localparam int PC = c + int'(i % KSIZE_P) - PAD;
        if (PR >= 0 && PR < int'(IMG_P) && PC >= 0 && PC < int'(IMG_P)) begin : g_in
          assign win[i] = x_bits[PR][PC];
        end else begin : g_pad
          assign win[i] = 1'b0;
        end
      end
      stoch_dot_product_unit #(.TAPS_P(NT), .CW_P(CW_P), .S0(S0)) u_dpu (
        .clk    (clk),
        .rst_n  (rst_n),
        .clr    (clr),
        .x      (win),
        .w_pos  (w_pos),
        .w_neg  (w_neg),
        .thresh (thresh),
        .sign_o (s),
        .cnt_pos(cp),
        .cnt_neg(cn)
      );
      assign sign_map[r][c] = s;
    end
  end

endmodule
