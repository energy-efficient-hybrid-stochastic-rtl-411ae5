// snn_pkg: constants and types shared by the stochastic first layer.
//
// The layer is the first convolution of a LeNet-5 variant: a 28x28 image,
// 32 kernels of 5x5 taps, run at a stream precision of up to 8 bits
// (a stream of 2^prec clock cycles). Those numbers follow the paper.
// The ternary sign code and the sign-magnitude weight word are this
// design's own encodings.
package snn_pkg;

  localparam int unsigned IMG      = 28;             // image side
  localparam int unsigned KSIZE    = 5;              // kernel side
  localparam int unsigned TAPS     = KSIZE * KSIZE;  // 25 taps per kernel
  localparam int unsigned NKERN    = 32;             // first-layer kernels
  localparam int unsigned PREC_MAX = 8;              // longest stream: 2^8 cycles
  localparam int unsigned CW       = PREC_MAX + 1;   // counter width, counts 0..2^PREC_MAX
  localparam int unsigned WW       = PREC_MAX + 1;   // weight word: sign + magnitude
  localparam int unsigned KW       = $clog2(NKERN);  // kernel index width
  localparam int unsigned PW       = $clog2(PREC_MAX + 1); // width of the prec input

  // Ternary activation result, two's complement of -1 / 0 / +1.
  typedef enum logic [1:0] {
    SIGN_ZERO = 2'b00,
    SIGN_POS  = 2'b01,
    SIGN_NEG  = 2'b11
  } sign_e;

  // Kernel weight: value is (neg ? -1 : +1) * mag / 2^PREC_MAX.
  typedef struct packed {
    logic                neg;
    logic [PREC_MAX-1:0] mag;
  } weight_t;

  // One result plane: the ternary sign of every output pixel for one kernel,
  // indexed [row][column]. Each element holds an sign_e code.
  typedef logic [IMG-1:0][IMG-1:0][1:0] plane_t;

  // One bit per pixel: the pixel streams of the whole image in one cycle.
  typedef logic [IMG-1:0][IMG-1:0] pixbits_t;

endpackage
