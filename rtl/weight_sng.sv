// weight_sng: stochastic number generators for the kernel weights.
//
// Each of the TAPS_P sign-magnitude weights becomes two unipolar streams:
// w_pos carries |w| when w is positive, w_neg carries |w| when w is negative,
// the other stream is all zeros. Following the paper, each stream is made by
// a comparator (stream bit = sequence value < magnitude) fed by a
// low-discrepancy sequence, and the sequence source is shared by all
// comparators and, through the shared weight streams, by all engines.
// The sequence used here is the base-2 van der Corput sequence: the
// bit-reversed value of a prec-bit step counter, so a stream of 2^prec bits
// holds exactly mag_p ones, spread evenly over the stream. At prec below
// PREC_MAX_P the magnitude is truncated to its prec high bits (mag_p). The
// choice of sequence and the truncation are this design's.
//
// Timing: restart sets the step counter to 0 at the next edge; the streams
// are combinational from the step counter and the weights, and step
// advances every clock, wrapping at 2^prec.
module weight_sng
  import snn_pkg::*;
#(
  parameter int unsigned TAPS_P     = snn_pkg::TAPS,
  parameter int unsigned PREC_MAX_P = snn_pkg::PREC_MAX
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              restart,
  input  logic [$clog2(PREC_MAX_P+1)-1:0]   prec,
  input  logic [TAPS_P-1:0][PREC_MAX_P:0]   weights,   // {neg, mag}
  output logic [TAPS_P-1:0]                 w_pos,
  output logic [TAPS_P-1:0]                 w_neg,
  output logic [PREC_MAX_P-1:0]             step
);

  logic [PREC_MAX_P-1:0] step_mask;
  logic [PREC_MAX_P-1:0] rev;      // bit-reversed step, PREC_MAX_P bits
  logic [PREC_MAX_P-1:0] ld;       // sequence value, prec bits

  assign step_mask = PREC_MAX_P'((1 << prec) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       step <= '0;
    else if (restart) step <= '0;
    else              step <= (step + 1'b1) & step_mask;
  end

  always_comb begin
    for (int unsigned b = 0; b < PREC_MAX_P; b++) rev[b] = step[PREC_MAX_P-1-b];
    ld = rev >> (PREC_MAX_P - 32'(prec));
  end

  for (genvar i = 0; i < TAPS_P; i++) begin : g_sng
    logic                  neg;
    logic [PREC_MAX_P-1:0] mag_p;
    logic                  bit_s;
    assign neg      = weights[i][PREC_MAX_P];
    assign mag_p    = weights[i][PREC_MAX_P-1:0] >> (PREC_MAX_P - 32'(prec));
    assign bit_s    = (ld < mag_p);
    assign w_pos[i] = bit_s & ~neg;
    assign w_neg[i] = bit_s &  neg;
  end

endmodule
