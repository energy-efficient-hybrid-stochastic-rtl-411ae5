// conv_controller: sequences the 32 kernel passes of one image.
//
// The engine array computes one kernel for all 784 output pixels at a time,
// so an image takes one pass per kernel, as in the paper. Each pass is
//   PREP   1 cycle     fetch kernel k's weights (registered read), restart
//                      the ramp, the weight sequence, the TFFs and counters
//   STREAM 2^prec      one stream bit per clock through the engines
//   WRITE  1 cycle     counters are final: store the result plane of kernel k
// so an image takes NKERN_P * (2^prec + 2) cycles from the cycle after start
// to the cycle after the last WRITE, when done pulses. prec (1..PREC_MAX_P)
// is latched at start; it sets the stream length and is passed on as
// prec_q. The schedule is this design's choice.
//
// start is ignored while busy. A prec of 0 or above PREC_MAX_P is clamped
// into range when latched.
module conv_controller
  import snn_pkg::*;
#(
  parameter int unsigned NKERN_P    = snn_pkg::NKERN,
  parameter int unsigned PREC_MAX_P = snn_pkg::PREC_MAX
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [$clog2(PREC_MAX_P+1)-1:0]   prec,
  output logic [$clog2(PREC_MAX_P+1)-1:0]   prec_q,
  output logic [$clog2(NKERN_P)-1:0]        kernel,
  output logic                              clr,      // PREP: restart stream state
  output logic                              streaming,
  output logic                              write,    // WRITE: results valid
  output logic                              busy,
  output logic                              done
);

  typedef enum logic [1:0] {S_IDLE, S_PREP, S_STREAM, S_WRITE} state_e;

  state_e                state;
  logic [PREC_MAX_P:0]   t;        // stream cycle counter
  logic [PREC_MAX_P:0]   n_bits;   // 2^prec_q

  assign n_bits    = (PREC_MAX_P+1)'(1) << prec_q;
  assign clr       = (state == S_PREP);
  assign streaming = (state == S_STREAM);
  assign write     = (state == S_WRITE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kernel <= '0;
      t      <= '0;
      prec_q <= ($clog2(PREC_MAX_P+1))'(PREC_MAX_P);
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_PREP;
          kernel <= '0;
          if (prec == 0)                   prec_q <= 1;
          else if (32'(prec) > PREC_MAX_P) prec_q <= ($clog2(PREC_MAX_P+1))'(PREC_MAX_P);
          else                             prec_q <= prec;
        end
        S_PREP: begin
          state <= S_STREAM;
          t     <= '0;
        end
        S_STREAM: begin
          if (t == n_bits - 1'b1) state <= S_WRITE;
          else                    t     <= t + 1'b1;
        end
        S_WRITE: begin
          if (32'(kernel) == NKERN_P - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state  <= S_PREP;
            kernel <= kernel + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The stream length is a power of two between 2 and 2^PREC_MAX_P.
  a_prec_range: assert property (@(posedge clk) disable iff (!rst_n)
    prec_q >= 1 && 32'(prec_q) <= PREC_MAX_P);
  // A result plane is written only after a complete stream.
  a_write_after_stream: assert property (@(posedge clk) disable iff (!rst_n)
    write |-> $past(streaming));

endmodule
