// ramp_generator: behavioural model of the ramp voltage of the
// analog-to-stochastic converters (not synthesizable: real-valued output).
//
// A staircase from 0 V rising by VFS / 2^prec per clock, shared by all pixel
// comparators, like the ramp of a ramp-compare ADC. restart (sampled at the
// rising edge) returns it to 0 V, so in stream cycle t the ramp is at
// t * VFS / 2^prec and a pixel at voltage v gives ceil(v * 2^prec / VFS)
// ones in a stream of 2^prec bits. The paper gives the ramp's role; the
// staircase shape and the full scale VFS are this model's choice.
module ramp_generator #(
  parameter int unsigned PREC_MAX_P = snn_pkg::PREC_MAX,
  parameter real         VFS        = 1.0
) (
  input  logic                              clk,
  input  logic                              restart,
  input  logic [$clog2(PREC_MAX_P+1)-1:0]   prec,
  output real                               ramp_v
);

  logic [PREC_MAX_P:0] step;  // set by restart before every stream

  always_ff @(posedge clk) begin
    if (restart) step <= '0;
    else         step <= step + 1'b1;
  end

  assign ramp_v = VFS * real'(step) / real'(1 << prec);

endmodule
