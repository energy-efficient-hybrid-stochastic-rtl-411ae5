// tff_adder: two-input unipolar stochastic adder, p_z = (p_x + p_y) / 2.
//
// An XOR compares the two input bits. Where they agree, the common bit
// (taken from y through mux input 0) is the output. Where they differ, the
// toggle flip-flop's state is the output (mux input 1) and the flip-flop
// toggles, so the differing positions are shared out alternately 0,1,0,...
// (S0 = 0) or 1,0,1,... (S0 = 1). The count of ones in z is therefore
// floor((cx+cy)/2) for S0 = 0 and ceil((cx+cy)/2) for S0 = 1, whatever the
// correlation of x and y. This structure and S0 follow the paper.
//
// Interface: x, y one bit per clock; z is combinational from x, y and the
// flip-flop. clr (synchronous) and rst_n (asynchronous) set the flip-flop to
// S0; restarting it before each stream is this design's choice.
module tff_adder #(
  parameter logic S0 = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic x,
  input  logic y,
  output logic z
);

  logic q;
  logic differ;

  assign differ = x ^ y;
  assign z      = differ ? q : y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= S0;
    else if (clr)    q <= S0;
    else if (differ) q <= ~q;
  end

endmodule
