// sc_counter: stochastic-to-binary converter, counts the ones of a stream.
//
// count holds the number of clocks since the last clr on which x was 1.
// The paper uses an asynchronous (ripple) counter so that the stochastic
// part can be clocked faster than a synchronous counter's carry allows;
// this RTL uses a synchronous counter, which gives the same count at the
// end of each cycle and leaves the ripple circuit to implementation.
//
// Timing: x sampled at each rising edge; clr has priority and sets the
// count to 0 at the edge (the bit on x in that cycle is not counted).
module sc_counter #(
  parameter int unsigned W = 9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         x,
  output logic [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (x)   count <= count + 1'b1;
  end

endmodule
