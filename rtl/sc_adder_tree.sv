// sc_adder_tree: many-input scaled stochastic adder built from TFF adders.
//
// The N_IN input streams are padded with constant-0 streams up to the next
// power of two, LEAVES, and summed by a balanced binary tree of tff_adder
// cells. Every input therefore carries the same weight and the output
// stream has value sum(p_i) / LEAVES. The tree has no registers between its
// levels: one output bit per clock, combinational from the inputs and the
// TFF states. The paper uses its TFF adder for the many-input sum; the tree
// shape and the zero padding are this design's choice.
//
// clr restarts every TFF to S0 before a new stream.
module sc_adder_tree #(
  parameter int unsigned N_IN = 25,
  parameter logic        S0   = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic [N_IN-1:0] in_bits,
  output logic            sum_bit
);

  localparam int unsigned LEVELS = (N_IN <= 1) ? 1 : $clog2(N_IN);
  localparam int unsigned LEAVES = 1 << LEVELS;

  // Level l of the tree takes the 2^(LEVELS-l) streams in g_level[l].in_s
  // and produces half as many in g_level[l].out_s.
  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned NIN  = LEAVES >> l;
    localparam int unsigned NOUT = NIN >> 1;
    logic [NIN-1:0]  in_s;
    logic [NOUT-1:0] out_s;
    if (l == 0) begin : g_leaves
      assign in_s = {{(LEAVES - N_IN){1'b0}}, in_bits};
    end else begin : g_inner
      assign in_s = g_level[l-1].out_s;
    end
    for (genvar j = 0; j < NOUT; j++) begin : g_add
      tff_adder #(.S0(S0)) u_add (
        .clk  (clk),
        .rst_n(rst_n),
        .clr  (clr),
        .x    (in_s[2*j]),
        .y    (in_s[2*j+1]),
        .z    (out_s[j])
      );
    end
  end

  assign sum_bit = g_level[LEVELS-1].out_s[0];

endmodule
