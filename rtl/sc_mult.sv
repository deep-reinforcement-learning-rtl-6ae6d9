// sc_mult: bank of N stochastic multipliers for bipolar bit-streams.
//
// In bipolar coding a stream with P(1)=p stands for 2p-1. For independent
// streams, P(x XNOR w = 1) = pq + (1-p)(1-q), which stands for exactly the
// product of the two values, so each product costs one XNOR gate whatever the
// stream length. Purely combinational: p[i] is valid in the same cycle as
// x[i] and w[i]. Follows the paper's multiplication unit.
module sc_mult #(
  parameter int unsigned N = 26
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] w,
  output logic [N-1:0] p
);

  always_comb p = ~(x ^ w);

endmodule
