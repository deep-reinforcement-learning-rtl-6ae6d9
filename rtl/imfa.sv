// imfa: inverse mirror full adder, the adder cell of the APC's adder tree.
//
// It returns the complements of the full-adder sum and carry. Since a full
// adder is self-dual (complementing all three inputs complements both
// outputs), a stage of these cells fed with complemented signals produces
// true signals again; the APC tree exploits this by alternating polarity
// from one adder layer to the next. Combinational. The cell follows the
// paper's choice of adder; its transistor-level benefit is not modelled.
module imfa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic sn,  // ~(a ^ b ^ c)
  output logic cn   // ~majority(a, b, c)
);

  always_comb begin
    sn = ~(a ^ b ^ c);
    cn = ~((a & b) | (a & c) | (b & c));
  end

endmodule
