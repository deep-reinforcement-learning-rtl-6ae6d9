// apc: improved approximate parallel counter (APC), the SC addition unit.
//
// Every cycle it adds the current bit of N stochastic streams (N even,
// 4..30) into a binary count of CW bits. The first N-2 inputs go through an
// approximate unit: each pair (a[2k], a[2k+1]) is reduced to one bit by an
// AND gate (even k) or an OR gate (odd k). Because AND(a,b)+OR(a,b) = a+b, a
// bit from the approximate unit stands for two input ones on average, so it
// carries weight 2. The last two inputs skip the approximate unit and enter
// a half adder whose sum is bit 0 of the result and whose carry joins the
// weight-2 bits:
//
//     cnt = 2 * (ones among the AU bits + half-adder carry) + half-adder sum
//
// The weight-2 bits (at most 14 AU bits plus the carry) are counted by a
// 15-input tree of 11 inverse mirror full adders in three columns of 4, 4
// and 3 cells; unused AU positions (N < 30) are tied to zero. Each cell
// returns complemented outputs, so signal polarity alternates from column
// to column and a signal is inverted where it joins cells of the other
// polarity. Structure (pairs into an approximate unit, last pair into a half
// adder, 4+4+3 full adders, 5-bit result for 30 inputs) follows the paper's
// figure; the AND/OR alternation and the exact wiring of the tree are this
// design's own. Combinational.
module apc #(
  parameter int unsigned N  = 30,
  parameter int unsigned CW = 5
) (
  input  logic [N-1:0]  a,
  output logic [CW-1:0] cnt
);

  localparam int unsigned NP = (N - 2) / 2;  // pairs in the approximate unit

  initial begin
    assert (N >= 4 && N <= 30 && N % 2 == 0) else $error("apc: N must be even, 4..30");
    assert (CW >= 5) else $error("apc: CW must be at least 5");
  end

  logic [NP-1:0] au;     // approximate-unit outputs, weight 2 each
  logic          ha_s;   // half-adder sum, weight 1
  logic          ha_c;   // half-adder carry, weight 2

  always_comb begin
    for (int k = 0; k < NP; k++) begin
      if (k % 2 == 0) au[k] = a[2*k] & a[2*k+1];
      else            au[k] = a[2*k] | a[2*k+1];
    end
  end

  always_comb begin
    ha_s = a[N-2] ^ a[N-1];
    ha_c = a[N-2] & a[N-1];
  end

  // Weight-2 bits, padded to 15 with zeros: 14 AU positions + HA carry.
  logic [13:0] b;
  always_comb begin
    b = '0;
    b[NP-1:0] = au;
  end

  // Column 1: true inputs, complemented outputs (weights 2 and 4).
  logic s1n, c1n, s2n, c2n, s3n, c3n, s4n, c4n;
  imfa u_fa1 (.a(b[0]),  .b(b[1]),  .c(b[2]),  .sn(s1n), .cn(c1n));
  imfa u_fa2 (.a(b[3]),  .b(b[4]),  .c(b[5]),  .sn(s2n), .cn(c2n));
  imfa u_fa3 (.a(b[7]),  .b(b[8]),  .c(b[9]),  .sn(s3n), .cn(c3n));
  imfa u_fa4 (.a(b[10]), .b(b[11]), .c(b[12]), .sn(s4n), .cn(c4n));

  // Column 2: complemented inputs, true outputs. The AU bits that skip
  // column 1 (b[6], b[13]) are inverted to join it.
  logic s5, c5, s6, c6, s7, c7, s8, c8;
  imfa u_fa5 (.a(s1n), .b(s2n), .c(~b[6]),  .sn(s5), .cn(c5));   // weight 2
  imfa u_fa6 (.a(c1n), .b(c2n), .c(~c5),    .sn(s6), .cn(c6));   // weight 4
  imfa u_fa7 (.a(s3n), .b(s4n), .c(~b[13]), .sn(s7), .cn(c7));   // weight 2
  imfa u_fa8 (.a(c3n), .b(c4n), .c(~c7),    .sn(s8), .cn(c8));   // weight 4

  // Column 3: true inputs, complemented outputs, inverted at the output.
  logic s9n, c9n, s10n, c10n, s11n, c11n;
  imfa u_fa9  (.a(s5), .b(s7), .c(ha_c),  .sn(s9n),  .cn(c9n));   // weight 2
  imfa u_fa10 (.a(s6), .b(s8), .c(~c9n),  .sn(s10n), .cn(c10n));  // weight 4
  imfa u_fa11 (.a(c6), .b(c8), .c(~c10n), .sn(s11n), .cn(c11n));  // weight 8

  always_comb cnt = CW'({~c11n, ~s11n, ~s10n, ~s9n, ha_s});

endmodule
