// lfsr: maximal-length Fibonacci linear-feedback shift register, the random
// source of the binary-to-stochastic converters.
//
// For W=10 the feedback polynomial is x^10 + x^7 + 1 (period 1023); other
// widths from 3 to 16 use a table of maximal taps. The state never becomes
// zero. 'restart' loads SEED (so every inference sees the same random
// sequence), otherwise 'step' advances the register by one. The state is the
// output, valid in the cycle it is held. The choice of generator is this
// design's own; the paper does not describe the random source.
module lfsr #(
  parameter int unsigned W    = 10,
  parameter logic [W-1:0] SEED = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         restart,
  input  logic         step,
  output logic [W-1:0] rnd
);

  logic [W-1:0] state;

  // Feedback mask: bit k set means stage k+1 is tapped.
  function automatic logic [15:0] taps();
    logic [15:0] t;
    case (W)
      3:  t = 16'h0006;  // x^3+x^2+1
      4:  t = 16'h000C;  // x^4+x^3+1
      5:  t = 16'h0014;  // x^5+x^3+1
      6:  t = 16'h0030;  // x^6+x^5+1
      7:  t = 16'h0060;  // x^7+x^6+1
      8:  t = 16'h00B8;  // x^8+x^6+x^5+x^4+1
      9:  t = 16'h0110;  // x^9+x^5+1
      10: t = 16'h0240;  // x^10+x^7+1
      11: t = 16'h0500;  // x^11+x^9+1
      12: t = 16'h0E08;  // x^12+x^11+x^10+x^4+1
      13: t = 16'h1C80;  // x^13+x^12+x^11+x^8+1
      14: t = 16'h3802;  // x^14+x^13+x^12+x^2+1
      15: t = 16'h6000;  // x^15+x^14+1
      default: t = 16'hB400;  // x^16+x^14+x^13+x^11+1
    endcase
    return t;
  endfunction

  localparam logic [15:0] TAPS16 = taps();
  localparam logic [W-1:0] TAPS = TAPS16[W-1:0];

  initial begin
    assert (W >= 3 && W <= 16) else $error("lfsr: W must be 3..16");
    assert (SEED != '0) else $error("lfsr: SEED must be non-zero");
  end

  always_comb rnd = restart ? SEED : state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                state <= SEED;
    else if (restart || step)  state <= {rnd[W-2:0], ^(rnd & TAPS)};
  end

endmodule
