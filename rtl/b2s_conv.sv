// b2s_conv: binary-to-stochastic converter for N words sharing one LFSR.
//
// Each word v is a W-bit two's complement number standing for v/2^(W-1) in
// [-1,1). Its bipolar stream must have P(1) = (v/2^(W-1) + 1)/2, so the
// offset-binary threshold u = v + 2^(W-1) is compared with a random word r
// uniform over 1..2^W-1: the bit is 1 when r <= u, giving
// P(1) = u/(2^W-1). Lane i uses the LFSR word rotated left by (i mod W), which
// decorrelates the lanes at no cost in random sources.
//
// Timing: combinational from 'val' and the LFSR word of the current cycle.
// 'restart' makes this cycle use the seed (first bit of an inference);
// 'step' advances the LFSR. The paper names this conversion block only; the
// LFSR-and-comparator generator is this design's choice.
module b2s_conv #(
  parameter int unsigned N    = 26,
  parameter int unsigned W    = 10,
  parameter logic [W-1:0] SEED = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                restart,
  input  logic                step,
  input  logic [N-1:0][W-1:0] val,
  output logic [N-1:0]        bits
);

  logic [W-1:0] rnd;

  lfsr #(.W(W), .SEED(SEED)) u_lfsr (
    .clk, .rst_n, .restart, .step, .rnd
  );

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [W-1:0] r, u;
      r = (rnd << (i % W)) | (rnd >> ((W - i % W) % W));
      u = val[i] ^ {1'b1, {(W-1){1'b0}}};
      bits[i] = (r <= u);
    end
  end

endmodule
