// s2b_conv: stochastic-to-binary converter of the output neuron.
//
// The output neuron's APC gives each cycle the count cnt of ones among its N
// product streams; the bipolar sum of the N products in that cycle is
// 2*cnt - N. This block adds that sum over the whole stream and returns the
// signed total q. Dividing q by the stream length L gives the Q value in the
// units of the neuron's weighted sum, range [-N, N]; that scaling is left to
// the software.
//
// Timing: counts with 'en' high are accumulated; 'first' restarts the sum
// with the current count, 'last' publishes the total including the current
// count, so q and q_valid appear one cycle after the last count. q holds its
// value until the next result. Streams of consecutive inferences may follow
// each other without a gap. The conversion follows the paper's S/B block; its
// form (summing counts rather than counting ones of a stream) is this
// design's choice.
module s2b_conv #(
  parameter int unsigned N  = 30,
  parameter int unsigned CW = 5,
  parameter int unsigned AW = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                first,
  input  logic                last,
  input  logic [CW-1:0]       cnt,
  output logic signed [AW-1:0] q,
  output logic                q_valid
);

  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] step;
  logic signed [AW-1:0] sum;

  always_comb begin
    step = AW'(2 * int'(cnt) - int'(N));
    sum  = (first ? '0 : acc) + step;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q_valid <= en && last;
      if (en) begin
        acc <= sum;
        if (last) q <= sum;
      end
    end
  end

endmodule
