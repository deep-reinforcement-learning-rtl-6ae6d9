// sc_output_layer: the single linear output neuron of the Q network and its
// stochastic-to-binary converter.
//
// The N hidden-layer streams are multiplied with the N output-weight streams,
// counted by an improved APC and registered (the same register between
// addition and the next unit as in the hidden layer); the S/B converter then
// sums the bipolar counts over the stream. No activation is applied, so the
// result is the weighted sum of the hidden outputs, i.e. the Q value.
//
// Timing: bits entering with tok_in at cycle t reach the S/B converter at
// cycle t+1; q_valid pulses one cycle after the converter sees the 'last'
// token, that is two cycles after the last bit entered this layer.
module sc_output_layer
  import sc_pkg::*;
#(
  parameter int unsigned N  = 30,
  parameter int unsigned AW = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  tok_t                 tok_in,
  input  logic [N-1:0]         h,
  input  logic [N-1:0]         w,
  output logic signed [AW-1:0] q,
  output logic                 q_valid
);

  tok_t          tok_sum;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tok_sum <= '0;
    else        tok_sum <= tok_in;
  end

  sc_neuron #(.N(N), .CW(CW)) u_neuron (
    .clk, .rst_n, .x(h), .w, .cnt_q(cnt)
  );

  s2b_conv #(.N(N), .CW(CW), .AW(AW)) u_s2b (
    .clk, .rst_n, .en(tok_sum.valid), .first(tok_sum.first), .last(tok_sum.last),
    .cnt, .q, .q_valid
  );

endmodule
