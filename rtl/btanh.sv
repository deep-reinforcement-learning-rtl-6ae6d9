// btanh: SC activation unit (Btanh), a K-state saturating up/down counter
// that turns the binary APC count of a neuron into the tanh-shaped output
// bit-stream.
//
// The K states S0..S(K-1) are the states of the Stanh finite-state machine:
// the output is 0 while the state is in the lower half (S0..S(K/2-1)) and 1
// in the upper half. A single-stream Stanh moves one state right on a 1 and
// one state left on a 0; here the input is the APC count cnt of N product
// streams, so each cycle the state moves by the bipolar sum 2*cnt - N and
// saturates at S0 and S(K-1). With N=1 this is exactly the Stanh FSM. The
// mean output then approximates tanh of the neuron's weighted sum.
//
// Timing: when 'en' is high the state is updated at the clock edge and z
// is registered together with it, so z belongs to the count of the previous
// cycle (this is the pipeline register after the activation). On 'first' the
// state restarts from the middle state K/2 before the step. K is this
// design's choice (the paper does not give it); the structure follows the
// paper's activation unit and the Btanh design it cites.
module btanh #(
  parameter int unsigned N  = 26,
  parameter int unsigned K  = 2 * N,
  parameter int unsigned CW = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic [CW-1:0] cnt,
  output logic          z
);

  localparam int unsigned SW = $clog2(K);

  initial assert (K >= 2 && K % 2 == 0) else $error("btanh: K must be even");

  logic [SW-1:0] state;
  logic [SW-1:0] nxt;

  always_comb begin
    int signed cur, sum;
    cur = first ? int'(K / 2) : int'(state);
    sum = cur + 2 * int'(cnt) - int'(N);
    if (sum < 0)            nxt = '0;
    else if (sum > K - 1)   nxt = SW'(K - 1);
    else                    nxt = SW'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SW'(K / 2);
      z     <= 1'b1;
    end else if (en) begin
      state <= nxt;
      z     <= (nxt >= SW'(K / 2));
    end
  end

endmodule
