// sc_hidden_layer: first SC layer of the Q network: N_HID neurons, each with
// N_IN inputs, an improved APC and a Btanh activation.
//
// Pipeline (two stages, as in the paper's deep pipelining):
//   cycle t   : input and weight stream bits arrive with token tok_in; the
//               XNORs and APCs of all neurons work on them;
//   cycle t+1 : the registered counts drive the Btanh counters;
//   cycle t+2 : z (one bit per neuron) and tok_out hold the activation
//               outputs for the bits that entered at cycle t.
// The token (valid/first/last) travels with the data, so streams of
// consecutive inferences may follow each other without a gap: the Btanh
// counters restart when a 'first' token reaches them. There is no bias input.
module sc_hidden_layer
  import sc_pkg::tok_t, sc_pkg::CW;
#(
  parameter int unsigned N_IN  = 26,
  parameter int unsigned N_HID = 30,
  parameter int unsigned K     = 2 * N_IN
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  tok_t                           tok_in,
  input  logic [N_IN-1:0]                x,
  input  logic [N_HID-1:0][N_IN-1:0]     w,
  output tok_t                           tok_out,
  output logic [N_HID-1:0]               z
);

  tok_t tok_sum;  // token of the counts held after the addition unit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_sum <= '0;
      tok_out <= '0;
    end else begin
      tok_sum <= tok_in;
      tok_out <= tok_sum;
    end
  end

  for (genvar j = 0; j < N_HID; j++) begin : g_neuron
    logic [CW-1:0] cnt;

    sc_neuron #(.N(N_IN), .CW(CW)) u_neuron (
      .clk, .rst_n, .x, .w(w[j]), .cnt_q(cnt)
    );

    btanh #(.N(N_IN), .K(K), .CW(CW)) u_act (
      .clk, .rst_n, .en(tok_sum.valid), .first(tok_sum.first), .cnt, .z(z[j])
    );
  end

endmodule
