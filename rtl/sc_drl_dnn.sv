// sc_drl_dnn: stochastic-computing Q-network accelerator for deep
// reinforcement learning, a 26-30-1 network that returns Q(s,a).
//
// The software controller writes the trained weights once (offline phase)
// and, for every state-action pair it wants evaluated, the 26 input words,
// then requests an inference. The words are turned into bipolar bit-streams
// of run-time length L by LFSR-based generators; each hidden neuron
// multiplies its 26 input streams with its weight streams (XNOR), adds them
// with an improved approximate parallel counter and squashes the count with a
// Btanh counter; the output neuron does the same with 30 inputs but without an
// activation, and its counts are summed into the binary result q.
//
// Pipeline, counted in cycles from the one in which a stream bit is issued:
//   +0  stream generators, XNOR, APC of the hidden layer
//   +1  hidden-layer count register -> Btanh counters
//   +2  Btanh outputs (registered) -> output-weight generator, XNOR, APC
//   +3  output count register -> S/B accumulator
//   +4  q / q_valid (after the last bit)
// The first bit is issued in the cycle after the edge that accepts 'start',
// so q_valid rises at the (L+3)-th clock edge after that edge. Requests
// back to back are accepted every L cycles and give one result per L
// cycles, the paper's "delay = stream length x clock period".
//
// Interface:
//   wr_en/wr_addr/wr_data  parameter write bus (see dnn_param_regs, sc_pkg)
//   start/ready            request an inference; stream_len is sampled with it
//   q/q_valid              signed sum over the stream of the output neuron's
//                          bipolar counts; Q = q / L, in [-N_HID, N_HID]
// The network size, the SC units and the two pipeline stages per layer follow
// the paper; word width, random sources, K, the bus and the sequencing are
// this design's own.
module sc_drl_dnn
  import sc_pkg::tok_t, sc_pkg::AW_ADDR, sc_pkg::LW;
  import sc_pkg::SEED_X, sc_pkg::SEED_W1, sc_pkg::SEED_W2;
#(
  parameter int unsigned N_IN  = sc_pkg::N_IN,
  parameter int unsigned N_HID = sc_pkg::N_HID,
  parameter int unsigned W     = sc_pkg::W,
  parameter int unsigned K     = 2 * N_IN,
  parameter int unsigned QW    = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [AW_ADDR-1:0]   wr_addr,
  input  logic [W-1:0]         wr_data,
  input  logic                 start,
  input  logic [LW-1:0]        stream_len,
  output logic                 ready,
  output logic signed [QW-1:0] q,
  output logic                 q_valid
);

  logic                              load;
  tok_t                              tok_issue;
  tok_t                              tok_hid;
  logic [N_IN-1:0][W-1:0]            x_act;
  logic [N_HID-1:0][N_IN-1:0][W-1:0] w1;
  logic [N_HID-1:0][W-1:0]           w2;
  logic [N_IN-1:0]                   x_bits;
  logic [N_HID-1:0][N_IN-1:0]        w1_bits;
  logic [N_HID-1:0]                  w2_bits;
  logic [N_HID-1:0]                  h_bits;

  sc_seq #(.LW(LW)) u_seq (
    .clk, .rst_n, .start, .stream_len, .ready, .load, .tok(tok_issue)
  );

  dnn_param_regs #(.N_IN(N_IN), .N_HID(N_HID), .W(W), .AWD(AW_ADDR)) u_regs (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .load, .x_act, .w1, .w2
  );

  // Binary-to-stochastic conversion: inputs, first-layer weights and
  // output-layer weights each use their own LFSR.
  b2s_conv #(.N(N_IN), .W(W), .SEED(W'(SEED_X))) u_b2s_x (
    .clk, .rst_n, .restart(tok_issue.first), .step(tok_issue.valid),
    .val(x_act), .bits(x_bits)
  );

  b2s_conv #(.N(N_HID * N_IN), .W(W), .SEED(W'(SEED_W1))) u_b2s_w1 (
    .clk, .rst_n, .restart(tok_issue.first), .step(tok_issue.valid),
    .val(w1), .bits(w1_bits)
  );

  sc_hidden_layer #(.N_IN(N_IN), .N_HID(N_HID), .K(K)) u_hidden (
    .clk, .rst_n, .tok_in(tok_issue), .x(x_bits), .w(w1_bits),
    .tok_out(tok_hid), .z(h_bits)
  );

  b2s_conv #(.N(N_HID), .W(W), .SEED(W'(SEED_W2))) u_b2s_w2 (
    .clk, .rst_n, .restart(tok_hid.first), .step(tok_hid.valid),
    .val(w2), .bits(w2_bits)
  );

  sc_output_layer #(.N(N_HID), .AW(QW)) u_out (
    .clk, .rst_n, .tok_in(tok_hid), .h(h_bits), .w(w2_bits), .q, .q_valid
  );

  // Bus rule: weights are read by the stream generators every cycle, so
  // they may only be written while no stream is in the first two stages.
  a_weights_idle: assert property (@(posedge clk)
    (wr_en && int'(wr_addr) >= int'(N_IN)) |-> !(tok_issue.valid || tok_hid.valid))
    else $error("weight written while a stream is running");

endmodule
