// sc_pkg: constants and helpers shared by the stochastic-computing (SC) DNN.
//
// The network is the 26-30-1 Q-value estimator: 26 input words (state and
// action), 30 hidden neurons with a Btanh activation and one linear output
// neuron that returns Q(s,a). Values are bipolar: a stream whose fraction of
// ones is p stands for 2p-1. Binary words are W-bit two's complement numbers
// scaled by 2^(W-1), so they cover [-1,1). The network size follows the paper;
// the word width W, the LFSR polynomial and the address map are choices of
// this design.
package sc_pkg;

  // Network size (paper, experimental section).
  localparam int unsigned N_IN  = 26;
  localparam int unsigned N_HID = 30;

  // Binary word width of inputs and weights (own choice: resolution 1/512,
  // comparable with the longest stream of 1024 bits).
  localparam int unsigned W = 10;

  // Width of an APC count for up to 31 inputs (paper: 5-bit output).
  localparam int unsigned CW = 5;

  // Width of the run-time stream length (lengths 1..1024).
  localparam int unsigned LW = 11;

  // Write-bus address map of the parameter registers.
  //   0 .. N_IN-1                      : input word i (shadow copy)
  //   W1_BASE + j*N_IN + i             : first-layer weight w1[j][i]
  //   W2_BASE + j                      : output-layer weight w2[j]
  localparam int unsigned AW_ADDR = 10;
  localparam int unsigned W1_BASE = N_IN;
  localparam int unsigned W2_BASE = N_IN + N_IN * N_HID;
  localparam int unsigned N_ADDR  = W2_BASE + N_HID;

  // Seeds of the three random sources (any non-zero value works).
  localparam logic [W-1:0] SEED_X  = 10'h001;
  localparam logic [W-1:0] SEED_W1 = 10'h2A5;
  localparam logic [W-1:0] SEED_W2 = 10'h1C3;

  // Control tokens that travel down the pipeline with each stream bit.
  typedef struct packed {
    logic valid;  // a stream bit is present in this stage
    logic first;  // first bit of an inference
    logic last;   // last bit of an inference
  } tok_t;

endpackage
