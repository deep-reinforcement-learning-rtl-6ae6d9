// sc_seq: stream sequencer of the SC network.
//
// An inference is requested with 'start' while 'ready' is high; the stream
// length L (1..2^LW-1, 0 is taken as 1) is sampled with it and 'load' pulses
// in the same cycle so that the parameter registers copy the shadow input
// words. From the next cycle on, the sequencer issues L tokens, one per
// cycle: every token is valid, the first is marked 'first' and the L-th
// 'last'. 'ready' is high while idle and in the cycle of the last token, so
// back-to-back requests issue one inference every L cycles, matching the
// paper's throughput of one stream length per result. The request interface
// is this design's own.
module sc_seq
  import sc_pkg::tok_t;
#(
  parameter int unsigned LW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] stream_len,
  output logic          ready,
  output logic          load,
  output tok_t          tok
);

  logic          busy;
  logic [LW-1:0] len_q;
  logic [LW-1:0] cnt;

  always_comb begin
    tok.valid = busy;
    tok.first = busy && (cnt == '0);
    tok.last  = busy && (cnt == len_q - 1'b1);
    ready     = !busy || tok.last;
    load      = start && ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      len_q <= LW'(1);
      cnt   <= '0;
    end else if (load) begin
      busy  <= 1'b1;
      len_q <= (stream_len == '0) ? LW'(1) : stream_len;
      cnt   <= '0;
    end else if (busy) begin
      if (tok.last) busy <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  // A token is never both absent and marked.
  a_tok_valid: assert property (@(posedge clk)
    (tok.first || tok.last) |-> tok.valid);

endmodule
