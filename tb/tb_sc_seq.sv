// tb_sc_seq: random inference requests with random stream lengths (0 and 1
// included) and back-to-back requests; checks ready, load and the token of
// every cycle against a reference, and that back-to-back streams leave no gap.
module tb_sc_seq;
  import sc_pkg::tok_t;
  localparam int LW = 11;
  logic clk = 0, rst_n = 0, start = 0;
  logic [LW-1:0] stream_len = '0;
  logic ready, load;
  tok_t tok;
  int checks = 0, failures = 0;
  bit m_busy = 0;
  int m_len = 1, m_cnt = 0, b2b = 0, tokens = 0;

  sc_seq #(.LW(LW)) dut (.clk, .rst_n, .start, .stream_len, .ready, .load, .tok);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      bit e_first, e_last, e_ready;
      @(negedge clk);
      start = ($urandom_range(0, 3) == 0);
      stream_len = LW'($urandom_range(0, 3) == 0 ? $urandom_range(0, 2) : $urandom_range(3, 40));
      #1;
      e_first = m_busy && m_cnt == 0;
      e_last  = m_busy && m_cnt == m_len - 1;
      e_ready = !m_busy || e_last;
      checks += 4;
      if (tok.valid !== m_busy || tok.first !== e_first || tok.last !== e_last) begin
        failures++; $display("t=%0d tok=%b expected %b%b%b", t, tok, m_busy, e_first, e_last);
      end
      if (ready !== e_ready) begin failures++; $display("t=%0d ready=%b", t, ready); end
      if (load !== (start && e_ready)) begin failures++; $display("t=%0d load=%b", t, load); end
      checks++;
      if (tok.valid) tokens++;
      if (start && e_last) b2b++;
      // Reference of the next edge.
      if (start && e_ready) begin
        m_busy = 1; m_cnt = 0;
        m_len = (stream_len == 0) ? 1 : int'(stream_len);
      end else if (m_busy) begin
        if (e_last) m_busy = 0;
        m_cnt++;
      end
    end
    checks++;
    if (b2b == 0) begin failures++; $display("no back-to-back request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
