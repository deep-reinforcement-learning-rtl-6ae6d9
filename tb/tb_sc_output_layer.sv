// tb_sc_output_layer: small output neuron (6 inputs) with random stream bits
// and streams of random length back to back; a reference model predicts q
// and the cycle of q_valid (two cycles after the last bit enters).
module tb_sc_output_layer;
  import sc_pkg::tok_t;
  import tb_ref_pkg::*;
  localparam int N = 6, AW = 17;
  logic clk = 0, rst_n = 0;
  tok_t tok_in = '0;
  logic [N-1:0] h = '0, w = '0;
  logic signed [AW-1:0] q;
  logic q_valid;
  int checks = 0, failures = 0, results = 0;
  tok_t m_tok1 = '0;
  int m_cnt = 0, m_acc = 0, m_q = 0;
  bit m_qv = 0;

  sc_output_layer #(.N(N), .AW(AW)) dut (.clk, .rst_n, .tok_in, .h, .w, .q, .q_valid);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len = 5, pos = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      @(negedge clk);
      checks++;
      if (q_valid !== m_qv) begin failures++; $display("t=%0d q_valid=%b expected %b", t, q_valid, m_qv); end
      if (m_qv) begin
        checks++; results++;
        if (int'(q) != m_q) begin failures++; $display("t=%0d q=%0d expected %0d", t, q, m_q); end
      end
      tok_in.valid = ($urandom_range(0, 3) != 0);
      tok_in.first = tok_in.valid && pos == 0;
      tok_in.last  = tok_in.valid && pos == len - 1;
      if (tok_in.valid) begin
        if (pos == len - 1) begin pos = 0; len = $urandom_range(1, 40); end
        else pos++;
      end
      h = N'($urandom); w = N'($urandom);
      // Reference of the next edge.
      m_qv = m_tok1.valid && m_tok1.last;
      if (m_tok1.valid) begin
        m_acc = (m_tok1.first ? 0 : m_acc) + 2 * m_cnt - N;
        if (m_tok1.last) m_q = m_acc;
      end
      m_tok1 = tok_in;
      m_cnt = apc_ref(64'(~(h ^ w)), N);
    end
    checks++;
    if (results < 50) begin failures++; $display("only %0d results", results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
