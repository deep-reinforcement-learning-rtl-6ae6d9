// tb_sc_hidden_layer: small hidden layer (6 inputs, 3 neurons, K=12) driven
// with random stream bits and random tokens; a reference model of the two
// pipeline stages (APC count register, Btanh walk) predicts z and tok_out.
module tb_sc_hidden_layer;
  import sc_pkg::tok_t;
  import tb_ref_pkg::*;
  localparam int NI = 6, NH = 3, KK = 12;
  logic clk = 0, rst_n = 0;
  tok_t tok_in = '0, tok_out;
  logic [NI-1:0] x = '0;
  logic [NH-1:0][NI-1:0] w = '0;
  logic [NH-1:0] z;
  int checks = 0, failures = 0;
  // Reference pipeline state.
  tok_t m_tok1 = '0, m_tok2 = '0;
  int m_cnt [NH], m_state [NH];
  bit m_z [NH];
  int restarts = 0;

  sc_hidden_layer #(.N_IN(NI), .N_HID(NH), .K(KK)) dut (
    .clk, .rst_n, .tok_in, .x, .w, .tok_out, .z);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NH; j++) begin m_cnt[j] = 0; m_state[j] = KK / 2; m_z[j] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      @(negedge clk);
      checks++;
      if (tok_out !== m_tok2) begin failures++; $display("t=%0d tok_out=%b expected %b", t, tok_out, m_tok2); end
      for (int j = 0; j < NH; j++) begin
        checks++;
        if (z[j] !== m_z[j]) begin failures++; $display("t=%0d z[%0d]=%b expected %b", t, j, z[j], m_z[j]); end
      end
      // New inputs.
      tok_in.valid = ($urandom_range(0, 5) != 0);
      tok_in.first = tok_in.valid && ($urandom_range(0, 30) == 0);
      tok_in.last  = tok_in.valid && ($urandom_range(0, 30) == 0);
      x = NI'($urandom);
      for (int j = 0; j < NH; j++) w[j] = NI'($urandom);
      if ((t / 300) % 2 == 0) for (int j = 0; j < NH; j++) w[j] = x;  // drive upwards
      // Reference model of the coming clock edge, later stage first.
      m_tok2 = m_tok1;
      for (int j = 0; j < NH; j++)
        if (m_tok1.valid) begin
          m_state[j] = btanh_step(m_state[j], m_cnt[j], NI, KK, m_tok1.first);
          m_z[j] = (m_state[j] >= KK / 2);
        end
      if (m_tok1.valid && m_tok1.first) restarts++;
      m_tok1 = tok_in;
      for (int j = 0; j < NH; j++) m_cnt[j] = apc_ref(64'(~(x ^ w[j])), NI);
    end
    checks++;
    if (restarts == 0) begin failures++; $display("no restart happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
