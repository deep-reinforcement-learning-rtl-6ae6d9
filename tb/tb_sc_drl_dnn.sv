// tb_sc_drl_dnn: end-to-end test of the SC Q-network at its full size
// (26 inputs, 30 hidden neurons, one output; no parameter overrides).
//
// The testbench plays the software controller: it writes all weights over
// the parameter bus, then for one environment state evaluates Q(s,a) for
// four actions with requests back to back (writing the next input words
// while the previous stream runs) and picks the greedy action; it also runs
// single requests at stream lengths 256, 512 and 1024 and two requests whose
// sign is known in advance. Every result is compared with a bit-exact
// reference of the network (LFSRs, stream generators, APCs, Btanh walks and
// the output sum) computed here from the arithmetic definitions. Latency
// (L+3 clock edges from the accepting edge) and throughput (one result per L
// cycles back to back) are checked, and the mechanisms exercised are counted:
// back-to-back issue, writes during a stream, Btanh saturation, each
// stream length.
module tb_sc_drl_dnn;
  import sc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = sc_pkg::N_IN, NH = sc_pkg::N_HID, KK = 2 * sc_pkg::N_IN;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [AW_ADDR-1:0] wr_addr = '0;
  logic [W-1:0] wr_data = '0;
  logic start = 0;
  logic [LW-1:0] stream_len = '0;
  logic ready;
  logic signed [16:0] q;
  logic q_valid;

  sc_drl_dnn dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .start, .stream_len,
                  .ready, .q, .q_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // Watchdog: a fixed number of cycles.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model of the register contents.
  int m_x [NI];            // shadow input words (signed)
  int m_w1 [NH][NI];
  int m_w2 [NH];

  // Requests accepted and still waiting for their result.
  int     exp_q [$];
  longint exp_cyc [$];
  int     exp_len [$];
  int     n_results = 0, n_b2b = 0, n_wr_during = 0, n_sat = 0;
  int     n_len [3] = '{0, 0, 0};
  longint last_result_cycle = -1;
  int     got_q [$];
  longint acc_cycle = -100000;
  int     acc_len = 0;

  // Bit-exact reference of one inference.
  function automatic int ref_q(input int xin [NI], input int len);
    int ra = int'(SEED_X), rb = int'(SEED_W1), rc = int'(SEED_W2);
    int st [NH];
    bit z [NH];
    int acc = 0;
    for (int j = 0; j < NH; j++) st[j] = KK / 2;
    for (int t = 0; t < len; t++) begin
      bit xb [NI];
      logic [63:0] prod;
      int c2;
      for (int i = 0; i < NI; i++) xb[i] = sng_ref(ra, i, xin[i]);
      for (int j = 0; j < NH; j++) begin
        int c1;
        prod = '0;
        for (int i = 0; i < NI; i++) prod[i] = (xb[i] == sng_ref(rb, j * NI + i, m_w1[j][i]));
        c1 = apc_ref(prod, NI);
        st[j] = btanh_step(st[j], c1, NI, KK, t == 0);
        if (st[j] == 0 || st[j] == KK - 1) n_sat++;
        z[j] = (st[j] >= KK / 2);
      end
      prod = '0;
      for (int j = 0; j < NH; j++) prod[j] = (z[j] == sng_ref(rc, j, m_w2[j]));
      c2 = apc_ref(prod, NH);
      acc += 2 * c2 - NH;
      ra = lfsr10_next(ra); rb = lfsr10_next(rb); rc = lfsr10_next(rc);
    end
    return acc;
  endfunction

  task automatic bus_write(input int addr, input int data);
    @(negedge clk);
    wr_en = 1; wr_addr = AW_ADDR'(addr); wr_data = W'(data);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic write_x(input int i, input int v);
    bus_write(i, v);
    m_x[i] = v;
  endtask

  // Request an inference: hold start until it is accepted.
  task automatic request(input int len);
    int xs [NI];
    @(negedge clk);
    start = 1; stream_len = LW'(len);
    forever begin
      @(posedge clk);
      if (ready) break;
      @(negedge clk);
    end
    // Accepted at this edge: remember what the result must be. The previous
    // stream occupies the L edges after its accepting edge; acceptance at the
    // L-th is back to back, earlier would overrun it.
    #1;
    checks++;
    if (cycle < acc_cycle + acc_len) begin
      failures++; $display("accepted while busy");
    end
    if (cycle == acc_cycle + acc_len) n_b2b++;
    acc_cycle = cycle; acc_len = len;
    for (int i = 0; i < NI; i++) xs[i] = m_x[i];
    exp_q.push_back(ref_q(xs, len));
    // q_valid rises at the (L+3)-th edge after the accepting edge; the
    // checker samples it at the edge after that.
    exp_cyc.push_back(cycle + len + 3 + 1);
    exp_len.push_back(len);
    case (len)
      256: n_len[0]++;
      512: n_len[1]++;
      1024: n_len[2]++;
      default: ;
    endcase
    @(negedge clk);
    start = 0;
  endtask

  // Result checker.
  always @(posedge clk) begin
    if (rst_n && q_valid) begin
      int e; longint ec; int el;
      #1;
      n_results++;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected result q=%0d", q);
      end else begin
        e = exp_q.pop_front(); ec = exp_cyc.pop_front(); el = exp_len.pop_front();
        got_q.push_back(int'(q));
        if (int'(q) != e) begin
          failures++; $display("q=%0d expected %0d (L=%0d)", q, e, el);
        end
        if (cycle != ec) begin
          failures++; $display("result at cycle %0d, expected %0d", cycle, ec);
        end
        // Back-to-back results must come exactly L cycles apart.
        if (last_result_cycle >= 0 && cycle - last_result_cycle < el) begin
          checks++; failures++; $display("results closer than L");
        end
        last_result_cycle = cycle;
      end
    end
  end

  task automatic wait_results();
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  function automatic int rnd_word(input int lo, input int hi);
    int r;
    r = $urandom_range(0, hi - lo);
    return r + lo;
  endfunction

  initial begin
    int best_a, best_q, ref_best_a, ref_best_q;
    int qa [4];
    longint t0;
    for (int i = 0; i < NI; i++) m_x[i] = 0;
    for (int j = 0; j < NH; j++) begin m_w2[j] = 0; for (int i = 0; i < NI; i++) m_w1[j][i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // --- Known-sign requests: all weights and inputs +0.75.
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) begin bus_write(W1_BASE + j * NI + i, 384); m_w1[j][i] = 384; end
      bus_write(W2_BASE + j, 384); m_w2[j] = 384;
    end
    for (int i = 0; i < NI; i++) write_x(i, 384);
    request(256);
    wait_results();
    checks++;
    if (got_q[got_q.size() - 1] <= 256 * 10) begin
      failures++; $display("positive network gave q=%0d", got_q[got_q.size() - 1]);
    end
    for (int i = 0; i < NI; i++) write_x(i, -384);
    request(256);
    wait_results();
    checks++;
    if (got_q[got_q.size() - 1] >= -256 * 10) begin
      failures++; $display("negative network gave q=%0d", got_q[got_q.size() - 1]);
    end

    // --- Random trained-looking network: weights in [-0.5, 0.5].
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) begin
        m_w1[j][i] = rnd_word(-256, 255);
        bus_write(W1_BASE + j * NI + i, m_w1[j][i]);
      end
      m_w2[j] = rnd_word(-512, 511);
      bus_write(W2_BASE + j, m_w2[j]);
    end

    // --- One decision epoch: state in words 0..21, action one-hot in 22..25.
    for (int i = 0; i < 22; i++) write_x(i, rnd_word(-512, 511));
    for (int a = 0; a < 4; a++) begin
      for (int i = 22; i < 26; i++) write_x(i, (i - 22 == a) ? 511 : -512);
      if (a > 0 && cycle < acc_cycle + acc_len) n_wr_during++;
      request(256);
    end
    wait_results();
    // Greedy action from hardware results and from the reference.
    best_a = 0; ref_best_a = 0;
    for (int a = 0; a < 4; a++) qa[a] = got_q[got_q.size() - 4 + a];
    best_q = qa[0];
    for (int a = 1; a < 4; a++) if (qa[a] > best_q) begin best_q = qa[a]; best_a = a; end
    begin
      int xs [NI];
      for (int i = 0; i < NI; i++) xs[i] = m_x[i];
      ref_best_q = -1000000;
      for (int a = 0; a < 4; a++) begin
        int rq;
        for (int i = 22; i < 26; i++) xs[i] = (i - 22 == a) ? 511 : -512;
        rq = ref_q(xs, 256);
        if (rq > ref_best_q) begin ref_best_q = rq; ref_best_a = a; end
      end
    end
    checks++;
    if (best_a != ref_best_a) begin failures++; $display("greedy action %0d, reference %0d", best_a, ref_best_a); end
    $display("Q(s,a)*L for a=0..3: %0d %0d %0d %0d -> action %0d", qa[0], qa[1], qa[2], qa[3], best_a);

    // --- Precision modes: the same pair at 512 and 1024 bits.
    request(512);
    wait_results();
    request(1024);
    wait_results();

    // --- Mechanism counts.
    checks += 5;
    if (n_b2b < 3)       begin failures++; $display("back-to-back issue happened %0d times", n_b2b); end
    if (n_wr_during < 3) begin failures++; $display("writes during a stream: %0d", n_wr_during); end
    if (n_sat == 0)      begin failures++; $display("no Btanh saturation"); end
    if (n_len[0] == 0 || n_len[1] == 0 || n_len[2] == 0) begin failures++; $display("a stream length was not run"); end
    if (n_results != 8)  begin failures++; $display("%0d results, expected 8", n_results); end
    $display("results=%0d back_to_back=%0d writes_during_stream=%0d btanh_saturations=%0d L256=%0d L512=%0d L1024=%0d",
             n_results, n_b2b, n_wr_during, n_sat, n_len[0], n_len[1], n_len[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
