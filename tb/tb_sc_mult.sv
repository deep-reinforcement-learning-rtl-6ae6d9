// tb_sc_mult: checks the XNOR multiplier bank bit by bit on random vectors,
// and checks bipolar multiplication statistically on long random streams.
module tb_sc_mult;
  localparam int N = 26;
  logic [N-1:0] x, w, p;
  int checks = 0, failures = 0;

  sc_mult #(.N(N)) dut (.x, .w, .p);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Bitwise truth table on random vectors.
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) begin
        x[i] = 1'($urandom);
        w[i] = 1'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (p[i] !== (x[i] == w[i])) begin
          failures++;
          $display("bit mismatch t=%0d i=%0d x=%b w=%b p=%b", t, i, x[i], w[i], p[i]);
        end
      end
    end
    // Statistics: lane i carries values a_i, b_i; product value a_i*b_i.
    begin
      int ones [N];
      real a [N], b [N];
      for (int i = 0; i < N; i++) begin
        int ra, rb;
        ones[i] = 0;
        ra = $urandom_range(0, 200);
        rb = $urandom_range(0, 200);
        a[i] = (ra - 100) / 100.0;
        b[i] = (rb - 100) / 100.0;
      end
      for (int t = 0; t < 20000; t++) begin
        for (int i = 0; i < N; i++) begin
          x[i] = ($urandom_range(0, 9999) < int'((a[i] + 1.0) / 2.0 * 10000.0));
          w[i] = ($urandom_range(0, 9999) < int'((b[i] + 1.0) / 2.0 * 10000.0));
        end
        #1;
        for (int i = 0; i < N; i++) ones[i] += p[i];
      end
      for (int i = 0; i < N; i++) begin
        real v;
        v = 2.0 * ones[i] / 20000.0 - 1.0;
        checks++;
        if (v - a[i] * b[i] > 0.05 || a[i] * b[i] - v > 0.05) begin
          failures++;
          $display("stat lane %0d: %f * %f -> %f", i, a[i], b[i], v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
