// tb_apc: checks the improved APC (30 and 26 inputs) against the reference
// count on corner and random vectors, and checks that the accumulated count
// of random streams of 256, 512 and 1024 bits stays within 5% of the exact
// number of ones, 2.5% on average (and prints the mean inaccuracy of each
// case).
module tb_apc;
  import tb_ref_pkg::*;
  logic [29:0] a30;
  logic [25:0] a26;
  logic [4:0]  c30, c26;
  int checks = 0, failures = 0;
  int lens [3] = '{256, 512, 1024};

  apc #(.N(30), .CW(5)) dut30 (.a(a30), .cnt(c30));
  apc #(.N(26), .CW(5)) dut26 (.a(a26), .cnt(c26));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int t);
    #1;
    checks += 2;
    if (int'(c30) != apc_ref(64'(a30), 30)) begin
      failures++;
      $display("N=30 t=%0d a=%b cnt=%0d ref=%0d", t, a30, c30, apc_ref(64'(a30), 30));
    end
    if (int'(c26) != apc_ref(64'(a26), 26)) begin
      failures++;
      $display("N=26 t=%0d a=%b cnt=%0d ref=%0d", t, a26, c26, apc_ref(64'(a26), 26));
    end
  endtask

  initial begin
    a30 = '0; a26 = '0; check(-1);
    checks++; if (c30 != 0) failures++;
    a30 = '1; a26 = '1; check(-2);
    checks += 2; if (c30 != 30 || c26 != 26) failures++;
    // Only the half-adder pair set: exact 2, bit 0 clear.
    a30 = 30'h3000_0000; a26 = 26'h300_0000; check(-3);
    checks++; if (c30 != 2 || c26 != 2) failures++;
    for (int t = 0; t < 20000; t++) begin
      a30 = 30'($urandom); a26 = 26'($urandom);
      check(t);
    end
    // Accuracy over streams, for both sizes and the three stream lengths of
    // the source's APC evaluation (256, 512, 1024 bits). Lane i carries the
    // product of two random bipolar values, P(1) = (1 + x*w)/2, as the
    // product streams of a neuron do. Inaccuracy is taken here as
    // |sum of APC counts - exact number of ones| / exact number of ones,
    // averaged over 8 trials; each trial must stay within 5% and the mean
    // within 2.5%.
    foreach (lens[li]) begin
      for (int nn = 26; nn <= 30; nn += 4) begin
        real err_sum;
        err_sum = 0.0;
        for (int trial = 0; trial < 8; trial++) begin
          int pr [30];
          longint sum_apc, sum_exact, d;
          sum_apc = 0;
          sum_exact = 0;
          for (int i = 0; i < 30; i++) begin
            int xv, wv;
            xv = $urandom_range(0, 2000);
            wv = $urandom_range(0, 2000);
            xv -= 1000;
            wv -= 1000;
            pr[i] = (1000000 + xv * wv) / 2000;
          end
          for (int t = 0; t < lens[li]; t++) begin
            for (int i = 0; i < 30; i++) a30[i] = ($urandom_range(0, 999) < pr[i]);
            a26 = a30[25:0];
            #1;
            sum_apc   += (nn == 30) ? c30 : c26;
            sum_exact += (nn == 30) ? $countones(a30) : $countones(a26);
          end
          d = (sum_apc > sum_exact) ? sum_apc - sum_exact : sum_exact - sum_apc;
          err_sum += real'(d) / real'(sum_exact);
          checks++;
          if (d * 100 > 5 * sum_exact) begin
            failures++;
            $display("accuracy N=%0d L=%0d trial %0d: apc=%0d exact=%0d", nn, lens[li], trial, sum_apc, sum_exact);
          end
        end
        $display("APC N=%0d L=%0d: mean inaccuracy %0.2f%%", nn, lens[li], 100.0 * err_sum / 8.0);
        checks++;
        if (err_sum / 8.0 > 0.025) begin
          failures++;
          $display("mean inaccuracy too high");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
