// tb_s2b_conv: feeds random APC counts with stream marks (including streams
// of length one and streams back to back) and compares q with a reference
// sum of the bipolar counts; q_valid must follow 'last' by one cycle.
module tb_s2b_conv;
  localparam int N = 30, CW = 5, AW = 17;
  logic clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  logic [CW-1:0] cnt = '0;
  logic signed [AW-1:0] q;
  logic q_valid;
  int checks = 0, failures = 0;
  int acc = 0, expect_q = 0, pending = 0, results = 0;

  s2b_conv #(.N(N), .CW(CW), .AW(AW)) dut (.clk, .rst_n, .en, .first, .last, .cnt, .q, .q_valid);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, pos;
    repeat (2) @(posedge clk);
    rst_n = 1;
    len = 1; pos = 0;
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      // Check the result of the previous cycle.
      checks++;
      if (q_valid !== (pending == 1)) begin
        failures++; $display("t=%0d q_valid=%b expected %0d", t, q_valid, pending);
      end
      if (pending == 1) begin
        checks++;
        results++;
        if (int'(q) != expect_q) begin failures++; $display("t=%0d q=%0d expected %0d", t, q, expect_q); end
      end
      pending = 0;
      en = ($urandom_range(0, 4) != 0);
      cnt = CW'($urandom_range(0, N));
      if (t > 20000) cnt = CW'(N);  // long positive streams
      first = en && (pos == 0);
      last  = en && (pos == len - 1);
      if (en) begin
        acc = (first ? 0 : acc) + 2 * int'(cnt) - N;
        if (last) begin
          expect_q = acc; pending = 1;
          pos = 0;
          len = ($urandom_range(0, 3) == 0) ? 1 : $urandom_range(2, 1024);
        end else pos++;
      end
    end
    checks++;
    if (results < 20) begin failures++; $display("only %0d results", results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
