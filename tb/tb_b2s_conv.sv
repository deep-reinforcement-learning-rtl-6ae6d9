// tb_b2s_conv: checks the binary-to-stochastic converter against a
// reference LFSR and comparator bit by bit, checks that a stream of one full
// LFSR period holds exactly v + 2^(W-1) ones, and checks the restart.
module tb_b2s_conv;
  import tb_ref_pkg::*;
  localparam int N = 12, W = 10;
  localparam logic [W-1:0] SEED = 10'h2A5;
  logic clk = 0, rst_n = 0, restart = 0, step = 0;
  logic [N-1:0][W-1:0] val;
  logic [N-1:0] bits;
  int checks = 0, failures = 0;
  int rnd;
  int ones [N];

  b2s_conv #(.N(N), .W(W), .SEED(SEED)) dut (.clk, .rst_n, .restart, .step, .val, .bits);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Compare the lane bits of the current cycle with the reference.
  task automatic cmp(input int t);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (bits[i] !== sng_ref(rnd, i, int'(val[i]))) begin
        failures++;
        if (failures < 10) $display("t=%0d lane %0d rnd=%h val=%h bit=%b", t, i, rnd, val[i], bits[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) val[i] = W'($urandom);
    val[0] = 10'h200;  // -1.0: never one
    val[1] = 10'h1FF;  // just below +1.0: always one
    val[2] = 10'h000;  //  0.0
    repeat (2) @(posedge clk);
    rst_n = 1;
    // One full period starting from a restart.
    for (int i = 0; i < N; i++) ones[i] = 0;
    @(negedge clk);
    restart = 1; step = 1; rnd = int'(SEED);
    #1 cmp(0);
    for (int i = 0; i < N; i++) ones[i] += bits[i];
    for (int t = 1; t < 1023; t++) begin
      @(negedge clk);
      restart = 0;
      rnd = lfsr10_next(rnd);
      #1 cmp(t);
      for (int i = 0; i < N; i++) ones[i] += bits[i];
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (ones[i] != int'(val[i] ^ 10'h200)) begin
        failures++;
        $display("lane %0d: %0d ones, expected %0d", i, ones[i], int'(val[i] ^ 10'h200));
      end
    end
    // Hold (step low) then restart in the middle.
    @(negedge clk); step = 0; rnd = lfsr10_next(rnd);
    #1 cmp(2000);
    @(negedge clk); #1 cmp(2001);
    @(negedge clk); restart = 1; step = 1; rnd = int'(SEED);
    #1 cmp(2002);
    for (int t = 0; t < 100; t++) begin
      @(negedge clk); restart = 0; rnd = lfsr10_next(rnd);
      for (int i = 0; i < N; i++) val[i] = W'($urandom);
      #1 cmp(3000 + t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
