// tb_sc_neuron: drives random input and weight bits into a 26-input neuron
// front end and checks that cnt_q is the reference APC count of the XNOR
// products of the previous cycle (one-cycle pipeline register) and does not
// change between clock edges.
module tb_sc_neuron;
  import tb_ref_pkg::*;
  localparam int N = 26;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] x = '0, w = '0;
  logic [4:0] cnt_q;
  int checks = 0, failures = 0;
  int prev;

  sc_neuron #(.N(N), .CW(5)) dut (.clk, .rst_n, .x, .w, .cnt_q);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    x = N'($urandom); w = N'($urandom);
    prev = apc_ref(64'(~(x ^ w)), N);
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(cnt_q) != prev) begin
        failures++; $display("t=%0d cnt_q=%0d expected %0d", t, cnt_q, prev);
      end
      x = N'($urandom); w = N'($urandom);
      if (t % 100 == 0) w = ~x;     // all products zero -> count 0
      if (t % 100 == 50) w = x;     // all products one -> count N
      // New inputs must not reach cnt_q before the next clock edge.
      #1;
      checks++;
      if (int'(cnt_q) != prev) begin
        failures++; $display("t=%0d cnt_q changed between edges", t);
      end
      prev = apc_ref(64'(~(x ^ w)), N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
