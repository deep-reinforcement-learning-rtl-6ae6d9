// tb_btanh: drives the Btanh activation (N=26, K=52) with random APC counts
// and restart marks and compares its output with a reference state walk;
// also checks saturation at both ends and the restart at the middle state.
module tb_btanh;
  import tb_ref_pkg::*;
  localparam int N = 26, K = 52;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [4:0] cnt = '0;
  logic z;
  int checks = 0, failures = 0;
  int st = K / 2;
  int sat_lo = 0, sat_hi = 0;

  btanh #(.N(N), .K(K), .CW(5)) dut (.clk, .rst_n, .en, .first, .cnt, .z);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      en    = ($urandom_range(0, 9) != 0);
      first = ($urandom_range(0, 99) == 0);
      // Bias the counts in phases so that the walk reaches both ends.
      case ((t / 500) % 3)
        0: cnt = 5'($urandom_range(10, 26));
        1: cnt = 5'($urandom_range(0, 16));
        default: cnt = 5'($urandom_range(0, 26));
      endcase
      @(posedge clk);
      if (en) st = btanh_step(st, int'(cnt), N, K, first);
      if (st == 0) sat_lo++;
      if (st == K - 1) sat_hi++;
      #1;
      checks++;
      if (z !== (st >= K / 2)) begin
        failures++;
        $display("t=%0d cnt=%0d first=%0d en=%0d z=%0d ref_state=%0d", t, cnt, first, en, z, st);
      end
    end
    checks += 2;
    if (sat_lo == 0) begin failures++; $display("lower saturation never reached"); end
    if (sat_hi == 0) begin failures++; $display("upper saturation never reached"); end
    // Constant positive drive: output must be all ones; negative: all zeros.
    @(negedge clk); en = 1; first = 1; cnt = 5'd20;
    @(negedge clk); first = 0;
    repeat (50) begin @(negedge clk); checks++; if (z !== 1'b1) failures++; end
    cnt = 5'd6;
    repeat (10) @(negedge clk);
    repeat (50) begin @(negedge clk); checks++; if (z !== 1'b0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
