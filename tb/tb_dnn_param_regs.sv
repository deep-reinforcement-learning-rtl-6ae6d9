// tb_dnn_param_regs: random writes over the whole address range (including
// unused addresses) with random load pulses; the outputs are compared every
// cycle with a reference copy of the register contents.
module tb_dnn_param_regs;
  localparam int NI = 4, NH = 3, W = 10, AWD = 5;
  localparam int B1 = NI, B2 = NI + NI * NH;
  logic clk = 0, rst_n = 0, wr_en = 0, load = 0;
  logic [AWD-1:0] wr_addr = '0;
  logic [W-1:0] wr_data = '0;
  logic [NI-1:0][W-1:0] x_act;
  logic [NH-1:0][NI-1:0][W-1:0] w1;
  logic [NH-1:0][W-1:0] w2;
  int checks = 0, failures = 0;
  int m_sh [NI], m_act [NI], m_w1 [NH][NI], m_w2 [NH];
  int loads = 0;

  dnn_param_regs #(.N_IN(NI), .N_HID(NH), .W(W), .AWD(AWD)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .load, .x_act, .w1, .w2);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NI; i++) begin m_sh[i] = 0; m_act[i] = 0; end
    for (int j = 0; j < NH; j++) begin m_w2[j] = 0; for (int i = 0; i < NI; i++) m_w1[j][i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) begin
        checks++;
        if (int'(x_act[i]) != m_act[i]) begin failures++; $display("t=%0d x_act[%0d]=%0h exp %0h", t, i, x_act[i], m_act[i]); end
      end
      for (int j = 0; j < NH; j++) begin
        checks++;
        if (int'(w2[j]) != m_w2[j]) begin failures++; $display("t=%0d w2[%0d]", t, j); end
        for (int i = 0; i < NI; i++) begin
          checks++;
          if (int'(w1[j][i]) != m_w1[j][i]) begin failures++; $display("t=%0d w1[%0d][%0d]=%0h exp %0h", t, j, i, w1[j][i], m_w1[j][i]); end
        end
      end
      wr_en = ($urandom_range(0, 3) != 0);
      wr_addr = AWD'($urandom_range(0, (1 << AWD) - 1));
      wr_data = W'($urandom);
      load = ($urandom_range(0, 9) == 0);
      // Reference of the next edge: load copies the old shadow values.
      if (load) begin for (int i = 0; i < NI; i++) m_act[i] = m_sh[i]; loads++; end
      if (wr_en) begin
        int a;
        a = int'(wr_addr);
        if (a < B1) m_sh[a] = int'(wr_data);
        else if (a < B2) m_w1[(a - B1) / NI][(a - B1) % NI] = int'(wr_data);
        else if (a < B2 + NH) m_w2[a - B2] = int'(wr_data);
      end
    end
    checks++;
    if (loads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
