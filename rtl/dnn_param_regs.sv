// dnn_param_regs: parameter and input registers of the SC network.
//
// The software controller writes words over a simple synchronous bus
// (wr_en, wr_addr, wr_data, one word per cycle, no wait states). Addresses
// follow sc_pkg: input words 0..N_IN-1 (shadow copy), first-layer weights
// from N_IN on, row by row (neuron j, input i at N_IN + j*N_IN + i), then the
// N_HID output weights. Writes to other addresses are ignored. 'load' copies
// the shadow inputs into the active inputs that drive the stream generators,
// so the next state-action pair can be written while an inference runs.
// Weights are used directly; they are meant to be written while the network
// is idle (offline phase). All registers reset to zero. The bus and the
// double buffering are this design's choice.
module dnn_param_regs #(
  parameter int unsigned N_IN  = 26,
  parameter int unsigned N_HID = 30,
  parameter int unsigned W     = 10,
  parameter int unsigned AWD   = 10
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wr_en,
  input  logic [AWD-1:0]                    wr_addr,
  input  logic [W-1:0]                      wr_data,
  input  logic                              load,
  output logic [N_IN-1:0][W-1:0]            x_act,
  output logic [N_HID-1:0][N_IN-1:0][W-1:0] w1,
  output logic [N_HID-1:0][W-1:0]           w2
);

  localparam int unsigned B1 = N_IN;
  localparam int unsigned B2 = N_IN + N_IN * N_HID;

  initial assert ((1 << AWD) >= B2 + N_HID) else $error("dnn_param_regs: AWD too small");

  logic [N_IN-1:0][W-1:0] x_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_sh  <= '0;
      x_act <= '0;
      w1    <= '0;
      w2    <= '0;
    end else begin
      if (load) x_act <= x_sh;
      if (wr_en) begin
        if (int'(wr_addr) < B1)
          x_sh[wr_addr] <= wr_data;
        else if (int'(wr_addr) < B2)
          w1[(int'(wr_addr) - B1) / N_IN][(int'(wr_addr) - B1) % N_IN] <= wr_data;
        else if (int'(wr_addr) < B2 + N_HID)
          w2[int'(wr_addr) - B2] <= wr_data;
      end
    end
  end

endmodule
