// sc_neuron: front end of one SC neuron: N XNOR multipliers, an improved
// APC and the pipeline register that separates the addition unit from the
// activation unit.
//
// Each cycle the N input stream bits are multiplied with the N weight stream
// bits, the APC counts the ones among the products, and the count is
// registered. cnt_q therefore holds the count of the previous cycle's bits.
// The register between sum and activation is the paper's intra-layer
// pipelining; the control tokens that accompany it are kept by the layer.
module sc_neuron #(
  parameter int unsigned N  = 26,
  parameter int unsigned CW = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  x,
  input  logic [N-1:0]  w,
  output logic [CW-1:0] cnt_q
);

  logic [N-1:0]  prod;
  logic [CW-1:0] cnt;

  sc_mult #(.N(N)) u_mult (.x, .w, .p(prod));
  apc #(.N(N), .CW(CW)) u_apc (.a(prod), .cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= cnt;
  end

endmodule
