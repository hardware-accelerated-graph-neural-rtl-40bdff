// vec_mul: one vector-multiplication unit, the arithmetic core of the graph
// convolution layers and of both network heads.
//
// It computes the dot product of an activation vector x (N signed 9-bit
// values, which hold either 8-bit unsigned activations or 8-bit signed
// hidden-state values) with one weight row w (N 8-bit codes, weight value =
// code - W_ZP), all N products in parallel and summed by an adder tree, in a
// single clock. The result is registered: it appears one cycle after 'en'.
// The design description states that each layer's products are spread over a
// few such units working on whole rows; the fully parallel row and the single
// pipeline register are this design's choices.
module vec_mul
  import gnn_pkg::*;
#(
  parameter int unsigned N = 66
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic signed [N-1:0][8:0] x,
  input  logic        [N-1:0][7:0] w,
  output logic signed [ACC_W-1:0]  y
);
  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) begin
      sum += ACC_W'($signed(x[i])) * ACC_W'($signed({1'b0, w[i]}) - $signed(10'(W_ZP)));
    end
  end

  always_ff @(posedge clk) begin
    if (en) y <= sum;
  end
endmodule
