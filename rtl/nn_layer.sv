// nn_layer: a fully connected layer of K hidden nodes sharing M inputs.
//
// Node k uses weight row w[k] and bias b[k]; all nodes work in parallel and
// are identical, so the layer delay equals one node's delay.
// Timing: combinational.
module nn_layer #(
  parameter int M       = 24,
  parameter int K       = 64,
  parameter int N       = 4,
  parameter bit IN_1BIT = 1'b1,
  localparam int XW     = IN_1BIT ? 1 : N
) (
  input  logic [M-1:0][XW-1:0]        x,
  input  logic [K-1:0][M-1:0][N-1:0]  w,
  input  logic [K-1:0][N-1:0]         b,
  output logic [K-1:0][N-1:0]         y
);
  for (genvar k = 0; k < K; k++) begin : g_node
    nn_node #(.M(M), .N(N), .IN_1BIT(IN_1BIT)) u_node (
      .x(x),
      .w(w[k]),
      .b(b[k]),
      .y(y[k])
    );
  end
endmodule
