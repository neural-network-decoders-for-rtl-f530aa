// neural_network: fully parallel, fully connected feed-forward network that
// estimates the logical error left by the pure error decoder.
//
// Inputs: the D*D-1 syndrome bits (one unsigned bit each). Layer 1: L1 SQNL
// nodes with AND-gate products. Layer 2: L2 SQNL nodes with Baugh-Wooley
// products. Output layer: two nodes of which only the sign of the sum is
// used; node 0 flags a logical X error and node 1 a logical Z error. A flag
// is 1 when its sum is zero or positive (the paper says only that the sign is
// used; the polarity is this design's choice).
// Weights and biases are N-bit two's complement with N-1 fraction bits and
// come from outside (the paper keeps them in an external memory):
//   w1[j][i]: input i -> layer-1 node j      b1[j]
//   w2[j][i]: layer-1 node i -> layer-2 node j   b2[j]
//   w3[o][i]: layer-2 node i -> output o     b3[o]
// The structure (two hidden layers, two outputs, SQNL, shared bit width N)
// follows the paper; default sizes are its distance-5 design with 64 and 64
// hidden nodes and 4 bits.
// Timing: combinational, three node delays.
module neural_network
  import hld_pkg::*;
#(
  parameter int D  = 5,
  parameter int L1 = 64,
  parameter int L2 = 64,
  parameter int N  = 4,
  localparam int NA = D * D - 1
) (
  input  logic [NA-1:0]                syndrome,
  input  logic [L1-1:0][NA-1:0][N-1:0] w1,
  input  logic [L1-1:0][N-1:0]         b1,
  input  logic [L2-1:0][L1-1:0][N-1:0] w2,
  input  logic [L2-1:0][N-1:0]         b2,
  input  logic [1:0][L2-1:0][N-1:0]    w3,
  input  logic [1:0][N-1:0]            b3,
  output logic                         log_x,
  output logic                         log_z
);
  localparam int WO = sum_width(L2, N, 1'b0);

  logic [L1-1:0][N-1:0] y1;
  logic [L2-1:0][N-1:0] y2;
  logic [1:0][WO-1:0]   s3;

  nn_layer #(.M(NA), .K(L1), .N(N), .IN_1BIT(1'b1)) u_l1 (
    .x(syndrome),
    .w(w1),
    .b(b1),
    .y(y1)
  );

  nn_layer #(.M(L1), .K(L2), .N(N), .IN_1BIT(1'b0)) u_l2 (
    .x(y1),
    .w(w2),
    .b(b2),
    .y(y2)
  );

  for (genvar o = 0; o < 2; o++) begin : g_out
    nn_accum #(.M(L2), .N(N), .IN_1BIT(1'b0)) u_acc (
      .x  (y2),
      .w  (w3[o]),
      .b  (b3[o]),
      .sum(s3[o])
    );
  end

  assign log_x = ~s3[0][WO-1];
  assign log_z = ~s3[1][WO-1];
endmodule
