// nn_node: one hidden-layer node, y = SQNL(b + sum_i w[i] * x[i]).
//
// The weighted sum comes from nn_accum (AND gates for one-bit inputs, or
// Baugh-Wooley rows, then a carry-save tree); the SQNL unit turns the sum
// into an N-bit output with N-1 fraction bits. Output nodes do not use this
// module: they need only the sign of the sum (see neural_network).
// Timing: combinational.
module nn_node
  import hld_pkg::*;
#(
  parameter int M       = 64,
  parameter int N       = 4,
  parameter bit IN_1BIT = 1'b0,
  localparam int XW     = IN_1BIT ? 1 : N
) (
  input  logic [M-1:0][XW-1:0] x,
  input  logic [M-1:0][N-1:0]  w,
  input  logic [N-1:0]         b,
  output logic [N-1:0]         y
);
  localparam int W = sum_width(M, N, IN_1BIT);
  localparam int F = sum_frac(N, IN_1BIT);

  logic [W-1:0] sum;

  nn_accum #(.M(M), .N(N), .IN_1BIT(IN_1BIT)) u_acc (
    .x  (x),
    .w  (w),
    .b  (b),
    .sum(sum)
  );

  sqnl_unit #(.W(W), .F(F), .N(N)) u_sqnl (
    .x(sum),
    .y(y)
  );
endmodule
