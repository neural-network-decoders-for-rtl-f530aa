// sqnl_unit: SQNL transfer function of a hidden node.
//
//   SQNL(x) = -1 for x < -1,  2x + x^2 for -1 <= x < 0,
//             2x - x^2 for 0 <= x <= 1,  1 for x > 1.
// The W-bit node sum x has F fraction bits. When x lies in [-1, 1) it is fully
// described by its sign bit and its F fraction bits; that (F+1)-bit value goes
// through a squaring unit and the square is added to (x negative) or
// subtracted from (x non-negative) x shifted left by one. Outside that range
// the output saturates. This split, square and add/subtract structure follows
// the paper's node hardware; the paper does not say how the result is rounded
// to N bits: here the low bits are dropped (rounding towards minus infinity),
// and +1 saturates to the largest code 1 - 2^-(N-1).
// Output: N-bit two's complement with N-1 fraction bits, range [-1, 1).
// Timing: combinational (one (F+1)-bit squarer and one adder).
module sqnl_unit #(
  parameter int W = 14,
  parameter int F = 6,
  parameter int N = 4
) (
  input  logic [W-1:0] x,
  output logic [N-1:0] y
);
  localparam int TW = 2 * F + 3;

  logic                 neg;
  logic                 in_range;
  logic signed [F:0]    xs;
  logic signed [2*F+1:0] sq;
  logic signed [TW-1:0] t;

  assign neg      = x[W-1];
  // -1 <= x < 1 when all integer bits equal the sign bit
  assign in_range = (x[W-1:F] == {(W-F){neg}});
  assign xs       = signed'(x[F:0]);
  assign sq       = xs * xs;

  always_comb begin
    t = (TW'(xs) <<< (F + 1)) + (neg ? TW'(sq) : -TW'(sq));
    if (!in_range)
      y = neg ? {1'b1, {(N-1){1'b0}}} : {1'b0, {(N-1){1'b1}}};
    else
      y = t[2*F-(N-1) +: N];
  end
endmodule
