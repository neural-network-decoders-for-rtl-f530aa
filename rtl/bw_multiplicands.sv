// bw_multiplicands: partial-product rows of one signed N x N-bit product in
// the modified Baugh-Wooley form.
//
// Both operands are two's complement. Row i holds the bits a[i] & b[j] at
// weight i+j; the bits where exactly one of i, j is the sign position N-1 are
// complemented. All rows are non-negative, so a carry-save tree can add them
// without sign extension. The true product is
//   a * b = sum(rows) + 2^N - 2^(2N-1)            (exact, as integers)
// and the node adds that constant once per product in its bias row (see
// BW_CONST in nn_accum). Rows are W bits wide, W >= 2N.
// The method is the one the node hardware uses for its multiplications; the
// exact bit matrix is the textbook modified Baugh-Wooley array.
// Timing: one level of AND/NAND gates, combinational.
module bw_multiplicands #(
  parameter int N = 4,
  parameter int W = 14
) (
  input  logic [N-1:0]        a,
  input  logic [N-1:0]        b,
  output logic [N-1:0][W-1:0] rows
);
  // Row i < N-1: a[i] & b[N-2:0], then the complemented sign-column bit.
  // Row N-1:     complemented a[N-1] & b[N-2:0], then a[N-1] & b[N-1].
  for (genvar i = 0; i < N - 1; i++) begin : g_row
    assign rows[i] = W'({~(a[i] & b[N-1]), b[N-2:0] & {(N-1){a[i]}}}) << i;
  end
  assign rows[N-1] = W'({a[N-1] & b[N-1], ~(b[N-2:0] & {(N-1){a[N-1]}})}) << (N - 1);
endmodule
