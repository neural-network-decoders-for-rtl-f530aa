// nn_accum: weighted sum plus bias of one neural-network node.
//
// Computes  sum = b + sum_i w[i] * x[i]  in fixed point. Weights, biases and
// multi-bit inputs are N-bit two's complement numbers with N-1 fraction bits
// (range [-1, 1 - 2^-(N-1)]).
// IN_1BIT = 1 (first hidden layer): each input is one unsigned syndrome bit,
//   so each product is the weight AND-ed with the bit; the sum has N-1
//   fraction bits and N + log2(M) + 1 bits.
// IN_1BIT = 0 (second hidden layer and output layer): each product is formed
//   as modified Baugh-Wooley partial-product rows; the sum has 2(N-1)
//   fraction bits and 2N + log2(M) bits. The bias, moved to the product's
//   binary point, and the M Baugh-Wooley correction constants form one extra
//   row.
// All rows are added by one carry-save (Wallace) tree. This follows the node
// data flow of the paper; the bias alignment is this design's choice.
// Timing: combinational.
module nn_accum
  import hld_pkg::*;
#(
  parameter int M       = 64,
  parameter int N       = 4,
  parameter bit IN_1BIT = 1'b0,
  localparam int XW     = IN_1BIT ? 1 : N,
  localparam int W      = sum_width(M, N, IN_1BIT)
) (
  input  logic [M-1:0][XW-1:0] x,
  input  logic [M-1:0][N-1:0]  w,
  input  logic [N-1:0]         b,
  output logic [W-1:0]         sum
);
  localparam int K = IN_1BIT ? (M + 1) : (M * N + 1);

  // 2^N - 2^(2N-1), the correction of one Baugh-Wooley product, mod 2^W
  localparam logic [W-1:0] BW_CONST = W'((64'd1 << N) - (64'd1 << (2 * N - 1)));

  logic [K-1:0][W-1:0] ops;

  if (IN_1BIT) begin : g_and
    for (genvar i = 0; i < M; i++) begin : g_row
      assign ops[i] = W'(signed'(w[i] & {N{x[i][0]}}));
    end
    assign ops[M] = W'(signed'(b));
  end else begin : g_bw
    for (genvar i = 0; i < M; i++) begin : g_mul
      bw_multiplicands #(.N(N), .W(W)) u_bw (
        .a   (x[i]),
        .b   (w[i]),
        .rows(ops[i*N +: N])
      );
    end
    assign ops[M*N] = (W'(signed'(b)) << (N - 1)) + W'(M) * BW_CONST;
  end

  csa_tree #(.K(K), .W(W)) u_csa (
    .ops(ops),
    .sum(sum)
  );
endmodule
