// node_check: testbench helper that drives one nn_accum and one nn_node with
// the same random inputs, weights and bias and compares the sum with
// b + sum w*x (integer arithmetic) and the output with the SQNL reference.
// Inputs are drawn so that sums fall below -1, inside [-1, 1) and above 1.
module node_check #(
  parameter int M       = 8,
  parameter int N       = 4,
  parameter bit IN_1BIT = 1'b0,
  parameter int TESTS   = 500,
  localparam int XW     = IN_1BIT ? 1 : N,
  localparam int W      = hld_pkg::sum_width(M, N, IN_1BIT),
  localparam int F      = hld_pkg::sum_frac(N, IN_1BIT)
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_region [3]
);
  import hld_ref_pkg::*;

  logic [M-1:0][XW-1:0] x;
  logic [M-1:0][N-1:0]  w;
  logic [N-1:0]         b;
  logic [W-1:0]         sum;
  logic [N-1:0]         y;

  nn_accum #(.M(M), .N(N), .IN_1BIT(IN_1BIT)) u_acc (.x(x), .w(w), .b(b), .sum(sum));
  nn_node  #(.M(M), .N(N), .IN_1BIT(IN_1BIT)) u_node (.x(x), .w(w), .b(b), .y(y));

  initial begin
    longint acc, got;
    int bias_lim, wv, xv;
    done = 0; checks = 0; failures = 0;
    n_region = '{0, 0, 0};
    for (int t = 0; t < TESTS; t++) begin
      // bias of the weights changes every test: all positive, all negative, mixed, small
      b = N'($urandom);
      acc = IN_1BIT ? longint'(sx(int'(b), N)) : (longint'(sx(int'(b), N)) << (N - 1));
      for (int i = 0; i < M; i++) begin
        case (t % 4)
          0: wv = int'($urandom % (1 << (N - 1)));
          1: wv = -int'($urandom % (1 << (N - 1))) - 1;
          2: wv = sx(int'($urandom), N);
          default: wv = int'($urandom % 3) - 1;
        endcase
        w[i] = N'(wv);
        xv = IN_1BIT ? int'($urandom % 2) : sx(int'($urandom), N);
        x[i] = XW'(xv);
        acc += longint'(wv) * longint'(xv);
      end
      #1;
      got = longint'(sx(int'(sum), W));
      checks += 2;
      if (got != acc) begin
        failures++;
        $display("FAIL accum M=%0d N=%0d 1bit=%0d: sum %0d expected %0d", M, N, IN_1BIT, got, acc);
      end
      if (sx(int'(y), N) != sqnl_ref(acc, F, N)) begin
        failures++;
        $display("FAIL node M=%0d N=%0d 1bit=%0d: y %0d expected %0d (sum %0d)", M, N, IN_1BIT,
                 sx(int'(y), N), sqnl_ref(acc, F, N), acc);
      end
      if (acc >= (longint'(1) << F)) n_region[0]++;
      else if (acc < -(longint'(1) << F)) n_region[1]++;
      else n_region[2]++;
    end
    done = 1;
  end
endmodule
