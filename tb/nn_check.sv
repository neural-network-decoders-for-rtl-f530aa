// nn_check: testbench helper that drives one neural_network instance with
// random weights, biases and syndromes and compares its two outputs with
// hld_ref_pkg::nn_ref. Weights are drawn so that some nodes saturate and
// some stay in the curved part of SQNL. Reports its counts when done.
module nn_check #(
  parameter int D     = 3,
  parameter int L1    = 8,
  parameter int L2    = 4,
  parameter int N     = 3,
  parameter int TESTS = 200
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_class [4]
);
  import hld_ref_pkg::*;
  localparam int NA = D * D - 1;

  logic [NA-1:0]                syn;
  logic [L1-1:0][NA-1:0][N-1:0] w1;
  logic [L1-1:0][N-1:0]         b1;
  logic [L2-1:0][L1-1:0][N-1:0] w2;
  logic [L2-1:0][N-1:0]         b2;
  logic [1:0][L2-1:0][N-1:0]    w3;
  logic [1:0][N-1:0]            b3;
  logic                         lx, lz;

  neural_network #(.D(D), .L1(L1), .L2(L2), .N(N)) dut (
    .syndrome(syn), .w1(w1), .b1(b1), .w2(w2), .b2(b2), .w3(w3), .b3(b3),
    .log_x(lx), .log_z(lz)
  );

  int rw1[], rb1[], rw2[], rb2[], rw3[], rb3[];
  sqnl_stats_t st;

  function automatic int rnd(int n);
    return sx(int'($urandom), n);
  endfunction

  initial begin
    logic [1:0] exp;
    done = 0; checks = 0; failures = 0;
    n_class = '{0, 0, 0, 0};
    st = '{0, 0, 0};
    rw1 = new[L1*NA]; rb1 = new[L1]; rw2 = new[L2*L1]; rb2 = new[L2];
    rw3 = new[2*L2]; rb3 = new[2];
    for (int t = 0; t < TESTS; t++) begin
      if (t % 20 == 0) begin
        for (int k = 0; k < L1*NA; k++) begin rw1[k] = rnd(N); w1[k/NA][k%NA] = N'(rw1[k]); end
        for (int k = 0; k < L1; k++)    begin rb1[k] = rnd(N); b1[k] = N'(rb1[k]); end
        for (int k = 0; k < L2*L1; k++) begin rw2[k] = rnd(N); w2[k/L1][k%L1] = N'(rw2[k]); end
        for (int k = 0; k < L2; k++)    begin rb2[k] = rnd(N); b2[k] = N'(rb2[k]); end
        for (int k = 0; k < 2*L2; k++)  begin rw3[k] = rnd(N); w3[k/L2][k%L2] = N'(rw3[k]); end
        for (int k = 0; k < 2; k++)     begin rb3[k] = rnd(N); b3[k] = N'(rb3[k]); end
      end
      for (int i = 0; i < NA; i++) syn[i] = (($urandom % 4) < (t % 4));
      #1;
      exp = nn_ref(D, L1, L2, N, (MAXQ-1)'(syn), rw1, rb1, rw2, rb2, rw3, rb3, st);
      checks++;
      n_class[{lz, lx}]++;
      if ({lz, lx} !== exp) begin
        failures++;
        $display("FAIL nn D=%0d L1=%0d L2=%0d N=%0d test %0d: got %b exp %b", D, L1, L2, N, t, {lz, lx}, exp);
      end
    end
    $display("nn D=%0d L1=%0d L2=%0d N=%0d: sqnl sat+ %0d sat- %0d curved %0d; classes I %0d X %0d Z %0d Y %0d",
             D, L1, L2, N, st[0], st[1], st[2], n_class[0], n_class[1], n_class[2], n_class[3]);
    if (st[0] == 0 || st[1] == 0 || st[2] == 0) begin
      failures++;
      $display("FAIL an SQNL region was never exercised");
    end
    done = 1;
  end
endmodule
