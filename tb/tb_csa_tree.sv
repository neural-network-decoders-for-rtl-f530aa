// tb_csa_tree: random check of the carry-save adder tree against a plain
// running sum, for 257 operands of 14 bits (the default second-layer node),
// for 3 operands and for 25 operands, including all-ones operands.
module tb_csa_tree;
  int checks = 0, failures = 0;

  logic [256:0][13:0] ops_a;  logic [13:0] sum_a;
  logic [2:0][7:0]    ops_b;  logic [7:0]  sum_b;
  logic [24:0][9:0]   ops_c;  logic [9:0]  sum_c;

  csa_tree #(.K(257), .W(14)) ua (.ops(ops_a), .sum(sum_a));
  csa_tree #(.K(3),   .W(8))  ub (.ops(ops_b), .sum(sum_b));
  csa_tree #(.K(25),  .W(10)) uc (.ops(ops_c), .sum(sum_c));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [13:0] ea; logic [7:0] eb; logic [9:0] ec;
    for (int n = 0; n < 600; n++) begin
      ea = '0; eb = '0; ec = '0;
      for (int k = 0; k < 257; k++) begin
        ops_a[k] = (n == 0) ? '1 : 14'($urandom);
        ea += ops_a[k];
      end
      for (int k = 0; k < 3; k++) begin
        ops_b[k] = (n == 0) ? '1 : 8'($urandom);
        eb += ops_b[k];
      end
      for (int k = 0; k < 25; k++) begin
        ops_c[k] = (n == 0) ? '1 : 10'($urandom);
        ec += ops_c[k];
      end
      #1;
      checks += 3;
      if (sum_a !== ea) begin failures++; $display("FAIL K=257 got %0d exp %0d", sum_a, ea); end
      if (sum_b !== eb) begin failures++; $display("FAIL K=3 got %0d exp %0d", sum_b, eb); end
      if (sum_c !== ec) begin failures++; $display("FAIL K=25 got %0d exp %0d", sum_c, ec); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
