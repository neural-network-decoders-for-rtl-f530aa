// tb_nn_node: checks node sums and SQNL outputs for a first-layer node
// (24 one-bit inputs, 4 bits), a second-layer node (64 inputs, 4 bits) and a
// 16-input node with 5 and with 9 bits, against integer arithmetic and the SQNL
// reference. Each node must see sums above 1, below -1 and in between.
module tb_nn_node;
  int checks = 0, failures = 0;
  logic d [4];
  int c [4], f [4];
  int r0 [3], r1 [3], r2 [3], r3 [3];

  node_check #(.M(24), .N(4), .IN_1BIT(1'b1)) u0 (.done(d[0]), .checks(c[0]), .failures(f[0]), .n_region(r0));
  node_check #(.M(64), .N(4), .IN_1BIT(1'b0)) u1 (.done(d[1]), .checks(c[1]), .failures(f[1]), .n_region(r1));
  node_check #(.M(16), .N(5), .IN_1BIT(1'b0)) u2 (.done(d[2]), .checks(c[2]), .failures(f[2]), .n_region(r2));
  node_check #(.M(16), .N(9), .IN_1BIT(1'b0)) u3 (.done(d[3]), .checks(c[3]), .failures(f[3]), .n_region(r3));

  initial begin
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1 wait (d[0] && d[1] && d[2] && d[3]);
    for (int i = 0; i < 4; i++) begin
      checks += c[i];
      failures += f[i];
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (r0[k] == 0 || r1[k] == 0 || r2[k] == 0 || r3[k] == 0) begin
        failures++;
        $display("FAIL SQNL region %0d never reached by some node", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
