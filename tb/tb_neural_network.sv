// tb_neural_network: checks the neural network against an integer/floating
// reference model for two configurations the paper implemented on an
// FPGA and ASIC at distance 3: 8/4 hidden nodes with 3 bits and 16/4 nodes
// with 5 bits; and distance 5 with 16/8 nodes and 4 bits (the full 64/64
// network is covered by tb_hld_top_full).
// Every logical class (I, X, Z, Y) must appear at least once.
module tb_neural_network;
  int checks = 0, failures = 0;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;
  int k0 [4], k1 [4], k2 [4];

  nn_check #(.D(3), .L1(8),  .L2(4),  .N(3), .TESTS(400)) u0 (.done(d0), .checks(c0), .failures(f0), .n_class(k0));
  nn_check #(.D(3), .L1(16), .L2(4),  .N(5), .TESTS(400)) u1 (.done(d1), .checks(c1), .failures(f1), .n_class(k1));
  nn_check #(.D(5), .L1(16), .L2(8),  .N(4), .TESTS(400)) u2 (.done(d2), .checks(c2), .failures(f2), .n_class(k2));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 wait (d0 && d1 && d2);
    checks = c0 + c1 + c2;
    failures += f0 + f1 + f2;
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (k0[c] + k1[c] + k2[c] == 0) begin
        failures++;
        $display("FAIL logical class %0d never produced", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
