// tb_nn_layer: checks a first layer (24 one-bit inputs, 8 nodes, 4 bits) and a
// second layer (8 inputs, 4 nodes, 3 bits) node by node against integer
// arithmetic and the SQNL reference, with random weights, biases and inputs.
module tb_nn_layer;
  import hld_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [23:0]           x1;
  logic [7:0][23:0][3:0] w1;
  logic [7:0][3:0]       b1;
  logic [7:0][3:0]       y1;
  logic [7:0][2:0]       x2;
  logic [3:0][7:0][2:0]  w2;
  logic [3:0][2:0]       b2;
  logic [3:0][2:0]       y2;

  nn_layer #(.M(24), .K(8), .N(4), .IN_1BIT(1'b1)) u1 (.x(x1), .w(w1), .b(b1), .y(y1));
  nn_layer #(.M(8),  .K(4), .N(3), .IN_1BIT(1'b0)) u2 (.x(x2), .w(w2), .b(b2), .y(y2));

  initial begin
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint acc;
    for (int t = 0; t < 500; t++) begin
      x1 = 24'($urandom); w1 = {8{$urandom, $urandom, $urandom}}; b1 = 32'($urandom);
      for (int k = 0; k < 8; k++) w1[k] = {$urandom, $urandom, $urandom};
      x2 = 24'($urandom); w2 = {$urandom, $urandom, $urandom}; b2 = 12'($urandom);
      #1;
      for (int k = 0; k < 8; k++) begin
        acc = sx(int'(b1[k]), 4);
        for (int i = 0; i < 24; i++) if (x1[i]) acc += sx(int'(w1[k][i]), 4);
        checks++;
        if (sx(int'(y1[k]), 4) != sqnl_ref(acc, 3, 4)) begin
          failures++;
          $display("FAIL layer1 node %0d: %0d expected %0d", k, sx(int'(y1[k]), 4), sqnl_ref(acc, 3, 4));
        end
      end
      for (int k = 0; k < 4; k++) begin
        acc = longint'(sx(int'(b2[k]), 3)) << 2;
        for (int i = 0; i < 8; i++) acc += sx(int'(w2[k][i]), 3) * sx(int'(x2[i]), 3);
        checks++;
        if (sx(int'(y2[k]), 3) != sqnl_ref(acc, 4, 3)) begin
          failures++;
          $display("FAIL layer2 node %0d: %0d expected %0d", k, sx(int'(y2[k]), 3), sqnl_ref(acc, 4, 3));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
