// tb_pure_error_decoder: self-checking test of the pure error decoder for the
// four code distances 3, 5, 7 and 9.
//
// The reference is independent of the decoder's index formulas: it rebuilds
// the syndrome of the decoder's data-error output from the rotated-surface-code
// geometry (which data qubits each ancilla touches) and requires it to equal
// the input syndrome. Geometry, for data qubit (row, col) = row*D + col:
//   X-ancilla k*(D+1)/2 + j sits between columns k and k+1 and touches rows
//   2j-1, 2j (k even) or 2j, 2j+1 (k odd), where they exist;
//   Z-ancilla (D*D-1)/2 + k*(D+1)/2 + j sits between rows k and k+1 and
//   touches columns D-1-2j, D-2j (k even) or D-2-2j, D-1-2j (k odd).
// It also checks the worked example of a single error on X-ancilla 8 at D=5,
// which must mark data qubits 23 and 24, and single-ancilla patterns.
module tb_pure_error_decoder;
  localparam int MAXQ = 81;

  int checks = 0, failures = 0;

  logic [7:0]  syn3;  logic [8:0]  pz3, px3;
  logic [23:0] syn5;  logic [24:0] pz5, px5;
  logic [47:0] syn7;  logic [48:0] pz7, px7;
  logic [79:0] syn9;  logic [80:0] pz9, px9;

  pure_error_decoder #(.D(3)) u3 (.syndrome(syn3), .pe_z(pz3), .pe_x(px3));
  pure_error_decoder #(.D(5)) u5 (.syndrome(syn5), .pe_z(pz5), .pe_x(px5));
  pure_error_decoder #(.D(7)) u7 (.syndrome(syn7), .pe_z(pz7), .pe_x(px7));
  pure_error_decoder #(.D(9)) u9 (.syndrome(syn9), .pe_z(pz9), .pe_x(px9));

  // Syndrome of a data error pattern: X-ancillas see ez, Z-ancillas see ex.
  function automatic logic [MAXQ-2:0] syndrome_of(int d, logic [MAXQ-1:0] ez, logic [MAXQ-1:0] ex);
    logic [MAXQ-2:0] s;
    int h, a, r0, c0;
    s = '0;
    h = (d + 1) / 2;
    for (int k = 0; k < d - 1; k++) begin
      for (int j = 0; j < h; j++) begin
        // X-ancilla between columns k and k+1
        a  = k * h + j;
        r0 = (k % 2 == 0) ? 2 * j - 1 : 2 * j;
        for (int r = r0; r <= r0 + 1; r++)
          if (r >= 0 && r < d) s[a] ^= ez[r*d + k] ^ ez[r*d + k + 1];
        // Z-ancilla between rows k and k+1
        a  = (d * d - 1) / 2 + k * h + j;
        c0 = (k % 2 == 0) ? d - 1 - 2 * j : d - 2 - 2 * j;
        for (int c = c0; c <= c0 + 1; c++)
          if (c >= 0 && c < d) s[a] ^= ex[k*d + c] ^ ex[(k+1)*d + c];
      end
    end
    return s;
  endfunction

  task automatic check_eq(string what, logic [MAXQ-2:0] got, logic [MAXQ-2:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic run_one(logic [MAXQ-2:0] s);
    syn3 = s[7:0]; syn5 = s[23:0]; syn7 = s[47:0]; syn9 = s[79:0];
    #1;
    check_eq("d3", syndrome_of(3, MAXQ'(pz3), MAXQ'(px3)), (MAXQ-1)'(syn3));
    check_eq("d5", syndrome_of(5, MAXQ'(pz5), MAXQ'(px5)), (MAXQ-1)'(syn5));
    check_eq("d7", syndrome_of(7, MAXQ'(pz7), MAXQ'(px7)), (MAXQ-1)'(syn7));
    check_eq("d9", syndrome_of(9, MAXQ'(pz9), MAXQ'(px9)), (MAXQ-1)'(syn9));
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXQ-2:0] s;
    // Worked example: error on X-ancilla 8 at distance 5 -> data 23 and 24.
    syn5 = 24'd1 << 8; syn3 = '0; syn7 = '0; syn9 = '0;
    #1;
    checks++;
    if (pz5 !== (25'd1 << 23 | 25'd1 << 24) || px5 !== '0) begin
      failures++;
      $display("FAIL worked example: pe_z=%h pe_x=%h", pz5, px5);
    end
    // Every single-ancilla syndrome.
    for (int a = 0; a < 80; a++) run_one((MAXQ-1)'(1) << a);
    // Random syndromes of several densities.
    for (int n = 0; n < 2000; n++) begin
      for (int b = 0; b < 80; b++) s[b] = (($urandom % 8) < (n % 8));
      run_one(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
