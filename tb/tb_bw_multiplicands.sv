// tb_bw_multiplicands: exhaustive check of the Baugh-Wooley rows for N = 3,
// 4 and 5: the rows plus the correction 2^N - 2^(2N-1) must equal the signed
// product a*b (computed with an ordinary multiplication) modulo 2^W.
module tb_bw_multiplicands;
  int checks = 0, failures = 0;

  logic [2:0] a3, b3;  logic [2:0][9:0]  r3;
  logic [3:0] a4, b4;  logic [3:0][13:0] r4;
  logic [4:0] a5, b5;  logic [4:0][15:0] r5;

  bw_multiplicands #(.N(3), .W(10)) u3 (.a(a3), .b(b3), .rows(r3));
  bw_multiplicands #(.N(4), .W(14)) u4 (.a(a4), .b(b4), .rows(r4));
  bw_multiplicands #(.N(5), .W(16)) u5 (.a(a5), .b(b5), .rows(r5));

  function automatic longint rowsum(int n, longint r0, longint r1, longint r2, longint r3_, longint r4_);
    longint s = r0 + r1 + r2;
    if (n > 3) s += r3_;
    if (n > 4) s += r4_;
    return s + (longint'(1) << n) - (longint'(1) << (2 * n - 1));
  endfunction

  task automatic chk(int n, int w, int a, int b, longint s);
    longint exp, mask;
    mask = (longint'(1) << w) - 1;
    exp  = longint'(hld_ref_pkg::sx(a, n)) * longint'(hld_ref_pkg::sx(b, n));
    checks++;
    if ((s & mask) != (exp & mask)) begin
      failures++;
      $display("FAIL N=%0d a=%0d b=%0d got %0d exp %0d", n, a, b, s & mask, exp & mask);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 32; a++) begin
      for (int b = 0; b < 32; b++) begin
        a3 = 3'(a); b3 = 3'(b); a4 = 4'(a); b4 = 4'(b); a5 = 5'(a); b5 = 5'(b);
        #1;
        if (a < 8 && b < 8) chk(3, 10, a, b, rowsum(3, r3[0], r3[1], r3[2], 0, 0));
        if (a < 16 && b < 16) chk(4, 14, a, b, rowsum(4, r4[0], r4[1], r4[2], r4[3], 0));
        chk(5, 16, a, b, rowsum(5, r5[0], r5[1], r5[2], r5[3], r5[4]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
