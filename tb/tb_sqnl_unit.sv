// tb_sqnl_unit: exhaustive check of the SQNL unit for the two default node
// formats (first layer: 10-bit sum with 3 fraction bits; second layer: 14-bit
// sum with 6 fraction bits; both with 4-bit output) and for a 9-bit output,
// against a floating-point evaluation of the SQNL definition. Counts the
// saturated, curved-positive and curved-negative cases seen.
module tb_sqnl_unit;
  import hld_ref_pkg::*;
  int checks = 0, failures = 0;
  int n_sat_pos = 0, n_sat_neg = 0, n_curve = 0;

  logic [9:0]  x1;  logic [3:0] y1;
  logic [13:0] x2;  logic [3:0] y2;
  logic [20:0] x3;  logic [8:0] y3;

  sqnl_unit #(.W(10), .F(3),  .N(4)) u1 (.x(x1), .y(y1));
  sqnl_unit #(.W(14), .F(6),  .N(4)) u2 (.x(x2), .y(y2));
  sqnl_unit #(.W(21), .F(16), .N(9)) u3 (.x(x3), .y(y3));

  task automatic chk(string what, longint acc, int f, int n, int got);
    int exp;
    exp = sqnl_ref(acc, f, n);
    checks++;
    if (sx(got, n) != exp) begin
      failures++;
      $display("FAIL %s x=%0d got %0d exp %0d", what, acc, sx(got, n), exp);
    end
    if (exp == (1 << (n - 1)) - 1 && acc >= (longint'(1) << f)) n_sat_pos++;
    else if (exp == -(1 << (n - 1)) && acc < -(longint'(1) << f)) n_sat_neg++;
    else n_curve++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -512; v < 512; v++) begin
      x1 = 10'(v); #1; chk("W10F3", v, 3, 4, int'(y1));
    end
    for (int v = -8192; v < 8192; v++) begin
      x2 = 14'(v); #1; chk("W14F6", v, 6, 4, int'(y2));
    end
    for (int k = 0; k < 20000; k++) begin
      longint v;
      v = (k < 10000) ? longint'(int'($urandom % 163840) - 81920)
                      : longint'(sx(int'($urandom), 21));
      x3 = 21'(v); #1; chk("W21F16", v, 16, 9, int'(y3));
    end
    $display("saturated+ %0d saturated- %0d curved %0d", n_sat_pos, n_sat_neg, n_curve);
    if (n_sat_pos == 0 || n_sat_neg == 0 || n_curve == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
