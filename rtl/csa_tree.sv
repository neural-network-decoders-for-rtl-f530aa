// csa_tree: Wallace carry-save adder tree with a final carry-propagate adder.
//
// K operands of W bits are reduced level by level: every group of three words
// passes through a row of full adders (3:2 compressors) that gives a sum word
// and a carry word shifted left by one; words left over in a level pass
// straight to the next. When two words remain they are added. The result is
// the sum of all operands modulo 2^W, so two's complement operands (or rows
// with a separate correction constant) sum correctly as long as the true sum
// fits in W bits. This is the adder tree the node hardware uses; the
// grouping order and the plain final adder are this design's choice.
// Timing: combinational, about log1.5(K/2) full-adder delays plus one W-bit add.
module csa_tree #(
  parameter int K = 257,
  parameter int W = 14
) (
  input  logic [K-1:0][W-1:0] ops,
  output logic [W-1:0]        sum
);
  // Number of words after `lvl` levels of 3:2 compression.
  function automatic int cnt_at(int lvl);
    int c = K;
    for (int i = 0; i < lvl; i++) c = 2 * (c / 3) + c % 3;
    return c;
  endfunction

  function automatic int num_levels();
    int c = K;
    int l = 0;
    while (c > 2) begin
      c = 2 * (c / 3) + c % 3;
      l++;
    end
    return l;
  endfunction

  // Index of the first word of level `lvl` in the flat word array.
  function automatic int off_at(int lvl);
    int o = 0;
    for (int i = 0; i < lvl; i++) o += cnt_at(i);
    return o;
  endfunction

  localparam int LV  = num_levels();
  localparam int TOT = off_at(LV + 1);

  // all levels, one after the other: level l holds cnt_at(l) words
  logic [W-1:0] word [TOT];

  for (genvar k = 0; k < K; k++) begin : g_in
    assign word[k] = ops[k];
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    localparam int C  = cnt_at(l);
    localparam int G  = C / 3;
    localparam int R  = C % 3;
    localparam int I0 = off_at(l);
    localparam int O0 = off_at(l + 1);
    for (genvar g = 0; g < G; g++) begin : g_fa
      logic [W-1:0] x, y, z;
      assign x = word[I0 + 3*g];
      assign y = word[I0 + 3*g + 1];
      assign z = word[I0 + 3*g + 2];
      assign word[O0 + 2*g]     = x ^ y ^ z;
      assign word[O0 + 2*g + 1] = {((x[W-2:0] & y[W-2:0]) | (x[W-2:0] & z[W-2:0]) | (y[W-2:0] & z[W-2:0])), 1'b0};
    end
    for (genvar r = 0; r < R; r++) begin : g_pass
      assign word[O0 + 2*G + r] = word[I0 + 3*G + r];
    end
  end

  assign sum = word[off_at(LV)] + word[off_at(LV) + 1];

  initial assert (K >= 2) else $error("csa_tree needs at least two operands");
endmodule
