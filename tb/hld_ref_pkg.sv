// hld_ref_pkg: reference models used by the testbenches. They are written
// from the arithmetic definitions, not from the RTL structure:
//  - sqnl_ref: SQNL of an exact fixed-point sum, evaluated in floating point,
//    rounded down to N-1 fraction bits and clamped to [-1, 1 - 2^-(N-1)].
//  - node_ref: b + sum w*x with ordinary integer multiplication.
//  - syndrome_of: syndrome of a data-error pattern from the rotated surface
//    code geometry (see tb_pure_error_decoder for the layout).
package hld_ref_pkg;

  function automatic int sqnl_ref(longint acc, int f, int n);
    real v, g;
    int  q;
    if (acc >= (longint'(1) << f)) return (1 << (n - 1)) - 1;
    if (acc < -(longint'(1) << f)) return -(1 << (n - 1));
    v = real'(acc) / real'(longint'(1) << f);
    g = (acc >= 0) ? (2.0 * v - v * v) : (2.0 * v + v * v);
    q = int'($floor(g * real'(1 << (n - 1))));
    if (q > (1 << (n - 1)) - 1) q = (1 << (n - 1)) - 1;
    if (q < -(1 << (n - 1)))    q = -(1 << (n - 1));
    return q;
  endfunction

  // signed value of an n-bit two's complement code
  function automatic int sx(int code, int n);
    code = code & ((1 << n) - 1);
    return (code >= (1 << (n - 1))) ? code - (1 << n) : code;
  endfunction

  localparam int MAXQ = 81;

  function automatic logic [MAXQ-2:0] syndrome_of(int d, logic [MAXQ-1:0] ez, logic [MAXQ-1:0] ex);
    logic [MAXQ-2:0] s;
    int h, a, r0, c0;
    s = '0;
    h = (d + 1) / 2;
    for (int k = 0; k < d - 1; k++) begin
      for (int j = 0; j < h; j++) begin
        a  = k * h + j;
        r0 = (k % 2 == 0) ? 2 * j - 1 : 2 * j;
        for (int r = r0; r <= r0 + 1; r++)
          if (r >= 0 && r < d) s[a] ^= ez[r*d + k] ^ ez[r*d + k + 1];
        a  = (d * d - 1) / 2 + k * h + j;
        c0 = (k % 2 == 0) ? d - 1 - 2 * j : d - 2 - 2 * j;
        for (int c = c0; c <= c0 + 1; c++)
          if (c >= 0 && c < d) s[a] ^= ex[k*d + c] ^ ex[(k+1)*d + c];
      end
    end
    return s;
  endfunction

  // Saturation statistics of the reference network: [0] SQNL outputs
  // saturated at +max, [1] at -1, [2] in the curved part.
  typedef int sqnl_stats_t[3];

  function automatic void count_sqnl(longint acc, int f, ref sqnl_stats_t st);
    if (acc >= (longint'(1) << f)) st[0]++;
    else if (acc < -(longint'(1) << f)) st[1]++;
    else st[2]++;
  endfunction

  // Reference of the whole network. Weights and biases are signed integers
  // in units of 2^-(n-1), flattened row-major: w1[j*na+i], w2[j*l1+i],
  // w3[o*l2+i]. Returns {log_z, log_x}.
  function automatic logic [1:0] nn_ref(int d, int l1, int l2, int n,
                                        logic [MAXQ-2:0] syn,
                                        int w1[], int b1[], int w2[], int b2[],
                                        int w3[], int b3[],
                                        ref sqnl_stats_t st);
    int na = d * d - 1;
    int y1[] = new[l1];
    int y2[] = new[l2];
    longint acc;
    logic [1:0] r;
    for (int j = 0; j < l1; j++) begin
      acc = b1[j];
      for (int i = 0; i < na; i++) if (syn[i]) acc += w1[j*na+i];
      y1[j] = sqnl_ref(acc, n - 1, n);
      count_sqnl(acc, n - 1, st);
    end
    for (int j = 0; j < l2; j++) begin
      acc = longint'(b2[j]) << (n - 1);
      for (int i = 0; i < l1; i++) acc += longint'(w2[j*l1+i]) * y1[i];
      y2[j] = sqnl_ref(acc, 2 * n - 2, n);
      count_sqnl(acc, 2 * n - 2, st);
    end
    for (int o = 0; o < 2; o++) begin
      acc = longint'(b3[o]) << (n - 1);
      for (int i = 0; i < l2; i++) acc += longint'(w3[o*l2+i]) * y2[i];
      r[o] = (acc >= 0);
    end
    return r;
  endfunction

endpackage
