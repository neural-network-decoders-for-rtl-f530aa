// hld_pkg: types and helper functions shared by the high-level surface-code
// decoder (pure error decoder + quantized neural network).
//
// The logical class combines the two one-bit outputs of the neural network:
// neither flag is the identity, only X is a logical X, only Z a logical Z and
// both flags together a logical Y. The encoding {z,x} is a design choice.
// sum_width() gives the width of a node accumulator, 2*n + log2(m) bits as in
// the node data-flow description (first hidden layer: n + log2(m) + 1 bits,
// since its products are plain AND gates of one-bit inputs and n-bit weights).
package hld_pkg;

  typedef enum logic [1:0] {
    LOG_I = 2'b00,
    LOG_X = 2'b01,
    LOG_Z = 2'b10,
    LOG_Y = 2'b11
  } log_class_e;

  // Bits of a node sum: m products of n-bit Q0.(n-1) numbers plus a bias.
  function automatic int sum_width(int m, int n, bit in_1bit);
    return in_1bit ? (n + $clog2(m) + 1) : (2 * n + $clog2(m));
  endfunction

  // Fraction bits of a node sum.
  function automatic int sum_frac(int n, bit in_1bit);
    return in_1bit ? (n - 1) : (2 * (n - 1));
  endfunction

endpackage
