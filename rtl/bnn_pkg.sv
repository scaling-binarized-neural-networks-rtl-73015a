// bnn_pkg: constants and helper functions shared by the streaming BNN
// accelerator. Binarized values use the convention of the network: an unset
// bit stands for -1 and a set bit for +1. Multi-bit values (first-layer
// pixels, accumulators, thresholds, class scores) are two's complement.
// The accumulator width rule below is this design's own choice; the paper
// only names the width "T".
package bnn_pkg;

  // Larger of two integers (used to size shared configuration buses).
  function automatic int imax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  // Bits needed to index N items (at least 1).
  function automatic int idx_w(input int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // Signed accumulator/threshold width T for a dot product of Y elements.
  // Binary input: the popcount lies in 0..Y, plus a sign bit so that the
  // thresholds can be compared as signed numbers.
  // IN_BITS-bit signed input times +-1: |sum| <= Y * 2^(IN_BITS-1).
  function automatic int acc_w(input int in_bits, input int y);
    return (in_bits == 1) ? $clog2(y + 1) + 1 : in_bits + $clog2(y + 1) + 1;
  endfunction

  // Target of a configuration write.
  typedef enum logic {
    CFG_WEIGHT = 1'b0,
    CFG_THRESH = 1'b1
  } cfg_target_e;

endpackage
