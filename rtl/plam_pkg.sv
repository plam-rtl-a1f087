// plam_pkg: field widths shared by the posit<N,ES> decoder, the PLAM
// log-domain adder, the encoder and the top-level multiplier.
//
// A posit<N,ES> word is a sign bit, a run-length coded regime, up to ES
// exponent bits and the remaining fraction bits. Once unpacked, the fields
// are held at fixed widths:
//   regime value K : signed, ceil(log2(N-1))+1 bits (covers -(N-2)..N-2)
//   exponent E     : ES bits, unsigned, unbiased
//   fraction F     : N-ES-3 bits (the longest fraction a posit can carry:
//                    N minus sign, minimum 2-bit regime and ES exponent bits)
// These widths are the ones printed above the field boxes of the paper's
// figures. The width of the sum of two regimes (one more bit) and of the
// leading-zero count are this design's own choices.
package plam_pkg;

  // Width of the signed regime value K of one operand.
  function automatic int unsigned regime_w(int unsigned n);
    return $clog2(n - 1) + 1;
  endfunction

  // Width of the signed regime of a product (sum of two regimes + carry).
  function automatic int unsigned regime_sum_w(int unsigned n);
    return $clog2(n - 1) + 2;
  endfunction

  // Width of the fraction field carried through the datapath.
  function automatic int unsigned frac_w(int unsigned n, int unsigned es);
    return n - es - 3;
  endfunction

  // Width of a run-length count over the N-1 bits that follow the sign
  // (values 0..N-1).
  function automatic int unsigned count_w(int unsigned n);
    return $clog2(n);
  endfunction

endpackage
