// grng_pkg -- constants shared by the Gaussian noise generator.
//
// The generator sums blocks of M consecutive +/-1 chips of a Gold code and
// scales the sum by M^(-1/2), which by the central limit theorem gives an
// approximately standard-normal sample.  The Gold code is the XOR of two
// maximum-length LFSRs of degree 89.  The two characteristic polynomials and
// the block length M = 256 are the values the generator was evaluated with:
//   f1(x) = x^89 + x^38 + 1
//   f2(x) = x^89 + x^72 + x^55 + x^38 + 1
// f2 is the minimal polynomial of alpha^3 when alpha is a root of f1, i.e.
// the Gold construction x + x^(2^r+1) with r = 1.
//
// A polynomial f(x) = sum b_i x^i is stored as its low coefficients
// b_0 .. b_{n-1} (b_n = 1 is implied): bit i of the vector is b_i.
// The default seeds are this design's own choice (any non-zero state works).
package grng_pkg;

  localparam int unsigned LFSR_N = 89;

  typedef logic [LFSR_N-1:0] lfsr_state_t;

  localparam lfsr_state_t F1_TAPS = lfsr_state_t'(1) | (lfsr_state_t'(1) << 38);
  localparam lfsr_state_t F2_TAPS = lfsr_state_t'(1) | (lfsr_state_t'(1) << 38)
                                  | (lfsr_state_t'(1) << 55) | (lfsr_state_t'(1) << 72);

  localparam lfsr_state_t F1_SEED = lfsr_state_t'(1);
  localparam lfsr_state_t F2_SEED = lfsr_state_t'(1);

  // Block length of the central-limit sum.
  localparam int unsigned CLT_M = 256;

  // Width of a signed sum of M values of +/-1: |sum| <= M.
  function automatic int unsigned sum_width(input int unsigned m);
    return $clog2(m + 1) + 1;
  endfunction

endpackage
