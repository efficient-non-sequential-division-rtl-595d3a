// nsdiv_pkg -- shared constants of the non-sequential divider.
//
// The divider computes q = w / x in fixed point as
//     q = w * p_d(a) * y_l(x),   y_l(x) = (3 - x 2^-z) 2^-(z+1),  a = x 2^-z - 1,
// where z = floor(log2 x), y_l is a piecewise-linear approximation of 1/x
// with node points at the powers of two, and p_d is a polynomial that
// approximates the correction factor gamma(a) = 2 / (3(1+a) - (1+a)^2).
//
// This package holds the default fixed-point widths and the real-valued
// polynomial constants. Each datapath module quantises the constants it uses
// to its own number of fraction bits with fixq(), rounding to nearest, so
// that changing the FRAC parameter re-derives every constant.
//
// Values that follow the paper: 17 fraction bits for all internal results,
// a 16-bit integer divisor x, a dividend w with 16 integer and 15 fraction
// bits, the degree-2 coefficients c2, c0 and the degree-4 factored form
// (c4, K1, K2, with the linear terms rounded to -2.5 and +0.5).
// Design choices: w is two's complement, constants are rounded to nearest
// at FRAC fraction bits.
package nsdiv_pkg;

  // Default formats.
  localparam int unsigned FRAC_DEF = 17;  // fraction bits of every internal result
  localparam int unsigned XW_DEF   = 16;  // integer bits of the divisor x (unsigned)
  localparam int unsigned WI_DEF   = 16;  // integer bits of the dividend w (signed, incl. sign)
  localparam int unsigned WF_DEF   = 15;  // fraction bits of the dividend w

  // Degree-2 least-squares polynomial p2(a) = c2 a^2 + c1 a + c0 (c1 ~ -c2),
  // rewritten as c2 (a - 0.5)^2 + C' with C' = c0 - 0.25 c2.
  localparam real C2_R     = 0.444059373310529;
  localparam real C0_R     = 0.998316470026731;
  localparam real CPRIME_R = C0_R - 0.25 * C2_R;

  // Degree-4 polynomial in factored form
  //   p4(a) = c4 (K1 - 2.5 a + a^2) (K2 + 0.5 a + a^2).
  localparam real C4_R = 0.209150199411479;
  localparam real K1_R = 3.0616168632399;
  localparam real K2_R = 1.561598389171924;

  // Round a non-negative real to an unsigned fixed-point integer with f
  // fraction bits (nearest; a real-to-integer cast rounds).
  function automatic logic [63:0] fixq(real v, int unsigned f);
    return 64'(longint'(v * (2.0 ** f)));
  endfunction

endpackage
