// corr_poly2 -- degree-2 correction factor of the reciprocal approximation.
//
// Input s = x 2^-z in [1, 2), output p ~ gamma(a) with a = s - 1. The
// least-squares polynomial p2(a) = c2 a^2 + c1 a + c0 has c1 ~ -c2, so it is
// evaluated as
//     p2 = c2 (a - 0.5)^2 + C',   C' = c0 - 0.25 c2,
// and the subtraction of 1 (for a) and of 0.5 merge into one subtraction of
// 1.5 from s. That leaves one squarer, one constant multiplier and one
// constant adder.
//
//   s - 1.5 -> square -> [reg] -> * c2 -> + C' -> [reg] -> p
//
// Formats (FRAC fraction bits everywhere, results truncated toward minus
// infinity): s unsigned 1.FRAC; s - 1.5 two's complement in [-0.5, 0.5);
// the square in [0, 0.25]; p unsigned with 2 integer bits (its value stays
// below 1). c2 and C' are rounded to FRAC fraction bits.
//
// Timing: with PIPELINED set the two registers drawn in the paper's degree-2
// architecture (after the squarer and after the C' adder) are present and
// p lags s by LATENCY = 2 clock cycles; with PIPELINED clear the block is
// combinational (LATENCY = 0).
//
// Follows the paper: the reformulation, the 1.5 subtraction, the register
// positions, 17 fraction bits. Design choices: truncation and rounding of
// the constants to nearest.
module corr_poly2
  import nsdiv_pkg::*;
#(
  parameter int unsigned FRAC      = FRAC_DEF,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic            clk,
  input  logic [FRAC:0]   s,   // x 2^-z, unsigned 1.FRAC
  output logic [FRAC+1:0] p    // p2(s - 1), unsigned 2.FRAC
);

  localparam int unsigned LATENCY = PIPELINED ? 2 : 0;

  localparam logic [FRAC-1:0] C2     = FRAC'(fixq(C2_R, FRAC));
  localparam logic [FRAC:0]   CPRIME = (FRAC+1)'(fixq(CPRIME_R, FRAC));
  localparam logic [FRAC+1:0] ONE_P5 = (FRAC+2)'(3) << (FRAC - 1);

  // s - 1.5 in [-0.5, 0.5), two's complement with FRAC+2 bits.
  logic signed [FRAC+1:0]     t;
  logic signed [2*FRAC+3:0]   t_sq_full;
  logic        [FRAC-1:0]     t_sq, t_sq_r;   // (a - 0.5)^2 <= 0.25
  logic        [2*FRAC-1:0]   m_full;
  logic        [FRAC:0]       p_c, p_r;

  always_comb begin
    t         = $signed({1'b0, s}) - $signed(ONE_P5);
    t_sq_full = t * t;
    t_sq      = t_sq_full[2*FRAC-1:FRAC];
  end

  pipe_reg #(.W(FRAC), .EN(PIPELINED)) u_reg_sq (.clk, .d(t_sq), .q(t_sq_r));

  always_comb begin
    m_full = C2 * t_sq_r;
    p_c    = (FRAC+1)'(m_full[2*FRAC-1:FRAC]) + CPRIME;
  end

  pipe_reg #(.W(FRAC+1), .EN(PIPELINED)) u_reg_p (.clk, .d(p_c), .q(p_r));

  assign p = {1'b0, p_r};

  // Unused: the sign bits of the square (it is never negative).
  logic unused;
  assign unused = ^{t_sq_full[2*FRAC+3:2*FRAC], t_sq_full[FRAC-1:0], m_full[FRAC-1:0],
                    LATENCY[0]};

endmodule
