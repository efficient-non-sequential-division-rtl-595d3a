// corr_poly4 -- degree-4 correction factor of the reciprocal approximation.
//
// Input s = x 2^-z in [1, 2), output p ~ gamma(a) with a = s - 1. The
// degree-4 least-squares polynomial is used in its factored form
//     p4(a) = c4 (K1 - 2.5 a + a^2) (K2 + 0.5 a + a^2),
// K1 = 3.0616168632399, K2 = 1.561598389171924, c4 = 0.209150199411479,
// where the linear coefficients have been rounded to -2.5 and +0.5 so that
// they cost only shifts and adds: 2.5 a = (a << 1) + (a >> 1), 0.5 a = a >> 1.
// One squarer, one multiplier for the two factors and one constant
// multiplier remain.
//
//   a = s - 1 -> a^2, K1 - 2.5a, K2 + 0.5a -> [reg] -> + a^2 (both)
//     -> factor product -> [reg] -> * c4 -> [reg] -> p
//
// Formats (FRAC fraction bits everywhere, results truncated toward minus
// infinity): a and a^2 unsigned 0.FRAC; the factors unsigned 2.FRAC (they
// lie in [1.56, 3.07]); their product unsigned 4.FRAC; p unsigned 2.FRAC
// (its value stays below 1). The constants are rounded to FRAC fraction bits.
//
// Timing: with PIPELINED set the three register levels drawn in the paper's
// degree-4 architecture are present and p lags s by LATENCY = 3 clock
// cycles; with PIPELINED clear the block is combinational (LATENCY = 0).
//
// Follows the paper: the factored form, the rounding of the linear terms,
// the shift-and-add realisation, the register positions, 17 fraction bits.
// Design choices: truncation, and dropping the LSB in a >> 1.
module corr_poly4
  import nsdiv_pkg::*;
#(
  parameter int unsigned FRAC      = FRAC_DEF,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic            clk,
  input  logic [FRAC:0]   s,   // x 2^-z, unsigned 1.FRAC
  output logic [FRAC+1:0] p    // p4(s - 1), unsigned 2.FRAC
);

  localparam int unsigned LATENCY = PIPELINED ? 3 : 0;

  localparam logic [FRAC-1:0] C4  = FRAC'(fixq(C4_R, FRAC));
  localparam logic [FRAC+1:0] K1  = (FRAC+2)'(fixq(K1_R, FRAC));
  localparam logic [FRAC+1:0] K2  = (FRAC+2)'(fixq(K2_R, FRAC));
  localparam logic [FRAC:0]   ONE = (FRAC+1)'(1) << FRAC;

  logic [FRAC:0]     a_full;
  logic [FRAC-1:0]   a;
  logic [2*FRAC-1:0] a_sq_full;
  logic [FRAC-1:0]   a_sq, a_sq_r;
  logic [FRAC+1:0]   a_x2p5;             // 2.5 a
  logic [FRAC+1:0]   f1_lin, f1_lin_r;   // K1 - 2.5 a
  logic [FRAC+1:0]   f2_lin, f2_lin_r;   // K2 + 0.5 a
  logic [FRAC+1:0]   f1, f2;             // full factors
  logic [2*FRAC+3:0] fp_full;
  logic [FRAC+3:0]   fp, fp_r;           // f1 * f2
  logic [2*FRAC+3:0] pc_full;
  logic [FRAC+1:0]   p_c, p_r;

  // Level 1: a, a^2 and the linear parts of both factors.
  always_comb begin
    a_full    = s - ONE;
    a         = a_full[FRAC-1:0];        // s in [1, 2) so a in [0, 1)
    a_sq_full = a * a;
    a_sq      = a_sq_full[2*FRAC-1:FRAC];
    a_x2p5    = ((FRAC+2)'(a) << 1) + (FRAC+2)'(a >> 1);
    f1_lin    = K1 - a_x2p5;
    f2_lin    = K2 + (FRAC+2)'(a >> 1);
  end

  pipe_reg #(.W(FRAC),   .EN(PIPELINED)) u_reg_sq (.clk, .d(a_sq),   .q(a_sq_r));
  pipe_reg #(.W(FRAC+2), .EN(PIPELINED)) u_reg_f1 (.clk, .d(f1_lin), .q(f1_lin_r));
  pipe_reg #(.W(FRAC+2), .EN(PIPELINED)) u_reg_f2 (.clk, .d(f2_lin), .q(f2_lin_r));

  // Level 2: complete both factors and multiply them.
  always_comb begin
    f1      = f1_lin_r + (FRAC+2)'(a_sq_r);
    f2      = f2_lin_r + (FRAC+2)'(a_sq_r);
    fp_full = f1 * f2;
    fp      = fp_full[2*FRAC+3:FRAC];
  end

  pipe_reg #(.W(FRAC+4), .EN(PIPELINED)) u_reg_fp (.clk, .d(fp), .q(fp_r));

  // Level 3: scale by the leading coefficient c4.
  always_comb begin
    pc_full = C4 * fp_r;
    p_c     = pc_full[2*FRAC+1:FRAC];
  end

  pipe_reg #(.W(FRAC+2), .EN(PIPELINED)) u_reg_p (.clk, .d(p_c), .q(p_r));

  assign p = p_r;

  logic unused;
  assign unused = ^{a_full[FRAC], a_sq_full[FRAC-1:0], fp_full[FRAC-1:0],
                    pc_full[2*FRAC+3:2*FRAC+2], pc_full[FRAC-1:0], LATENCY[0]};

endmodule
