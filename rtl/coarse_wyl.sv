// coarse_wyl -- the piecewise-linear reciprocal y_l(x), already multiplied
// by the dividend w, and the normalised divisor s = x 2^-z.
//
// With z = floor(log2 x) the reciprocal is linearised between the node
// points 2^z and 2^(z+1):
//     y_l(x) = (3 - x 2^-z) 2^-(z+1).
// The leading-one detector with bit reversal (lod_bitrev) gives 2^-z as a
// one-hot word; x 2^-z and w 2^-(z+1) are then shifts (pow2_mult), 3 - s is
// a constant subtraction, and a single multiplier forms w y_l(x) =
// (3 - s) * (w 2^-(z+1)). Pre-shifting w keeps the multiplier narrow when w
// has many integer bits, e.g. a sum of N fractional values divided by N.
// s is also handed to the correction-polynomial block.
//
// Formats: x unsigned XW-bit integer (x >= 1); w two's complement with WI
// integer bits (sign included) and WF fraction bits; s unsigned 1.FRAC;
// w 2^-(z+1) is kept with WSH_INT integer bits (sign included) and wyl with
// WSH_INT+1, both with FRAC fraction bits. WSH_INT = WI (default) is exact for
// every w. When |w| <= x is known, as for an average of x fractional
// values, w 2^-(z+1) is a fraction and WSH_INT = 1 narrows the w path and
// its multiplier; larger |w| then wrap around. All
// products are truncated toward minus infinity to FRAC fraction bits. For
// x = 0, x_zero is set and the outputs are meaningless.
//
// Timing (PIPELINED set, the register positions drawn in the paper): x and
// w are registered after the leading-one detector (level 1), 3 - s and
// w 2^-(z+1) after the shifters (level 2), w y_l after the multiplier
// (level 3). s therefore lags x by S_LAT = 1 cycle and wyl by WYL_LAT = 3.
// With PIPELINED clear the block is combinational (both lags 0).
//
// Follows the paper: the structure and register placement of the y_l path.
// Design choices: signed w, the output widths, truncation.
module coarse_wyl
  import nsdiv_pkg::*;
#(
  parameter int unsigned XW        = XW_DEF,
  parameter int unsigned WI        = WI_DEF,
  parameter int unsigned WF        = WF_DEF,
  parameter int unsigned FRAC      = FRAC_DEF,
  parameter int unsigned WSH_INT   = WI,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic                      clk,
  input  logic [XW-1:0]             x,
  input  logic signed [WI+WF-1:0]   w,
  output logic [FRAC:0]             s,       // x 2^-z, unsigned 1.FRAC
  output logic signed [WSH_INT+FRAC:0] wyl,   // w y_l(x), (WSH_INT+1).FRAC
  output logic                      x_zero   // x == 0, combinational from x
);

  localparam int unsigned WW = WI + WF;
  localparam logic [FRAC+1:0] THREE = (FRAC+2)'(3) << FRAC;

  logic [XW-1:0]           pow_z;
  logic [FRAC:0]           inv_z, inv_z_r, inv_z1;
  logic [XW-1:0]           x_r;
  logic [WW-1:0]           w_r;
  logic [XW+FRAC-1:0]      s_full;
  logic [WW+FRAC-1:0]      wsh_full;
  logic [WSH_INT+FRAC-1:0] wsh, wsh_r;          // w 2^-(z+1), WSH_INT.FRAC
  logic [FRAC+1:0]         u, u_r;              // 3 - s, 2.FRAC
  logic signed [WSH_INT+2*FRAC+2:0] wyl_full;
  logic [WSH_INT+FRAC:0]   wyl_c, wyl_r;

  lod_bitrev #(.XW(XW), .FRAC(FRAC)) u_lod (
    .x, .pow_z, .inv_z, .x_zero
  );

  // Level 1 registers: x, 2^-z and w.
  pipe_reg #(.W(XW),     .EN(PIPELINED)) u_reg_x   (.clk, .d(x),     .q(x_r));
  pipe_reg #(.W(FRAC+1), .EN(PIPELINED)) u_reg_inv (.clk, .d(inv_z), .q(inv_z_r));
  pipe_reg #(.W(WW),     .EN(PIPELINED)) u_reg_w   (.clk, .d(w),     .q(w_r));

  // x 2^-z: x is an integer, 2^-z has FRAC fraction bits, and the product
  // lies in [1, 2).
  pow2_mult #(.AW(XW), .BW(FRAC+1), .A_SIGNED(1'b0)) u_mul_x (
    .a(x_r), .b(inv_z_r), .p(s_full)
  );
  assign s = s_full[FRAC:0];

  // >> 1 of the one-hot 2^-z gives 2^-(z+1); then w 2^-(z+1) with WF+FRAC
  // fraction bits, truncated to FRAC.
  assign inv_z1 = inv_z_r >> 1;
  pow2_mult #(.AW(WW), .BW(FRAC+1), .A_SIGNED(1'b1)) u_mul_w (
    .a(w_r), .b(inv_z1), .p(wsh_full)
  );
  assign wsh = wsh_full[WSH_INT+FRAC+WF-1:WF];

  assign u = THREE - {1'b0, s};

  // Level 2 registers: 3 - s and w 2^-(z+1).
  pipe_reg #(.W(FRAC+2),    .EN(PIPELINED)) u_reg_u   (.clk, .d(u),   .q(u_r));
  pipe_reg #(.W(WSH_INT+FRAC), .EN(PIPELINED)) u_reg_wsh (.clk, .d(wsh), .q(wsh_r));

  // w y_l(x) = (3 - s) * w 2^-(z+1).
  always_comb begin
    wyl_full = $signed(wsh_r) * $signed({1'b0, u_r});
    wyl_c    = wyl_full[WSH_INT+2*FRAC:FRAC];
  end

  // Level 3 register: w y_l(x).
  pipe_reg #(.W(WSH_INT+FRAC+1), .EN(PIPELINED)) u_reg_wyl (.clk, .d(wyl_c), .q(wyl_r));
  assign wyl = $signed(wyl_r);

  logic unused;
  assign unused = ^{pow_z, s_full[XW+FRAC-1:FRAC+1], wsh_full,
                    wyl_full[WSH_INT+2*FRAC+2:WSH_INT+2*FRAC+1], wyl_full[FRAC-1:0]};

  initial begin
    assert (WSH_INT >= 1 && WSH_INT <= WI) else $error("coarse_wyl: WSH_INT must be in 1..WI");
  end

endmodule
