// nsdiv_top -- non-sequential divider with both correction degrees side by
// side.
//
// One divisor x and one dividend w feed two independent dividers that share
// nothing but their inputs: div_poly2 (about 10 bits of precision for small
// x, approaching 16 bits for large x) and div_poly4 (about 16 bits
// throughout). Each returns q ~ w / x with its own valid flag, because their
// latencies differ. A system that needs only one precision simply leaves the
// other output open and synthesis removes that divider.
//
// Interface: x unsigned 16-bit integer (x >= 1), w two's complement 16.15,
// q2 and q4 two's complement 16.17. *_zero flags an x of 0. WSH_INT = 1
// (default WI) narrows the internal w path for averaging, where |w| <= x.
//
// Timing: PIPELINED set (default) gives the register placement of the
// paper's figures: q2 after 4 cycles and q4 after 5, a new division every
// cycle. PIPELINED clear gives the one-clock-cycle variants (both after 1
// cycle).
//
// Follows the paper: both architectures and their two register variants.
// Design choice: offering both degrees in one top level.
module nsdiv_top
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
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [XW-1:0]             x,
  input  logic signed [WI+WF-1:0]   w,
  output logic                      q2_valid,
  output logic                      q2_zero,
  output logic signed [WI+FRAC-1:0] q2,
  output logic                      q4_valid,
  output logic                      q4_zero,
  output logic signed [WI+FRAC-1:0] q4
);

  div_poly2 #(.XW(XW), .WI(WI), .WF(WF), .FRAC(FRAC), .WSH_INT(WSH_INT),
              .PIPELINED(PIPELINED)) u_div2 (
    .clk, .rst_n, .in_valid, .x, .w,
    .out_valid(q2_valid), .div_zero(q2_zero), .q(q2)
  );

  div_poly4 #(.XW(XW), .WI(WI), .WF(WF), .FRAC(FRAC), .WSH_INT(WSH_INT),
              .PIPELINED(PIPELINED)) u_div4 (
    .clk, .rst_n, .in_valid, .x, .w,
    .out_valid(q4_valid), .div_zero(q4_zero), .q(q4)
  );

endmodule
