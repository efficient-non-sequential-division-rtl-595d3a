// div_poly4 -- one-shot fixed-point divider q = w / x with the degree-4
// correction polynomial.
//
// The quotient is formed as q = w * p4(a) * y_l(x), a = x 2^-z - 1,
// z = floor(log2 x): coarse_wyl produces the piecewise-linear reciprocal
// already multiplied by w, corr_poly4 the factor p4(a) ~ gamma(a) that
// corrects it, and one final multiplier combines the two. No iteration, no
// table and no scaling of the input are needed, so a new division can start
// every clock cycle.
//
// Formats: x unsigned XW-bit integer, x >= 1; w two's complement with WI
// integer bits (sign included) and WF fraction bits; q two's complement with
// WI integer bits and FRAC fraction bits (|q| <= |w| since x >= 1 and the
// corrected reciprocal stays below 1 for x = 1). Results are truncated.
// WSH_INT (default WI, exact for any w) sets the integer bits kept for
// w 2^-(z+1); 1 is enough, and narrows the w path, when |w| <= x, e.g. when
// w is a sum of x fractional values and q their average.
// x = 0 is not a valid divisor: q is then meaningless and div_zero is set
// alongside out_valid.
//
// Timing: PIPELINED set places every register drawn in the paper's degree-4
// architecture, giving LATENCY = 5 cycles from in_valid to out_valid and
// one result per cycle. PIPELINED clear keeps only the output register,
// giving LATENCY = 1 (the paper's one-clock-cycle variant). in_valid is
// carried alongside the data; out_valid and div_zero are reset by rst_n
// (asynchronous, active low), the data registers are not.
//
// Follows the paper: the datapath, its register positions, the latencies
// 5 and 1, 17 fraction bits, the 16-bit x and the 16.15 w. Design choices:
// the valid flag, the reset, the div_zero flag, the output format,
// truncation.
module div_poly4
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
  output logic                      out_valid,
  output logic                      div_zero,
  output logic signed [WI+FRAC-1:0] q
);

  localparam int unsigned LATENCY = PIPELINED ? 5 : 1;

  logic [FRAC:0]              s;
  logic signed [WSH_INT+FRAC:0] wyl;
  logic [FRAC+1:0]            p;
  logic                       x_zero;
  logic signed [WI+2*FRAC+3:0] q_full;
  logic [WI+FRAC-1:0]         q_c, q_r;

  coarse_wyl #(.XW(XW), .WI(WI), .WF(WF), .FRAC(FRAC), .WSH_INT(WSH_INT),
               .PIPELINED(PIPELINED)) u_coarse (
    .clk, .x, .w, .s, .wyl, .x_zero
  );

  corr_poly4 #(.FRAC(FRAC), .PIPELINED(PIPELINED)) u_corr (
    .clk, .s, .p
  );

  // The y_l path is one register level shorter than the correction path:
  // level 4 register on w y_l(x).
  logic [WSH_INT+FRAC:0] wyl_d;
  pipe_reg #(.W(WSH_INT+FRAC+1), .EN(PIPELINED)) u_reg_wyl4 (.clk, .d(wyl), .q(wyl_d));

  always_comb begin
    q_full = $signed(wyl_d) * $signed({1'b0, p});
    q_c    = q_full[WI+2*FRAC-1:FRAC];
  end

  // Output register, present in both variants.
  pipe_reg #(.W(WI+FRAC), .EN(1'b1)) u_reg_q (.clk, .d(q_c), .q(q_r));
  assign q = $signed(q_r);

  // Valid and divide-by-zero flags travel alongside the data.
  logic [LATENCY-1:0] v_pipe, z_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0;
      z_pipe <= '0;
    end else begin
      v_pipe <= LATENCY'({v_pipe, in_valid});
      z_pipe <= LATENCY'({z_pipe, in_valid & x_zero});
    end
  end
  assign out_valid = v_pipe[LATENCY-1];
  assign div_zero  = z_pipe[LATENCY-1];

  logic unused;
  assign unused = ^{q_full[WI+2*FRAC+3:WI+2*FRAC], q_full[FRAC-1:0]};

endmodule
