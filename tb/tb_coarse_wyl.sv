// tb_coarse_wyl -- the piecewise-linear reciprocal path, pipelined and
// combinational instances side by side.
// Random x (with powers of two and the extremes mixed in) and signed w are
// applied every cycle. s must equal x 2^-z exactly; wyl must be within 3 LSB
// of w (3 - x 2^-z) 2^-(z+1) evaluated in real arithmetic. The pipelined
// instance must reproduce the combinational results 1 cycle (s) and 3 cycles
// (wyl) later, which checks the register levels.
module tb_coarse_wyl;
  localparam int unsigned XW = 16, WI = 16, WF = 15, FRAC = 17;
  localparam int unsigned N = 30000;
  localparam real LSB = 1.0 / real'(1 << FRAC);
  logic clk = 1'b0;
  logic [XW-1:0] x;
  logic signed [WI+WF-1:0] w;
  logic [FRAC:0] s_p, s_c;
  logic signed [WI+FRAC:0] wyl_p, wyl_c;
  logic xz_p, xz_c;
  logic [FRAC:0] hist_s [0:N];
  logic signed [WI+FRAC:0] hist_wyl [0:N];
  int checks = 0, failures = 0;

  coarse_wyl #(.PIPELINED(1'b1)) dut_p (.clk, .x, .w, .s(s_p), .wyl(wyl_p), .x_zero(xz_p));
  coarse_wyl #(.PIPELINED(1'b0)) dut_c (.clk, .x, .w, .s(s_c), .wyl(wyl_c), .x_zero(xz_c));

  always #5 clk = ~clk;

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 16'd1;
    w = '0;
    for (int k = 0; k < N; k++) begin
      int z;
      real xr, wr, exp_wyl, got;
      logic [XW+FRAC:0] exp_s;
      @(negedge clk);
      if (k >= 1) begin
        z = -1;
        for (int t = int'(x); t != 0; t = t >> 1) z++;
        xr = real'(x);
        wr = real'(w) / real'(1 << WF);
        exp_s = ((XW+FRAC+1)'(x) << FRAC) >> z;
        exp_wyl = wr * (3.0 - xr / 2.0 ** z) / 2.0 ** (z + 1);
        got = real'(wyl_c) * LSB;
        checks++;
        if ((XW+FRAC+1)'(s_c) !== exp_s || got - exp_wyl > 3.0 * LSB || exp_wyl - got > 3.0 * LSB) begin
          failures++;
          if (failures < 10) $display("x=%0d w=%f s=%h (exp %h) wyl=%f (exp %f)", x, wr, s_c, exp_s, got, exp_wyl);
        end
        hist_s[k-1] = s_c;
        hist_wyl[k-1] = wyl_c;
      end
      if (k >= 1) begin
        checks++;
        if (s_p !== hist_s[k-1]) failures++;
      end
      if (k >= 3) begin
        checks++;
        if (wyl_p !== hist_wyl[k-3]) begin
          failures++;
          if (failures < 10) $display("k=%0d pipelined wyl %h expected %h", k, wyl_p, hist_wyl[k-3]);
        end
      end
      case (k % 8)
        0: x = XW'(1) << $urandom_range(XW - 1);
        1: x = {XW{1'b1}};
        default: x = XW'($urandom_range((1 << XW) - 1, 1));
      endcase
      w = (k % 16 == 5) ? {1'b1, {(WI+WF-1){1'b0}}} : (WI+WF)'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
