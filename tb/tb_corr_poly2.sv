// tb_corr_poly2 -- the degree-2 correction factor, pipelined and
// combinational instances side by side.
// Each cycle a new s in [1, 2) is applied. The combinational output is
// compared with c2 (a - 0.5)^2 + C' evaluated in real arithmetic (within
// 3 LSB) and with the exact correction gamma(a) = 2 / (3(1+a) - (1+a)^2)
// (within 1.8e-3, the polynomial's own error). The pipelined output must
// equal the combinational result for the input applied 2 cycles earlier,
// which checks its latency.
module tb_corr_poly2;
  localparam int unsigned FRAC = 17;
  localparam int unsigned N = 40000;
  localparam real LSB = 1.0 / real'(1 << FRAC);
  logic clk = 1'b0;
  logic [FRAC:0] s;
  logic [FRAC+1:0] p_pipe, p_comb;
  logic [FRAC+1:0] hist_comb [0:N];
  int checks = 0, failures = 0;

  corr_poly2 #(.FRAC(FRAC), .PIPELINED(1'b1)) dut_p (.clk, .s, .p(p_pipe));
  corr_poly2 #(.FRAC(FRAC), .PIPELINED(1'b0)) dut_c (.clk, .s, .p(p_comb));

  always #5 clk = ~clk;

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s = (FRAC+1)'(1) << FRAC;
    for (int k = 0; k < N; k++) begin
      real a, pr, g, got;
      @(negedge clk);
      // s applied in iteration k-1 is on the combinational output now.
      if (k >= 1) begin
        a   = real'(s) * LSB - 1.0;
        pr  = 0.444059373310529 * (a - 0.5) ** 2 + (0.998316470026731 - 0.25 * 0.444059373310529);
        g   = 2.0 / (3.0 * (1.0 + a) - (1.0 + a) ** 2);
        got = real'(p_comb) * LSB;
        hist_comb[k-1] = p_comb;
        checks++;
        if (got - pr > 3.0 * LSB || pr - got > 3.0 * LSB || got - g > 1.8e-3 || g - got > 1.8e-3) begin
          failures++;
          if (failures < 10) $display("s=%h p=%f poly=%f gamma=%f", s, got, pr, g);
        end
      end
      if (k >= 2) begin
        checks++;
        if (p_pipe !== hist_comb[k-2]) begin
          failures++;
          if (failures < 10) $display("k=%0d pipelined %h expected %h", k, p_pipe, hist_comb[k-2]);
        end
      end
      // Next s: the interval ends, then random values.
      if (k < 4) s = (k % 2 == 0) ? {1'b1, {FRAC{1'b1}}} : {1'b1, {FRAC{1'b0}}};
      else s = {1'b1, FRAC'($urandom)};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
