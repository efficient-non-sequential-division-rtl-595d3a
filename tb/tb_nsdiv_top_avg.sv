// tb_nsdiv_top_avg -- the top level in its averaging configuration
// (WSH_INT = 1: w 2^-(z+1) kept as a fraction), used as an averager.
// For each operation N random 1.15 fractions are summed into w and x = N,
// N from 1 to 2^15, including the extreme means -1 (all values -1) and
// 1 - 2^-15. One operation is offered per cycle. Both quotients are compared
// with the mean computed here in real arithmetic (degree 2 within
// |mean| (2e-3 + 2^-15) + 5 LSB, degree 4 within |mean| (6e-5 + 2^-15) + 5 LSB),
// and their latencies must be 4 and 5 cycles.
module tb_nsdiv_top_avg;
  localparam int unsigned XW = 16, WI = 16, WF = 15, FRAC = 17;
  localparam int unsigned N_OPS = 400;
  localparam real LSB = 1.0 / real'(1 << FRAC);

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [XW-1:0] x = '0;
  logic signed [WI+WF-1:0] w = '0;
  logic q2_valid, q2_zero, q4_valid, q4_zero;
  logic signed [WI+FRAC-1:0] q2, q4;
  real mean [0:N_OPS-1];
  int issued [0:N_OPS-1];
  int n2 = 0, n4 = 0, cycle = 0, checks = 0, failures = 0;

  nsdiv_top #(.WSH_INT(1)) dut (
    .clk, .rst_n, .in_valid, .x, .w,
    .q2_valid, .q2_zero, .q2,
    .q4_valid, .q4_zero, .q4
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit close(real got, real ex, real rel);
    real tol, d;
    tol = (ex < 0.0 ? -ex : ex) * (rel + 1.0 / 32768.0) + 5.0 * LSB;
    d = got - ex;
    return d <= tol && -d <= tol;
  endfunction

  always @(negedge clk) begin
    if (rst_n && q2_valid) begin
      checks++;
      if (n2 >= N_OPS || q2_zero || cycle - issued[n2] != 4 || !close(real'(q2) * LSB, mean[n2], 2.0e-3)) begin
        failures++;
        if (failures < 10) $display("degree 2 op %0d: q=%f mean=%f", n2, real'(q2) * LSB, mean[n2]);
      end
      n2++;
    end
    if (rst_n && q4_valid) begin
      checks++;
      if (n4 >= N_OPS || q4_zero || cycle - issued[n4] != 5 || !close(real'(q4) * LSB, mean[n4], 6.0e-5)) begin
        failures++;
        if (failures < 10) $display("degree 4 op %0d: q=%f mean=%f", n4, real'(q4) * LSB, mean[n4]);
      end
      n4++;
    end
    cycle++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N_OPS; k++) begin
      int n;
      longint sum;
      n = (k == 0 || k == 1 || k == 2) ? 32768 : (k == 3) ? 1 : (k < 200) ? int'($urandom_range(300, 1))
                                                                        : int'($urandom_range(32768, 1));
      sum = 0;
      for (int i = 0; i < n; i++) begin
        if (k == 0) sum += -32768;
        else if (k == 1) sum += 32767;
        else sum += longint'($signed(16'($urandom)));
      end
      @(negedge clk);
      in_valid = 1'b1;
      x = XW'(n);
      w = (WI+WF)'(sum);
      mean[k] = (real'(sum) / 32768.0) / real'(n);
      issued[k] = cycle;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (n2 != N_OPS || n4 != N_OPS) begin
      failures++;
      $display("results: %0d / %0d of %0d", n2, n4, N_OPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
