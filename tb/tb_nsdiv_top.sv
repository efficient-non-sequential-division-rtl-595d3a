// tb_nsdiv_top -- end-to-end test of the divider top level at its default
// sizes (16-bit x, 16.15 w, 17 fraction bits, pipelined).
//
// Phase 1, reciprocal sweep: w = 1 and every x from 1 to 65535, one per
// cycle. The largest |q - 1/x| of each divider is collected per x range and
// compared with the precision the method is known to reach: degree 2 below
// 1.75e-3 at x = 1, below 1e-3 for x >= 2 and below 2^-15 for x >= 256;
// degree 4 below 5e-5 for x <= 4 and below 1.6e-5 (about the rounding error
// of a 16-bit fraction) above.
// Phase 2, averaging: N random 1.15 fractions are summed into w and divided
// by x = N, for N from 2 up to 2^15, and q is compared with the mean.
// Phase 3, random traffic with bubbles, invalid divisors and powers of two.
// Every result is matched in order to its operation, its latency must be 4
// (degree 2) or 5 (degree 4) cycles, and every mechanism (back-to-back
// issue, bubble, x = 0 flag, power-of-two x, negative w) must occur.
module tb_nsdiv_top;
  localparam int unsigned XW = 16, WI = 16, WF = 15, FRAC = 17;
  localparam real LSB = 1.0 / real'(1 << FRAC);

  typedef enum int {SWEEP, AVERAGE, RANDOM} phase_e;
  typedef struct {
    int            issued;
    logic [XW-1:0] x;
    logic signed [WI+WF-1:0] w;
    real           expect_q;
    phase_e        phase;
  } op_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [XW-1:0] x = '0;
  logic signed [WI+WF-1:0] w = '0;
  logic q2_valid, q2_zero, q4_valid, q4_zero;
  logic signed [WI+FRAC-1:0] q2, q4;

  op_t fifo2 [$], fifo4 [$];
  int checks = 0, failures = 0, cycle = 0;
  int n_b2b = 0, n_bubble = 0, n_zero = 0, n_pow2 = 0, n_neg = 0, n_avg = 0;
  real e2_x1 = 0.0, e2_lo = 0.0, e2_hi = 0.0, e4_lo = 0.0, e4_hi = 0.0;

  nsdiv_top dut (
    .clk, .rst_n, .in_valid, .x, .w,
    .q2_valid, .q2_zero, .q2,
    .q4_valid, .q4_zero, .q4
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  // Compare one result with its operation.
  task automatic check(input int deg, input logic zf, input logic signed [WI+FRAC-1:0] q,
                       ref op_t fifo [$]);
    op_t op;
    real got, err, tol;
    checks++;
    if (fifo.size() == 0) begin
      failures++;
      $display("degree %0d: result without an operation", deg);
      return;
    end
    op = fifo.pop_front();
    if (cycle - op.issued != (deg == 2 ? 4 : 5)) begin
      failures++;
      if (failures < 10) $display("degree %0d: latency %0d", deg, cycle - op.issued);
    end
    if (op.x == 0) begin
      checks++;
      if (!zf) begin failures++; $display("degree %0d: x = 0 not flagged", deg); end
      return;
    end
    got = real'(q) * LSB;
    err = absr(got - op.expect_q);
    if (op.phase == SWEEP) begin
      if (deg == 2) begin
        if (op.x == 1) e2_x1 = (err > e2_x1) ? err : e2_x1;
        else if (op.x < 256) e2_lo = (err > e2_lo) ? err : e2_lo;
        else e2_hi = (err > e2_hi) ? err : e2_hi;
      end else begin
        if (op.x <= 4) e4_lo = (err > e4_lo) ? err : e4_lo;
        else e4_hi = (err > e4_hi) ? err : e4_hi;
      end
    end
    tol = absr(op.expect_q) * ((deg == 2 ? 2.0e-3 : 6.0e-5) + 1.0 / 32768.0) + 5.0 * LSB;
    checks++;
    if (zf || err > tol) begin
      failures++;
      if (failures < 10) $display("degree %0d: x=%0d w=%f q=%f expected %f", deg, op.x,
                                  real'(op.w) / real'(1 << WF), got, op.expect_q);
    end
  endtask

  // Results are collected at every falling edge, before new inputs change.
  always @(negedge clk) begin
    if (rst_n) begin
      if (q2_valid) check(2, q2_zero, q2, fifo2);
      if (q4_valid) check(4, q4_zero, q4, fifo4);
    end
    cycle++;
  end

  // Offer one operation in the current cycle (called right after a falling
  // edge).
  task automatic issue(input logic [XW-1:0] xv, input logic signed [WI+WF-1:0] wv,
                       input real expect_q, input phase_e ph);
    if (in_valid) n_b2b++;
    in_valid = 1'b1;
    x = xv;
    w = wv;
    if (xv == 0) n_zero++;
    if (xv != 0 && (xv & (xv - 1)) == 0) n_pow2++;
    if (wv < 0) n_neg++;
    fifo2.push_back('{cycle, xv, wv, expect_q, ph});
    fifo4.push_back('{cycle, xv, wv, expect_q, ph});
  endtask

  task automatic idle();
    if (in_valid) n_bubble++;
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Phase 1: reciprocal sweep with w = 1.
    for (int xv = 1; xv < (1 << XW); xv++) begin
      @(negedge clk);
      issue(XW'(xv), (WI+WF)'(1 << WF), 1.0 / real'(xv), SWEEP);
    end
    @(negedge clk);
    idle();

    // Phase 2: averages of N random 1.15 fractions.
    for (int t = 0; t < 24; t++) begin
      int n;
      longint sum;
      n = (t == 0) ? 32768 : (t == 1) ? 2 : (t == 2) ? 3 : (t < 12) ? int'($urandom_range(100, 2))
                                                                    : int'($urandom_range(32768, 2));
      sum = 0;
      for (int i = 0; i < n; i++) sum += longint'($signed(16'($urandom)));
      @(negedge clk);
      issue(XW'(n), (WI+WF)'(sum), (real'(sum) / 32768.0) / real'(n), AVERAGE);
      n_avg++;
    end

    // Phase 3: random traffic.
    for (int k = 0; k < 20000; k++) begin
      logic [XW-1:0] xv;
      logic signed [WI+WF-1:0] wv;
      @(negedge clk);
      if ($urandom_range(3) == 0) idle();
      else begin
        case ($urandom_range(15))
          0: xv = '0;
          1: xv = XW'(1) << $urandom_range(XW - 1);
          default: xv = XW'($urandom_range((1 << XW) - 1, 1));
        endcase
        wv = (WI+WF)'($urandom);
        issue(xv, wv, (xv == 0) ? 0.0 : (real'(wv) / 32768.0) / real'(xv), RANDOM);
      end
    end
    @(negedge clk);
    idle();
    repeat (10) @(negedge clk);

    // Precision of the reciprocal sweep.
    $display("degree 2: max |q-1/x| %.3e at x=1, %.3e for 2<=x<256, %.3e for x>=256", e2_x1, e2_lo, e2_hi);
    $display("degree 4: max |q-1/x| %.3e for x<=4, %.3e for x>4", e4_lo, e4_hi);
    checks++; if (e2_x1 > 1.75e-3)        begin failures++; $display("degree 2 error at x = 1 too large"); end
    checks++; if (e2_lo > 1.0e-3)         begin failures++; $display("degree 2 error for x >= 2 too large"); end
    checks++; if (e2_hi > 1.0 / 32768.0)  begin failures++; $display("degree 2 error for x >= 256 too large"); end
    checks++; if (e4_lo > 5.0e-5)         begin failures++; $display("degree 4 error for x <= 4 too large"); end
    checks++; if (e4_hi > 1.6e-5)         begin failures++; $display("degree 4 error for x > 4 too large"); end

    // Every mechanism must have been exercised and every operation answered.
    $display("back-to-back %0d, bubbles %0d, x=0 %0d, power-of-two x %0d, negative w %0d, averages %0d",
             n_b2b, n_bubble, n_zero, n_pow2, n_neg, n_avg);
    checks++;
    if (n_b2b == 0 || n_bubble == 0 || n_zero == 0 || n_pow2 == 0 || n_neg == 0 || n_avg == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    checks++;
    if (fifo2.size() != 0 || fifo4.size() != 0) begin
      failures++;
      $display("%0d / %0d operations unanswered", fifo2.size(), fifo4.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
