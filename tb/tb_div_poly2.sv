// tb_div_poly2 -- the degree-2 divider in its pipelined (4-cycle) and
// one-clock-cycle variants, driven with the same random stream.
// Each cycle an operation is offered with probability 3/4, so back-to-back
// issue and bubbles both occur. x is random in [1, 2^16) with powers of two,
// 65535 and the invalid x = 0 mixed in; w is a random signed 16.15 value.
// Each result is matched, in order, to its operation: its arrival cycle must
// be issue + LATENCY (4 or 1), div_zero must flag x = 0, and otherwise
// |q - w/x| must not exceed |w/x| (REL + 2^-15) + 5 LSB, with w/x computed
// in real arithmetic and REL = 2e-3 the relative error of the degree-2
// correction.
module tb_div_poly2;
  localparam int unsigned XW = 16, WI = 16, WF = 15, FRAC = 17;
  localparam int unsigned N = 40000;
  localparam int unsigned LAT_P = 4;
  localparam real REL = 2.0e-3;
  localparam real LSB = 1.0 / real'(1 << FRAC);

  typedef struct {
    int          issued;
    logic [XW-1:0] x;
    logic signed [WI+WF-1:0] w;
  } op_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [XW-1:0] x;
  logic signed [WI+WF-1:0] w;
  logic v_p, v_c, z_p, z_c;
  logic signed [WI+FRAC-1:0] q_p, q_c;
  op_t fifo_p [$], fifo_c [$];
  int checks = 0, failures = 0, results = 0, zeros = 0, bubbles = 0, back2back = 0;

  div_poly2 #(.PIPELINED(1'b1)) dut_p (.clk, .rst_n, .in_valid, .x, .w, .out_valid(v_p), .div_zero(z_p), .q(q_p));
  div_poly2 #(.PIPELINED(1'b0)) dut_c (.clk, .rst_n, .in_valid, .x, .w, .out_valid(v_c), .div_zero(z_c), .q(q_c));

  always #5 clk = ~clk;

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_result(input string tag, input int k, input int lat, input logic zf,
                              input logic signed [WI+FRAC-1:0] q, ref op_t fifo [$]);
    op_t op;
    real ex, got, tol;
    checks++;
    if (fifo.size() == 0) begin
      failures++;
      $display("%s: result without an operation at k=%0d", tag, k);
      return;
    end
    op = fifo.pop_front();
    if (k - op.issued != lat) begin
      failures++;
      if (failures < 10) $display("%s: latency %0d, expected %0d", tag, k - op.issued, lat);
    end
    if (op.x == 0) begin
      checks++;
      if (!zf) failures++;
      return;
    end
    ex  = (real'(op.w) / real'(1 << WF)) / real'(op.x);
    got = real'(q) * LSB;
    tol = (ex < 0.0 ? -ex : ex) * (REL + 1.0 / 32768.0) + 5.0 * LSB;
    checks++;
    if (zf || got - ex > tol || ex - got > tol) begin
      failures++;
      if (failures < 10) $display("%s: x=%0d w=%f q=%f expected %f", tag, op.x, real'(op.w) / real'(1 << WF), got, ex);
    end
  endtask

  initial begin
    in_valid = 1'b0;
    x = '0;
    w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      if (v_p) begin check_result("pipelined", k, LAT_P, z_p, q_p, fifo_p); results++; end
      if (v_c) check_result("one-cycle", k, 1, z_c, q_c, fifo_c);
      if (k < N - 10 && $urandom_range(3) != 0) begin
        if (in_valid) back2back++;
        in_valid = 1'b1;
        case ($urandom_range(15))
          0: x = '0;
          1: x = XW'(1) << $urandom_range(XW - 1);
          2: x = {XW{1'b1}};
          3: x = XW'($urandom_range(8, 1));
          default: x = XW'($urandom_range((1 << XW) - 1, 1));
        endcase
        w = (WI+WF)'($urandom);
        if (x == 0) zeros++;
        fifo_p.push_back('{k, x, w});
        fifo_c.push_back('{k, x, w});
      end else begin
        if (in_valid) bubbles++;
        in_valid = 1'b0;
      end
    end
    checks++;
    if (fifo_p.size() != 0 || fifo_c.size() != 0 || results < 1000 || zeros == 0 || bubbles == 0 || back2back == 0) begin
      failures++;
      $display("left over %0d/%0d, results %0d zeros %0d bubbles %0d back-to-back %0d",
               fifo_p.size(), fifo_c.size(), results, zeros, bubbles, back2back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
