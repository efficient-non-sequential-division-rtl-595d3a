// tb_pow2_mult -- random test of the one-hot power-of-two multiplier, in a
// signed and an unsigned instance. The expected product is formed here with
// an ordinary integer multiplication by 2^i. b = 0 is also checked.
module tb_pow2_mult;
  localparam int unsigned AW = 31, BW = 18, OW = AW + BW - 1;
  logic clk = 1'b0;
  logic [AW-1:0] a;
  logic [BW-1:0] b;
  logic [OW-1:0] p_s, p_u;
  int checks = 0, failures = 0;

  pow2_mult #(.AW(AW), .BW(BW), .A_SIGNED(1'b1)) dut_s (.a, .b, .p(p_s));
  pow2_mult #(.AW(AW), .BW(BW), .A_SIGNED(1'b0)) dut_u (.a, .b, .p(p_u));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int i;
      longint sa, ua, es, eu;
      @(negedge clk);
      a = AW'($urandom);
      i = (n % 19 == 18) ? -1 : int'($urandom_range(BW - 1));
      b = (i < 0) ? '0 : BW'(1) << i;
      #1;
      sa = longint'($signed(a));
      ua = longint'(a);
      es = (i < 0) ? 0 : sa * (longint'(1) << i);
      eu = (i < 0) ? 0 : ua * (longint'(1) << i);
      checks++;
      if (p_s !== OW'(es) || p_u !== OW'(eu)) begin
        failures++;
        if (failures < 10) $display("a=%h i=%0d p_s=%h exp %h p_u=%h exp %h", a, i, p_s, OW'(es), p_u, OW'(eu));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
