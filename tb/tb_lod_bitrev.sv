// tb_lod_bitrev -- exhaustive test of the leading-one detector with bit
// reversal. Every 16-bit x is applied; floor(log2 x) is computed here by a
// separate loop, and pow_z, inv_z and x_zero are compared with the one-hot
// words it implies. A watchdog ends the run after a fixed number of cycles.
module tb_lod_bitrev;
  localparam int unsigned XW = 16, FRAC = 17;
  logic clk = 1'b0;
  logic [XW-1:0] x;
  logic [XW-1:0] pow_z;
  logic [FRAC:0] inv_z;
  logic x_zero;
  int checks = 0, failures = 0;

  lod_bitrev #(.XW(XW), .FRAC(FRAC)) dut (.x, .pow_z, .inv_z, .x_zero);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << XW); v++) begin
      int z;
      logic [XW-1:0] exp_pow;
      logic [FRAC:0] exp_inv;
      @(negedge clk);
      x = XW'(v);
      #1;
      z = -1;
      for (int t = v; t != 0; t = t >> 1) z++;
      exp_pow = (z < 0) ? '0 : XW'(1) << z;
      exp_inv = (z < 0) ? '0 : (FRAC+1)'(1) << (FRAC - z);
      checks++;
      if (pow_z !== exp_pow || inv_z !== exp_inv || x_zero !== (v == 0)) begin
        failures++;
        if (failures < 10)
          $display("x=%0d pow_z=%h (exp %h) inv_z=%h (exp %h) x_zero=%b",
                   v, pow_z, exp_pow, inv_z, exp_inv, x_zero);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
