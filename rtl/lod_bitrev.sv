// lod_bitrev -- leading-one detector followed by a bit reversal about the
// binary point.
//
// For an unsigned integer divisor x >= 1 it returns z = floor(log2 x) as the
// one-hot word pow_z = 2^z, and the one-hot word inv_z = 2^-z in an unsigned
// fixed-point format with FRAC fraction bits (bit FRAC has weight 1, bit
// FRAC-k weight 2^-k). The reversal is pure wiring: bit k of pow_z drives bit
// FRAC-k of inv_z. The shifts x 2^-z and w 2^-(z+1) of the divider then
// become multiplications by one-hot words (see pow2_mult).
//
// Following the paper: the detector-plus-reversal structure. Design choices:
// x = 0 has no leading one; then pow_z and inv_z are all zero and x_zero is
// set (the divider's result is then meaningless). FRAC must be at least XW-1
// so that every 2^-z is representable.
//
// Purely combinational.
module lod_bitrev #(
  parameter int unsigned XW   = 16,  // width of x
  parameter int unsigned FRAC = 17   // fraction bits of inv_z
) (
  input  logic [XW-1:0]  x,
  output logic [XW-1:0]  pow_z,   // one-hot 2^z
  output logic [FRAC:0]  inv_z,   // one-hot 2^-z, FRAC fraction bits
  output logic           x_zero   // x == 0
);

  // Leading-one detector: a bit is the leading one when it is set and no
  // higher bit is.
  always_comb begin
    logic higher;
    higher = 1'b0;
    for (int i = XW - 1; i >= 0; i--) begin
      pow_z[i] = x[i] & ~higher;
      higher   = higher | x[i];
    end
  end

  // Bit reversal about the binary point: 2^k -> 2^-k.
  always_comb begin
    inv_z = '0;
    for (int k = 0; k < XW; k++) inv_z[FRAC-k] = pow_z[k];
  end

  assign x_zero = ~|x;

  initial begin
    assert (FRAC + 1 >= XW) else $error("lod_bitrev: FRAC must be >= XW-1");
  end

endmodule
