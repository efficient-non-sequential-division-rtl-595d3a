// pow2_mult -- multiplication of an operand by a power of two that is given
// as a one-hot word.
//
// p = a * b where b has exactly one bit set. Because b is one-hot the product
// is a shifted copy of a; it is built as a one-hot multiplexer, the OR over i
// of (b[i] ? a << i : 0), which maps onto LUTs and needs no DSP block. The
// caller keeps track of the binary points: p has the fraction bits of a plus
// those of b. a is sign-extended when A_SIGNED is set, zero-extended
// otherwise. If b is zero, p is zero.
//
// Following the paper: the block "mult. with power of two" with inputs a and
// b, fed by the leading-one detector. The one-hot multiplexer is this
// design's choice of how to realise the shift.
//
// Purely combinational.
module pow2_mult #(
  parameter int unsigned AW       = 16,          // width of a
  parameter int unsigned BW       = 18,          // width of the one-hot b
  parameter int unsigned OW       = AW + BW - 1, // width of p
  parameter bit          A_SIGNED = 1'b0
) (
  input  logic [AW-1:0] a,
  input  logic [BW-1:0] b,
  output logic [OW-1:0] p
);

  logic [OW-1:0] a_ext;

  always_comb begin
    a_ext = A_SIGNED ? OW'($signed(a)) : OW'(a);
    p = '0;
    for (int i = 0; i < BW; i++) begin
      if (b[i]) p = p | (a_ext << i);
    end
  end

endmodule
