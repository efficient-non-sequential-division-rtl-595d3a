// pipe_reg -- one optional pipeline register of the divider.
//
// With EN set, q is d delayed by one rising clock edge; with EN clear the
// register is left out and q follows d combinationally. The divider places
// one of these at every register position drawn in its architecture; the
// one-cycle variant clears EN on all of them except the output register.
// The data registers have no reset (the valid flag that travels alongside
// them is reset instead), which keeps them mappable to DSP-block registers.
module pipe_reg #(
  parameter int unsigned W  = 8,
  parameter bit          EN = 1'b1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (EN) begin : g_reg
    always_ff @(posedge clk) q <= d;
  end else begin : g_wire
    assign q = d;
  end

endmodule
