// postprocessing: the post-processing (sum) cell of the Brent-Kung adder,
// one per operand bit.
//
// The sum bit is the bit's own propagate XOR the carry into the bit:
// s = c ^ p. Purely combinational, one XOR. The published cell drawing
// puts a buffer after the XOR; a buffer only adds delay and has no logic
// effect, so it is not modelled.
module postprocessing (
  input  logic c,
  input  logic p,
  output logic s
);

  assign s = c ^ p;

endmodule
