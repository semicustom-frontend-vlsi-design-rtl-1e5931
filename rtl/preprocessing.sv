// preprocessing: the pre-processing cell of the Brent-Kung adder, one per
// operand bit.
//
// It forms the bit's generate and propagate signals, g = a & b and
// p = a ^ b (an AND and an XOR gate). Purely combinational: inputs a, b
// (one bit of each operand), outputs g, p, valid one gate delay later.
// Function and port names follow the published description of the cell;
// nothing here is an own choice.
module preprocessing (
  input  logic a,
  input  logic b,
  output logic g,
  output logic p
);

  assign g = a & b;
  assign p = a ^ b;

endmodule
