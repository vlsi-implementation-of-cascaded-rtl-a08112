// pfa: partial full adder, one bit slice of the carry look-ahead adder.
//
// A partial full adder does not form its own carry out. It gives the bit
// propagate p = a ^ b and generate g = a & b to the carry look-ahead logic,
// which returns the carry c into this bit; the sum is then s = p ^ c.
// The p and g names and the slice itself follow the 8-bit MCLA drawing; the
// gate equations are the standard ones for a carry look-ahead adder.
// Purely combinational.
module pfa (
  input  logic a,   // addend bit
  input  logic b,   // addend bit
  input  logic c,   // carry into this bit, from the look-ahead logic
  output logic s,   // sum bit
  output logic p,   // propagate
  output logic g    // generate
);

  // Three separate assignments: p and g must not depend on c, and the carry
  // logic closes a path from p, g back to c through the look-ahead block.
  assign p = a ^ b;
  assign g = a & b;
  assign s = p ^ c;

endmodule
