// full_adder: one-bit full adder cell of the array multiplier.
//
// s = x ^ y ^ ci, co = majority(x, y, ci). Purely combinational. The cell is
// the usual building block of an array multiplier; the paper does not show
// the multiplier's cells, so this is the textbook form.
module full_adder (
  input  logic x,
  input  logic y,
  input  logic ci,
  output logic s,
  output logic co
);
  assign s  = x ^ y ^ ci;
  assign co = (x & y) | (x & ci) | (y & ci);
endmodule
