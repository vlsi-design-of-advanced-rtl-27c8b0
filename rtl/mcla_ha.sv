// mcla_ha -- half adder cell of the modified carry look-ahead adder.
//
// Used for the least significant bit, where the carry-in is zero. The sum is
// a XOR b and the generate term (which is the carry into bit 1) is a AND b,
// as in the half adder truth table of the published adder (Table 5.2 there).
// Purely combinational.
module mcla_ha (
  input  logic a,
  input  logic b,
  output logic s,  // sum bit
  output logic g   // generate, equal to the carry into the next bit
);
  assign s = a ^ b;
  assign g = a & b;
endmodule
