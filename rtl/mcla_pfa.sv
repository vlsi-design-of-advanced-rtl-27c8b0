// mcla_pfa -- partial full adder cell of the modified carry look-ahead adder.
//
// Produces the sum bit a^b^ci together with the generate (a&b) and propagate
// (a|b) terms; it does not form a carry-out, which is the job of the
// look-ahead logic of its 4-bit group. Sum follows the PFA truth table of the
// published adder (Table 5.3 there); g and p follow its equations 5.7 and 5.8
// (the propagate is the OR form given in the text). Purely combinational.
module mcla_pfa (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,  // sum bit
  output logic g,  // generate
  output logic p   // propagate
);
  assign s = a ^ b ^ ci;
  assign g = a & b;
  assign p = a | b;
endmodule
