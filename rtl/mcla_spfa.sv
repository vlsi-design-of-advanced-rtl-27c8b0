// mcla_spfa -- sum-only partial full adder for the most significant bit.
//
// The MSB of the adder needs no generate or propagate term because the
// carry out of the word is discarded (the integrators wrap modulo 2^W), so
// this cell only forms s = a^b^ci. Purely combinational.
module mcla_spfa (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s
);
  assign s = a ^ b ^ ci;
endmodule
