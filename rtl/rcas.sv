// rcas -- ripple carry adder/subtractor (RCAS), WIDTH bits.
//
// The subtractor of every comb stage. B is passed through an XOR with the
// "sub" control and "sub" is also the carry into bit 0, so sub=1 forms
// A + ~B + 1 = A - B (two's complement) and sub=0 forms A + B. The carry then
// ripples through a chain of full adders. The published filter ties sub to 1;
// the XOR-and-carry-in construction is the one the design describes, the
// full-adder chain is the plain textbook form. The carry out of the MSB is
// dropped: the result is modulo 2^WIDTH.
// Timing: purely combinational (pipeline registers live in the comb stage).
module rcas #(
  parameter int unsigned WIDTH = 16
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             sub,   // 1: a-b, 0: a+b
  output logic [WIDTH-1:0] s
);
  logic [WIDTH-1:0] c;
  logic [WIDTH-1:0] bx;

  assign c[0] = sub;
  for (genvar i = 0; i < WIDTH; i++) begin : g_fa
    assign bx[i]  = b[i] ^ sub;
    assign s[i]   = a[i] ^ bx[i] ^ c[i];
    if (i < WIDTH - 1) begin : g_carry
      assign c[i+1] = (a[i] & bx[i]) | (a[i] & c[i]) | (bx[i] & c[i]);
    end
  end
endmodule
