// mcla -- modified carry look-ahead adder (MCLA), WIDTH bits, no carry-in.
//
// The adder of every integrator stage. The word is cut into 4-bit groups.
// Inside a group each carry is formed in one sum-of-products from the bit
// generate/propagate terms and the group carry-in:
//   c1 = g0 + p0.c0,  c2 = g1 + p1.g0 + p1.p0.c0,  ... up to c4,
// and each group also produces a group propagate PG = p3.p2.p1.p0 and a group
// generate GG = g3 + p3.g2 + p3.p2.g1 + p3.p2.p1.g0. The carry into the next
// group is GG + PG.c0, so groups are chained by one AND-OR per 4 bits instead
// of the exponentially growing full look-ahead expression.
// Bit 0 uses a half adder (the carry-in is zero), the MSB a sum-only cell,
// and all other bits partial full adders. These cells and equations follow
// the published MCLA; the 25-bit default is the width used by the filter.
// The last group may be shorter than 4 bits (25 = 6x4 + 1). The carry out of
// the MSB is dropped: the result is (a+b) mod 2^WIDTH.
// Timing: purely combinational.
module mcla #(
  parameter int unsigned WIDTH = 25
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] s
);
  localparam int unsigned NGRP = (WIDTH + 3) / 4;

  logic [WIDTH-1:0] g, p, c;    // bit generate, propagate, carry-in
  logic [NGRP:0]    gc;         // group carry-in
  logic [NGRP-1:0]  gg, gp;     // group generate / propagate

  if (WIDTH < 2) begin : g_bad_width
    $error("mcla: WIDTH must be at least 2");
  end

  // Bit cells.
  mcla_ha u_ha (.a(a[0]), .b(b[0]), .s(s[0]), .g(g[0]));
  assign p[0] = 1'b0;           // c0 is zero, so p0 never matters
  for (genvar i = 1; i < WIDTH - 1; i++) begin : g_pfa
    mcla_pfa u_pfa (.a(a[i]), .b(b[i]), .ci(c[i]), .s(s[i]), .g(g[i]), .p(p[i]));
  end
  mcla_spfa u_spfa (.a(a[WIDTH-1]), .b(b[WIDTH-1]), .ci(c[WIDTH-1]), .s(s[WIDTH-1]));
  assign g[WIDTH-1] = 1'b0;     // no carry out of the word is formed
  assign p[WIDTH-1] = 1'b0;

  // Group chaining: the carry into group k+1 is GG_k + PG_k . c_k.
  assign gc[0] = 1'b0;
  for (genvar k = 0; k < NGRP; k++) begin : g_chain
    assign gc[k+1] = gg[k] | (gp[k] & gc[k]);
  end

  // Carries into the bits of each group, one sum-of-products each.
  always_comb begin
    logic term;
    for (int unsigned k = 0; k < NGRP; k++) begin
      for (int unsigned t = 0; t < 4; t++) begin
        if (4*k + t < WIDTH) begin
          c[4*k+t] = gc[k];
          for (int unsigned j = 4*k; j < 4*k + t; j++) c[4*k+t] &= p[j];
          for (int unsigned j = 4*k; j < 4*k + t; j++) begin
            term = g[j];
            for (int unsigned l = j + 1; l < 4*k + t; l++) term &= p[l];
            c[4*k+t] |= term;
          end
        end
      end
    end
  end

  // Group propagate and generate over each group's bits.
  always_comb begin
    logic term;
    for (int unsigned k = 0; k < NGRP; k++) begin
      gp[k] = 1'b1;
      gg[k] = 1'b0;
      for (int unsigned j = 4*k; j < 4*k + 4; j++) begin
        if (j < WIDTH) begin
          term = g[j];
          for (int unsigned l = j + 1; l < 4*k + 4; l++)
            if (l < WIDTH) term &= p[l];
          gg[k] |= term;
          gp[k] &= p[j];
        end
      end
    end
  end

endmodule
