// cic_combs -- the cascade of N comb stages (low-rate section).
//
// N cic_comb stages of equal width W in series, each with its output
// pipeline register, so the cascade computes (1 - z^-M)^N on the decimated
// sample stream. A single in_valid strobe walks down the chain with the data.
// The number of stages (N=5), the 16-bit width of the truncated design and
// the pipeline registers between combs follow the published design.
// Timing: y and out_valid appear N clocks after in_valid; a new sample may be
// presented on any clock.
module cic_combs
  import cic_pkg::*;
#(
  parameter int unsigned N = CIC_N,
  parameter int unsigned W = out_width(1'b1, CIC_B_MAX),
  parameter int unsigned M = CIC_M
) (
  input  logic         clk,
  input  logic         rst,        // synchronous, active high
  input  logic         in_valid,
  input  logic [W-1:0] x,
  output logic         out_valid,
  output logic [W-1:0] y
);
  logic [W-1:0] d [N+1];
  logic         v [N+1];

  assign d[0] = x;
  assign v[0] = in_valid;
  for (genvar j = 0; j < N; j++) begin : g_stage
    cic_comb #(.W(W), .M(M)) u_comb (
      .clk(clk), .rst(rst), .in_valid(v[j]), .x(d[j]),
      .out_valid(v[j+1]), .y(d[j+1]));
  end
  assign y         = d[N];
  assign out_valid = v[N];
endmodule
