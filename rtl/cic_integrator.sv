// cic_integrator -- one pipelined integrator stage, y[n] = y[n-1] + x[n].
//
// The stage's accumulator register is at the same time its feedback delay
// and the pipeline register towards the next stage, so the stage costs one
// W-bit register and one W-bit MCLA adder and adds one sample of latency.
// The input word (IN_W bits) is truncated to the stage width W by dropping
// its IN_W-W least significant bits before the add; the accumulator wraps
// modulo 2^W, which the comb section later cancels exactly (two's complement
// wrap-around is harmless in a CIC filter as long as W covers the growth
// seen at this stage's LSB position). The dropped input bits are left
// unread on purpose, so a lint tool reports them as unused bits of x.
// The register placement (feedback register moved into the pipeline register)
// and the MCLA adder follow the published design; the synchronous reset to
// zero and the enable are this design's choices.
// Timing: y updates on each clock edge with en high and holds otherwise.
module cic_integrator #(
  parameter int unsigned IN_W = 25,
  parameter int unsigned W    = 25
) (
  input  logic            clk,
  input  logic            rst,   // synchronous, active high
  input  logic            en,    // one input sample per enabled clock
  input  logic [IN_W-1:0] x,
  output logic [W-1:0]    y
);
  logic [W-1:0] xt, sum;

  if (W > IN_W) begin : g_bad_width
    $error("cic_integrator: W must not exceed IN_W");
  end

  assign xt = x[IN_W-1 -: W];   // drop IN_W-W LSBs

  mcla #(.WIDTH(W)) u_add (.a(y), .b(xt), .s(sum));

  always_ff @(posedge clk) begin
    if (rst)     y <= '0;
    else if (en) y <= sum;
  end
endmodule
