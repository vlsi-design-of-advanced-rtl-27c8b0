// cic_adjuster -- input register and word-length adjuster of the CIC filter.
//
// The modulator delivers B_IN-bit two's complement samples; the integrators
// work on W-bit words. On a clock edge with load high the adjuster captures
// the input sample and sign-extends it to W bits, so that a negative sample
// stays negative in the wide arithmetic. With load low it holds its value.
// Widening the 5-bit input to 25 bits follows the published design; that the
// widening is a sign extension, that it happens in a register gated by the
// load pin, and the synchronous active-high reset are this design's choices.
// Timing: one register; dout shows a sample one clock after it is loaded.
module cic_adjuster #(
  parameter int unsigned B_IN = 5,
  parameter int unsigned W    = 25
) (
  input  logic            clk,
  input  logic            rst,   // synchronous, active high
  input  logic            load,  // new input sample present on din
  input  logic [B_IN-1:0] din,   // two's complement sample
  output logic [W-1:0]    dout   // sign-extended sample
);
  if (W < B_IN) begin : g_bad_width
    $error("cic_adjuster: W must not be smaller than B_IN");
  end

  always_ff @(posedge clk) begin
    if (rst)       dout <= '0;
    else if (load) dout <= {{(W-B_IN){din[B_IN-1]}}, din};
  end
endmodule
