// cic_test_mux -- test configuration of the CIC decimator: routes data so
// that the integrator cascade, the down-sampler and the comb cascade can each
// be exercised and observed on their own through the filter's pins.
//
// Two input multiplexers and one output multiplexer, selected by a 2-bit
// mode (cic_pkg::cic_mode_e):
//   NORMAL       down-sampler fed by the integrators, combs fed by the
//                down-sampler, output = comb cascade (the filter itself);
//   INTEGRATOR   output = integrator cascade, updated on every loaded sample;
//   DOWNSAMPLER  down-sampler fed by the adjusted input directly, output =
//                down-sampler (every 16th loaded sample);
//   COMB         comb cascade fed by the adjusted input directly, stepped on
//                every loaded sample, output = comb cascade.
// rdy marks a new output word in every mode: the comb cascade's valid
// (NORMAL, COMB), the down-sampler's strobe (DOWNSAMPLER), or, for
// INTEGRATOR, a one-clock-delayed copy of load, because the integrators
// update on the load edge and their new value is visible one clock later.
// In DOWNSAMPLER and COMB mode the adjusted input is taken in its low W bits;
// it is sign-extended, so the value is unchanged. The sections that are not
// observed keep running; change the mode together with a reset so that all
// stages start from zero.
//
// Follows the published filter: separate testing of integrator, down-sampler
// and comb with multiplexers and the three test observations (integrator
// output, decimated input, comb output with integrator and down-sampler
// idle). This design's own choice: the mux positions and the 2-bit mode
// encoding; the six published control signals and their settings could not
// be mapped onto a consistent routing.
module cic_test_mux
  import cic_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  logic       clk,
  input  logic       rst,          // synchronous, active high
  input  cic_mode_e  mode,
  input  logic       load,         // a sample is loaded on this clock
  input  logic [W-1:0] adj,        // adjusted input sample (low W bits)
  input  logic [W-1:0] integ,      // integrator cascade output
  // down-sampler
  output logic [W-1:0] ds_x,
  input  logic [W-1:0] ds_y,
  input  logic         ds_valid,
  // comb cascade
  output logic [W-1:0] comb_x,
  output logic         comb_valid,
  input  logic [W-1:0] comb_y,
  input  logic         comb_rdy,
  // filter output
  output logic [W-1:0] out,
  output logic         rdy
);
  logic int_rdy;

  always_ff @(posedge clk) begin
    if (rst) int_rdy <= 1'b0;
    else     int_rdy <= load;
  end

  always_comb begin
    ds_x       = (mode == CIC_MODE_DOWNSAMPLER) ? adj : integ;
    comb_x     = (mode == CIC_MODE_COMB) ? adj : ds_y;
    comb_valid = (mode == CIC_MODE_COMB) ? load : ds_valid;
    unique case (mode)
      CIC_MODE_INTEGRATOR:  begin out = integ; rdy = int_rdy;  end
      CIC_MODE_DOWNSAMPLER: begin out = ds_y;  rdy = ds_valid; end
      default:              begin out = comb_y; rdy = comb_rdy; end
    endcase
  end
endmodule
