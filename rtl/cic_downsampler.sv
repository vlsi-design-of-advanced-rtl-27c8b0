// cic_downsampler -- multirate down-sampler by R (keep every R-th sample).
//
// A down counter of clog2(R) bits counts the input samples (clocks with en
// high). It starts at zero after reset, so the very first sample is kept, as
// recommended for the published design to avoid losing data at start-up; a
// kept sample reloads the counter with R-1 and the R-1 samples that follow
// are discarded. So y[m] = x[m*R]. The kept sample is registered (the
// down-sampler is a pipeline stage) and valid pulses for one clock; valid is
// the low-rate strobe that steps the comb section.
// Following the design: R=16, a 4-bit down counter initialised to zero. This
// design's choices: a clock-enable strobe instead of a divided clock for the
// low-rate section, and the synchronous active-high reset.
// Timing: y and valid appear one clock after the enabled edge that keeps the
// sample; valid is never high on two consecutive clocks.
module cic_downsampler #(
  parameter int unsigned W = 16,
  parameter int unsigned R = 16
) (
  input  logic         clk,
  input  logic         rst,    // synchronous, active high
  input  logic         en,     // an input sample is present
  input  logic [W-1:0] x,
  output logic [W-1:0] y,
  output logic         valid   // one-clock strobe: y holds a new kept sample
);
  localparam int unsigned CW = $clog2(R);
  localparam logic [CW-1:0] RELOAD = CW'(R - 1);

  logic [CW-1:0] cnt;

  if (R < 2) begin : g_bad_r
    $error("cic_downsampler: R must be at least 2");
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= '0;
      y     <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (en) begin
        if (cnt == '0) begin
          y     <= x;
          valid <= 1'b1;
          cnt   <= RELOAD;
        end else begin
          cnt   <= cnt - 1'b1;
        end
      end
    end
  end

  // At most one kept sample per clock means at least one idle clock between
  // strobes once R >= 2.
  a_valid_single : assert property (@(posedge clk) disable iff (rst) valid |=> !valid);
endmodule
