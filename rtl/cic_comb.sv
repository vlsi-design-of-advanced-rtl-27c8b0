// cic_comb -- one pipelined comb (differentiator) stage, y[m] = x[m] - x[m-M].
//
// Runs at the decimated rate: it acts only on clocks where in_valid is high.
// On such a clock it subtracts the input of M low-rate samples ago (held in
// an M-deep delay line) from the present input with the RCAS subtractor
// (sub tied to 1), stores the difference in its output pipeline register and
// shifts the present input into the delay line. out_valid is in_valid
// delayed by one clock, so a chain of combs passes one strobe down the
// pipeline. The arithmetic wraps modulo 2^W.
// The differentiator, its RCAS subtractor and the pipeline register between
// combs follow the published design; the valid strobe and the synchronous
// active-high reset of the delay line are this design's choices.
// Timing: y and out_valid appear one clock after in_valid.
module cic_comb #(
  parameter int unsigned W = 16,
  parameter int unsigned M = 1
) (
  input  logic         clk,
  input  logic         rst,        // synchronous, active high
  input  logic         in_valid,   // low-rate sample strobe
  input  logic [W-1:0] x,
  output logic         out_valid,
  output logic [W-1:0] y
);
  logic [W-1:0] dly [M];    // dly[M-1] is x[m-M]
  logic [W-1:0] diff;

  if (M < 1) begin : g_bad_m
    $error("cic_comb: M must be at least 1");
  end

  rcas #(.WIDTH(W)) u_sub (.a(x), .b(dly[M-1]), .sub(1'b1), .s(diff));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned i = 0; i < M; i++) dly[i] <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y      <= diff;
        dly[0] <= x;
        for (int unsigned i = 1; i < M; i++) dly[i] <= dly[i-1];
      end
    end
  end
endmodule
