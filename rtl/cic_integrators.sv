// cic_integrators -- the cascade of N integrator stages (high-rate section).
//
// Stage 0 takes the B_MAX-bit adjusted input; each later stage takes the
// previous stage's output, truncated to its own width. With TRUNCATE set the
// stage widths are 25, 22, 20, 18 and 16 bits (for B_MAX=25, N=5), as in the
// published high-speed filter; with TRUNCATE clear all stages keep B_MAX bits.
// All stages share one enable, so the cascade is a pipeline that advances by
// one input sample per enabled clock: after enable edge n, stage j holds the
// j+1-fold running sum of the input up to sample n-j (inputs before reset
// count as zero).
// Timing: N samples of latency from x to y, one register per stage.
module cic_integrators
  import cic_pkg::*;
#(
  parameter int unsigned N        = CIC_N,
  parameter int unsigned B_MAX    = CIC_B_MAX,
  parameter bit          TRUNCATE = 1'b1,
  localparam int unsigned OUT_W   = int_width(N - 1, TRUNCATE, B_MAX)
) (
  input  logic             clk,
  input  logic             rst,   // synchronous, active high
  input  logic             en,    // one input sample per enabled clock
  input  logic [B_MAX-1:0] x,
  output logic [OUT_W-1:0] y
);
  // stage outputs, right-aligned in B_MAX-bit slots; slot 0 is the input
  logic [B_MAX-1:0] st [N+1];

  if (TRUNCATE && N > CIC_N_TRUNC) begin : g_bad_n
    $error("cic_integrators: the truncation widths are defined for N <= 5");
  end

  assign st[0] = x;
  for (genvar j = 0; j < N; j++) begin : g_stage
    localparam int unsigned IW = (j == 0) ? B_MAX : int_width(j - 1, TRUNCATE, B_MAX);
    localparam int unsigned OW = int_width(j, TRUNCATE, B_MAX);
    logic [OW-1:0] yj;
    cic_integrator #(.IN_W(IW), .W(OW)) u_int (
      .clk(clk), .rst(rst), .en(en), .x(st[j][IW-1:0]), .y(yj));
    if (OW < B_MAX) begin : g_pad
      assign st[j+1] = {{(B_MAX-OW){1'b0}}, yj};
    end else begin : g_full
      assign st[j+1] = yj;
    end
  end

  assign y = st[N][OUT_W-1:0];
endmodule
