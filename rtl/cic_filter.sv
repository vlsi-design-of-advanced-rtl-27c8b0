// cic_filter -- pipelined, truncated fifth-order CIC decimation filter.
//
// Turns the 5-bit, 6.144 MHz output of a sigma-delta modulator into a
// 384 kHz stream (R=16) while low-pass filtering it with the transfer
// function ((1 - z^-RM) / (1 - z^-1))^N, N=5, M=1, which needs no multipliers.
// Data path: adjuster (input register, sign extension 5 -> 25 bits), five
// pipelined integrators on MCLA adders truncated to 25/22/20/18/16 bits, the
// down-sampler (4-bit down counter, keeps every 16th sample), five pipelined
// 16-bit combs on RCAS subtractors, 16-bit output CIC_out.
// Everything runs from one clock. The high-rate section advances on clocks
// with load high (one input sample each); the down-sampler's strobe steps
// the combs; cic_rdy pulses for one clock when CIC_out holds a new output.
// With TRUNCATE=0 every stage carries the full 25 bits and CIC_out is 25
// bits wide: the untruncated filter, whose output is exactly the FIR
// convolution of the input with the CIC impulse response.
// test_mode selects the test configuration (cic_test_mux): CIC_MODE_NORMAL
// for filtering; the integrator, down-sampler or comb cascade alone on
// CIC_out in the other three modes. Change it together with rst.
// Follows the design: the structure, N, R, M, word widths, the truncation
// list, MCLA/RCAS arithmetic, the clk/load/rst/CIC_in/CIC_out pins, the
// multiplexed test configuration.
// This design's choices: cic_rdy (not a pin of the published filter),
// a clock-enable strobe in place of a divided low-rate clock, synchronous
// active-high reset, sign extension in the adjuster, the test_mode encoding.
// Timing: for every load edge whose sample is kept by the down-sampler,
// CIC_out updates and cic_rdy pulses 6 clocks later (1 down-sampler + 5
// comb registers). The kept integrator value lags the input by 6 samples
// (adjuster + 5 integrators), so output m is the filter response at input
// sample 16*m - 6.
module cic_filter
  import cic_pkg::*;
#(
  parameter int unsigned N        = CIC_N,
  parameter int unsigned R        = CIC_R,
  parameter int unsigned M        = CIC_M,
  parameter int unsigned B_IN     = CIC_B_IN,
  parameter int unsigned B_MAX    = CIC_B_MAX,
  parameter bit          TRUNCATE = 1'b1,
  localparam int unsigned OUT_W   = out_width(TRUNCATE, B_MAX)
) (
  input  logic             clk,
  input  logic             rst,      // synchronous, active high
  input  logic             load,     // CIC_in holds a new input sample
  input  logic [B_IN-1:0]  CIC_in,   // two's complement modulator output
  input  cic_mode_e        test_mode, // CIC_MODE_NORMAL for filtering
  output logic [OUT_W-1:0] CIC_out,  // filter output, decimated by R
  output logic             cic_rdy   // one-clock pulse: CIC_out is new
);
  localparam int unsigned IW_OUT = int_width(N - 1, TRUNCATE, B_MAX);

  logic [B_MAX-1:0]  adj;
  logic [IW_OUT-1:0] integ;
  logic [IW_OUT-1:0] ds;
  logic              ds_valid;
  logic [OUT_W-1:0]  ds_x, comb_x, comb_y;
  logic              comb_valid, comb_rdy;

  if (IW_OUT != OUT_W) begin : g_bad_cfg
    $error("cic_filter: the last integrator width must equal the comb width");
  end

  cic_adjuster #(.B_IN(B_IN), .W(B_MAX)) u_adj (
    .clk(clk), .rst(rst), .load(load), .din(CIC_in), .dout(adj));

  cic_integrators #(.N(N), .B_MAX(B_MAX), .TRUNCATE(TRUNCATE)) u_int (
    .clk(clk), .rst(rst), .en(load), .x(adj), .y(integ));

  cic_test_mux #(.W(OUT_W)) u_test (
    .clk(clk), .rst(rst), .mode(test_mode), .load(load),
    .adj(adj[OUT_W-1:0]), .integ(integ),
    .ds_x(ds_x), .ds_y(ds), .ds_valid(ds_valid),
    .comb_x(comb_x), .comb_valid(comb_valid), .comb_y(comb_y), .comb_rdy(comb_rdy),
    .out(CIC_out), .rdy(cic_rdy));

  cic_downsampler #(.W(IW_OUT), .R(R)) u_ds (
    .clk(clk), .rst(rst), .en(load), .x(ds_x), .y(ds), .valid(ds_valid));

  cic_combs #(.N(N), .W(OUT_W), .M(M)) u_comb (
    .clk(clk), .rst(rst), .in_valid(comb_valid), .x(comb_x),
    .out_valid(comb_rdy), .y(comb_y));
endmodule
