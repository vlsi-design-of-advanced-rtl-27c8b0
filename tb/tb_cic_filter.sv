// tb_cic_filter -- end-to-end testbench of the CIC decimation filter at its
// default configuration (N=5, R=16, M=1, 5-bit input, truncated 25/22/20/18/
// 16-bit integrators, 16-bit combs and output).
//
// Stimulus, in phases: the output of a third-order 5-bit sigma-delta
// modulator driven by a sine (the filter's intended input), with load held
// high (one sample per clock, the full 6.144 MHz-style stream) and then with
// random gaps in load (input stalls); random 5-bit codes; near-full-scale DC at
// -15 and +15; and a reset in the middle of a stream.
// Checks:
//  * every output word against a register-level reference model of the
//    truncated data path written in plain integer arithmetic;
//  * output timing: cic_rdy must pulse exactly 6 clocks after each load edge
//    that the down-sampler keeps (the 1st, 17th, 33rd ... sample after reset),
//    and never otherwise -- one output per 16 input samples;
//  * DC gain: a settled DC input c must give c * 16^5 / 2^9 = c * 2048 at the
//    16-bit output, to within 32 LSBs of truncation error (c = -15, +15, -8;
//    c = -16 would sit exactly on the most negative code and the truncation
//    error of the integrators can push it past it, see the README);
//  * tracking: the output stays close to the exact (untruncated) CIC response
//    scaled by 2^-9, computed here by direct convolution.
// Test configuration: after the filtering phases, each of the three test
// modes (integrator cascade, down-sampler, comb cascade alone on the output)
// is entered with a reset and run; its output and ready flag are checked
// against the same model with the corresponding routing.
// Mechanism counters (each must be non-zero): decimated outputs, load stalls,
// first-integrator wrap-around, truncation that discards non-zero bits,
// mid-stream reset, DC settling, outputs in each test mode.
module tb_cic_filter;
  import sdm3_pkg::*;
  import cic_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst, load;
  logic [4:0]  cic_in;
  logic [15:0] cic_out;
  logic        rdy;
  cic_mode_e   tmode;

  cic_filter dut (.clk(clk), .rst(rst), .load(load), .CIC_in(cic_in), .test_mode(tmode),
                  .CIC_out(cic_out), .cic_rdy(rdy));

  always #5 clk = ~clk;

  localparam int W [6] = '{25, 25, 22, 20, 18, 16};  // adjuster, stages 1..5
  localparam int TOTAL_CYCLES = 60000;

  // ---------------- reference model (updated on the design's edges) -------
  longint unsigned m_adj, m_int [5], m_ds, m_cd [5], m_cy [5];
  bit     m_dsv, m_cv [5], m_irdy;
  longint m_nload;
  longint cyc = 0;
  longint rdy_due [$];                 // cycles at which cic_rdy is expected
  int     n_tmode [4] = '{0, 0, 0, 0};  // outputs seen in each test mode
  int     n_wrap = 0, n_trunc = 0, n_stall = 0, n_out = 0, n_reset = 0, n_dc = 0;

  // exact response of the whole (untruncated) filter, for the tracking check
  longint xin [$];                     // loaded samples since the last reset
  longint h [];                        // CIC impulse response, length 76

  function automatic longint sx(longint unsigned v, int w);   // signed value
    return (v >= (64'd1 << (w-1))) ? longint'(v) - (longint'(1) << w) : longint'(v);
  endfunction

  always @(posedge clk) begin
    longint unsigned in_j, nx;
    cyc <= cyc + 1;
    if (rst) begin
      m_adj <= 0; m_ds <= 0; m_dsv <= 0; m_nload <= 0; m_irdy <= 0;
      for (int j = 0; j < 5; j++) begin m_int[j] <= 0; m_cd[j] <= 0; m_cy[j] <= 0; m_cv[j] <= 0; end
      rdy_due = {};
      xin = {};
    end else begin
      if (load) begin
        m_adj <= longint'($signed(cic_in)) & ((64'd1 << 25) - 1);
        xin.push_back(longint'($signed(cic_in)));
        for (int j = 0; j < 5; j++) begin
          in_j = (j == 0) ? m_adj : m_int[j-1];
          if ((in_j & ((64'd1 << (W[j] - W[j+1])) - 1)) != 0) n_trunc++;
          nx = m_int[j] + (in_j >> (W[j] - W[j+1]));
          if (j == 0 && nx >= (64'd1 << 25)) n_wrap++;
          m_int[j] <= nx % (64'd1 << W[j+1]);
        end
        m_nload <= m_nload + 1;
        if (m_nload % 16 == 0 && tmode == CIC_MODE_NORMAL) rdy_due.push_back(cyc + 6);
      end else if (cyc > 10) n_stall++;
      m_irdy <= load;
      // down-sampler, fed by the input itself in DOWNSAMPLER test mode
      m_dsv <= load && (m_nload % 16 == 0);
      if (load && (m_nload % 16 == 0))
        m_ds <= (tmode == CIC_MODE_DOWNSAMPLER) ? (m_adj & 64'hFFFF) : m_int[4];
      // combs, fed by the input on every load in COMB test mode
      for (int j = 0; j < 5; j++) begin
        bit v_j;
        if (j == 0) begin
          in_j = (tmode == CIC_MODE_COMB) ? (m_adj & 64'hFFFF) : m_ds;
          v_j  = (tmode == CIC_MODE_COMB) ? load : m_dsv;
        end else begin
          in_j = m_cy[j-1];
          v_j  = m_cv[j-1];
        end
        m_cv[j] <= v_j;
        if (v_j) begin
          m_cy[j] <= (in_j - m_cd[j]) & 64'hFFFF;
          m_cd[j] <= in_j;
        end
      end
    end
  end

  // ---------------- output checks ------------------------------------------
  longint max_track_err = 0;
  always @(negedge clk) begin
    if (!rst && tmode != CIC_MODE_NORMAL) begin
      // test configuration: the observed section against the model
      logic        e_rdy;
      longint unsigned e_out;
      case (tmode)
        CIC_MODE_INTEGRATOR:  begin e_rdy = m_irdy; e_out = m_int[4]; end
        CIC_MODE_DOWNSAMPLER: begin e_rdy = m_dsv;  e_out = m_ds;     end
        default:              begin e_rdy = m_cv[4]; e_out = m_cy[4]; end
      endcase
      checks++;
      if (rdy !== e_rdy) begin failures++; $display("FAIL mode %0d rdy=%b model %b", tmode, rdy, e_rdy); end
      if (rdy) begin
        checks++;
        n_tmode[tmode]++;
        if (cic_out !== 16'(e_out)) begin failures++; $display("FAIL mode %0d out=%h model %h", tmode, cic_out, 16'(e_out)); end
      end
    end else if (!rst) begin
      checks++;
      if (rdy !== m_cv[4]) begin failures++; $display("FAIL rdy=%b model %b at cycle %0d", rdy, m_cv[4], cyc); end
      checks++;
      if (rdy !== (rdy_due.size() > 0 && rdy_due[0] == cyc)) begin
        failures++; $display("FAIL rdy timing at cycle %0d", cyc);
      end
      if (rdy_due.size() > 0 && rdy_due[0] == cyc) void'(rdy_due.pop_front());
      if (rdy) begin
        longint m, ex, err, idx;
        n_out++;
        checks++;
        if (cic_out !== 16'(m_cy[4])) begin failures++; $display("FAIL out=%0d model %0d", $signed(cic_out), sx(m_cy[4], 16)); end
        // tracking: output m is the filter response at input index 16m-6
        m = n_out_since_reset;
        ex = 0;
        for (int k = 0; k < 76; k++) begin
          idx = 16*m - 6 - k;
          if (idx >= 0 && idx < xin.size()) ex += h[k] * xin[idx];
        end
        err = $signed(cic_out) - ex / 512;
        if (err < 0) err = -err;
        if (err > max_track_err) max_track_err = err;
        checks++;
        if (err > 1024) begin failures++; $display("FAIL tracking: out=%0d exact/512=%0d", $signed(cic_out), ex / 512); end
        n_out_since_reset++;
      end
    end else n_out_since_reset = 0;
  end
  int n_out_since_reset = 0;

  // ---------------- watchdog -----------------------------------------------
  initial begin
    repeat (TOTAL_CYCLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus -----------------------------------------------
  sdm3 mod;
  task automatic feed(input int nsamp, input int load_pct, input int kind, input int dc);
    int sent = 0;
    while (sent < nsamp) begin
      load = ($urandom % 100) < load_pct;
      case (kind)
        0: cic_in = 5'(mod.next());
        1: cic_in = 5'($urandom);
        default: cic_in = 5'(dc);
      endcase
      if (kind == 0 && !load) mod.n--;    // hold the modulator while stalled
      if (load) sent++;
      @(negedge clk);
    end
  endtask

  task automatic dc_check(input int c);
    int expv;
    feed(16 * 12, 100, 2, c);            // > (76+6) samples: fully settled
    @(posedge rdy); @(negedge clk);
    expv = c * 2048;
    checks++;
    if ($signed(cic_out) - expv > 32 || expv - $signed(cic_out) > 32) begin failures++; $display("FAIL DC %0d: out=%0d exp %0d", c, $signed(cic_out), expv); end
    else n_dc++;
  endtask

  initial begin
    // impulse response of ((1 - z^-16)/(1 - z^-1))^5 = (1 + ... + z^-15)^5
    h = new[76];
    for (int k = 0; k < 76; k++) h[k] = (k == 0);
    for (int s = 0; s < 5; s++) begin
      longint t [76];
      for (int k = 0; k < 76; k++) begin
        t[k] = 0;
        for (int d = 0; d < 16; d++) if (k - d >= 0) t[k] += h[k-d];
      end
      for (int k = 0; k < 76; k++) h[k] = t[k];
    end

    mod = new(10.0, 1.0 / 1024.0);        // 6 kHz tone at a 6.144 MHz input rate
    rst = 1; load = 0; cic_in = '0; tmode = CIC_MODE_NORMAL;
    repeat (3) @(negedge clk);
    rst = 0;
    feed(16000, 100, 0, 0);               // modulator stream, one sample per clock
    feed(8000, 70, 0, 0);                 // same stream with input stalls
    feed(4000, 100, 1, 0);                // random codes
    dc_check(-15);
    dc_check(15);
    feed(300, 100, 0, 0);
    rst = 1; n_reset++;                   // reset in mid-stream
    @(negedge clk);
    rst = 0;
    feed(4000, 90, 0, 0);
    dc_check(-8);
    repeat (20) @(negedge clk);

    // test configuration: each section on its own, entered with a reset
    for (int t = 1; t < 4; t++) begin
      rst = 1; tmode = cic_mode_e'(t);
      @(negedge clk);
      rst = 0;
      feed(800, 80, (t == 1) ? 0 : 1, 0);
      repeat (20) @(negedge clk);
    end
    rst = 1; tmode = CIC_MODE_NORMAL;
    @(negedge clk);
    rst = 0;
    feed(400, 100, 0, 0);
    repeat (20) @(negedge clk);

    // every mechanism must have happened
    checks += 9;
    for (int t = 1; t < 4; t++)
      if (n_tmode[t] == 0) begin failures++; $display("FAIL test mode %0d produced no output", t); end
    if (n_out   == 0) begin failures++; $display("FAIL no decimated output"); end
    if (n_stall == 0) begin failures++; $display("FAIL no input stall"); end
    if (n_wrap  == 0) begin failures++; $display("FAIL integrator never wrapped"); end
    if (n_trunc == 0) begin failures++; $display("FAIL truncation never dropped bits"); end
    if (n_reset == 0) begin failures++; $display("FAIL no mid-stream reset"); end
    if (n_dc    != 3) begin failures++; $display("FAIL DC checks passed %0d of 3", n_dc); end
    $display("outputs=%0d stalls=%0d wraps=%0d truncations=%0d resets=%0d dc=%0d max|out-exact/512|=%0d",
             n_out, n_stall, n_wrap, n_trunc, n_reset, n_dc, max_track_err);
    $display("test-mode outputs: integrator=%0d down-sampler=%0d comb=%0d",
             n_tmode[1], n_tmode[2], n_tmode[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
