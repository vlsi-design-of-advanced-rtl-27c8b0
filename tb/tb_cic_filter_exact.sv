// tb_cic_filter_exact -- the filter with truncation switched off, checked
// against the CIC transfer function itself.
//
// With TRUNCATE=0 every stage carries 25 bits, enough for the worst-case
// growth (R*M)^N = 2^20 of a 5-bit input, so the output must equal, bit for
// bit, the direct convolution of the input with the impulse response of
// ((1 - z^-16) / (1 - z^-1))^5 = (1 + z^-1 + ... + z^-15)^5 (76 taps, sum
// 2^20). Output m is the response at input sample 16m - 6 (six samples of
// pipeline ahead of the down-sampler). Stimulus: the third-order sigma-delta
// stream, random codes under random input stalls, and settled full-scale DC
// at -16 and +15, which must give exactly -16 * 2^20 = -2^24 (the most
// negative 25-bit code) and 15 * 2^20. cic_rdy must come exactly 6 clocks
// after each kept load edge.
module tb_cic_filter_exact;
  import sdm3_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst, load;
  logic [4:0]  cic_in;
  logic [24:0] cic_out;
  logic        rdy;

  cic_filter #(.TRUNCATE(1'b0)) dut (.clk(clk), .rst(rst), .load(load), .CIC_in(cic_in),
                                     .test_mode(cic_pkg::CIC_MODE_NORMAL),
                                     .CIC_out(cic_out), .cic_rdy(rdy));

  always #5 clk = ~clk;

  longint h [76];
  longint xin [$];
  longint cyc = 0, nload = 0;
  longint rdy_due [$];
  int     n_out = 0, n_dc = 0;
  longint last_out;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst) begin
      xin = {}; rdy_due = {}; nload <= 0;
    end else if (load) begin
      xin.push_back(longint'($signed(cic_in)));
      if (nload % 16 == 0) rdy_due.push_back(cyc + 6);
      nload <= nload + 1;
    end
  end

  always @(negedge clk) begin
    longint ex, idx;
    if (!rst) begin
      checks++;
      if (rdy !== (rdy_due.size() > 0 && rdy_due[0] == cyc)) begin
        failures++; $display("FAIL rdy timing at cycle %0d", cyc);
      end
      if (rdy_due.size() > 0 && rdy_due[0] == cyc) void'(rdy_due.pop_front());
      if (rdy) begin
        ex = 0;
        for (int k = 0; k < 76; k++) begin
          idx = 16*n_out - 6 - k;
          if (idx >= 0 && idx < xin.size()) ex += h[k] * xin[idx];
        end
        checks++;
        last_out = $signed(cic_out);
        if (last_out != ex) begin failures++; $display("FAIL out %0d: %0d exp %0d", n_out, last_out, ex); end
        n_out++;
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
      if (load) sent++;
      @(negedge clk);
    end
  endtask

  task automatic dc_check(input int c);
    feed(16 * 12, 100, 2, c);
    @(posedge rdy); @(negedge clk);
    checks++;
    if (last_out != longint'(c) * (longint'(1) << 20)) begin
      failures++; $display("FAIL DC %0d: out=%0d", c, last_out);
    end else n_dc++;
  endtask

  initial begin
    for (int k = 0; k < 76; k++) h[k] = (k == 0);
    for (int s = 0; s < 5; s++) begin
      longint t [76];
      for (int k = 0; k < 76; k++) begin
        t[k] = 0;
        for (int d = 0; d < 16; d++) if (k - d >= 0) t[k] += h[k-d];
      end
      h = t;
    end
    mod = new(10.0, 1.0 / 1024.0);
    rst = 1; load = 0; cic_in = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    feed(12000, 100, 0, 0);
    feed(6000, 60, 1, 0);
    dc_check(-16);
    dc_check(15);
    repeat (20) @(negedge clk);
    checks++;
    if (n_dc != 2 || n_out < 1000) begin failures++; $display("FAIL coverage: dc=%0d outputs=%0d", n_dc, n_out); end
    $display("outputs=%0d dc=%0d", n_out, n_dc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
