// tb_cic_integrator -- self-checking testbench of one integrator stage.
//
// Two instances: a full 25-bit stage and a truncating stage (25-bit input,
// 22-bit accumulator, three LSBs dropped). Random inputs with a random
// enable; the reference accumulates floor(x / 2^drop) modulo 2^W in plain
// integer arithmetic. Long runs of large inputs make both accumulators wrap
// around many times; reset is applied in mid-run.
module tb_cic_integrator;
  int checks = 0, failures = 0;
  logic clk = 0, rst, en;
  logic [24:0] x;
  logic [24:0] y25;
  logic [21:0] y22;
  longint unsigned ref25, ref22;
  int wraps = 0;

  cic_integrator #(.IN_W(25), .W(25)) dut25 (.clk(clk), .rst(rst), .en(en), .x(x), .y(y25));
  cic_integrator #(.IN_W(25), .W(22)) dut22 (.clk(clk), .rst(rst), .en(en), .x(x), .y(y22));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, updated on the same edges as the design
  always @(posedge clk) begin
    if (rst) begin
      ref25 <= 0; ref22 <= 0;
    end else if (en) begin
      if (ref25 + longint'(x) >= (64'd1 << 25)) wraps++;
      ref25 <= (ref25 + longint'(x)) % (64'd1 << 25);
      ref22 <= (ref22 + (longint'(x) >> 3)) % (64'd1 << 22);
    end
  end

  initial begin
    rst = 1; en = 0; x = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      x  = 25'($urandom);
      en = ($urandom % 4) != 0;
      rst = (i == 2000);
      @(negedge clk);
      checks += 2;
      if (y25 !== 25'(ref25)) begin failures++; $display("FAIL y25=%h exp %h", y25, 25'(ref25)); end
      if (y22 !== 22'(ref22)) begin failures++; $display("FAIL y22=%h exp %h", y22, 22'(ref22)); end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL accumulator never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
