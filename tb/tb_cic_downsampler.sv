// tb_cic_downsampler -- self-checking testbench of the down-sampler (R=16).
//
// Feeds a counting sequence (the value is the index of the input sample)
// with a random enable. Checks that the first sample after reset is kept,
// then exactly every 16th enabled sample, that valid is a one-clock pulse
// exactly one clock after the enabled edge that keeps the sample, and that y
// carries the kept value. A second run with enable held high checks the
// steady 1-in-16 output rate.
module tb_cic_downsampler;
  int checks = 0, failures = 0;
  logic clk = 0, rst, en;
  logic [15:0] x, y;
  logic valid;
  int nin, nout, exp_valid;
  logic [15:0] exp_y;

  cic_downsampler #(.W(16), .R(16)) dut (.clk(clk), .rst(rst), .en(en), .x(x), .y(y), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: sample index nin counts enabled edges since reset
  always @(posedge clk) begin
    if (rst) begin
      nin <= 0; exp_valid <= 0; exp_y <= '0;
    end else begin
      exp_valid <= 0;
      if (en) begin
        nin <= nin + 1;
        if (nin % 16 == 0) begin exp_valid <= 1; exp_y <= x; end
      end
    end
  end

  task automatic run(input int cycles, input int en_pct);
    for (int i = 0; i < cycles; i++) begin
      en = ($urandom % 100) < en_pct;
      @(negedge clk);
      checks++;
      if (valid !== 1'(exp_valid)) begin failures++; $display("FAIL valid=%b exp %0d at sample %0d", valid, exp_valid, nin); end
      if (valid) begin
        nout++;
        checks++;
        if (y !== exp_y) begin failures++; $display("FAIL y=%0d exp %0d", y, exp_y); end
      end
      x = x + (en ? 16'd1 : 16'd0);
    end
  endtask

  initial begin
    rst = 1; en = 0; x = '0; nout = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    run(3000, 60);
    rst = 1; x = '0; @(negedge clk); rst = 0;
    nout = 0;
    run(1600, 100);
    checks++;
    if (nout != 100) begin failures++; $display("FAIL %0d outputs in 1600 clocks, exp 100", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
