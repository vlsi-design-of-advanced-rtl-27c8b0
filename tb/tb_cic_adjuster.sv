// tb_cic_adjuster -- self-checking testbench of the input adjuster.
//
// Feeds every 5-bit input value, with load randomly high or low, and checks
// that the register takes the sample only on load and holds it otherwise,
// that the 25-bit result equals the signed value of the 5-bit input (sign
// extension) and that reset clears it.
module tb_cic_adjuster;
  int checks = 0, failures = 0;
  logic clk = 0, rst, load;
  logic [4:0]  din;
  logic [24:0] dout;
  int          expv;

  cic_adjuster #(.B_IN(5), .W(25)) dut (.clk(clk), .rst(rst), .load(load), .din(din), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int e);
    checks++;
    if ($signed(dout) != e) begin failures++; $display("FAIL dout=%0d exp %0d", $signed(dout), e); end
  endtask

  initial begin
    rst = 1; load = 0; din = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    check(0);
    expv = 0;
    for (int i = 0; i < 32; i++) begin      // every code, loaded
      din = 5'(i); load = 1;
      @(negedge clk);
      expv = (i >= 16) ? i - 32 : i;
      check(expv);
    end
    for (int i = 0; i < 1000; i++) begin    // random load pattern
      din = 5'($urandom); load = 1'($urandom);
      @(negedge clk);
      if (load) expv = $signed(din);
      check(expv);
    end
    din = 5'h10; load = 1; rst = 1;         // reset wins over load
    @(negedge clk);
    check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
