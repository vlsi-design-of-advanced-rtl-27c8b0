// tb_mcla -- self-checking testbench of the modified carry look-ahead adder.
//
// Three instances: the 25-bit adder of the integrators (six full 4-bit
// groups plus a one-bit group), an 8-bit adder (two groups) and a 6-bit
// adder (a short last group). Each gets corner cases that exercise carries
// rippling across group boundaries (all-ones plus one, alternating bits) and
// random vectors; the expected sum is the plain integer sum modulo 2^WIDTH.
module tb_mcla;
  int checks = 0, failures = 0;

  logic [24:0] a25, b25, s25;
  logic [7:0]  a8,  b8,  s8;
  logic [5:0]  a6,  b6,  s6;

  mcla #(.WIDTH(25)) dut25 (.a(a25), .b(b25), .s(s25));
  mcla #(.WIDTH(8))  dut8  (.a(a8),  .b(b8),  .s(s8));
  mcla #(.WIDTH(6))  dut6  (.a(a6),  .b(b6),  .s(s6));

  task automatic check_all(input logic [24:0] x, input logic [24:0] y);
    logic [25:0] r25;
    logic [8:0]  r8;
    logic [6:0]  r6;
    a25 = x; b25 = y; a8 = x[7:0]; b8 = y[7:0]; a6 = x[5:0]; b6 = y[5:0];
    #1;
    r25 = {1'b0, x} + {1'b0, y};
    r8  = {1'b0, x[7:0]} + {1'b0, y[7:0]};
    r6  = {1'b0, x[5:0]} + {1'b0, y[5:0]};
    checks += 3;
    if (s25 !== r25[24:0]) begin failures++; $display("FAIL 25: %h+%h=%h exp %h", x, y, s25, r25[24:0]); end
    if (s8  !== r8[7:0])   begin failures++; $display("FAIL 8: %h+%h=%h exp %h", x[7:0], y[7:0], s8, r8[7:0]); end
    if (s6  !== r6[5:0])   begin failures++; $display("FAIL 6: %h+%h=%h exp %h", x[5:0], y[5:0], s6, r6[5:0]); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_all('0, '0);
    check_all('1, 25'd1);
    check_all('1, '1);
    check_all(25'h0AAAAAA, 25'h1555555);
    check_all(25'h0AAAAAA, 25'h1555556);
    for (int k = 0; k < 25; k++) begin
      check_all((25'd1 << k) - 25'd1, 25'd1);       // carry ripples through k bits
      check_all(25'd1 << k, 25'd1 << k);
      check_all(~(25'd1 << k), 25'd1 << k);
    end
    for (int i = 0; i < 5000; i++) check_all(25'($urandom), 25'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
