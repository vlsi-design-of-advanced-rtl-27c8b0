// tb_rcas -- self-checking testbench of the ripple carry adder/subtractor.
//
// Drives the 16-bit RCAS of the comb stages and a 25-bit one with both
// settings of the sub pin: sub=1 must give a-b and sub=0 a+b, modulo 2^WIDTH.
// Corner cases (0-1, most negative minus one, equal operands) and random
// vectors; expected values come from plain integer arithmetic.
module tb_rcas;
  int checks = 0, failures = 0;

  logic [15:0] a16, b16, s16;
  logic [24:0] a25, b25, s25;
  logic        sub;

  rcas #(.WIDTH(16)) dut16 (.a(a16), .b(b16), .sub(sub), .s(s16));
  rcas #(.WIDTH(25)) dut25 (.a(a25), .b(b25), .sub(sub), .s(s25));

  task automatic check_all(input logic [24:0] x, input logic [24:0] y, input logic sb);
    logic [15:0] e16;
    logic [24:0] e25;
    a16 = x[15:0]; b16 = y[15:0]; a25 = x; b25 = y; sub = sb;
    #1;
    e16 = sb ? x[15:0] - y[15:0] : x[15:0] + y[15:0];
    e25 = sb ? x - y : x + y;
    checks += 2;
    if (s16 !== e16) begin failures++; $display("FAIL 16: %h %s %h = %h exp %h", x[15:0], sb ? "-" : "+", y[15:0], s16, e16); end
    if (s25 !== e25) begin failures++; $display("FAIL 25: %h %s %h = %h exp %h", x, sb ? "-" : "+", y, s25, e25); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int sb = 0; sb < 2; sb++) begin
      check_all('0, '0, 1'(sb));
      check_all('0, 25'd1, 1'(sb));
      check_all(25'h1000000, 25'd1, 1'(sb));
      check_all(25'h0008000, 25'd1, 1'(sb));
      check_all(25'h1234567, 25'h1234567, 1'(sb));
      check_all('1, '1, 1'(sb));
    end
    for (int i = 0; i < 5000; i++) check_all(25'($urandom), 25'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
