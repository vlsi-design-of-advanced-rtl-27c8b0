// tb_cic_integrators -- self-checking testbench of the integrator cascade.
//
// Two instances of the five-stage cascade: the truncated one (stages of 25,
// 22, 20, 18 and 16 bits) and the full-width one (five 25-bit stages). The
// reference is a register-level model in plain integer arithmetic: on each
// enabled edge every stage adds the previous stage's old value, shifted right
// by the difference of the two widths, modulo 2^width. Random 25-bit inputs
// with a random enable, a reset in mid-run; the 5-sample pipeline latency is
// implied by comparing on every clock.
module tb_cic_integrators;
  int checks = 0, failures = 0;
  logic clk = 0, rst, en;
  logic [24:0] x;
  logic [15:0] yt;
  logic [24:0] yf;

  localparam int WT [6] = '{25, 25, 22, 20, 18, 16};  // input, then stages
  longint unsigned rt [5], rf [5];

  cic_integrators #(.N(5), .B_MAX(25), .TRUNCATE(1'b1)) dut_t (.clk(clk), .rst(rst), .en(en), .x(x), .y(yt));
  cic_integrators #(.N(5), .B_MAX(25), .TRUNCATE(1'b0)) dut_f (.clk(clk), .rst(rst), .en(en), .x(x), .y(yf));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    longint unsigned inp_t, inp_f;
    if (rst) begin
      for (int j = 0; j < 5; j++) begin rt[j] <= 0; rf[j] <= 0; end
    end else if (en) begin
      for (int j = 0; j < 5; j++) begin
        inp_t = (j == 0) ? longint'(x) : rt[j-1];
        inp_f = (j == 0) ? longint'(x) : rf[j-1];
        rt[j] <= (rt[j] + (inp_t >> (WT[j] - WT[j+1]))) % (64'd1 << WT[j+1]);
        rf[j] <= (rf[j] + inp_f) % (64'd1 << 25);
      end
    end
  end

  initial begin
    rst = 1; en = 0; x = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      // sign-extended small samples most of the time, full random words too
      x   = (i % 500 < 400) ? 25'($signed(5'($urandom))) : 25'($urandom);
      en  = ($urandom % 3) != 0;
      rst = (i == 2500);
      @(negedge clk);
      checks += 2;
      if (yt !== 16'(rt[4])) begin failures++; $display("FAIL trunc y=%h exp %h", yt, 16'(rt[4])); end
      if (yf !== 25'(rf[4])) begin failures++; $display("FAIL full y=%h exp %h", yf, 25'(rf[4])); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
