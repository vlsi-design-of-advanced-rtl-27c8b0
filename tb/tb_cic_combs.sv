// tb_cic_combs -- self-checking testbench of the five-stage comb cascade.
//
// The 16-bit, M=1 cascade gets random samples under a random strobe. The
// reference keeps the strobed input history and forms the fifth difference
// sum_k (-1)^k C(5,k) x[m-k] modulo 2^16 (binomial weights 1,5,10,10,5,1),
// which is what five cascaded (1 - z^-1) sections compute. The output must
// appear exactly 5 clocks after each input strobe; back-to-back strobes are
// included to show a new sample may enter on any clock.
module tb_cic_combs;
  int checks = 0, failures = 0;
  logic clk = 0, rst, vin;
  logic [15:0] x, y;
  logic vout;
  logic [15:0] hist [$];
  logic [15:0] exp_pipe [6];
  logic        vld_pipe [6];
  localparam int BIN [6] = '{1, -5, 10, -10, 5, -1};

  cic_combs #(.N(5), .W(16), .M(1)) dut (.clk(clk), .rst(rst), .in_valid(vin), .x(x), .out_valid(vout), .y(y));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: expected value computed at the strobe, delayed 5 clocks
  always @(posedge clk) begin
    int acc;
    if (rst) begin
      hist = {};
      for (int i = 0; i < 6; i++) vld_pipe[i] <= 0;
    end else begin
      acc = 0;
      if (vin) begin
        hist.push_front(x);
        for (int k = 0; k < 6; k++)
          if (k < hist.size()) acc += BIN[k] * int'(hist[k]);
      end
      exp_pipe[0] <= 16'(acc);
      vld_pipe[0] <= vin;
      for (int i = 1; i < 6; i++) begin exp_pipe[i] <= exp_pipe[i-1]; vld_pipe[i] <= vld_pipe[i-1]; end
    end
  end

  initial begin
    rst = 1; vin = 0; x = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      vin = (i % 700 < 100) ? 1'b1 : (($urandom % 4) == 0);
      x   = 16'($urandom);
      @(negedge clk);
      checks++;
      if (vout !== vld_pipe[4]) begin failures++; $display("FAIL valid=%b exp %b", vout, vld_pipe[4]); end
      if (vout) begin
        checks++;
        if (y !== exp_pipe[4]) begin failures++; $display("FAIL y=%h exp %h", y, exp_pipe[4]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
