// tb_cic_comb -- self-checking testbench of one comb stage.
//
// Two instances, differential delay M=1 (the filter's) and M=2, 16 bits
// wide, driven by random samples under a random strobe. The reference keeps
// the history of strobed inputs and expects y = x[m] - x[m-M] modulo 2^16
// (inputs before reset count as zero), with out_valid one clock after
// in_valid. A mid-run reset clears the history.
module tb_cic_comb;
  int checks = 0, failures = 0;
  logic clk = 0, rst, vin;
  logic [15:0] x, y1, y2;
  logic v1, v2;
  logic [15:0] hist [$];
  logic [15:0] e1, e2;
  logic ev;

  cic_comb #(.W(16), .M(1)) dut1 (.clk(clk), .rst(rst), .in_valid(vin), .x(x), .out_valid(v1), .y(y1));
  cic_comb #(.W(16), .M(2)) dut2 (.clk(clk), .rst(rst), .in_valid(vin), .x(x), .out_valid(v2), .y(y2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst) begin
      hist = {}; ev <= 0;
    end else begin
      ev <= vin;
      if (vin) begin
        hist.push_front(x);
        e1 <= x - ((hist.size() > 1) ? hist[1] : 16'd0);
        e2 <= x - ((hist.size() > 2) ? hist[2] : 16'd0);
      end
    end
  end

  initial begin
    rst = 1; vin = 0; x = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      vin = ($urandom % 3) == 0;
      x   = 16'($urandom);
      rst = (i == 1500);
      @(negedge clk);
      checks += 2;
      if (v1 !== ev || v2 !== ev) begin failures++; $display("FAIL valid %b %b exp %b", v1, v2, ev); end
      if (v1 && (y1 !== e1 || y2 !== e2)) begin failures++; $display("FAIL y1=%h exp %h y2=%h exp %h", y1, e1, y2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
