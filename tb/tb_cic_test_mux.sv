// tb_cic_test_mux -- self-checking testbench of the test-configuration
// multiplexers of the CIC decimator.
//
// Drives random data on every mux input, random load and valid strobes and
// all four modes, and checks each output against the routing table of the
// four modes written out here: the down-sampler input, the comb input and its
// valid, the filter output and its ready flag. The INTEGRATOR-mode ready flag
// must be load delayed by exactly one clock, and cleared by reset.
// Every mode is counted and must have been seen.
module tb_cic_test_mux;
  import cic_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst, load, ds_valid, comb_rdy;
  cic_mode_e mode;
  logic [15:0] adj, integ, ds_y, comb_y;
  logic [15:0] ds_x, comb_x, out;
  logic comb_valid, rdy;
  logic load_q;                          // load one clock earlier (model)
  int n_mode [4];

  cic_test_mux #(.W(16)) dut (.clk(clk), .rst(rst), .mode(mode), .load(load),
    .adj(adj), .integ(integ), .ds_x(ds_x), .ds_y(ds_y), .ds_valid(ds_valid),
    .comb_x(comb_x), .comb_valid(comb_valid), .comb_y(comb_y), .comb_rdy(comb_rdy),
    .out(out), .rdy(rdy));

  always #5 clk = ~clk;

  always @(posedge clk) load_q <= rst ? 1'b0 : load;

  task automatic expect16(input logic [15:0] got, input logic [15:0] want, input string what);
    checks++;
    if (got !== want) begin failures++; $display("FAIL %s mode=%0d got %h want %h", what, mode, got, want); end
  endtask

  task automatic expect1(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin failures++; $display("FAIL %s mode=%0d got %b want %b", what, mode, got, want); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; load = 0; mode = CIC_MODE_NORMAL;
    adj = 0; integ = 0; ds_y = 0; comb_y = 0; ds_valid = 0; comb_rdy = 0;
    @(negedge clk); @(negedge clk);
    expect1(rdy, 1'b0, "rdy in reset");
    for (int i = 0; i < 4000; i++) begin
      rst  = ($urandom % 500) == 0;
      if (i % 250 == 0) mode = cic_mode_e'(i / 250 % 4);
      load = 1'($urandom % 2);
      adj = 16'($urandom); integ = 16'($urandom);
      ds_y = 16'($urandom); comb_y = 16'($urandom);
      ds_valid = 1'($urandom % 2); comb_rdy = 1'($urandom % 2);
      #1;
      case (mode)
        CIC_MODE_NORMAL: begin
          expect16(ds_x, integ, "ds_x"); expect16(comb_x, ds_y, "comb_x");
          expect1(comb_valid, ds_valid, "comb_valid");
          expect16(out, comb_y, "out"); expect1(rdy, comb_rdy, "rdy");
        end
        CIC_MODE_INTEGRATOR: begin
          expect16(ds_x, integ, "ds_x"); expect16(out, integ, "out");
          expect1(rdy, load_q, "rdy");
        end
        CIC_MODE_DOWNSAMPLER: begin
          expect16(ds_x, adj, "ds_x"); expect16(out, ds_y, "out");
          expect1(rdy, ds_valid, "rdy");
        end
        CIC_MODE_COMB: begin
          expect16(comb_x, adj, "comb_x"); expect1(comb_valid, load, "comb_valid");
          expect16(out, comb_y, "out"); expect1(rdy, comb_rdy, "rdy");
        end
        default: ;
      endcase
      n_mode[mode]++;
      @(negedge clk);
    end
    checks += 4;
    for (int k = 0; k < 4; k++) if (n_mode[k] == 0) begin failures++; $display("FAIL mode %0d never used", k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
