`timescale 1ps/1fs
// Testbench for phase_monitor: a 200 ps reference clock, a copy delayed by a
// known d, and an asynchronous sampling clock of period 1234.567 ps (unrelated
// to 200 ps). Over M = 4096 samples the XOR count must be 2*d/200*M within
// +/-3%. Also checks that pm_valid comes once every M sampling clocks.
module tb_phase_monitor;
  localparam int M = 4096;
  logic clk_ref = 1'b0, clk_dut = 1'b0, clk_async = 1'b0, rst_n = 1'b0;
  logic [12:0] pm_out;
  logic pm_valid;
  int   checks = 0, failures = 0;
  real  d;

  phase_monitor #(.M(M)) dut (.clk_async, .rst_n, .clk_ref, .clk_dut, .pm_out, .pm_valid);

  always #100 clk_ref = ~clk_ref;
  always @(posedge clk_ref or negedge clk_ref) begin
    automatic logic v = clk_ref;
    fork begin #(d); clk_dut = v; end join_none
  end
  always #617.2835 clk_async = ~clk_async;

  initial begin
    real ds [4] = '{12.5, 33.0, 61.25, 90.0};
    d = ds[0];
    #3000 rst_n = 1'b1;
    foreach (ds[i]) begin
      real expected;
      int  ncyc;
      d = ds[i];
      @(posedge pm_valid);     // discard the window that spans the change
      ncyc = 0;
      fork
        begin @(posedge pm_valid); end
        begin forever begin @(posedge clk_async); ncyc++; end end
      join_any
      disable fork;
      #1;
      expected = 2.0 * d / 200.0 * real'(M);
      checks++;
      if (real'(pm_out) < 0.97 * expected || real'(pm_out) > 1.03 * expected) begin
        failures++;
        $display("FAIL: delay %f count %0d expected %f", d, pm_out, expected);
      end
      checks++;
      if (ncyc != M) begin failures++; $display("FAIL: window %0d cycles", ncyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
