`timescale 1ps/1fs
// Testbench for pi_delay_chain: 200 ps clock; checks that every tap is the
// clock delayed (same polarity), that each cell adds 7 ps +/-5%, and that the
// whole chain is longer than one period, as the arbiters require.
module tb_pi_delay_chain;
  localparam int N = 32;
  logic clk = 1'b0;
  logic [N-1:0] phi;
  int   checks = 0, failures = 0;
  real  t_clk, t_rise [N];

  pi_delay_chain #(.N(N), .T_D(7.0), .MISMATCH(0.05), .SEED(4)) dut (.clk_in(clk), .phi);

  initial begin
    #1000;
    forever begin clk = 1'b1; t_clk = $realtime; #100; clk = 1'b0; #100; end
  end

  for (genvar k = 0; k < N; k++) begin : g_mon
    always @(posedge phi[k]) t_rise[k] = $realtime;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real prev, total;
    #1000;
    @(posedge clk); #1;
    @(posedge clk); #(1000.0);   // let all edges of the previous cycle propagate
    // Measure one launch: clock edge at t_clk - 200*k for the edge each tap shows.
    prev = 0.0; total = 0.0;
    for (int k = 0; k < N; k++) begin
      real d;
      d = t_rise[k] - t_clk;
      while (d <= prev) d += 200.0;   // unwrap: taps are later than the previous one
      check(d - prev > 6.65 - 0.001 && d - prev < 7.35 + 0.001, $sformatf("cell %0d delay %f", k, d - prev));
      prev = d;
    end
    check(prev > 200.0, $sformatf("chain %f ps longer than the 200 ps period", prev));
    check(phi[0] == 1'b0 || phi[0] == 1'b1, "tap driven");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
