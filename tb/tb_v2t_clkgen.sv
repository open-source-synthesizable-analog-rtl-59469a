`timescale 1ps/1fs
// Testbench for v2t_clkgen: 5 GHz clock; checks divide-by-4 period (800 ps)
// and 50% duty of clk_div, phi1 width of one clock period, phi2 = ~phi1, the
// 5 ps lead of phi1e and 5 ps lag of phi2l, and that div_phase shifts the
// sampling phase by whole clock periods between slices.
module tb_v2t_clkgen;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] dp0 = 2'd0, dp1 = 2'd1;
  logic cd0, e0, p10, p20, l0, cd1, e1, p11, p21, l1;
  int   checks = 0, failures = 0;

  always #100 clk = ~clk;

  v2t_clkgen u0 (.clk, .rst_n, .div_phase(dp0), .clk_div(cd0), .phi1e(e0), .phi1(p10), .phi2(p20), .phi2l(l0));
  v2t_clkgen u1 (.clk, .rst_n, .div_phase(dp1), .clk_div(cd1), .phi1e(e1), .phi1(p11), .phi2(p21), .phi2l(l1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real te_r, te_f, tp_r, tp_f, tl_r, tp_r2, tc_r, tc_f, tc_r2, t1_r;

  initial begin
    #1050 rst_n = 1'b1;
    repeat (3) @(posedge cd0);
    for (int i = 0; i < 10; i++) begin
      fork
        begin @(posedge e0);  te_r = $realtime; @(negedge e0); te_f = $realtime; end
        begin @(posedge p10); tp_r = $realtime; @(negedge p10); tp_f = $realtime; @(posedge l0); tl_r = $realtime; end
      join
      @(posedge p10); tp_r2 = $realtime;
      check(tp_r2 - tp_r > 799.9 && tp_r2 - tp_r < 800.1, $sformatf("phi1 period %f", tp_r2 - tp_r));
      check(tp_f - tp_r > 199.9 && tp_f - tp_r < 200.1, "phi1 high for one clock period");
      check(tp_r - te_r > 4.9 && tp_r - te_r < 5.1, "phi1e leads phi1 rise by 5 ps");
      check(tp_f - te_f > 4.9 && tp_f - te_f < 5.1, "phi1e leads phi1 fall by 5 ps");
      check(tl_r - tp_f > 4.9 && tl_r - tp_f < 5.1, $sformatf("phi2l lags phi1 fall by 5 ps: %f %f", tl_r, tp_f));
      check(p20 == ~p10, "phi2 is the complement of phi1");
    end
    @(posedge cd0); tc_r = $realtime; @(negedge cd0); tc_f = $realtime; @(posedge cd0); tc_r2 = $realtime;
    check(tc_r2 - tc_r > 799.9 && tc_r2 - tc_r < 800.1, "clk_div period 800 ps");
    check(tc_f - tc_r > 399.9 && tc_f - tc_r < 400.1, "clk_div 50% duty");
    @(posedge p10); tp_r = $realtime; @(posedge p11); t1_r = $realtime;
    check(t1_r - tp_r > 599.9 && t1_r - tp_r < 600.1, $sformatf("div_phase 1 converts 3 clock periods later: %f", t1_r - tp_r));
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
