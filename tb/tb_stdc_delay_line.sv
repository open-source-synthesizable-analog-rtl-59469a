`timescale 1ps/1fs
// Testbench for stdc_delay_line: an 800 ps clock; checks that tap k is the
// clock inverted k+1 times (polarity), that each stage's delay lies within
// 15 ps +/-20%, and that the taps' rising edges folded into one period are
// quasi-uniform: every eighth of the period holds 255/8 edges within +/-40%.
module tb_stdc_delay_line;
  localparam int  N = 255;
  localparam real T = 800.0;
  logic clk = 1'b0;
  logic [N-1:0] phi;
  int   checks = 0, failures = 0;
  real  t_rise [N];
  real  t_clk;

  stdc_delay_line #(.N(N), .T_UNIT(15.0), .MISMATCH(0.2), .SEED(9)) dut (.clk_div(clk), .phi);

  always #(T / 2.0) clk = ~clk;
  always @(posedge clk) t_clk = $realtime;

  for (genvar k = 0; k < N; k++) begin : g_mon
    always @(posedge phi[k]) t_rise[k] = $realtime;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int hist [8];
    #(10.0 * T + 1.0);
    // total chain delay, and per-stage delay from consecutive same-polarity taps
    for (int k = 2; k < N; k += 2) begin
      real d;
      d = t_rise[k] - t_rise[k-2];
      while (d < 0.0) d += T;
      while (d >= T) d -= T;
      // two stages: the falling edge of the middle tap is between them
      check(d > 2.0 * 12.0 - 0.01 && d < 2.0 * 18.0 + 0.01, $sformatf("two-stage delay at tap %0d: %f", k, d));
    end
    // tap 0 inverts: its rising edge follows the clock's falling edge
    begin
      real d0;
      d0 = t_rise[0] - (t_clk - T / 2.0);
      while (d0 < 0.0) d0 += T;
      while (d0 >= T) d0 -= T;
      check(d0 > 11.99 && d0 < 18.01, $sformatf("first inverter follows the falling edge: %f", d0));
    end
    foreach (hist[b]) hist[b] = 0;
    for (int k = 0; k < N; k++) begin
      real p;
      p = t_rise[k];
      while (p >= T) p -= T;
      hist[int'($floor(p / (T / 8.0)))]++;
    end
    foreach (hist[b]) check(hist[b] > 19 && hist[b] < 45, $sformatf("bin %0d holds %0d edges", b, hist[b]));
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
