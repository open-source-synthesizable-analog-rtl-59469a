`timescale 1ps/1fs
// Testbench for stdc_counter: drives N tap clocks with evenly spaced, known
// rising edges (period 800 ps) and pulses of random position and width, and
// compares the count with the number of tap edges the testbench itself finds
// inside each pulse.
module tb_stdc_counter;
  localparam int  N = 255;
  localparam real T = 800.0;
  logic [N-1:0] phi = '0;
  logic p_in = 1'b0;
  logic [7:0] count;
  int   checks = 0, failures = 0;
  real  tap_t [N];

  stdc_counter #(.N(N), .W(8)) dut (.phi, .p_in, .count);

  // Tap k rises at offset tap_t[k] in each period (a scrambled, uniform set).
  initial for (int k = 0; k < N; k++) tap_t[k] = real'((k * 97) % N) * T / real'(N) + 0.5;

  for (genvar k = 0; k < N; k++) begin : g_clk
    initial begin
      #(tap_t[k]);
      forever begin
        phi[k] = 1'b1; #(T / 2.0);
        phi[k] = 1'b0; #(T / 2.0);
      end
    end
  end

  initial begin
    #(3.0 * T);
    for (int i = 0; i < 40; i++) begin
      real start, width, base;
      int expected;
      base  = real'(3 + 2 * i) * T;
      start = real'($urandom_range(0, 700)) + 0.25;
      width = real'($urandom_range(20, 700));
      if (start + width > T - 1.0) width = T - 1.0 - start;
      expected = 0;
      for (int k = 0; k < N; k++) if (tap_t[k] > start && tap_t[k] < start + width) expected++;
      #(base + start - $realtime);
      p_in = 1'b1;
      #(width);
      p_in = 1'b0;
      #2;
      checks++;
      if (int'(count) != expected) begin
        failures++;
        $display("FAIL: width %f count %0d expected %0d", width, count, expected);
      end
    end
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
