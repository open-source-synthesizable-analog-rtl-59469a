`timescale 1ps/1fs
// Testbench for pi_phase_mixer: two clocks with a random skew. With ctrl=0 the
// output edge follows ph_in1 by 20 ps; with ctrl=1 it lands 20 ps after the
// mean of the two input edges (both rising and falling edges are checked).
module tb_pi_phase_mixer;
  logic a = 1'b0, b = 1'b0, ctrl = 1'b0, y;
  int   checks = 0, failures = 0;
  real  ty_r, ty_f;

  pi_phase_mixer #(.T_BUF(20.0), .PAIR_WIN(30.0)) dut (.ph_in1(a), .ph_in2(b), .ctrl, .ph_out(y));

  always @(posedge y) ty_r = $realtime;
  always @(negedge y) ty_f = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 60; i++) begin
      real s, t0, ta, expect_r;
      s = real'($urandom_range(0, 250)) / 10.0 - 12.5;    // b relative to a
      ctrl = 1'($urandom_range(0, 1));
      #200;
      t0 = $realtime + 20.0;
      fork
        begin #(20.0); a = 1'b1; #(100.0); a = 1'b0; end
        begin #(20.0 + s); b = 1'b1; #(100.0); b = 1'b0; end
      join
      #100;
      ta = t0;
      expect_r = ctrl ? ta + s / 2.0 + 20.0 : ta + 20.0;
      check(ty_r > expect_r - 0.01 && ty_r < expect_r + 0.01, $sformatf("ctrl %b skew %f rise %f expected %f", ctrl, s, ty_r, expect_r));
      check(ty_f > expect_r + 99.99 && ty_f < expect_r + 100.01, $sformatf("ctrl %b skew %f fall", ctrl, s));
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
