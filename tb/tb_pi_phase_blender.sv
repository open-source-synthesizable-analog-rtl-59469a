`timescale 1ps/1fs
// Testbench for pi_phase_blender: two clocks with a random skew and a random
// thermometer weight w; the output edge must land at t1 + (w/16)(t2 - t1)
// + 40 ps, for skews of either sign.
module tb_pi_phase_blender;
  logic a = 1'b0, b = 1'b0, y;
  logic [15:0] ctrl = '0;
  int   checks = 0, failures = 0;
  real  ty;

  pi_phase_blender #(.N(16), .T_BLEND(40.0), .PAIR_WIN(30.0)) dut (.ph_sel1(a), .ph_sel2(b), .ctrl, .clk_out(y));
  always @(posedge y) ty = $realtime;

  initial begin
    for (int i = 0; i < 80; i++) begin
      real s, t0, e;
      int w;
      s = real'($urandom_range(0, 400)) / 20.0 - 10.0;
      w = int'($urandom_range(0, 16));
      ctrl = 16'((32'h1 << w) - 1);
      #200;
      t0 = $realtime + 20.0;
      fork
        begin #(20.0); a = 1'b1; #(100.0); a = 1'b0; end
        begin #(20.0 + s); b = 1'b1; #(100.0); b = 1'b0; end
      join
      #100;
      e = t0 + real'(w) / 16.0 * s + 40.0;
      checks++;
      if (!(ty > e - 0.01 && ty < e + 0.01)) begin
        failures++;
        $display("FAIL: w %0d skew %f edge %f expected %f", w, s, ty, e);
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
