`timescale 1ps/1fs
// Testbench for pi_adj_buffer: checks 12 ps delay with the extra driver off
// and 10 ps with it on, for both edges.
module tb_pi_adj_buffer;
  logic a = 1'b0, ctrl = 1'b0, y;
  int   checks = 0, failures = 0;
  real  ty;

  pi_adj_buffer #(.T_WEAK(12.0), .T_STRONG(10.0)) dut (.ph_in(a), .ctrl, .ph_out(y));
  always @(posedge y or negedge y) ty = $realtime;

  initial begin
    for (int i = 0; i < 40; i++) begin
      real t0, d;
      ctrl = 1'($urandom_range(0, 1));
      #50;
      a = ~a; t0 = $realtime;
      #50;
      d = ctrl ? 10.0 : 12.0;
      checks++;
      if (!(ty - t0 > d - 0.01 && ty - t0 < d + 0.01) || y != a) begin
        failures++;
        $display("FAIL: ctrl %b delay %f", ctrl, ty - t0);
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
