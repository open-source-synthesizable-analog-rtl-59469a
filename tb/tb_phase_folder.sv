`timescale 1ps/1fs
// Testbench for phase_folder: launches t_inp and t_inn with random separations
// of both signs and checks that p_in starts at the first edge, lasts
// |dt| + 100 ps, and that sign is 1 exactly when t_inp came first.
module tb_phase_folder;
  logic t_inp = 1'b0, t_inn = 1'b0, sign, p_in;
  int   checks = 0, failures = 0;
  real  t_rise, t_fall;

  phase_folder #(.D_OFFSET(100.0)) dut (.t_inp, .t_inn, .sign, .p_in);

  always @(posedge p_in) t_rise = $realtime;
  always @(negedge p_in) t_fall = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 100; i++) begin
      real d, t0;
      d = real'($urandom_range(1, 3000)) / 10.0;
      if ($urandom_range(0, 1) == 1) d = -d;
      #300;
      t0 = $realtime;
      if (d > 0.0) begin t_inp = 1'b1; #(d); t_inn = 1'b1; end
      else         begin t_inn = 1'b1; #(-d); t_inp = 1'b1; end
      #400;
      check(t_rise > t0 - 0.01 && t_rise < t0 + 0.01, "p_in rises with the first edge");
      check(t_fall - t_rise > (d > 0.0 ? d : -d) + 99.99 && t_fall - t_rise < (d > 0.0 ? d : -d) + 100.01,
            $sformatf("dt %f width %f", d, t_fall - t_rise));
      check(sign == (d > 0.0), $sformatf("dt %f sign %b", d, sign));
      t_inp = 1'b0; t_inn = 1'b0;
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
