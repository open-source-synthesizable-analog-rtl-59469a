`timescale 1ps/1fs
// Testbench for v2t: generates phi1e/phi1/phi2l by hand (800 ps cycle), applies
// random input voltages and checks that t_in rises (vin - VTH) / slope after
// phi2l rises, to 0.01 ps, and that it is cleared by the next phi1. Also checks
// that a lower bias (smaller current) lengthens the delay in proportion.
module tb_v2t;
  logic phi1e = 1'b0, phi1 = 1'b0, phi2l = 1'b0, t_in;
  real  vin, vbias;
  int   checks = 0, failures = 0;

  v2t #(.VTH(0.30), .SLOPE_V_PER_PS(0.0008), .VB_NOM(0.5625)) dut (.vin, .vbias, .phi1e, .phi1, .phi2l, .t_in);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic convert(input real v, input real vb, output real dt);
    real t0;
    vbias = vb;
    vin = v;
    phi1e = 1'b1; phi1 = 1'b1; #200;
    check(t_in == 1'b0, "t_in cleared during phi1");
    phi1e = 1'b0; #1 vin = 0.0; #4;           // value after the sampling edge must not matter
    phi1 = 1'b0; #5;
    phi2l = 1'b1; t0 = $realtime;
    @(posedge t_in);
    dt = $realtime - t0;
    #(600.0 - dt);
    phi2l = 1'b0;
  endtask

  initial begin
    real dt, ideal;
    vin = 0.5; vbias = 0.5625;
    #100;
    for (int i = 0; i < 40; i++) begin
      real v;
      v = 0.35 + 0.3 * real'($urandom_range(0, 1000)) / 1000.0;
      convert(v, 0.5625, dt);
      ideal = (v - 0.30) / 0.0008;
      check(dt > ideal - 0.01 && dt < ideal + 0.01, $sformatf("vin %f delay %f ideal %f", v, dt, ideal));
    end
    convert(0.5, 0.38125, dt);   // half the nominal (vbias - 0.2)
    ideal = 2.0 * (0.5 - 0.30) / 0.0008;
    check(dt > ideal - 0.05 && dt < ideal + 0.05, $sformatf("half bias: delay %f ideal %f", dt, ideal));
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
