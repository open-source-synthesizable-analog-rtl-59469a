`timescale 1ps/1fs
// Testbench for adc_slice: drives a 5 GHz slice clock and a sequence of DC
// differential inputs, and compares each settled code with the ideal transfer
// code = vd / slope * 255 / 800 ps (slope 0.8 mV/ps, 800 ps conversion period),
// allowing +/-5 codes for the stochastic quantizer. Also checks the conversion
// rate (one code every 4 clock periods) and that the sign follows the input.
module tb_adc_slice;
  logic clk = 1'b0, rst_n = 1'b0;
  real  vin_p, vin_n, vbias;
  adc_pkg::adc_code_t   code;
  adc_pkg::stdc_count_t offset;
  logic valid, conv_clk;
  int   checks = 0, failures = 0;

  always #100 clk = ~clk;   // 5 GHz

  adc_slice #(.N_STDC(255), .SEED(3)) dut (
    .clk, .rst_n, .div_phase(2'd0), .vin_p, .vin_n, .vbias, .adapt_en(1'b0),
    .adc_out(code), .valid, .conv_clk, .offset
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real vds [8] = '{0.004, 0.05, -0.05, 0.1, -0.1, 0.2, -0.2, 0.02};

  initial begin
    real t0, t1;
    vbias = 0.5625; vin_p = 0.55; vin_n = 0.55;
    #1000 rst_n = 1'b1;
    repeat (8) @(posedge conv_clk);
    foreach (vds[i]) begin
      int ideal, c;
      vin_p = 0.55 + vds[i] / 2.0;
      vin_n = 0.55 - vds[i] / 2.0;
      repeat (4) @(posedge conv_clk);
      #1;
      c = int'(code);
      ideal = int'(vds[i] / 0.0008 * 255.0 / 800.0);
      if (vds[i] < 0.0) ideal = ideal - 1;   // one's-complement negative side
      check((c - ideal <= 5) && (ideal - c <= 5), $sformatf("vd=%f code=%0d ideal=%0d", vds[i], c, ideal));
      if (vds[i] > 0.03)  check(c > 0, "positive input gives positive code");
      if (vds[i] < -0.03) check(c < 0, "negative input gives negative code");
      $display("vd=%6.3f code=%0d ideal=%0d", vds[i], c, ideal);
    end
    @(posedge conv_clk); t0 = $realtime;
    @(posedge conv_clk); t1 = $realtime;
    check((t1 - t0 > 799.0) && (t1 - t0 < 801.0), "one conversion per 4 clock periods");
    check(valid, "valid high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
