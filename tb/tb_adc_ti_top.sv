`timescale 1ps/1fs
// End-to-end testbench for adc_ti_top at reduced sizes: two PI groups and
// eight slices (10 GS/s), a 63-stage STDC, 32-frame capture, 256-sample delay
// monitor and a 16-code offset-loop window. It exercises:
//   interleave  - the two PIs, given offsets of half a turn, must produce
//                 clocks 100 ps apart;
//   conversion  - for DC inputs of both signs every lane's code must be within
//                 +/-3 of vd / 0.8 mV/ps * 63 / 800 ps;
//   bias        - raising the bias code must lower the gain by the ratio of
//                 (vbias - 0.2 V);
//   monitor     - each PI's delay monitor must agree with the delay measured
//                 here from the clock edges;
//   capture     - the SRAM must hold exactly the frames the aligner produced;
//   adaptation  - with a busy random input the offset loops must move;
//   rotation    - sweeping the common PI code must pass the period wrap and
//                 move PI 0's phase monotonically in small steps.
// Each mechanism's occurrences are counted; one that never happens fails.
module tb_adc_ti_top;
  localparam int D  = 32;
  localparam int PM = 256;
  localparam int NP = 2;
  localparam int NS = 8;
  localparam int NST = 63;
  localparam real T = 200.0;

  logic clk = 1'b0, clk_async = 1'b0, rst_n = 1'b0;
  real  vin_p = 0.55, vin_n = 0.55;
  adc_pkg::pi_code_t pi_ctrl = '0;
  adc_pkg::pi_code_t [NP-1:0] ph_ofs = '0;
  logic [NP-1:0][31:0] buffer_ctrl = '0;
  logic [7:0] bias_ctrl = 8'b0001_1111;
  logic adapt_en = 1'b0, cap_start = 1'b0;
  logic [4:0] cap_rd_addr = '0;
  logic [NS-1:0][7:0] frame;
  logic frame_clk, cap_full;
  logic [NS*8-1:0] cap_rd_data;
  logic [NP-1:0][8:0] pm_out;
  logic [NP-1:0] pm_valid, sel_order, pi_clk;
  logic [NP-1:0][5:0] n_period;
  logic [NS-1:0][7:0] offsets;

  int checks = 0, failures = 0;
  int n_quad = 0, n_conv = 0, n_pos = 0, n_neg = 0, n_bias = 0, n_mon = 0, n_cap = 0, n_adapt = 0, n_wrap = 0, n_rot = 0;

  always #(T / 2.0) clk = ~clk;
  always #61.72835 clk_async = ~clk_async;

  adc_ti_top #(.N_SLICE(NS), .N_PI(NP), .N_STDC(NST), .SRAM_D(D), .PM_M(PM), .ADAPT_LOG2_WIN(4)) dut (
    .clk, .rst_n, .vin_p, .vin_n, .pi_ctrl, .ph_ofs, .buffer_ctrl, .bias_ctrl, .adapt_en,
    .cap_start, .cap_rd_addr, .clk_async, .frame, .frame_clk, .cap_rd_data, .cap_full,
    .pm_out, .pm_valid, .sel_order, .n_period, .offsets, .pi_clk
  );

  // Edge bookkeeping: time of the last input-clock edge and each PI's delay.
  real t_clk, d_pi [NP];
  always @(posedge clk) t_clk = $realtime;
  for (genvar g = 0; g < NP; g++) begin : g_mon
    always @(posedge pi_clk[g]) begin
      automatic real d = $realtime - t_clk;
      while (d < 0.0) d += T;
      while (d >= T) d -= T;
      d_pi[g] = d;
    end
    always @(posedge dut.g_grp[g].u_pi.u_enc.wrap) n_wrap++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_vd(input real vd);
    vin_p = 0.55 + vd / 2.0;
    vin_n = 0.55 - vd / 2.0;
  endtask

  function automatic int ideal_code(input real vd, input real gain);
    int c;
    c = int'(vd * gain / 0.0008 * real'(NST) / 800.0);
    return (vd < 0.0) ? c - 1 : c;
  endfunction

  task automatic check_dc(input real vd, input real gain);
    int e;
    set_vd(vd);
    repeat (8) @(posedge frame_clk);
    #1;
    e = ideal_code(vd, gain);
    for (int k = 0; k < NS; k++) begin
      int c;
      c = int'($signed(frame[k]));
      check(c - e <= 3 && e - c <= 3, $sformatf("vd %f lane %0d code %0d ideal %0d", vd, k, c, e));
      n_conv++;
      if (c > 0) n_pos++;
      if (c < 0) n_neg++;
    end
  endtask

  // Frame record for the capture check.
  logic [NS*8-1:0] rec [512];
  int nrec = 0;
  always @(negedge frame_clk) if (nrec < 512) begin rec[nrec] = frame; nrec++; end

  initial begin
    #2000 rst_n = 1'b1;
    repeat (20) @(posedge clk);

    // ---- interleave: offsets of 1/NP turn from each PI's own period count
    for (int g = 0; g < NP; g++) begin
      int n, l;
      n = int'(n_period[g]);
      l = (n % 2 == 1) ? n + 1 : n + 2;
      ph_ofs[g] = adc_pkg::pi_code_t'((g * l * 16) / NP);
    end
    repeat (20) @(posedge clk);
    for (int g = 1; g < NP; g++) begin
      real s;
      s = d_pi[g] - d_pi[g-1];
      while (s < 0.0) s += T;
      check(s > T / NP - 5.0 && s < T / NP + 5.0, $sformatf("PI %0d is %f ps after PI %0d", g, s, g - 1));
      n_quad++;
    end

    $display("%0t ps: conversion", $realtime); $fflush;
    // ---- conversion at nominal bias
    check_dc(0.1, 1.0);
    check_dc(-0.15, 1.0);
    check_dc(0.05, 1.0);
    check_dc(-0.03, 1.0);
    check_dc(0.2, 1.0);

    $display("%0t ps: bias", $realtime); $fflush;
    // ---- bias: 6 of 8 drivers -> vbias 0.675 V, faster ramp, gain
    // (0.5625-0.2)/(0.675-0.2)
    bias_ctrl = 8'b0011_1111;
    check_dc(0.2, 0.3625 / 0.475);
    n_bias++;
    bias_ctrl = 8'b0001_1111;

    $display("%0t ps: monitor", $realtime); $fflush;
    // ---- delay monitor, compared with the measured PI delays
    for (int g = 0; g < NP; g++) begin
      real dd, e;
      @(posedge pm_valid[g]);
      @(posedge pm_valid[g]); #1;
      dd = d_pi[g];
      e = 2.0 * ((dd < T / 2.0) ? dd : T - dd) / T * real'(PM);
      check(real'(pm_out[g]) > e - 0.05 * PM && real'(pm_out[g]) < e + 0.05 * PM,
            $sformatf("monitor %0d: %0d, expected %f", g, pm_out[g], e));
      n_mon++;
    end

    $display("%0t ps: capture", $realtime); $fflush;
    // ---- capture of changing frames
    fork
      begin
        @(negedge frame_clk); cap_start = 1'b1;
        @(negedge frame_clk); cap_start = 1'b0;
        while (!cap_full) @(posedge frame_clk);
      end
      begin
        repeat (D + 10) begin
          set_vd(real'($urandom_range(0, 300)) / 1000.0 - 0.15);
          #(800.0);
        end
      end
    join
    begin
      logic [NS*8-1:0] words [D];
      int o;
      for (int a = 0; a < D; a++) begin
        @(negedge frame_clk); cap_rd_addr = 5'(a);
        @(posedge frame_clk); #1;
        words[a] = cap_rd_data;
      end
      o = -1;
      for (int s = 0; s + D <= nrec && o < 0; s++) begin
        automatic bit same = 1'b1;
        for (int a = 0; a < D; a++) if (words[a] != rec[s + a]) same = 1'b0;
        if (same) o = s;
      end
      check(o >= 0, "SRAM holds a run of consecutive aligner frames");
      check(words[0] != words[D-1], "captured frames differ (input changed)");
      n_cap++;
    end

    $display("%0t ps: adaptation", $realtime); $fflush;
    // ---- background offset adaptation under a busy input
    begin
      logic [NS-1:0][7:0] ofs_start;
      ofs_start = offsets;
      check(int'(offsets[0]) == (NST * 100 + 400) / 800, "initial offset is D_offset in counts");
      adapt_en = 1'b1;
      repeat (16 * 8 * 16) begin
        set_vd(real'($urandom_range(0, 400)) / 1000.0 - 0.2);
        #(50.0);
      end
      adapt_en = 1'b0;
      for (int k = 0; k < NS; k++) if (offsets[k] != ofs_start[k]) n_adapt++;
      for (int k = 0; k < NS; k++)
        check(int'(offsets[k]) >= 2 && int'(offsets[k]) <= 14, $sformatf("lane %0d offset %0d", k, offsets[k]));
    end

    $display("%0t ps: rotation", $realtime); $fflush;
    // ---- rotation: sweep the common code across PI 0's period wrap; its
    // phase must move monotonically in small steps
    begin
      real prev, step;
      int  flips, l, c0;
      logic last_order;
      l = (n_period[0] % 2 == 1) ? int'(n_period[0]) + 1 : int'(n_period[0]) + 2;
      c0 = (l - 2) * 16;
      pi_ctrl = adc_pkg::pi_code_t'(c0);
      repeat (3) @(posedge clk);
      @(posedge pi_clk[0]); #1;
      prev = d_pi[0]; flips = 0; last_order = sel_order[0];
      for (int c = c0 + 1; c <= c0 + 40; c++) begin
        pi_ctrl = adc_pkg::pi_code_t'(c);
        repeat (3) @(posedge clk);
        @(posedge pi_clk[0]); #1;
        step = d_pi[0] - prev;
        if (step < -T / 2.0) step += T;
        if (step > T / 2.0) step -= T;
        check(step > -0.05 && step < 2.0, $sformatf("code %0d: PI 0 step %f ps", c, step));
        prev = d_pi[0];
        if (sel_order[0] != last_order) flips++;
        last_order = sel_order[0];
        n_rot++;
      end
      check(flips > 0, "blender-input arbiter saw both orders");
    end

    $display("mechanisms: quad=%0d conv=%0d pos=%0d neg=%0d bias=%0d monitor=%0d capture=%0d adapt=%0d wrap=%0d rotate=%0d",
             n_quad, n_conv, n_pos, n_neg, n_bias, n_mon, n_cap, n_adapt, n_wrap, n_rot);
    check(n_quad > 0 && n_conv > 0 && n_pos > 0 && n_neg > 0 && n_bias > 0 && n_mon > 0 &&
          n_cap > 0 && n_adapt > 0 && n_wrap > 0 && n_rot > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
