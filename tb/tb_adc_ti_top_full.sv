`timescale 1ps/1fs
// Full-size testbench for adc_ti_top with every parameter at its default
// (16 slices with 255-stage STDCs, four PIs, 1024-frame capture SRAM,
// 65536-sample delay monitors, 4096-code offset windows). One complete
// operation: reset, quarter-turn PI offsets and a check that the four sampling
// clocks are 50 ps apart, DC conversions of both signs checked lane by lane
// against the ideal transfer code (+/-6 codes), then the start of a capture
// of a changing input whose first words are read back and compared with the
// frames the aligner produced. Filling all 1024 words, the delay monitors and
// the offset loops need microseconds of simulated time at these sizes (the
// 4080 STDC taps make this model slow) and are exercised by the reduced-size
// end-to-end testbench.
module tb_adc_ti_top_full;
  localparam real T = 200.0;

  logic clk = 1'b0, clk_async = 1'b0, rst_n = 1'b0;
  real  vin_p = 0.55, vin_n = 0.55;
  adc_pkg::pi_code_t pi_ctrl = '0;
  adc_pkg::pi_code_t [3:0] ph_ofs = '0;
  logic [3:0][31:0] buffer_ctrl = '0;
  logic [7:0] bias_ctrl = 8'b0001_1111;
  logic adapt_en = 1'b0, cap_start = 1'b0;
  logic [9:0] cap_rd_addr = '0;
  logic [15:0][7:0] frame;
  logic frame_clk, cap_full;
  logic [127:0] cap_rd_data;
  logic [3:0][16:0] pm_out;
  logic [3:0] pm_valid, sel_order, pi_clk;
  logic [3:0][5:0] n_period;
  logic [15:0][7:0] offsets;

  int checks = 0, failures = 0;

  always #(T / 2.0) clk = ~clk;
  always #617.2835 clk_async = ~clk_async;

  adc_ti_top dut (
    .clk, .rst_n, .vin_p, .vin_n, .pi_ctrl, .ph_ofs, .buffer_ctrl, .bias_ctrl, .adapt_en,
    .cap_start, .cap_rd_addr, .clk_async, .frame, .frame_clk, .cap_rd_data, .cap_full,
    .pm_out, .pm_valid, .sel_order, .n_period, .offsets, .pi_clk
  );

  real t_clk, d_pi [4];
  always @(posedge clk) t_clk = $realtime;
  for (genvar g = 0; g < 4; g++) begin : g_mon
    always @(posedge pi_clk[g]) begin
      automatic real d = $realtime - t_clk;
      while (d < 0.0) d += T;
      while (d >= T) d -= T;
      d_pi[g] = d;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_vd(input real vd);
    vin_p = 0.55 + vd / 2.0;
    vin_n = 0.55 - vd / 2.0;
  endtask

  task automatic check_dc(input real vd);
    int e;
    set_vd(vd);
    repeat (8) @(posedge frame_clk);
    #1;
    e = int'(vd / 0.0008 * 255.0 / 800.0);
    if (vd < 0.0) e = e - 1;
    for (int k = 0; k < 16; k++) begin
      int c;
      c = int'($signed(frame[k]));
      check(c - e <= 6 && e - c <= 6, $sformatf("vd %f lane %0d code %0d ideal %0d", vd, k, c, e));
    end
  endtask

  logic [127:0] rec [64];
  int nrec = 0;
  always @(negedge frame_clk) if (nrec < 64) begin rec[nrec] = frame; nrec++; end

  initial begin
    #2000 rst_n = 1'b1;
    repeat (20) @(posedge clk);
    for (int g = 0; g < 4; g++) begin
      int n, l;
      n = int'(n_period[g]);
      l = (n % 2 == 1) ? n + 1 : n + 2;
      ph_ofs[g] = adc_pkg::pi_code_t'((g * l * 16) / 4);
    end
    repeat (20) @(posedge clk);
    for (int g = 1; g < 4; g++) begin
      real s;
      s = d_pi[g] - d_pi[g-1];
      while (s < 0.0) s += T;
      check(s > 45.0 && s < 55.0, $sformatf("PI %0d is %f ps after PI %0d", g, s, g - 1));
    end
    check_dc(0.12);
    check_dc(-0.08);
    $display("%0t ps: capture", $realtime); $fflush;
    // Start a capture of a changing input; after eight frames read the first
    // four words back (the read port is independent of the write pointer).
    @(negedge frame_clk); cap_start = 1'b1;
    @(negedge frame_clk); cap_start = 1'b0;
    repeat (8) begin
      set_vd(real'($urandom_range(0, 300)) / 1000.0 - 0.15);
      @(negedge frame_clk);
    end
    begin
      logic [127:0] words [4];
      int o;
      for (int a = 0; a < 4; a++) begin
        @(negedge frame_clk); cap_rd_addr = 10'(a);
        @(posedge frame_clk); #1;
        words[a] = cap_rd_data;
      end
      o = -1;
      for (int s = 0; s + 4 <= nrec && o < 0; s++) begin
        automatic bit same = 1'b1;
        for (int a = 0; a < 4; a++) if (words[a] != rec[s + a]) same = 1'b0;
        if (same) o = s;
      end
      check(o >= 0, "SRAM words 0..3 are four consecutive aligner frames");
      check(words[0] != words[3], "captured frames differ (input changed)");
      check(!cap_full, "capture still running after 12 of 1024 frames");
    end
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
