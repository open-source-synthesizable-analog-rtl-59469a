`timescale 1ps/1fs
// Testbench for phase_interpolator: runs a 5 GHz input clock, sweeps the code
// over one full turn (L positions x 16 steps, L from the reported quantized
// period) and measures the output edge time modulo the period. Checks: the
// quantized period matches 200 ps / T_D within one delay, every code step
// moves the phase forward by less than 2 ps (monotonic, no jumps, including
// across the period boundary), and one full turn adds up to 200 ps.
module tb_phase_interpolator;
  localparam real T = 200.0;
  logic clk = 1'b0, rst_n = 1'b0;
  adc_pkg::pi_code_t code = '0;
  logic clk_out, sel_order;
  logic [5:0] n_period;
  int   checks = 0, failures = 0;
  real  t_in_edge;

  always #(T / 2.0) clk = ~clk;
  always @(posedge clk) t_in_edge = $realtime;

  phase_interpolator #(.N(32), .SEED(5)) dut (
    .clk_in(clk), .rst_n, .pi_ctrl(code), .buffer_ctrl('0), .clk_out, .sel_order, .n_period
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real phase_of();
    real p;
    p = $realtime - t_in_edge;
    while (p < 0.0) p += T;
    while (p >= T) p -= T;
    return p;
  endfunction

  initial begin
    int L, nsteps, nq;
    real prev, cur, step, total, maxstep;
    #1000 rst_n = 1'b1;
    repeat (10) @(posedge clk);
    nq = int'(n_period);
    check(nq >= 27 && nq <= 29, $sformatf("quantized period %0d, expected about 200/7", nq));
    L = (nq % 2 == 1) ? nq + 1 : nq + 2;
    nsteps = L * 16;
    repeat (4) @(posedge clk);
    @(posedge clk_out); prev = phase_of();
    total = 0.0; maxstep = 0.0;
    for (int c = 1; c <= nsteps; c++) begin
      code = adc_pkg::pi_code_t'(c % 512);
      repeat (4) @(posedge clk);
      @(posedge clk_out); cur = phase_of();
      step = cur - prev;
      if (step < -T / 2.0) step += T;
      if (step > T / 2.0)  step -= T;
      checks++;
      if (step < -0.05 || step > 2.0) begin
        failures++;
        $display("FAIL: code %0d step %f ps", c, step);
      end
      if (step > maxstep) maxstep = step;
      total += step;
      prev = cur;
    end
    $display("L=%0d total=%f ps max step=%f ps", L, total, maxstep);
    check(total > T - 1.0 && total < T + 1.0, $sformatf("one turn adds up to the period: %f", total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
