`timescale 1ps/1fs
// Testbench for pi_encoder: builds arbiter words for a chosen number of delays
// per period (ones from the half-period tap up to tap N, zeros after) and
// random codes, and compares all outputs one clock later with a reference:
//   L = N+1 (N odd) or N+2 (N even); seg = code[8:4] mod L; f = code[3:0];
//   weight = f (seg even) or 16-f (seg odd), as a thermometer;
//   mixer bit N set, and bit N+1 too when N is even; wrap when seg = L-1.
module tb_pi_encoder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [8:0]  code;
  logic [31:0] arb, mixer_ctrl;
  logic [4:0]  mux_ctrl;
  logic        wrap;
  logic [15:0] blender_ctrl;
  logic [5:0]  n_period;
  int          checks = 0, failures = 0;

  always #100 clk = ~clk;

  pi_encoder #(.N(32), .CTRL_W(9), .NB(16)) dut (
    .clk, .rst_n, .pi_ctrl(code), .arb, .mixer_ctrl, .mux_ctrl, .wrap, .blender_ctrl, .n_period
  );

  initial begin
    code = '0; arb = '0;
    #250 rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      int n, l, seg, f, w;
      logic [31:0] mix;
      logic [15:0] th;
      n = int'($urandom_range(17, 30));
      @(negedge clk);
      arb = '0;
      for (int k = n / 2; k < n; k++) arb[k] = 1'b1;
      code = 9'($urandom_range(0, 511));
      l = (n % 2 == 1) ? n + 1 : n + 2;
      seg = (int'(code) >> 4) % l;
      f = int'(code) & 15;
      w = (seg % 2 == 1) ? 16 - f : f;
      th = 16'((32'h1 << w) - 1);
      mix = 32'h1 << n;
      if (n % 2 == 0) mix |= 32'h1 << (n + 1);
      @(posedge clk); #1;
      checks++;
      if (int'(n_period) != n || int'(mux_ctrl) != seg || blender_ctrl != th || mixer_ctrl != mix || wrap != (seg == l - 1)) begin
        failures++;
        $display("FAIL: N=%0d code=%0d: n=%0d seg=%0d/%0d th=%h/%h mix=%h/%h wrap=%b", n, code,
                 n_period, mux_ctrl, seg, blender_ctrl, th, mixer_ctrl, mix, wrap);
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
