`timescale 1ps/1fs
// Testbench for offset_adapt, closed loop with a reference model of the
// stochastic front end: each cycle a magnitude m (uniform, 0..100 codes) and a
// random sign are drawn, the STDC count is m + D (true offset D = 37, in
// counts) and the code is unfolded with the loop's current estimate. The
// estimate starts at 32 and must settle within +/-1 of 37. A second phase
// moves D to 30 and checks that the loop follows it down.
module tb_offset_adapt;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [7:0] code;
  logic [7:0] offset;
  int   checks = 0, failures = 0;
  int   d_true = 37;

  always #5 clk = ~clk;

  offset_adapt #(.W(8), .LOG2_WIN(10), .INIT_OFFSET(32)) dut (
    .clk, .rst_n, .en(1'b1), .in_valid(1'b1), .adc_out(code), .offset
  );

  always @(negedge clk) begin
    int m, c, v;
    m = int'($urandom_range(0, 100));
    c = m + d_true - int'(offset);
    v = ($urandom_range(0, 1) == 1) ? -c - 1 : c;
    code = 8'(v);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    code = '0;
    #20 rst_n = 1'b1;
    check(offset == 8'd32, "reset value");
    repeat (1024 * 30) @(posedge clk);
    check(int'(offset) >= d_true - 1 && int'(offset) <= d_true + 1, $sformatf("settled at %0d, true %0d", offset, d_true));
    d_true = 30;
    repeat (1024 * 30) @(posedge clk);
    check(int'(offset) >= d_true - 1 && int'(offset) <= d_true + 1, $sformatf("settled at %0d, true %0d", offset, d_true));
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
