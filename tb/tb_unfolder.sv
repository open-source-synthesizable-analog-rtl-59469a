`timescale 1ps/1fs
// Testbench for unfolder: random counts, signs and offsets, compared with the
// reference fold (c = count - offset; sign ? -c-1 : c; saturate to 8 bits),
// one register stage of latency.
module tb_unfolder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] count, offset;
  logic sign;
  logic signed [7:0] adc_out;
  logic valid;
  int   checks = 0, failures = 0;

  always #400 clk = ~clk;

  unfolder #(.W(8)) dut (.clk, .rst_n, .count, .sign, .offset, .adc_out, .valid);

  initial begin
    count = '0; offset = '0; sign = 1'b0;
    #1000 rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      int c, v;
      @(negedge clk);
      count  = 8'($urandom_range(0, 255));
      offset = 8'($urandom_range(0, 64));
      sign   = 1'($urandom_range(0, 1));
      c = int'(count) - int'(offset);
      v = sign ? -c - 1 : c;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      @(posedge clk); #1;
      checks++;
      if (int'(adc_out) != v || !valid) begin
        failures++;
        $display("FAIL: count %0d offset %0d sign %b -> %0d expected %0d", count, offset, sign, adc_out, v);
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
