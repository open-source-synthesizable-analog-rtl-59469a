`timescale 1ps/1fs
// Testbench for th_switch: while phi is high the output follows a changing
// input; after phi falls it keeps the value at the falling edge regardless of
// later input changes.
module tb_th_switch;
  logic phi = 1'b0;
  real  vin = 0.0, vout;
  int   checks = 0, failures = 0;

  th_switch dut (.vin, .phi, .vout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 50; i++) begin
      real held;
      phi = 1'b1;
      repeat (3) begin
        vin = real'($urandom_range(0, 900)) / 1000.0; #10;
        check(vout == vin, "tracks while phi is high");
      end
      held = vin;
      phi = 1'b0; #1;
      repeat (3) begin
        vin = real'($urandom_range(0, 900)) / 1000.0; #10;
        check(vout == held, "holds while phi is low");
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
