`timescale 1ps/1fs
// Testbench for arbiter: races two rising edges with random separations of
// either sign and checks that a_first names the earlier one.
module tb_arbiter;
  logic a = 1'b0, b = 1'b0, a_first;
  int   checks = 0, failures = 0;

  arbiter dut (.a, .b, .a_first);

  initial begin
    for (int i = 0; i < 200; i++) begin
      int d;
      d = int'($urandom_range(1, 40)) * (($urandom_range(0, 1) == 1) ? 1 : -1);
      a = 1'b0; b = 1'b0;
      #100;
      if (d > 0) begin a = 1'b1; #(d); b = 1'b1; end
      else       begin b = 1'b1; #(-d); a = 1'b1; end
      #5;
      checks++;
      if (a_first !== (d > 0)) begin
        failures++;
        $display("FAIL: separation %0d ps, a_first=%b", d, a_first);
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
