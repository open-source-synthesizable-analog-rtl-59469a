`timescale 1ps/1fs
// Testbench for biasgen: every control word of an 8-driver array gives
// vbias = 0.9 V * ones / 8.
module tb_biasgen;
  logic [7:0] ctrl;
  real vbias;
  int  checks = 0, failures = 0;

  biasgen #(.W(8)) dut (.bias_ctrl(ctrl), .vbias);

  initial begin
    for (int c = 0; c < 256; c++) begin
      real e;
      ctrl = 8'(c);
      #1;
      e = 0.9 * real'($countones(ctrl)) / 8.0;
      checks++;
      if (vbias < e - 1e-9 || vbias > e + 1e-9) begin
        failures++;
        $display("FAIL: ctrl %b vbias %f expected %f", ctrl, vbias, e);
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
