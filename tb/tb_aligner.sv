`timescale 1ps/1fs
// Testbench for aligner: 16 slice clocks of period 800 ps staggered by 50 ps
// (phi1-like, 200 ps high). Lane k presents, at each rising edge of its clock,
// the conversion number n (mod 16) in its upper nibble and k in the lower.
// Checks: each frame carries every lane's own index, each lane advances by
// exactly one conversion per frame, and across a frame the conversion
// numbers of consecutive lanes never go backwards by more than one frame
// (they are aligned to within one conversion period).
module tb_aligner;
  localparam int N = 16;
  logic [N-1:0] sclk = '0;
  logic [N-1:0][7:0] sdata = '0;
  logic clk_out = 1'b0, rst_n = 1'b0;
  logic [N-1:0][7:0] frame;
  int   checks = 0, failures = 0;

  aligner #(.N(N), .W(8)) dut (.slice_clk(sclk), .slice_data(sdata), .clk_out, .rst_n, .frame);

  for (genvar k = 0; k < N; k++) begin : g_src
    initial begin
      automatic int n = 0;
      #(1000.0 + 50.0 * k);
      forever begin
        sclk[k] = 1'b1;
        sdata[k] = {4'(n), 4'(k)};
        n++;
        #200 sclk[k] = 1'b0;
        #600;
      end
    end
  end

  initial begin
    #1025;
    forever begin clk_out = 1'b1; #400; clk_out = 1'b0; #400; end
  end

  initial begin
    logic [N-1:0][7:0] prev;
    #500 rst_n = 1'b1;
    repeat (4) @(posedge clk_out);
    #1 prev = frame;
    for (int f = 0; f < 40; f++) begin
      @(posedge clk_out); #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (frame[k][3:0] != 4'(k) || frame[k][7:4] != prev[k][7:4] + 4'd1) begin
          failures++;
          $display("FAIL: frame %0d lane %0d = %h (previous %h)", f, k, frame[k], prev[k]);
        end
        if (k > 0) begin
          checks++;
          if (4'(frame[k-1][7:4] - frame[k][7:4]) > 4'd1) begin
            failures++;
            $display("FAIL: lanes %0d/%0d misaligned: %h %h", k - 1, k, frame[k-1], frame[k]);
          end
        end
      end
      prev = frame;
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
