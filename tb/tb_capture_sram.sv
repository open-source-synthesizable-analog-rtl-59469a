`timescale 1ps/1fs
// Testbench for capture_sram (DEPTH 64, W 128): after a start pulse, frames
// carrying a running counter are written one per clock; full must rise after
// exactly DEPTH writes, later frames must not overwrite the capture, and every
// address must read back the frame written to it (one cycle read latency).
// A second capture checks that start restarts the pointer.
module tb_capture_sram;
  localparam int D = 64;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, full;
  logic [127:0] wdata = '0, rd_data;
  logic [5:0] rd_addr = '0;
  int   checks = 0, failures = 0;
  int   ctr = 0;

  always #400 clk = ~clk;
  always @(posedge clk) begin ctr <= ctr + 1; wdata <= {4{32'(ctr + 1)}}; end

  capture_sram #(.DEPTH(D), .W(128)) dut (.clk, .rst_n, .start, .wdata, .rd_addr, .rd_data, .full);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic capture_and_verify();
    int first, ncyc;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    first = int'(wdata[31:0]);           // the frame presented at the first write edge
    ncyc = 0;
    while (!full) begin @(posedge clk); #1; ncyc++; end
    check(ncyc == D, $sformatf("full after %0d writes", ncyc));
    repeat (5) @(posedge clk);
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rd_addr = 6'(a);
      @(posedge clk); #1;
      check(rd_data == {4{32'(first + a)}}, $sformatf("addr %0d read %h expected %0d", a, rd_data[31:0], first + a));
    end
  endtask

  initial begin
    #1000 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(!full, "not full after reset");
    capture_and_verify();
    repeat (7) @(posedge clk);
    capture_and_verify();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
