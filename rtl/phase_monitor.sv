`timescale 1ps/1fs
// On-chip delay monitor based on uncorrelated sampling.
//
// An asynchronous clock, unrelated in frequency to the clock under test,
// samples both the PI input clock (clk_ref) and its output (clk_dut). The XOR
// of the two samples is 1 whenever the sampling instant fell between an edge
// of clk_ref and the matching edge of clk_dut. Because the sampling instants
// are uniformly spread over the clock period, the fraction of ones over M
// samples estimates the delay: for 50% duty clocks and a delay d below half a
// period T,
//     pm_out / M  ~=  2 d / T.
// An accumulator counts the ones; a divide-by-M counter on clk_async latches
// the total into pm_out, pulses pm_valid and restarts the sum. The structure
// (two samplers, XOR, accumulator with reset, divide-by-M, output register)
// follows the paper's figure; M is this design's choice.
module phase_monitor #(
  parameter int M = 65536
) (
  input  logic                 clk_async,
  input  logic                 rst_n,
  input  logic                 clk_ref,
  input  logic                 clk_dut,
  output logic [$clog2(M):0]   pm_out,
  output logic                 pm_valid
);
  localparam int AW = $clog2(M) + 1;

  logic          s_ref, s_dut;
  logic [AW-1:0] acc;
  logic [AW-1:0] n;
  logic          x;

  always_ff @(posedge clk_async) begin
    s_ref <= clk_ref;
    s_dut <= clk_dut;
  end

  assign x = s_ref ^ s_dut;

  always_ff @(posedge clk_async or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      n        <= '0;
      pm_out   <= '0;
      pm_valid <= 1'b0;
    end else if (n == AW'(M - 1)) begin
      pm_out   <= acc + AW'(x);
      pm_valid <= 1'b1;
      acc      <= '0;
      n        <= '0;
    end else begin
      acc      <= acc + AW'(x);
      n        <= n + 1'b1;
      pm_valid <= 1'b0;
    end
  end
endmodule
