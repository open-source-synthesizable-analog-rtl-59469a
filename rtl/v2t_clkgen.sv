`timescale 1ps/1fs
// V2T clock generator (behavioural model: the early/late offsets are analog
// delay cells).
//
// A divide-by-4 counter on the slice clock produces CLK_DIV, which also drives
// the STDC delay line. From the same counter the block derives the two
// non-overlapping V2T phases: phi1 (sample) is high for one slice-clock period
// out of four, phi2 is its complement (discharge). Two skewed copies are made:
// phi1e is phi1 advanced by T_EARLY, so the bottom-plate switch opens first,
// and phi2l is phi2 delayed by T_LATE, so discharge starts only after the
// sampling switches have settled.
//
// The counter advances on the falling edge of clk: in the interleaved ADC the
// first-stage T&H switch holds while its phase is low, and the slice must end
// its own sampling inside that hold window. div_phase selects the counter
// start state, i.e. which of four slices sharing a clock converts when.
// The 25% duty, the falling-edge choice and div_phase are this design's; the
// divide ratio and the four phases are the paper's.
//
// Timing: phi1e falls T_EARLY after the counter's falling clock edge; phi1
// falls and phi2 rises 2*T_EARLY after it; phi2l rises T_LATE after phi2.
module v2t_clkgen #(
  parameter real T_EARLY = 5.0,
  parameter real T_LATE  = 5.0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] div_phase,
  output logic       clk_div,
  output logic       phi1e,
  output logic       phi1,
  output logic       phi2,
  output logic       phi2l
);
  logic [1:0] cnt;
  logic       s1;

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= div_phase;
    else        cnt <= cnt + 2'd1;
  end

  always_comb begin
    clk_div = cnt[1];
    s1      = (cnt == 2'd0);
  end

  assign #(T_EARLY)          phi1e = s1;
  assign #(2.0 * T_EARLY)    phi1  = s1;
  assign #(2.0 * T_EARLY)    phi2  = ~s1;
  assign #(2.0 * T_EARLY + T_LATE) phi2l = ~s1;
endmodule
