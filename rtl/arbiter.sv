`timescale 1ps/1fs
// Edge arbiter: tells which of two rising edges arrived first.
//
// It is a single flip-flop clocked by b that samples a. When b rises, a_first
// takes the value 1 if a had already risen (and is still high), 0 otherwise.
// The result is valid from the rising edge of b until its next rising edge.
// The paper names arbiters (in the phase folder and the phase interpolator)
// without giving their circuit; the flip-flop form is this design's choice.
module arbiter (
  input  logic a,
  input  logic b,
  output logic a_first
);
  always_ff @(posedge b) a_first <= a;
endmodule
