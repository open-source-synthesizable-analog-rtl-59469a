`timescale 1ps/1fs
// Phase folder (behavioural model: D_offset is an analog delay line).
//
// The two V2Ts encode the differential input as the time difference between
// the rising edges of t_inp and t_inn. The phase folder turns that signed
// time into an unsigned pulse plus a sign bit:
//   * p_in rises with the first of the two edges and falls D_OFFSET after the
//     second, so its width is |t_inp - t_inn| + D_OFFSET (about 100 ps at
//     zero input, which keeps the pulse wide enough for the STDC);
//   * an arbiter decides which edge came first; sign = 1 when t_inp came
//     first. A higher V2T input discharges longer, so t_inp first means a
//     negative differential input.
// Both V2T outputs return low at the next sampling phase, which ends the
// pulse cycle. The sign polarity is this design's choice.
module phase_folder #(
  parameter real D_OFFSET = 100.0
) (
  input  logic t_inp,
  input  logic t_inn,
  output logic sign,
  output logic p_in
);
  logic both, both_d;

  arbiter u_arb (.a(t_inp), .b(t_inn), .a_first(sign));

  assign both = t_inp & t_inn;
  assign #(D_OFFSET) both_d = both;
  assign p_in = (t_inp | t_inn) & ~both_d;
endmodule
