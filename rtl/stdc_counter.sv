`timescale 1ps/1fs
// Stochastic TDC sampler and adder tree.
//
// A divided clock runs down a chain of N unit inverters (stdc_delay_line).
// Because the clock period is unrelated to the inverter delay, the taps' rising
// edges fall at quasi-uniformly spread instants within one clock period. This
// block gives each tap a flip-flop clocked by that tap which samples the pulse
// P_IN: the flop holds 1 exactly when its tap rose while P_IN was high. The
// sum of all N flops, taken on the falling edge of P_IN, is therefore the
// number of tap edges inside the pulse, i.e. the pulse width in units of
// (clock period / N). With N = 255 taps the count fits 8 bits.
//
// Timing: P_IN must be shorter than one period of the divided clock, so that
// no tap rises twice inside it; then every flop has been rewritten since the
// previous pulse and the count needs no reset. count is valid from the falling
// edge of P_IN until the next one. Sampling P_IN with the tap as clock, and
// registering the sum on P_IN's falling edge, are this design's choices; the
// paper gives the tap count, the flip-flop row and the adder.
module stdc_counter #(
  parameter int N = 255,
  parameter int W = 8
) (
  input  logic [N-1:0] phi,
  input  logic         p_in,
  output logic [W-1:0] count
);
  logic [N-1:0] hit;

  for (genvar k = 0; k < N; k++) begin : g_tap
    logic h;
    always_ff @(posedge phi[k]) h <= p_in;
    assign hit[k] = h;
  end

  // Adder tree: a population count of the hit vector.
  function automatic logic [W-1:0] popcount(input logic [N-1:0] v);
    logic [W-1:0] s;
    s = '0;
    for (int i = 0; i < N; i++) s = s + W'(v[i]);
    return s;
  endfunction

  always_ff @(negedge p_in) count <= popcount(hit);
endmodule
