`timescale 1ps/1fs
// First-stage passive track-and-hold switch (behavioural model of an analog
// switch).
//
// While phi is high vout follows vin; when phi falls vout keeps the last
// value. In the interleaved ADC one such switch per group feeds the four
// slices of that group without a buffer; the slices' own input switches form
// the second stage. Ideal: no charge sharing, no bandwidth limit.
module th_switch (
  input  real  vin,
  input  logic phi,
  output real  vout
);
  real held;
  initial held = 0.0;
  always @(negedge phi) held = vin;
  assign vout = phi ? vin : held;
endmodule
