`timescale 1ps/1fs
// Voltage-to-time converter (behavioural model of an analog circuit).
//
// The real circuit samples its input onto a capacitor C_S, then discharges the
// held voltage V_C toward ground through a constant current source; a digital
// buffer whose first gate is a 3-input NOR (threshold below VDD/2) produces a
// rising edge when V_C crosses its threshold. The input voltage is thereby
// encoded as the time of that edge.
//
// Model: V_C is the value of vin when phi1e falls (bottom-plate sampling with
// the early phase). When phi2l rises the discharge starts; t_in rises
//     (V_C - VTH) / slope
// later, with slope = SLOPE_V_PER_PS * (vbias - 0.2 V) / (VB_NOM - 0.2 V), a
// first-order stand-in for the current cell's dependence on its bias. t_in
// falls when phi1 rises (the next sampling phase). An input already below the
// threshold fires at the start of the discharge. VTH, the slope and the bias
// law are this model's numbers, not published ones.
module v2t #(
  parameter real VTH            = 0.30,
  parameter real SLOPE_V_PER_PS = 0.0008,
  parameter real VB_NOM         = 0.5625
) (
  input  real  vin,
  input  real  vbias,
  input  logic phi1e,
  input  logic phi1,
  input  logic phi2l,
  output logic t_in
);
  real vc;
  real slope;
  real t_fire;
  int  gen;   // discharge generation; a new sampling phase cancels a pending edge

  initial begin
    t_in = 1'b0;
    vc   = 0.0;
    gen  = 0;
  end

  always @(negedge phi1e) vc = vin;

  always @(posedge phi1) begin
    gen  = gen + 1;
    t_in = 1'b0;
  end

  always @(posedge phi2l) begin
    automatic int my_gen = gen;
    slope  = SLOPE_V_PER_PS * (vbias - 0.2) / (VB_NOM - 0.2);
    if (slope < 1.0e-6) slope = 1.0e-6;
    t_fire = (vc > VTH) ? (vc - VTH) / slope : 0.0;
    fork
      begin
        #(t_fire);
        if (gen == my_gen) t_in = 1'b1;
      end
    join_none
  end
endmodule
