`timescale 1ps/1fs
// Shared constants and types of the 20 GS/s time-interleaved stochastic-TDC ADC
// and its 5 GHz phase interpolator.
//
// The numbers here are the published ones: 8-bit codes, a 255-inverter STDC,
// a 32-stage PI delay chain with a 9-bit code and a 16-way phase blender,
// 16 interleaved slices, and a 0.9 V supply. Everything else (analog
// constants, window lengths) lives as a parameter of the module that uses it.
package adc_pkg;
  localparam int  ADC_W      = 8;    // ADC output code width
  localparam int  N_STDC     = 255;  // unit inverters in the stochastic TDC
  localparam int  PI_N_DELAY = 32;   // delay cells in the PI delay chain
  localparam int  PI_CTRL_W  = 9;    // PI control code width
  localparam int  PI_N_BLEND = 16;   // output-shorted muxes in the phase blender
  localparam int  N_SLICE    = 16;   // interleaved ADC slices
  localparam int  N_GROUP    = 4;    // first-stage T&H switches / PIs
  localparam real VDD        = 0.9;  // supply (V)

  typedef logic signed [ADC_W-1:0] adc_code_t;
  typedef logic [ADC_W-1:0]        stdc_count_t;
  typedef logic [PI_CTRL_W-1:0]    pi_code_t;
endpackage
