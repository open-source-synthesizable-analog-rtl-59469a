`timescale 1ps/1fs
// One ADC slice of the time-interleaved converter: a voltage-to-time front end
// followed by a stochastic time-to-digital converter (behavioural model as a
// whole, since it contains the analog V2T, delay-line and folder models).
//
// Signal flow, per conversion (one period of clk_div = 4 slice-clock periods):
//   1. v2t_clkgen divides the slice clock by 4 and makes phi1e/phi1/phi2/phi2l.
//   2. Two V2Ts sample vin_p and vin_n during phi1 and discharge during phi2;
//      each raises its output when its held voltage crosses the threshold.
//   3. The phase folder turns the edge-time difference into a pulse p_in of
//      width |dt| + D_offset and a sign bit.
//   4. The STDC delay line spreads clk_div's edges over one period; the STDC
//      counter counts how many fall inside p_in (0..255).
//   5. The unfolder subtracts the offset estimate and restores the sign; the
//      offset loop refines the estimate from a histogram of the output codes.
// adc_out is registered on the rising edge of phi1 (conv_clk), one conversion
// after the sample was taken. Structure and sizes follow the paper; analog
// constants are set in the submodules.
module adc_slice #(
  parameter int N_STDC         = 255,
  parameter int ADAPT_LOG2_WIN = 12,
  parameter int SEED           = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            div_phase,
  input  real                   vin_p,
  input  real                   vin_n,
  input  real                   vbias,
  input  logic                  adapt_en,
  output adc_pkg::adc_code_t    adc_out,
  output logic                  valid,
  output logic                  conv_clk,
  output adc_pkg::stdc_count_t  offset
);
  // Kept as its own simulation class: flattening sixteen 255-tap slices into
  // one class makes the generated C++ too large for the host compiler.
  /* verilator no_inline_module */
  logic clk_div, phi1e, phi1, phi2, phi2l;
  logic t_inp, t_inn, sign, p_in;
  logic [N_STDC-1:0] phi;
  adc_pkg::stdc_count_t count;

  v2t_clkgen u_clkgen (.clk, .rst_n, .div_phase, .clk_div, .phi1e, .phi1, .phi2, .phi2l);

  v2t u_v2t_p (.vin(vin_p), .vbias, .phi1e, .phi1, .phi2l, .t_in(t_inp));
  v2t u_v2t_n (.vin(vin_n), .vbias, .phi1e, .phi1, .phi2l, .t_in(t_inn));

  phase_folder u_pf (.t_inp, .t_inn, .sign, .p_in);

  stdc_delay_line #(.N(N_STDC), .SEED(SEED)) u_dl (.clk_div, .phi);
  stdc_counter    #(.N(N_STDC), .W(adc_pkg::ADC_W)) u_cnt (.phi, .p_in, .count);

  unfolder #(.W(adc_pkg::ADC_W)) u_unf (
    .clk(phi1), .rst_n, .count, .sign, .offset, .adc_out, .valid
  );

  // Starting offset estimate: D_offset (100 ps) in STDC counts, with N_STDC
  // counts spanning the 800 ps conversion period.
  localparam int INIT_OFS = (N_STDC * 100 + 400) / 800;

  offset_adapt #(.W(adc_pkg::ADC_W), .LOG2_WIN(ADAPT_LOG2_WIN), .INIT_OFFSET(INIT_OFS)) u_ofs (
    .clk(phi1), .rst_n, .en(adapt_en), .in_valid(valid), .adc_out, .offset
  );

  assign conv_clk = phi1;
endmodule
