`timescale 1ps/1fs
// Synthesizable phase interpolator (behavioural model as a whole, because its
// delay cells, mixers and blender are analog).
//
// A 32-stage delay chain spreads the input clock over somewhat more than one
// period. Arbiters on every tap measure how many delays fit in one period; the
// encoder uses that count and the 9-bit code to (1) make the mixer at the
// period boundary blend its tap with the next input-clock edge, so the last,
// shorter step is split evenly and the rotation stays monotonic across the
// period edge, (2) choose an odd and an even buffered phase through the mux
// network, and (3) set how many of the blender's 16 shorted muxes take the
// even phase. Every tap passes through a trimmable buffer (buffer_ctrl) so
// that a path whose accumulated delay error exceeds one unit delay can be
// corrected after fabrication; the arbiter on the blender inputs (sel_order)
// is the detector for that case.
//
// Timing: the encoder registers its outputs on clk_in, so a new code takes
// effect on the second input-clock edge after it is applied. Code step is
// about T_D/16 (under half a picosecond for T_D = 7 ps).
module phase_interpolator #(
  parameter int N    = 32,
  parameter int SEED = 1
) (
  input  logic                  clk_in,
  input  logic                  rst_n,
  input  adc_pkg::pi_code_t     pi_ctrl,
  input  logic [N-1:0]          buffer_ctrl,
  output logic                  clk_out,
  output logic                  sel_order,
  output logic [$clog2(N):0]    n_period
);
  localparam int NB = adc_pkg::PI_N_BLEND;

  logic [N-1:0]         phi, arb, mixer_ctrl, phm, phb;
  logic [$clog2(N)-1:0] mux_ctrl;
  logic                 wrap, ph_sel1, ph_sel2;
  logic [NB-1:0]        blender_ctrl;

  pi_delay_chain #(.N(N), .SEED(SEED)) u_chain (.clk_in, .phi);

  for (genvar k = 0; k < N; k++) begin : g_tap
    arbiter        u_arb (.a(phi[k]), .b(clk_in), .a_first(arb[k]));
    pi_phase_mixer u_mix (.ph_in1(phi[k]), .ph_in2(clk_in), .ctrl(mixer_ctrl[k]), .ph_out(phm[k]));
    pi_adj_buffer  u_buf (.ph_in(phm[k]), .ctrl(buffer_ctrl[k]), .ph_out(phb[k]));
  end

  pi_encoder #(.N(N), .CTRL_W(adc_pkg::PI_CTRL_W), .NB(NB)) u_enc (
    .clk(clk_in), .rst_n, .pi_ctrl, .arb, .mixer_ctrl, .mux_ctrl, .wrap, .blender_ctrl, .n_period
  );

  pi_mux_network #(.N(N)) u_mux (.phb, .mux_ctrl, .wrap, .ph_sel1, .ph_sel2);

  arbiter u_sel_arb (.a(ph_sel1), .b(ph_sel2), .a_first(sel_order));

  pi_phase_blender #(.N(NB)) u_blend (.ph_sel1, .ph_sel2, .ctrl(blender_ctrl), .clk_out);
endmodule
