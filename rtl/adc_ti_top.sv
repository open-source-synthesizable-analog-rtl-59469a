`timescale 1ps/1fs
// 16-channel time-interleaved ADC, 20 GS/s, built from stochastic-TDC slices
// and synthesizable phase interpolators (behavioural model as a whole, since
// it contains the analog front end, delay lines and interpolators).
//
// Clocking. A quarter-rate clock clk (5 GHz) feeds four phase
// interpolators. PI g receives code pi_ctrl + ph_ofs[g]; ph_ofs sets the
// nominal 0/90/180/270 degree spacing and trims the skew of each phase. PI g's
// output clocks group g: one first-stage track-and-hold switch and four
// slices. The four slices of a group divide that clock by 4 with staggered
// start states, so each converts every fourth edge: 4 groups x 4 slices x
// 1.25 GS/s = 20 GS/s. Sample order: group g at edge e is sample 4e+g.
//
// Signal path. vin_p/vin_n -> first-stage switch of group g (holds while its
// clock is low) -> slice input switches (second stage) -> V2T -> phase folder
// -> STDC -> unfolder with background offset loop -> 8-bit signed code.
// The aligner retimes all 16 codes into frame, on frame_clk = clk / 4.
// The capture SRAM stores frames for off-chip static correction, and one
// delay monitor per PI measures that PI's delay with the asynchronous clock
// clk_async. biasgen sets the V2T current-source bias.
//
// Slice index i = 4*g + m, where m is the slice's divider start state.
// The structure and sizes follow the paper; the frame clock, the code
// addition (modulo 512) and the capture protocol are this design's.
module adc_ti_top #(
  parameter int N_SLICE  = 16,
  parameter int N_STDC   = 255,
  parameter int N_PI     = 4,
  parameter int BIAS_W   = 8,
  parameter int SRAM_D   = 1024,
  parameter int PM_M     = 65536,
  parameter int ADAPT_LOG2_WIN = 12
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  real                                    vin_p,
  input  real                                    vin_n,
  input  adc_pkg::pi_code_t                      pi_ctrl,
  input  adc_pkg::pi_code_t [N_PI-1:0]           ph_ofs,
  input  logic [N_PI-1:0][31:0]                  buffer_ctrl,
  input  logic [BIAS_W-1:0]                      bias_ctrl,
  input  logic                                   adapt_en,
  input  logic                                   cap_start,
  input  logic [$clog2(SRAM_D)-1:0]              cap_rd_addr,
  input  logic                                   clk_async,
  output logic [N_SLICE-1:0][7:0]                frame,
  output logic                                   frame_clk,
  output logic [N_SLICE*8-1:0]                   cap_rd_data,
  output logic                                   cap_full,
  output logic [N_PI-1:0][$clog2(PM_M):0]        pm_out,
  output logic [N_PI-1:0]                        pm_valid,
  output logic [N_PI-1:0]                        sel_order,
  output logic [N_PI-1:0][5:0]                   n_period,
  output adc_pkg::stdc_count_t [N_SLICE-1:0]     offsets,
  output logic [N_PI-1:0]                        pi_clk
);
  localparam int PER_GROUP = N_SLICE / N_PI;

  real vbias;
  real vh_p [N_PI];
  real vh_n [N_PI];
  logic [N_SLICE-1:0]        conv_clk, valid;
  logic [N_SLICE-1:0][7:0]   codes;
  logic [1:0]                fdiv;

  biasgen #(.W(BIAS_W)) u_bias (.bias_ctrl, .vbias);

  for (genvar g = 0; g < N_PI; g++) begin : g_grp
    adc_pkg::pi_code_t code;
    assign code = pi_ctrl + ph_ofs[g];

    phase_interpolator #(.N(32), .SEED(101 + g)) u_pi (
      .clk_in(clk), .rst_n, .pi_ctrl(code), .buffer_ctrl(buffer_ctrl[g]),
      .clk_out(pi_clk[g]), .sel_order(sel_order[g]), .n_period(n_period[g])
    );

    phase_monitor #(.M(PM_M)) u_pm (
      .clk_async, .rst_n, .clk_ref(clk), .clk_dut(pi_clk[g]), .pm_out(pm_out[g]), .pm_valid(pm_valid[g])
    );

    th_switch u_sw_p (.vin(vin_p), .phi(pi_clk[g]), .vout(vh_p[g]));
    th_switch u_sw_n (.vin(vin_n), .phi(pi_clk[g]), .vout(vh_n[g]));

    for (genvar m = 0; m < PER_GROUP; m++) begin : g_sl
      adc_pkg::adc_code_t   sc;
      adc_pkg::stdc_count_t so;
      adc_slice #(.N_STDC(N_STDC), .ADAPT_LOG2_WIN(ADAPT_LOG2_WIN), .SEED(7 + 16 * g + m)) u_slice (
        .clk(pi_clk[g]), .rst_n, .div_phase(2'(m)), .vin_p(vh_p[g]), .vin_n(vh_n[g]),
        .vbias, .adapt_en, .adc_out(sc), .valid(valid[PER_GROUP*g+m]),
        .conv_clk(conv_clk[PER_GROUP*g+m]), .offset(so)
      );
      assign codes[PER_GROUP*g+m]   = sc;
      assign offsets[PER_GROUP*g+m] = so;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fdiv <= '0;
    else        fdiv <= fdiv + 2'd1;
  end
  assign frame_clk = fdiv[1];

  aligner #(.N(N_SLICE), .W(8)) u_align (
    .slice_clk(conv_clk), .slice_data(codes), .clk_out(frame_clk), .rst_n, .frame
  );

  capture_sram #(.DEPTH(SRAM_D), .W(N_SLICE * 8)) u_sram (
    .clk(frame_clk), .rst_n, .start(cap_start), .wdata(frame), .rd_addr(cap_rd_addr),
    .rd_data(cap_rd_data), .full(cap_full)
  );
endmodule
