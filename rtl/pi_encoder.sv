`timescale 1ps/1fs
// Phase-interpolator encoder.
//
// Inputs are the PI code and the arbiters' snapshot of the delay chain; the
// outputs steer the boundary mixers, the mux network and the phase blender.
//
// Quantized period. Arbiter k samples phase k+1 at the input clock's rising
// edge, so it reads 1 while that phase's delay lies between half and one clock
// period. The first run of ones therefore ends at the last phase that still
// falls inside the period: N = (index of that last 1) + 1, the number of whole
// delays per clock period. N is clamped to NMAX so the positions fit the chain.
//
// Phase positions. One period is covered by L positions: phases 1..N, then
// mixer N+1 blending phase N+1 with the next input-clock edge (and, when N is
// even, mixer N+2 as well, so that L is even and the odd/even alternation of
// the mux network wraps cleanly). L = N+1 for odd N, N+2 for even N.
//
// Code. seg = pi_ctrl[8:4] modulo L picks the segment, f = pi_ctrl[3:0] the
// 1/16 step within it. The blender's weight toward the even phase is f on
// even segments and 16-f on odd ones, so the output moves monotonically and
// only one mux input changes at each segment step. On the last segment
// (seg = L-1) wrap tells the mux network to take phase 1 of the next cycle.
//
// The paper gives the encoder's inputs and outputs and the selection sequence;
// the arbiter reading, the second blended mixer, the modulo-L wrap and the
// exact code split are this design's. Outputs are registered on clk.
module pi_encoder #(
  parameter int N      = 32,
  parameter int CTRL_W = 9,
  parameter int NB     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CTRL_W-1:0]    pi_ctrl,
  input  logic [N-1:0]         arb,
  output logic [N-1:0]         mixer_ctrl,
  output logic [$clog2(N)-1:0] mux_ctrl,
  output logic                 wrap,
  output logic [NB-1:0]        blender_ctrl,
  output logic [$clog2(N):0]   n_period
);
  localparam int SW   = $clog2(N);
  localparam int FW   = $clog2(NB);
  localparam int NMAX = N - 2;

  logic [SW:0]   n_q, l_pos, seg;
  logic [FW-1:0] f;
  logic [FW:0]   w;
  logic          found;
  logic [N-1:0]  mix_d;
  logic [NB-1:0] therm_d;

  always_comb begin
    // first 1 -> 0 transition of the arbiter word
    n_q   = (SW+1)'(NMAX);
    found = 1'b0;
    for (int k = 0; k < N - 1; k++) begin
      if (!found && arb[k] && !arb[k+1]) begin
        n_q   = (SW+1)'(k + 1);
        found = 1'b1;
      end
    end
    if (n_q > (SW+1)'(NMAX)) n_q = (SW+1)'(NMAX);
    if (n_q < (SW+1)'(2))    n_q = (SW+1)'(2);
    l_pos = n_q[0] ? n_q + 1'b1 : n_q + (SW+1)'(2);

    mix_d = '0;
    mix_d[n_q[SW-1:0]] = 1'b1;
    if (!n_q[0]) mix_d[n_q[SW-1:0] + 1'b1] = 1'b1;

    seg = (SW+1)'(pi_ctrl[CTRL_W-1:FW]);
    for (int r = 0; r < 16; r++) if (seg >= l_pos) seg = seg - l_pos;
    f = pi_ctrl[FW-1:0];
    w = seg[0] ? (FW+1)'(NB) - (FW+1)'(f) : (FW+1)'(f);
    for (int i = 0; i < NB; i++) therm_d[i] = ((FW+1)'(i) < w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mixer_ctrl   <= '0;
      mux_ctrl     <= '0;
      wrap         <= 1'b0;
      blender_ctrl <= '0;
      n_period     <= '0;
    end else begin
      mixer_ctrl   <= mix_d;
      mux_ctrl     <= seg[SW-1:0];
      wrap         <= (seg == l_pos - 1'b1);
      blender_ctrl <= therm_d;
      n_period     <= n_q;
    end
  end
endmodule
