`timescale 1ps/1fs
// Phase blender (behavioural model of 16 output-shorted muxes).
//
// Each of the N muxes drives the shared output from ph_sel1 (ctrl bit 0) or
// ph_sel2 (ctrl bit 1). With w of the N bits set, the shorted output switches
// at the weighted mean of the two input edges:
//     t_out = t1 + (w / N) * (t2 - t1) + T_BLEND
// where t1, t2 are matching edges (same direction, less than PAIR_WIN apart)
// of ph_sel1 and ph_sel2. Only the number of set bits matters; the encoder
// drives a thermometer code. The ideal linear blend and T_BLEND are this
// model's; T_BLEND must exceed PAIR_WIN.
module pi_phase_blender #(
  parameter int  N        = 16,
  parameter real T_BLEND  = 40.0,
  parameter real PAIR_WIN = 30.0
) (
  input  logic         ph_sel1,
  input  logic         ph_sel2,
  input  logic [N-1:0] ctrl,
  output logic         clk_out
);
  real t1 [2];
  real t2 [2];

  initial begin
    clk_out = 1'b0;
    t1 = '{-1.0e9, -1.0e9};
    t2 = '{-1.0e9, -1.0e9};
  end

  function automatic real weight();
    automatic int w = 0;
    for (int i = 0; i < N; i++) w += int'(ctrl[i]);
    return real'(w) / real'(N);
  endfunction

  task automatic drive(input logic v, input real d);
    fork
      begin
        #(d);
        clk_out = v;
      end
    join_none
  endtask

  always @(posedge ph_sel1 or negedge ph_sel1) begin
    automatic real now = $realtime;
    t1[ph_sel1] = now;
    if (now - t2[ph_sel1] < PAIR_WIN)
      drive(ph_sel1, now + weight() * (t2[ph_sel1] - now) + T_BLEND - now);
  end

  always @(posedge ph_sel2 or negedge ph_sel2) begin
    automatic real now = $realtime;
    t2[ph_sel2] = now;
    if (now - t1[ph_sel2] < PAIR_WIN)
      drive(ph_sel2, t1[ph_sel2] + weight() * (now - t1[ph_sel2]) + T_BLEND - now);
  end
endmodule
