`timescale 1ps/1fs
// Phase mixer, the "M" cell of the phase interpolator (behavioural model:
// edge averaging is an analog effect of shorted drivers).
//
// With ctrl = 0 the cell is a buffer: ph_out follows ph_in1 after T_BUF.
// With ctrl = 1 it blends: each edge of ph_out lands T_BUF after the mean of
// the matching edges of ph_in1 and ph_in2 (same direction, less than
// PAIR_WIN apart). In the PI, ph_in1 is a delay-chain phase and ph_in2 the
// input clock; the encoder sets ctrl only at the clock-period boundary, where
// averaging the first delay-chain edge past the period with the next input
// clock edge splits the short leftover step evenly. T_BUF must exceed
// PAIR_WIN/2 so the output edge is never scheduled in the past.
module pi_phase_mixer #(
  parameter real T_BUF    = 20.0,
  parameter real PAIR_WIN = 30.0
) (
  input  logic ph_in1,
  input  logic ph_in2,
  input  logic ctrl,
  output logic ph_out
);
  real t1 [2];   // last edge time of ph_in1, index = new level
  real t2 [2];   // last edge time of ph_in2

  initial begin
    ph_out = 1'b0;
    t1 = '{-1.0e9, -1.0e9};
    t2 = '{-1.0e9, -1.0e9};
  end

  task automatic drive(input logic v, input real d);
    fork
      begin
        #(d);
        ph_out = v;
      end
    join_none
  endtask

  always @(posedge ph_in1 or negedge ph_in1) begin
    automatic real now = $realtime;
    t1[ph_in1] = now;
    if (!ctrl) drive(ph_in1, T_BUF);
    else if (now - t2[ph_in1] < PAIR_WIN) drive(ph_in1, (t2[ph_in1] - now) / 2.0 + T_BUF);
  end

  always @(posedge ph_in2 or negedge ph_in2) begin
    automatic real now = $realtime;
    t2[ph_in2] = now;
    if (ctrl && (now - t1[ph_in2] < PAIR_WIN)) drive(ph_in2, (t1[ph_in2] - now) / 2.0 + T_BUF);
  end
endmodule
