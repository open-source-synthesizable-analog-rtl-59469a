`timescale 1ps/1fs
// Adjustable buffer, the "B" cell of the phase interpolator (behavioural
// model: drive strength is analog).
//
// A buffer with a second tri-state driver in parallel. ctrl = 1 enables the
// extra driver, which shortens the delay from T_WEAK to T_STRONG. After
// fabrication, a path whose accumulated delay breaks the PI's monotonicity is
// trimmed by setting its bit. The two delay values are this model's.
module pi_adj_buffer #(
  parameter real T_WEAK   = 12.0,
  parameter real T_STRONG = 10.0
) (
  input  logic ph_in,
  input  logic ctrl,
  output logic ph_out
);
  initial ph_out = 1'b0;

  always @(posedge ph_in or negedge ph_in) begin
    automatic logic v = ph_in;
    automatic real  d = ctrl ? T_STRONG : T_WEAK;
    fork
      begin
        #(d);
        ph_out = v;
      end
    join_none
  end
endmodule
