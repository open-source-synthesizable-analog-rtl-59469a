`timescale 1ps/1fs
// Phase-interpolator delay chain (behavioural model: analog delay cells).
//
// N non-inverting delay cells in series; phi[k] is the input clock delayed by
// k+1 cells. Each cell's delay is T_D * (1 + e_k), e_k drawn once, uniformly
// in [-MISMATCH, +MISMATCH], from a generator seeded by SEED. The chain must be
// longer than one input-clock period: the arbiters then find where the period
// ends. N = 32 is the paper's; T_D and the mismatch are this model's.
module pi_delay_chain #(
  parameter int  N        = 32,
  parameter real T_D      = 7.0,
  parameter real MISMATCH = 0.05,
  parameter int  SEED     = 1
) (
  input  logic         clk_in,
  output logic [N-1:0] phi
);
  real dly [N];

  initial begin
    automatic int unsigned x = 32'(SEED) * 32'd2246822519 + 32'd7;
    for (int k = 0; k < N; k++) begin
      x = x * 32'd1103515245 + 32'd12345;
      dly[k] = T_D * (1.0 + MISMATCH * (2.0 * real'(x[30:15]) / 65535.0 - 1.0));
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_cell
    logic src, o;
    if (k == 0) begin : g_first
      assign src = clk_in;
    end else begin : g_next
      assign src = g_cell[k-1].o;
    end
    initial o = 1'b0;
    always @(posedge src or negedge src) begin
      automatic logic v = src;
      fork
        begin
          #(dly[k]);
          o = v;
        end
      join_none
    end
    assign phi[k] = o;
  end
endmodule
