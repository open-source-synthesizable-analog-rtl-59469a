`timescale 1ps/1fs
// STDC delay line (behavioural model: inverter delays and their mismatch are
// analog quantities).
//
// A chain of N non-precise unit inverters driven by the divided clock. Stage k
// inverts the output of stage k-1 after its own delay T_UNIT * (1 + e_k),
// with e_k drawn once, uniformly in [-MISMATCH, +MISMATCH], from a generator
// seeded by SEED. The chain is several clock periods long, so its taps'
// rising edges, folded into one period, are spread quasi-uniformly: this is
// what lets the STDC measure a pulse width by counting tap edges, without any
// precise delay. The chain length is the paper's; the unit delay and the
// mismatch distribution are this model's.
//
// phi[k] is the output of inverter k+1 (phi[0] inverts clk_div).
module stdc_delay_line #(
  parameter int  N        = 255,
  parameter real T_UNIT   = 15.0,
  parameter real MISMATCH = 0.2,
  parameter int  SEED     = 1
) (
  input  logic         clk_div,
  output logic [N-1:0] phi
);
  real dly [N];

  initial begin
    automatic int unsigned x = 32'(SEED) * 32'd2654435761 + 32'd1;
    for (int k = 0; k < N; k++) begin
      x = x * 32'd1103515245 + 32'd12345;
      dly[k] = T_UNIT * (1.0 + MISMATCH * (2.0 * real'(x[30:15]) / 65535.0 - 1.0));
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_inv
    logic src, o;
    if (k == 0) begin : g_first
      assign src = clk_div;
    end else begin : g_next
      assign src = g_inv[k-1].o;
    end
    initial o = k[0];
    always @(posedge src or negedge src) begin
      automatic logic v = ~src;
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
