`timescale 1ps/1fs
// PI mux network: picks the two phases the blender interpolates between.
//
// Phases are numbered 1..N as in the delay chain (phb[k] is phase k+1). One
// 16:1 mux picks an odd phase for ph_sel1, another picks an even phase for
// ph_sel2. Segment s = mux_ctrl spans phases s+1 and s+2; one of them is odd
// and the other even, so stepping s changes only one mux at a time (as in the
// sequence phi1/phi2, phi3/phi2, phi3/phi4, ...). The odd pick is
// phase 2*ceil(s/2)+1, the even pick phase 2*floor(s/2)+2.
//
// wrap is this design's addition: on the last segment of a clock period the
// next odd phase is phase 1 of the following cycle, which the 5-bit segment
// number alone cannot express; wrap forces the odd pick to phase 1.
// Purely combinational on clock signals.
module pi_mux_network #(
  parameter int N = 32
) (
  input  logic [N-1:0]         phb,
  input  logic [$clog2(N)-1:0] mux_ctrl,
  input  logic                 wrap,
  output logic                 ph_sel1,
  output logic                 ph_sel2
);
  localparam int SW = $clog2(N);
  logic [SW-1:0] i_odd, j_even;   // index among the N/2 odd / even phases
  logic [SW:0]   s1;

  always_comb begin
    s1     = {1'b0, mux_ctrl} + 1'b1;
    i_odd  = SW'(s1 >> 1);
    j_even = SW'(mux_ctrl >> 1);
    if (wrap || i_odd >= SW'(N / 2)) i_odd = '0;
    ph_sel1 = phb[{i_odd[SW-2:0], 1'b0}];
    ph_sel2 = phb[{j_even[SW-2:0], 1'b1}];
  end
endmodule
