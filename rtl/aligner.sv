`timescale 1ps/1fs
// Double-flop aligner for the interleaved slices.
//
// Each slice delivers its code in its own clock phase. The first flop of each
// lane captures the slice's code on the falling edge of that slice's
// conversion clock (half a phase after the code changed, so it is stable);
// the second flop moves all lanes into the common frame clock clk_out. A lane
// therefore has a fixed latency of one or two frames depending on its phase,
// and every frame holds one code from each slice. The paper names the double
// flop aligner; the capture edges are this design's choice.
module aligner #(
  parameter int N = 16,
  parameter int W = 8
) (
  input  logic [N-1:0]        slice_clk,
  input  logic [N-1:0][W-1:0] slice_data,
  input  logic                clk_out,
  input  logic                rst_n,
  output logic [N-1:0][W-1:0] frame
);
  logic [N-1:0][W-1:0] stage1;

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic [W-1:0] s1;
    always_ff @(negedge slice_clk[i]) s1 <= slice_data[i];
    assign stage1[i] = s1;
  end

  always_ff @(posedge clk_out or negedge rst_n) begin
    if (!rst_n) frame <= '0;
    else        frame <= stage1;
  end
endmodule
