`timescale 1ps/1fs
// Unfolder: turns the unsigned STDC count back into a signed ADC code.
//
// The phase folder made the pulse width |dt| + D_offset and reported the sign
// of dt separately. The unfolder subtracts the current offset estimate and
// applies the sign:
//     c       = count - offset
//     adc_out = sign ? -c - 1 : c          (saturated to the signed range)
// Using -c-1 (one's complement) on the negative side keeps the positive and
// negative halves from both producing code 0, so a correct offset estimate
// gives a histogram with no peak and no gap at zero. The subtraction and sign
// restoration are the paper's; the one's-complement fold and saturation are
// this design's choices.
//
// Timing: one register stage on clk (the slice's Phi1 rising edge, after the
// STDC count has settled); valid pulses for one clk cycle per conversion.
module unfolder #(
  parameter int W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [W-1:0]        count,
  input  logic                sign,
  input  logic [W-1:0]        offset,
  output logic signed [W-1:0] adc_out,
  output logic                valid
);
  localparam logic signed [W+1:0] MAXV = (W+2)'((1 <<< (W-1)) - 1);
  localparam logic signed [W+1:0] MINV = (W+2)'(-(1 <<< (W-1)));

  logic signed [W+1:0] c, v;

  always_comb begin
    c = $signed({2'b00, count}) - $signed({2'b00, offset});
    v = sign ? (-c - 1) : c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_out <= '0;
      valid   <= 1'b0;
    end else begin
      valid <= 1'b1;
      if (v > MAXV)      adc_out <= MAXV[W-1:0];
      else if (v < MINV) adc_out <= MINV[W-1:0];
      else               adc_out <= v[W-1:0];
    end
  end
endmodule
