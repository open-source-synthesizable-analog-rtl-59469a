`timescale 1ps/1fs
// Bias generator built from logic gates (behavioural model: its output is an
// analog voltage).
//
// An array of W gate drivers, each enabled by one bias_ctrl bit, is shorted to
// a capacitor-loaded node; enabled drivers pull up, the rest pull down, so the
// node settles at a fraction of the supply set by the number of enabled
// drivers. The model is the ideal divider
//     vbias = VDD * ones(bias_ctrl) / W.
// The node feeds the current-source cells of every V2T. W and the ideal
// divider law are this model's.
module biasgen #(
  parameter int W = 8
) (
  input  logic [W-1:0] bias_ctrl,
  output real          vbias
);
  always_comb begin
    automatic int k = 0;
    for (int i = 0; i < W; i++) k += int'(bias_ctrl[i]);
    vbias = adc_pkg::VDD * real'(k) / real'(W);
  end
endmodule
