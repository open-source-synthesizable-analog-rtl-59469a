`timescale 1ps/1fs
// Background offset adaptation for the STDC ADC slice.
//
// The phase folder adds a fixed delay D_offset to every pulse so that the STDC
// never sees a pulse narrower than about 100 ps. The unfolder must subtract
// the same amount in STDC counts, but the count equivalent of D_offset varies
// from slice to slice. This loop estimates it from the output codes alone.
//
// If the estimate is too small, codes of both signs are pushed away from zero
// and a gap opens around code 0. If it is too large, the positive and
// negative halves overlap and a peak forms around code 0. The loop keeps a
// two-bin histogram over a window of 2^LOG2_WIN codes:
//     C = number of codes in -2..1           (4 codes, the centre)
//     S = number of codes in -14..-11 and 10..13 (8 codes, the reference)
// For an input distribution that is smooth within +/-14 codes of zero, 2C is
// close to S; errors of up to about 10 counts are detected. At the end of a window:
//     2C > S + S/4  (peak) -> offset - 1
//     2C + S/4 < S  (gap)  -> offset + 1
// and both bins are cleared. The paper states only that the offset comes from
// a histogram-based background loop; the bins, window and step are this
// design's. The direction follows the unfolder arithmetic (see unfolder.sv).
//
// Interface: one code per clk when in_valid is high; offset changes at most
// once per window and is held while en is low.
module offset_adapt #(
  parameter int W           = 8,
  parameter int LOG2_WIN    = 12,
  parameter int INIT_OFFSET = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic signed [W-1:0] adc_out,
  output logic [W-1:0]        offset
);
  logic [LOG2_WIN-1:0] n_seen;
  logic [LOG2_WIN:0]   c_cnt, s_cnt;
  logic                is_c, is_s, last;
  logic [LOG2_WIN+1:0] two_c, s_hi, s_lo;

  always_comb begin
    is_c  = (adc_out >= -2) && (adc_out <= 1);
    is_s  = ((adc_out >= -14) && (adc_out <= -11)) || ((adc_out >= 10) && (adc_out <= 13));
    last  = (n_seen == '1);
    two_c = {c_cnt, 1'b0};
    s_hi  = (LOG2_WIN+2)'(s_cnt) + (LOG2_WIN+2)'(s_cnt >> 2);
    s_lo  = (LOG2_WIN+2)'(s_cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_seen <= '0;
      c_cnt  <= '0;
      s_cnt  <= '0;
      offset <= W'(INIT_OFFSET);
    end else if (en && in_valid) begin
      n_seen <= n_seen + 1'b1;
      if (last) begin
        c_cnt <= '0;
        s_cnt <= '0;
        if (two_c > s_hi && offset != '0)
          offset <= offset - 1'b1;
        else if (two_c + (LOG2_WIN+2)'(s_cnt >> 2) < s_lo && offset != '1)
          offset <= offset + 1'b1;
      end else begin
        c_cnt <= c_cnt + (LOG2_WIN+1)'(is_c);
        s_cnt <= s_cnt + (LOG2_WIN+1)'(is_s);
      end
    end
  end
endmodule
