`timescale 1ps/1fs
// Testbench for pi_mux_network: for every segment and wrap value, drives a
// one-hot pattern on each phase in turn and checks that ph_sel1 carries the
// expected odd phase (1-based 2*ceil(s/2)+1, or phase 1 on wrap) and ph_sel2
// the expected even phase (2*floor(s/2)+2). Also checks that stepping the
// segment changes only one of the two selections.
module tb_pi_mux_network;
  logic [31:0] phb;
  logic [4:0]  mux_ctrl;
  logic        wrap, s1, s2;
  int          checks = 0, failures = 0;

  pi_mux_network #(.N(32)) dut (.phb, .mux_ctrl, .wrap, .ph_sel1(s1), .ph_sel2(s2));

  initial begin
    int prev_o, prev_e;
    prev_o = -1; prev_e = -1;
    for (int s = 0; s < 32; s++) begin
      for (int w = 0; w < 2; w++) begin
        int odd_ph, even_ph, got_o, got_e;
        odd_ph  = (w == 1 || ((s + 1) / 2) >= 16) ? 1 : 2 * ((s + 1) / 2) + 1;
        even_ph = 2 * (s / 2) + 2;
        mux_ctrl = 5'(s); wrap = 1'(w);
        got_o = -1; got_e = -1;
        for (int p = 1; p <= 32; p++) begin
          phb = 32'b1 << (p - 1);
          #1;
          if (s1) got_o = p;
          if (s2) got_e = p;
        end
        checks++;
        if (got_o != odd_ph || got_e != even_ph) begin
          failures++;
          $display("FAIL: seg %0d wrap %0d got %0d/%0d expected %0d/%0d", s, w, got_o, got_e, odd_ph, even_ph);
        end
        if (w == 0 && s > 0 && s < 31) begin
          checks++;
          if ((got_o != prev_o) && (got_e != prev_e)) begin
            failures++;
            $display("FAIL: both selections changed at segment %0d", s);
          end
        end
        if (w == 0) begin prev_o = got_o; prev_e = got_e; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
