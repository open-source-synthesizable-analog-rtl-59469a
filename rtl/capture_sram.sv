`timescale 1ps/1fs
// Capture SRAM for off-chip static calibration.
//
// A pulse on start clears the write pointer; from the next clk on, one frame
// (all slices' codes) is written per cycle until DEPTH frames are stored and
// full rises. The array is then read out through rd_addr/rd_data (one cycle
// of read latency), so that a look-up table correcting each slice's static
// non-linearity can be computed off chip from the code histograms. The paper
// places an on-chip SRAM between the aligner and the off-chip correction; the
// depth, width and capture protocol are this design's. Written as an array,
// which synthesis maps to a memory.
module capture_sram #(
  parameter int DEPTH = 1024,
  parameter int W     = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  output logic                     full
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr;
  logic          active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr   <= '0;
      active <= 1'b0;
      full   <= 1'b0;
    end else if (start) begin
      wptr   <= '0;
      active <= 1'b1;
      full   <= 1'b0;
    end else if (active) begin
      wptr <= wptr + 1'b1;
      if (wptr == (AW+1)'(DEPTH - 1)) begin
        active <= 1'b0;
        full   <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (active && !start) mem[wptr[AW-1:0]] <= wdata;
    rd_data <= mem[rd_addr];
  end
endmodule
