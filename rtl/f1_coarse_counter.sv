// f1_coarse_counter: counts ring-oscillator periods. It runs on osc_clk, whose
// rising edge marks phase 0 of the ring, and keeps two views of the count:
// 'count', the number of periods, and 'tbase', the time in bins at which the
// current period started (count * 38, modulo 2^16). Because 2^16*38 is a
// multiple of 2^16, tbase stays continuous when the count wraps, so a 16-bit
// time stamp tbase + phase is a plain modulo-2^16 bin count.
// The paper names the coarse counter; keeping the product as a running sum
// is this design's choice. Timing: both outputs change on each osc_clk edge.
`timescale 1ps/1ps
module f1_coarse_counter #(
  parameter int unsigned W = f1_pkg::TW
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] count,
  output logic [W-1:0] tbase
);
  import f1_pkg::*;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      count <= '0;
      tbase <= '0;
    end else begin
      count <= count + 1'b1;
      tbase <= tbase + W'(NPHASE);
    end
endmodule
