// f1_async_fifo: the interface FIFO (16 words of 24 bits) between the chip
// core, clocked by the ring oscillator, and the readout bus, clocked by the
// reader (up to 50 MHz). Classic dual-clock FIFO: binary pointers with one
// extra wrap bit, exchanged between the domains in Gray code through two
// flip-flops. Output is show-ahead ('rdata' is the oldest word while 'empty'
// is low). The size is the paper's; the dual-clock structure is this design's
// choice, made because the paper gives the readout bus its own frequency.
// DEPTH must be a power of two. Timing: a written word is seen by the reader
// 2-3 rclk cycles later; 'full' releases 2-3 wclk cycles after a read.
`timescale 1ps/1ps
module f1_async_fifo #(
  parameter int unsigned W     = 24,
  parameter int unsigned DEPTH = 16
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray, wg_r1, wg_r2, rg_w1, rg_w2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wgray = b2g(wbin);
  assign rgray = b2g(rbin);
  assign full  = (wgray == {~rg_w2[AW:AW-1], rg_w2[AW-2:0]});
  assign empty = (rgray == wg_r2);
  assign rdata = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk)
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;

  always_ff @(posedge wclk or negedge wrst_n)
    if (!wrst_n) begin
      wbin  <= '0;
      rg_w1 <= '0;
      rg_w2 <= '0;
    end else begin
      rg_w1 <= rgray;
      rg_w2 <= rg_w1;
      if (wr_en && !full) wbin <= wbin + 1'b1;
    end

  always_ff @(posedge rclk or negedge rrst_n)
    if (!rrst_n) begin
      rbin  <= '0;
      wg_r1 <= '0;
      wg_r2 <= '0;
    end else begin
      wg_r1 <= wgray;
      wg_r2 <= wg_r1;
      if (rd_en && !empty) rbin <= rbin + 1'b1;
    end
endmodule
