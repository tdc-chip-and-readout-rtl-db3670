// f1_hit_buffer: hit buffers of one channel pair. Each channel has DEPTH
// (16) words of 16 bits; in high resolution mode ('joined') the pair works as
// one channel and its two buffers form one buffer of 2*DEPTH (32) words, as
// the paper states ("the hit buffer for a single channel is increased by a
// factor of two"). Channel 1 is then idle.
//
// Each buffer is a circular FIFO with show-ahead read ('rd_data' is the
// oldest hit while 'rd_valid' is high). A hit is never refused, so input is
// free of dead time: writing into a full buffer overwrites the oldest hit
// and pulses 'overflow' (this policy is this design's choice; the paper gives
// only the sizes). Changing 'joined' empties both buffers.
// Timing: a word written in one cycle is readable in the next.
`timescale 1ps/1ps
module f1_hit_buffer #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = f1_pkg::TW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               joined,
  input  logic [1:0]         wr,
  input  logic [1:0][W-1:0]  wdata,
  input  logic [1:0]         pop,
  output logic [1:0]         rd_valid,
  output logic [1:0][W-1:0]  rd_data,
  output logic [1:0]         overflow
);
  localparam int unsigned AW = $clog2(2 * DEPTH);

  logic [W-1:0]  mem [2*DEPTH];
  logic [AW-1:0] wp [2], rp [2];
  logic [AW:0]   cnt [2];
  logic          joined_q;

  function automatic logic [AW-1:0] cap(input logic j);
    return j ? AW'(2 * DEPTH - 1) : AW'(DEPTH - 1);  // highest pointer value
  endfunction

  function automatic logic [AW-1:0] addr(input int c, input logic j, input logic [AW-1:0] p);
    return j ? p : AW'(c * DEPTH) + p;
  endfunction

  always_comb
    for (int c = 0; c < 2; c++) begin
      rd_valid[c] = (cnt[c] != '0) && !(joined && c == 1);
      rd_data[c]  = mem[addr(c, joined, rp[c])];
    end

  always_ff @(posedge clk)
    for (int c = 0; c < 2; c++)
      if (wr[c] && !(joined && c == 1) && joined == joined_q)
        mem[addr(c, joined, wp[c])] <= wdata[c];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      joined_q <= 1'b0;
      overflow <= '0;
      for (int c = 0; c < 2; c++) begin
        wp[c]  <= '0;
        rp[c]  <= '0;
        cnt[c] <= '0;
      end
    end else begin
      joined_q <= joined;
      overflow <= '0;
      for (int c = 0; c < 2; c++) begin
        logic act, w, p, isfull;
        act    = !(joined && c == 1) && joined == joined_q;
        isfull = (cnt[c] == (AW+1)'(cap(joined)) + 1'b1);
        w      = act && wr[c];
        p      = act && pop[c] && cnt[c] != '0;
        if (!act) begin
          wp[c]  <= '0;
          rp[c]  <= '0;
          cnt[c] <= '0;
        end else begin
          if (w)
            wp[c] <= (wp[c] == cap(joined)) ? '0 : wp[c] + 1'b1;
          if (p || (w && isfull))
            rp[c] <= (rp[c] == cap(joined)) ? '0 : rp[c] + 1'b1;
          if (w && !p && !isfull) cnt[c] <= cnt[c] + 1'b1;
          else if (p && !w)       cnt[c] <= cnt[c] - 1'b1;
          overflow[c] <= w && isfull && !p;
        end
      end
    end
endmodule
