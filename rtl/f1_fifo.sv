// f1_fifo: synchronous first-in first-out buffer with show-ahead output
// ('dout' is the oldest word whenever 'empty' is low). Used as the per-channel
// output buffer (8 x 17 bits in the chip) and for the trigger buffers
// (4 x 11 and 4 x 6 bits). Push and pop in the same cycle are allowed when
// the FIFO is neither empty nor full; a push into a full FIFO and a pop from an
// empty one are ignored (callers check 'full'/'empty'; an assertion flags a
// push into a full FIFO). Depth need not be a power of two.
`timescale 1ps/1ps
module f1_fifo #(
  parameter int unsigned W     = 17,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk)
    if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= nxt(wp);
      if (do_pop)  rp <= nxt(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end

  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin
    end else a_no_overrun: assert (!(push && full))
      else $error("f1_fifo: push into full FIFO");
endmodule
