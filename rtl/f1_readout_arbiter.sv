// f1_readout_arbiter: moves words from the eight per-channel output buffers
// into the shared interface FIFO, one word per cycle, and turns each 17-bit
// output-buffer word into a 24-bit readout word by adding the channel number
// (see f1_pkg::ro_word_t). Channels are served round robin starting after the
// one served last, so a busy channel cannot lock out the others. The outline
// shows the eight buffers feeding the FIFO; the arbitration rule and the word
// layout are this design's. Timing: the pop and FIFO write happen in the same
// cycle, combinationally from 'ob_valid' and 'fifo_full'.
`timescale 1ps/1ps
module f1_readout_arbiter #(
  parameter int unsigned N = f1_pkg::NCH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  ob_valid,
  input  f1_pkg::obuf_word_t [N-1:0]    ob_head,
  output logic [N-1:0]                  ob_pop,
  input  logic                          fifo_full,
  output logic                          fifo_wr,
  output f1_pkg::ro_word_t              fifo_data
);
  import f1_pkg::*;

  localparam int unsigned CW = $clog2(N);

  logic [CW-1:0] last, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = 1; i <= N; i++) begin
      logic [CW-1:0] c;
      c = CW'((int'(last) + i) % N);
      if (!found && ob_valid[c]) begin
        found = 1'b1;
        pick  = c;
      end
    end
    fifo_wr   = found && !fifo_full;
    ob_pop    = '0;
    ob_pop[pick] = fifo_wr;
    fifo_data = '{chan: 3'(pick), hdr: ob_head[pick].hdr, rsvd: 4'b0,
                  payload: ob_head[pick].payload};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       last <= CW'(N - 1);
    else if (fifo_wr) last <= pick;
endmodule
