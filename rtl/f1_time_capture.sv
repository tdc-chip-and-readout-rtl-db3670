// f1_time_capture: measures the time of an input edge. Used for the current
// time of each channel, for the reference time and for the trigger time.
//
// How it works: the rising edge of 'ev' itself clocks a register that takes
// the 19 ring stage outputs and the coarse time base (no fast clock samples
// the input). A toggle bit marks a new capture; it is brought into the osc_clk
// domain by two flip-flops, and one cycle later the ring state is decoded to
// a phase 0..37 and added to the time base: tstamp = tbase + phase, in bins.
//
// Timing: 'valid' pulses for one clk cycle 3 cycles after the edge (about
// 17 ns at 5.7 ns per cycle). A second edge within that time overwrites the
// first, which sets the double pulse resolution. Only rising edges are
// measured here; the top inverts an input to measure its trailing edges.
// In silicon the multi-bit base must be captured with a dual-counter scheme
// to avoid sampling it while it changes; this model captures it directly.
`timescale 1ps/1ps
module f1_time_capture (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ev,
  input  logic [f1_pkg::NTAP-1:0] taps,
  input  logic [f1_pkg::TW-1:0]   tbase,
  output logic                    valid,
  output logic [f1_pkg::TW-1:0]   tstamp
);
  import f1_pkg::*;

  logic [NTAP-1:0] taps_q;
  logic [TW-1:0]   base_q;
  logic            tog;
  logic [2:0]      sync;

  always_ff @(posedge ev or negedge rst_n)
    if (!rst_n) begin
      taps_q <= '0;
      base_q <= '0;
      tog    <= 1'b0;
    end else begin
      taps_q <= taps;
      base_q <= tbase;
      tog    <= ~tog;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync   <= '0;
      valid  <= 1'b0;
      tstamp <= '0;
    end else begin
      sync  <= {sync[1:0], tog};
      valid <= sync[2] ^ sync[1];
      if (sync[2] ^ sync[1])
        tstamp <= base_q + TW'(ring_phase(taps_q));
    end
endmodule
