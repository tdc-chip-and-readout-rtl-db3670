// f1_pkg: types and constants shared by the F1 TDC modules.
//
// Time is counted in bins of the ring oscillator. The ring has 19 stages and is
// asymmetric, so one oscillator period passes through 2*19 = 38 distinct stage
// states; a 16-bit time stamp is coarse_count*38 + phase, one LSB being one bin
// (150 ps nominal, 0 .. 9,830,250 ps over 16 bits). Trigger times use the upper
// 11 bits of that scale (32 bins = 4.8 ns per LSB).
//
// Word formats (17-bit output-buffer word and 24-bit readout word) follow the
// widths printed in the chip outline; the meaning of the individual fields is a
// choice of this design (see the comments on each type).
`timescale 1ps/1ps
package f1_pkg;

  localparam int unsigned NCH    = 8;   // TDC channels
  localparam int unsigned NWIRE  = 4;   // inputs per channel in latch mode
  localparam int unsigned NTAP   = 19;  // ring oscillator stages
  localparam int unsigned NPHASE = 2 * NTAP;  // bins per oscillator period
  localparam int unsigned TW     = 16;  // time stamp width
  localparam int unsigned TRW    = 11;  // trigger time width
  localparam int unsigned EVW    = 6;   // trigger (event) counter width

  // Operating modes.
  typedef enum logic [1:0] {
    MODE_STD    = 2'd0,  // 8 channels, 150 ps
    MODE_HIRES  = 2'd1,  // 4 channel pairs, 75 ps
    MODE_LATCH  = 2'd2,  // 32 inputs, pattern recognition
    MODE_CSTART = 2'd3   // common start, no trigger matching
  } mode_e;

  // Output buffer word, 17 bits. hdr=1: trigger header, payload =
  // {event number[5:0], window start[9:0]}; hdr=0: hit, payload = hit word.
  typedef struct packed {
    logic        hdr;
    logic [15:0] payload;
  } obuf_word_t;

  // Readout word, 24 bits.
  typedef struct packed {
    logic [2:0]  chan;
    logic        hdr;
    logic [3:0]  rsvd;     // always zero
    logic [15:0] payload;
  } ro_word_t;

  // Configuration written over the serial setup link.
  typedef struct packed {
    mode_e       mode;
    logic        bus8;         // 1: readout over 8 bits, 0: over 24 bits
    logic [7:0]  ch_enable;
    logic [10:0] trig_offset;  // trigger latency, 4.8 ns units
    logic [10:0] trig_window;  // window width, 4.8 ns units
    logic [4:0]  latch_hold;   // latch-mode hold time, coarse periods
    logic [15:0] ref_period;   // internal reference reset period, ref clocks, 0 = off
    logic [7:0]  edge_fall;    // per channel: 1 = measure trailing (falling) edges
  } cfg_t;

  // Ring state -> phase 0..37. Phase p < 19: stages 0..p-1 high, the rest low.
  // Phase p >= 19: stages p-19..18 high, the rest low.
  function automatic logic [5:0] ring_phase(input logic [NTAP-1:0] taps);
    logic [5:0] ones;
    ones = '0;
    for (int i = 0; i < NTAP; i++) ones += 6'(taps[i]);
    if (taps[0])        return ones;
    else if (ones == 0) return 6'd0;
    else                return 6'(NPHASE) - ones;
  endfunction

  // Ring state of a phase (inverse of ring_phase), used by models and tests.
  function automatic logic [NTAP-1:0] phase_taps(input int unsigned p);
    logic [NTAP-1:0] t;
    for (int i = 0; i < NTAP; i++)
      t[i] = (p < NTAP) ? (i < p) : (i >= p - NTAP);
    return t;
  endfunction

endpackage
