// f1_trigger_matcher: trigger matching of one channel. For the oldest
// buffered trigger it copies the hits whose time lies inside the window
// [start, start + window) from the hit buffer to the output buffer, preceded
// by one header word carrying the event number and the window start.
//
// The hit buffer holds hits in time order, so the matcher walks it from the
// oldest hit: hits before the window are discarded, hits inside it are copied
// and removed, and the first hit after the window ends the search (it may
// belong to a later trigger). Matching of a trigger starts only when the
// current time has passed the window end by MARGIN units of 4.8 ns, so that
// every hit of the window has left the time capture and reached the hit
// buffer. Times are compared on the 4.8 ns scale (hit bits 15:5) modulo 2^11;
// a difference with bit 10 set counts as "before the window", so windows must
// be shorter than 1024 units (4.9 us). In high resolution mode hit words are
// in 75 ps units and the comparison is made on bits 15:6 modulo 2^10.
// A hit left waiting longer than half this range would alias into the
// future, so while idle the matcher discards a head hit whose age against
// 'now' has bit 10 set (bit 9 in high resolution mode), i.e. hits older than
// 4.9 us (2.5 us) that no trigger has claimed.
// When its output buffer is full the matcher waits: the stall reaches the
// hit buffer, which keeps taking hits (see f1_hit_buffer).
// The paper gives the principle (hits inside a preset window around the
// trigger are accepted); header format, walk order and MARGIN are this
// design's choices. A disabled matcher reports 'done' without output.
// Timing: one hit word per cycle; 'done' stays high until 'release_i'.
`timescale 1ps/1ps
module f1_trigger_matcher #(
  parameter int unsigned MARGIN = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic                   hires,
  input  logic                   trig_valid,
  input  logic [f1_pkg::TRW-1:0] trig_start,
  input  logic [f1_pkg::EVW-1:0] trig_evnum,
  input  logic [f1_pkg::TRW-1:0] window,
  input  logic [f1_pkg::TRW-1:0] now,
  input  logic                   release_i,
  input  logic                   hit_valid,
  input  logic [f1_pkg::TW-1:0]  hit_data,
  output logic                   hit_pop,
  input  logic                   ob_full,
  output logic                   ob_wr,
  output f1_pkg::obuf_word_t     ob_data,
  output logic                   done,
  output logic                   stall
);
  import f1_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_SCAN, S_DONE} state_e;
  state_e state;

  logic [TRW-1:0] d, age;
  logic [9:0]     d_hr;
  logic           is_old, is_in, ready, stale;

  assign d_hr   = hit_data[TW-1 -: 10] - trig_start[9:0];
  assign d      = hires ? {d_hr[9], d_hr} : hit_data[TW-1 -: TRW] - trig_start;
  assign is_old = d[TRW-1];
  assign is_in = !is_old && (d < window);
  assign age    = now - trig_start;
  assign stale  = hires ? (10'(now[9:0] - hit_data[TW-1 -: 10]) >= 10'd512)
                        : (TRW'(now - hit_data[TW-1 -: TRW]) >= TRW'(1024));
  assign ready  = {1'b0, age} >= {1'b0, window} + (TRW+1)'(MARGIN);
  assign done   = (state == S_DONE);

  always_comb begin
    hit_pop = 1'b0;
    ob_wr   = 1'b0;
    ob_data = '0;
    stall   = 1'b0;
    unique case (state)
      S_IDLE: hit_pop = hit_valid && stale;
      S_HDR: begin
        ob_wr   = !ob_full;
        ob_data = '{hdr: 1'b1, payload: {trig_evnum, trig_start[9:0]}};
        stall   = ob_full;
      end
      S_SCAN:
        if (hit_valid) begin
          if (is_old) begin
            hit_pop = 1'b1;
          end else if (is_in) begin
            ob_wr   = !ob_full;
            hit_pop = !ob_full;
            ob_data = '{hdr: 1'b0, payload: hit_data};
            stall   = ob_full;
          end
        end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= S_IDLE;
    else
      unique case (state)
        S_IDLE:
          if (trig_valid) begin
            if (!enable)    state <= S_DONE;
            else if (ready) state <= S_HDR;
          end
        S_HDR:  if (!ob_full) state <= S_SCAN;
        S_SCAN: if (!hit_valid || (!is_old && !is_in)) state <= S_DONE;
        S_DONE: if (release_i) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
endmodule
