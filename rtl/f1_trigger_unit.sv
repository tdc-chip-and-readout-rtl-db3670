// f1_trigger_unit: the shared trigger path of the chip.
// For each measured trigger edge it
//   1. forms the trigger time relative to the last reference reset from the
//      upper 11 bits of the trigger and reference time stamps (LSB = 32 bins,
//      4.8 ns; range 0-9,830 ns),
//   2. subtracts the programmed trigger offset (the trigger latency), giving
//      the start of the matching window,
//   3. numbers the trigger with a 6-bit trigger counter, and
//   4. stores window start and number in two 4-deep trigger buffers
//      (4 x 11 and 4 x 6 bits).
// The eight trigger matchers all work on the oldest buffered trigger; when
// each has signalled 'all_done' the entry is removed ('release' pulses for
// one cycle). A trigger arriving with the buffers full is lost: 'lost'
// pulses, but the counter still advances, so event numbers stay aligned with
// an external trigger count. Widths and depths are the paper's; the order of
// operations follows the outline, the full-buffer rule is this design's.
// Timing: a trigger is visible at the head one cycle after 'trig_valid'.
// Lint note: bits 4:0 of the two time inputs are unused on purpose; the
// trigger time has 4.8 ns resolution (bits 15:5).
`timescale 1ps/1ps
module f1_trigger_unit #(
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   trig_valid,
  input  logic [f1_pkg::TW-1:0]  trig_time,
  input  logic [f1_pkg::TW-1:0]  ref_time,
  input  logic [f1_pkg::TRW-1:0] offset,
  input  logic                   all_done,
  output logic                   head_valid,
  output logic [f1_pkg::TRW-1:0] head_start,
  output logic [f1_pkg::EVW-1:0] head_evnum,
  output logic                   release_o,
  output logic                   lost,
  output logic [f1_pkg::EVW-1:0] evcount
);
  import f1_pkg::*;

  logic [TRW-1:0] trel, tstart;
  logic           full_t, full_e, empty_t, empty_e, push;
  logic [$clog2(DEPTH+1)-1:0] cnt_t, cnt_e;

  assign trel       = trig_time[TW-1 -: TRW] - ref_time[TW-1 -: TRW];
  assign tstart     = trel - offset;
  assign push       = trig_valid && !full_t;
  assign head_valid = !empty_t;
  assign release_o  = head_valid && all_done;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      evcount <= '0;
      lost    <= 1'b0;
    end else begin
      lost <= trig_valid && full_t;
      if (trig_valid) evcount <= evcount + 1'b1;
    end

  f1_fifo #(.W(TRW), .DEPTH(DEPTH)) u_time_buf (
    .clk, .rst_n, .push, .din(tstart), .pop(release_o),
    .dout(head_start), .empty(empty_t), .full(full_t), .count(cnt_t));

  f1_fifo #(.W(EVW), .DEPTH(DEPTH)) u_num_buf (
    .clk, .rst_n, .push, .din(evcount), .pop(release_o),
    .dout(head_evnum), .empty(empty_e), .full(full_e), .count(cnt_e));

  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin
    end else a_bufs_in_step: assert (cnt_t == cnt_e && full_t == full_e && empty_t == empty_e)
      else $error("f1_trigger_unit: time and number buffers out of step");
endmodule
