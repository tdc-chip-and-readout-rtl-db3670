// f1_tdc: top level of the F1 time-to-digital converter, an eight-channel
// trigger-matching TDC without a fast sampling clock.
//
// Time base: an asymmetric 19-stage ring oscillator, locked by a PLL to the
// reference clock (f1_ring_pll, a behavioural model), steps through 38
// states per period, one per 150 ps bin. Its period (5.7 ns) clocks the
// digital core and a coarse counter. An input edge latches the ring state and
// the coarse time (f1_time_capture), giving a 16-bit time stamp in bins.
//
// Reference: a "Reference reset / Common start" edge, or the periodic
// internal reset of f1_ref_reset_counter, sets the reference time; all hit
// and trigger times are taken relative to it. The time capture takes three
// core cycles, so a hit arriving within that time before a reset is taken
// relative to the new reference and reads as a small negative time.
//
// Channels: four f1_channel_pair instances hold the per-channel units for the
// four modes (standard, high resolution, latch, common start). In high
// resolution mode input 0 of each even channel is also fed, half a bin later
// (f1_half_lsb_delay), to the odd channel.
//
// Trigger: a trigger edge is measured like a hit, offset-corrected,
// numbered and buffered (f1_trigger_unit); every channel then matches its
// hits against the oldest trigger.
//
// Readout: f1_readout_arbiter collects the output buffers into the 16 x 24
// dual-clock interface FIFO, and f1_io_interface reads it onto an 8- or
// 24-bit bus with a 6-bit event number, clocked by 'rd_clk'.
// Setup: f1_setup_interface receives the configuration over a serial link;
// its DAC registers drive an AD8842 through f1_dac_interface.
//
// Edge select: the text names leading or trailing edges; here a register bit
// per channel picks one (the inputs are inverted before the time capture).
// Changing it while an input is high makes an edge; set it before taking data.
// Ports: hits[c][w] is input w of channel c (w = 0 in standard, high
// resolution and common start modes; w = 0..3 in latch mode). 'core_clk' is
// brought out for observation. Status outputs are sticky until reset.
// 'rst_n' resets both clock domains asynchronously.
// Lint note: some sub-block outputs are left unread at this level and stand
// as warnings: the raw coarse count (the time base uses 'tbase'), the
// trigger counter (event numbers travel with each trigger), the matchers'
// stall flags (a stall is visible as a full interface FIFO), the DAC busy
// flag (setup frames take far longer than one DAC load) and the DAC register
// copies.
`timescale 1ps/1ps
module f1_tdc #(
  parameter int unsigned BIN_PS   = 150,
  parameter int unsigned HB_DEPTH = 16,
  parameter int unsigned OB_DEPTH = 8,
  parameter int unsigned TB_DEPTH = 4,
  parameter int unsigned IF_DEPTH = 16,
  parameter int unsigned MARGIN   = 8,
  parameter int unsigned DAC_DIV  = 9
) (
  input  logic                                        rst_n,
  input  logic                                        ref_clk,
  input  logic                                        ref_reset,
  input  logic                                        trigger,
  input  logic [f1_pkg::NCH-1:0][f1_pkg::NWIRE-1:0]   hits,
  input  logic                                        setup_sclk,
  input  logic                                        setup_sdata,
  input  logic                                        setup_sen,
  input  logic                                        rd_clk,
  input  logic                                        rd_en,
  output logic [23:0]                                 data_out,
  output logic                                        data_valid,
  output logic [f1_pkg::EVW-1:0]                      event_number,
  output logic                                        dac_clk,
  output logic                                        dac_sdi,
  output logic                                        dac_ld,
  output logic                                        pll_locked,
  output logic                                        core_clk,
  output logic [f1_pkg::NCH-1:0]                      hit_overflow,
  output logic                                        trigger_lost,
  output logic                                        data_lost
);
  import f1_pkg::*;

  logic            clk;
  logic [NTAP-1:0] taps;
  logic [TW-1:0]   ccount, tbase, ref_time, now, ref_ts, trg_ts;
  logic            ref_v, trg_v, int_reset;
  cfg_t            cfg;
  logic            dac_wr, dac_busy;
  logic [2:0]      dac_addr;
  logic [7:0]      dac_data;
  logic [7:0]      dac_regs [8];

  logic            t_valid, t_release, t_lost;
  logic [TRW-1:0]  t_start;
  logic [EVW-1:0]  t_evnum, t_count;

  logic [NCH-1:0]  done, ob_pop, ob_valid, hb_ovf, ob_lost, stall;
  obuf_word_t [NCH-1:0] ob_head;
  logic [NCH/2-1:0] dly;
  logic [NCH-1:0][NWIRE-1:0] hits_p;

  logic            if_wr, if_full, if_empty, if_pop;
  ro_word_t        if_wdata, if_rdata;

  assign core_clk = clk;

  // edge select: a channel set to trailing edges sees its inputs inverted
  always_comb
    for (int c = 0; c < NCH; c++) hits_p[c] = hits[c] ^ {NWIRE{cfg.edge_fall[c]}};

  // ---------------- time base ----------------
  f1_ring_pll #(.BIN_PS(BIN_PS)) u_pll (
    .ref_clk, .taps, .osc_clk(clk), .locked(pll_locked));

  f1_coarse_counter u_coarse (.clk, .rst_n, .count(ccount), .tbase);

  // ---------------- reference time ----------------
  f1_time_capture u_refcap (
    .clk, .rst_n, .ev(ref_reset), .taps, .tbase, .valid(ref_v), .tstamp(ref_ts));

  f1_ref_reset_counter u_refcnt (
    .clk, .rst_n, .ref_clk, .ext_reset(ref_v), .period(cfg.ref_period),
    .int_reset);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         ref_time <= '0;
    else if (ref_v)     ref_time <= ref_ts;
    else if (int_reset) ref_time <= tbase;

  assign now = tbase - ref_time;

  // ---------------- trigger ----------------
  f1_time_capture u_trgcap (
    .clk, .rst_n, .ev(trigger), .taps, .tbase, .valid(trg_v), .tstamp(trg_ts));

  f1_trigger_unit #(.DEPTH(TB_DEPTH)) u_trig (
    .clk, .rst_n, .trig_valid(trg_v && cfg.mode != MODE_CSTART),
    .trig_time(trg_ts), .ref_time,
    .offset(cfg.trig_offset), .all_done(&done), .head_valid(t_valid),
    .head_start(t_start), .head_evnum(t_evnum), .release_o(t_release),
    .lost(t_lost), .evcount(t_count));

  // ---------------- channels ----------------
  for (genvar p = 0; p < NCH / 2; p++) begin : g_pair
    f1_half_lsb_delay #(.DELAY_PS(BIN_PS / 2)) u_dly (
      .din(hits_p[2*p][0]), .dout(dly[p]));

    f1_channel_pair #(.HB_DEPTH(HB_DEPTH), .OB_DEPTH(OB_DEPTH), .MARGIN(MARGIN)) u_pair (
      .clk, .rst_n, .mode(cfg.mode), .ch_en(cfg.ch_enable[2*p +: 2]),
      .latch_hold(cfg.latch_hold), .window(cfg.trig_window),
      .hits(hits_p[2*p +: 2]), .hit_a_dly(dly[p]), .taps, .tbase, .ref_time, .now,
      .trig_valid(t_valid), .trig_start(t_start), .trig_evnum(t_evnum),
      .release_i(t_release), .done(done[2*p +: 2]),
      .ob_pop(ob_pop[2*p +: 2]), .ob_valid(ob_valid[2*p +: 2]),
      .ob_head(ob_head[2*p +: 2]), .hb_overflow(hb_ovf[2*p +: 2]),
      .ob_lost(ob_lost[2*p +: 2]), .stall(stall[2*p +: 2]));
  end

  // ---------------- readout ----------------
  f1_readout_arbiter u_arb (
    .clk, .rst_n, .ob_valid, .ob_head, .ob_pop,
    .fifo_full(if_full), .fifo_wr(if_wr), .fifo_data(if_wdata));

  f1_async_fifo #(.W($bits(ro_word_t)), .DEPTH(IF_DEPTH)) u_ififo (
    .wclk(clk), .wrst_n(rst_n), .wr_en(if_wr), .wdata(if_wdata), .full(if_full),
    .rclk(rd_clk), .rrst_n(rst_n), .rd_en(if_pop), .rdata(if_rdata), .empty(if_empty));

  f1_io_interface u_io (
    .rclk(rd_clk), .rrst_n(rst_n), .bus8(cfg.bus8), .fifo_empty(if_empty),
    .fifo_data(if_rdata), .fifo_pop(if_pop), .rd_en, .data_out, .data_valid,
    .event_number);

  // ---------------- setup and thresholds ----------------
  f1_setup_interface u_setup (
    .clk, .rst_n, .sclk(setup_sclk), .sdata(setup_sdata), .sen(setup_sen),
    .cfg, .dac_wr, .dac_addr, .dac_data);

  f1_dac_interface #(.CLK_DIV(DAC_DIV)) u_dac (
    .clk, .rst_n, .wr(dac_wr), .addr(dac_addr), .data(dac_data), .regs(dac_regs),
    .dac_clk, .dac_sdi, .dac_ld, .busy(dac_busy));

  // ---------------- status ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hit_overflow <= '0;
      trigger_lost <= 1'b0;
      data_lost    <= 1'b0;
    end else begin
      hit_overflow <= hit_overflow | hb_ovf;
      trigger_lost <= trigger_lost | t_lost;
      data_lost    <= data_lost | (|ob_lost);
    end
endmodule
