// f1_channel_pair: two TDC channels (even channel a, odd channel b) with all
// the units the chip has once per channel: current-time capture, relative
// time, latch register, trigger matching and output buffer, plus the pair's
// shared hit buffer. The mode selects the data path:
//
//  standard      Each channel measures the rising edges of its input 0 (the
//                top inverts inputs set to trailing edges). The
//                relative time (current minus reference time, 16 bits of
//                150 ps) goes to its 16-word hit buffer and through trigger
//                matching to its output buffer.
//  high res.     Channel b measures channel a's input delayed by half a bin
//                ('hit_a_dly'). Sum of the two relative times = time in 75 ps
//                units (floor(x) + floor(x + 1/2) = floor(2x)). The sum enters
//                the joined 32-word hit buffer; only channel a gives output.
//  latch         Each channel's four inputs go to its latch register; when
//                the hold time has passed, {time bits 15:4, wire pattern 3:0}
//                is written to the hit buffer, the time being the current
//                time relative to the reference at that moment (resolution
//                one coarse period, 5.7 ns).
//  common start  Relative times (to the last start signal, which is the
//                reference reset) go straight to the output buffer; no hit
//                buffer, no trigger matching. A full output buffer loses the
//                measurement and pulses 'lost'.
// Field layout and the mode behaviour follow the paper's outline; combining
// the pair by summation is this design's reading of the "+1/2 LSB" scheme.
// Timing: a hit reaches the hit buffer 4 cycles after its edge (high
// resolution: 4-5 cycles, when both measurements are in).
// Lint note: bits 3:0 of 'now' are unused on purpose; latch words carry the
// time in bits 15:4 only.
`timescale 1ps/1ps
module f1_channel_pair #(
  parameter int unsigned HB_DEPTH = 16,
  parameter int unsigned OB_DEPTH = 8,
  parameter int unsigned MARGIN   = 8
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  f1_pkg::mode_e                         mode,
  input  logic [1:0]                            ch_en,
  input  logic [4:0]                            latch_hold,
  input  logic [f1_pkg::TRW-1:0]                window,
  input  logic [1:0][f1_pkg::NWIRE-1:0]         hits,
  input  logic                                  hit_a_dly,
  input  logic [f1_pkg::NTAP-1:0]               taps,
  input  logic [f1_pkg::TW-1:0]                 tbase,
  input  logic [f1_pkg::TW-1:0]                 ref_time,
  input  logic [f1_pkg::TW-1:0]                 now,
  input  logic                                  trig_valid,
  input  logic [f1_pkg::TRW-1:0]                trig_start,
  input  logic [f1_pkg::EVW-1:0]                trig_evnum,
  input  logic                                  release_i,
  output logic [1:0]                            done,
  input  logic [1:0]                            ob_pop,
  output logic [1:0]                            ob_valid,
  output f1_pkg::obuf_word_t [1:0]              ob_head,
  output logic [1:0]                            hb_overflow,
  output logic [1:0]                            ob_lost,
  output logic [1:0]                            stall
);
  import f1_pkg::*;

  logic            hires, latch, cstart;
  logic [1:0]      cap_ev, cap_valid, lat_valid;
  logic [1:0][TW-1:0] cap_ts, rel;
  logic [1:0][NWIRE-1:0] lat_pat;
  logic [1:0][$clog2(OB_DEPTH+1)-1:0] ob_cnt;
  logic [1:0]      hb_wr, hb_pop, hb_valid, m_pop, m_wr, ob_push, ob_full, ob_empty, m_en;
  logic [1:0][TW-1:0] hb_wdata, hb_rdata;
  obuf_word_t [1:0] m_data, ob_din;
  logic [1:0]      pend;
  logic [1:0][TW-1:0] pend_t;

  assign hires  = (mode == MODE_HIRES);
  assign latch  = (mode == MODE_LATCH);
  assign cstart = (mode == MODE_CSTART);

  assign cap_ev[0] = hits[0][0];
  assign cap_ev[1] = hires ? hit_a_dly : hits[1][0];

  for (genvar c = 0; c < 2; c++) begin : g_ch
    f1_time_capture u_cap (
      .clk, .rst_n, .ev(cap_ev[c]), .taps, .tbase,
      .valid(cap_valid[c]), .tstamp(cap_ts[c]));

    assign rel[c] = cap_ts[c] - ref_time;

    f1_wire_latch u_latch (
      .clk, .rst_n, .en(latch && ch_en[c]), .wires(hits[c]), .hold(latch_hold),
      .valid(lat_valid[c]), .pattern(lat_pat[c]));

    f1_trigger_matcher #(.MARGIN(MARGIN)) u_match (
      .clk, .rst_n, .enable(m_en[c]), .hires,
      .trig_valid, .trig_start, .trig_evnum, .window, .now(now[TW-1 -: TRW]),
      .release_i, .hit_valid(hb_valid[c]), .hit_data(hb_rdata[c]), .hit_pop(m_pop[c]),
      .ob_full(ob_full[c]), .ob_wr(m_wr[c]), .ob_data(m_data[c]), .done(done[c]),
      .stall(stall[c]));

    f1_fifo #(.W($bits(obuf_word_t)), .DEPTH(OB_DEPTH)) u_obuf (
      .clk, .rst_n, .push(ob_push[c]), .din(ob_din[c]), .pop(ob_pop[c]),
      .dout(ob_head[c]), .empty(ob_empty[c]), .full(ob_full[c]), .count(ob_cnt[c]));

    always @(posedge clk or negedge rst_n)
      if (!rst_n) begin
      end else a_ob_level: assert ((ob_cnt[c] == '0) == ob_empty[c])
        else $error("f1_channel_pair: output buffer level and empty flag disagree");

    assign ob_valid[c] = !ob_empty[c];
    assign m_en[c]     = ch_en[c] && !cstart && !(hires && c == 1);
    assign hb_pop[c]   = m_pop[c];

    // Common start: measurements bypass hit buffer and matching.
    always_comb begin
      if (cstart) begin
        ob_push[c] = cap_valid[c] && ch_en[c] && !ob_full[c];
        ob_din[c]  = '{hdr: 1'b0, payload: rel[c]};
      end else begin
        ob_push[c] = m_wr[c];
        ob_din[c]  = m_data[c];
      end
    end
    assign ob_lost[c] = cstart && cap_valid[c] && ch_en[c] && ob_full[c];
  end

  // High resolution: pair the two measurements of one edge.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pend   <= '0;
      pend_t <= '0;
    end else if (!hires || (pend[0] && pend[1])) begin
      pend <= '0;
    end else begin
      for (int c = 0; c < 2; c++)
        if (cap_valid[c]) begin
          pend[c]   <= 1'b1;
          pend_t[c] <= rel[c];
        end
    end

  always_comb begin
    hb_wr    = '0;
    hb_wdata = '0;
    unique case (mode)
      MODE_STD:
        for (int c = 0; c < 2; c++) begin
          hb_wr[c]    = cap_valid[c] && ch_en[c];
          hb_wdata[c] = rel[c];
        end
      MODE_HIRES: begin
        hb_wr[0]    = pend[0] && pend[1] && ch_en[0];
        hb_wdata[0] = pend_t[0] + pend_t[1];
      end
      MODE_LATCH:
        for (int c = 0; c < 2; c++) begin
          hb_wr[c]    = lat_valid[c];
          hb_wdata[c] = {now[TW-1:4], lat_pat[c]};
        end
      default: ;
    endcase
  end

  f1_hit_buffer #(.DEPTH(HB_DEPTH)) u_hbuf (
    .clk, .rst_n, .joined(hires), .wr(hb_wr), .wdata(hb_wdata), .pop(hb_pop),
    .rd_valid(hb_valid), .rd_data(hb_rdata), .overflow(hb_overflow));

endmodule
