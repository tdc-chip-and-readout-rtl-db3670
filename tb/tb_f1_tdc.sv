// tb_f1_tdc: end-to-end test of the whole chip at its default parameters,
// driven only through its pins: configuration over the serial setup link,
// reference reset, hits, triggers, readout over the 24- or 8-bit bus and the
// AD8842 lines. Hits are placed on the bin grid of the ring (found from the
// core clock output), so hit times are known exactly; window edges are kept
// well clear of hits, so the +-1 unit rounding of the trigger time cannot
// change which hits match. Phases:
//   1 standard mode, 8 channels: matched hits, unmatched hits dropped
//   2 twelve hits and six fast triggers with the reader stopped: output buffers
//     fill, matchers stall, the interface FIFO fills, triggers are lost
//   3 20 hits without trigger: hit buffer overflow
//   4 8-bit readout
//   5 high resolution mode (75 ps)
//   6 latch mode pattern
//   7 common start mode
//   8 periodic internal reference reset
//   9 threshold DAC loading (run after 10)
//  10 trailing-edge measurement selected per channel
// Each mechanism is counted and must have happened at least once.
`timescale 1ps/1ps
module tb_f1_tdc;
  import f1_pkg::*;
  int checks = 0, failures = 0;

  logic rst_n = 1'b1, ref_clk = 1'b0, ref_reset = 1'b0, trigger = 1'b0;
  logic [NCH-1:0][NWIRE-1:0] hits = '0;
  logic setup_sclk = 1'b0, setup_sdata = 1'b0, setup_sen = 1'b0;
  logic rd_clk = 1'b0, rd_en = 1'b0;
  logic [23:0] data_out;
  logic data_valid;
  logic [5:0] event_number;
  logic dac_clk, dac_sdi, dac_ld, pll_locked, core_clk;
  logic [NCH-1:0] hit_overflow;
  logic trigger_lost, data_lost;

  always #12860 ref_clk = ~ref_clk;  // 38.88 MHz
  always #10000 rd_clk = ~rd_clk;    // 50 MHz

  f1_tdc dut (.*);

  // ---------------- bookkeeping ----------------
  typedef struct { ro_word_t w; logic [5:0] ev; } rd_t;
  rd_t rx [$];
  bit bus8 = 0;
  int beat = 0;
  logic [23:0] acc;
  logic [11:0] dac_sh = '0;
  int dac_n = 0;
  logic [11:0] dac_loads [$];
  int n_stall = 0, n_iffull = 0, n_match = 0, n_hires = 0, n_latch = 0, n_cstart = 0,
      n_bus8 = 0, n_periodic = 0, n_fall = 0, n_lost = 0, n_hbovf = 0, n_dac = 0, n_drop = 0;
  longint T0, kref;
  int ntrig = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge rd_clk) if (data_valid) begin
    if (!bus8) rx.push_back('{w: ro_word_t'(data_out), ev: event_number});
    else begin
      acc = {acc[15:0], data_out[7:0]};
      if (beat == 2) begin rx.push_back('{w: ro_word_t'(acc), ev: event_number}); n_bus8++; end
      beat = (beat + 1) % 3;
    end
  end

  // internal observation, for the mechanism counters only
  always @(posedge core_clk) begin
    if (|dut.stall) n_stall++;
    if (dut.if_full) n_iffull++;
  end

  always @(posedge dac_clk) begin dac_sh = {dac_sh[10:0], dac_sdi}; dac_n++; end
  always @(posedge dac_ld) begin
    check(dac_n == 12, "DAC word length");
    dac_loads.push_back(dac_sh);
    dac_n = 0;
  end

  // ---------------- helpers ----------------
  function automatic longint bin_now();
    return ($time - T0) / 150;
  endfunction

  task automatic wait_until(input longint t);
    if (t < $time) begin failures++; $display("FAIL schedule %0d < %0t", t, $time); end
    else #(t - $time);
  endtask

  task automatic goto_bin(input longint gap, input int frac);
    longint b;
    b = bin_now() + gap;
    wait_until(T0 + b * 150 + frac);
  endtask

  task automatic send(input logic [7:0] a, input logic [15:0] d);
    logic [23:0] f;
    f = {a, d};
    setup_sen = 1'b1;
    #50000;
    for (int i = 0; i < 24; i++) begin
      setup_sdata = f[23 - i];
      #50000 setup_sclk = 1'b1;
      #50000 setup_sclk = 1'b0;
    end
    #50000 setup_sen = 1'b0;
    #200000;
  endtask

  task automatic hit_pulse(input int c, input int w);
    hits[c][w] = 1'b1;
    #8000 hits[c][w] = 1'b0;
  endtask

  task automatic trig_pulse();
    trigger = 1'b1;
    ntrig++;
    #8000 trigger = 1'b0;
  endtask

  task automatic ref_pulse();
    goto_bin(20, 75);
    kref = bin_now();
    ref_reset = 1'b1;
    #8000 ref_reset = 1'b0;
    #100000;
  endtask

  task automatic drain(input int ns);
    rd_en = 1'b1;
    #(ns * 1000);
  endtask

  // words of channel c, in order
  function automatic void chan_words(input int c, output rd_t q [$]);
    q.delete();
    foreach (rx[i]) if (int'(rx[i].w.chan) == c) q.push_back(rx[i]);
  endfunction

  initial begin
    #5000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_t q [$];
    #100 rst_n = 1'b0;
    #30000 rst_n = 1'b1;
    @(posedge core_clk);
    T0 = $time;
    wait (pll_locked);
    rd_en = 1'b1;
    // offset 60 units (288 ns), window 40 units (192 ns): the window covers
    // 288..96 ns before the trigger
    send(8'd2, 16'd60);
    send(8'd3, 16'd40);
    ref_pulse();

    // ---------- 1: standard mode ----------
    begin
      longint kh [NCH][4], kt;
      int want_in [NCH][$];
      goto_bin(2000, 75);
      kt = bin_now() + 4000;  // trigger bin, 600 ns ahead
      // per channel: 380 ns before (too old), 250 and 150 ns before (inside),
      // 40 ns before (after the window)
      for (int c = 0; c < NCH; c++) begin
        kh[c][0] = kt - 2533 - 3 * c;
        kh[c][1] = kt - 1667 - 5 * c;
        kh[c][2] = kt - 1000 - 7 * c;
        kh[c][3] = kt - 267 - c;
      end
      for (int j = 0; j < 4; j++)
        for (int c = NCH - 1; c >= 0; c--) begin
          wait_until(T0 + kh[c][j] * 150 + 75);
          hits[c][0] = 1'b1;
          fork begin automatic int cc = c; #8000 hits[cc][0] = 1'b0; end join_none
        end
      wait_until(T0 + kt * 150 + 60);
      trig_pulse();
      #3000000;
      for (int c = 0; c < NCH; c++) begin
        chan_words(c, q);
        check(q.size() == 3, $sformatf("std ch%0d: %0d words, want 3", c, q.size()));
        if (q.size() == 3) begin
          check(q[0].w.hdr && q[0].w.payload[15:10] == 6'(ntrig - 1) && q[0].ev == 6'(ntrig - 1), "std header");
          check(!q[1].w.hdr && q[1].w.payload == 16'(kh[c][1] - kref) && q[1].ev == 6'(ntrig - 1), "std hit 1");
          check(!q[2].w.hdr && q[2].w.payload == 16'(kh[c][2] - kref), "std hit 2");
          if (!q[1].w.hdr && q[1].w.payload == 16'(kh[c][1] - kref)) n_match++;
        end
      end
      rx.delete();
      // the hit after the window is dropped by the next trigger (too old)
      n_drop++;
    end

    // ---------- 2: stall, full FIFO, lost triggers ----------
    begin
      longint kt;
      int first_ev, nh;
      // window 480..48 ns before the trigger, 12 hits per channel
      send(8'd2, 16'd100);
      send(8'd3, 16'd90);
      rd_en = 1'b0;
      goto_bin(2000, 75);
      kt = bin_now() + 3500;
      for (int j = 0; j < 12; j++) begin
        wait_until(T0 + (kt - 3000 + 200 * j) * 150 + 75);
        for (int c = 0; c < NCH; c++) hits[c][0] = 1'b1;
        #8000 hits = '0;
      end
      wait_until(T0 + kt * 150 + 60);
      first_ev = ntrig;
      for (int k = 0; k < 6; k++) begin
        trig_pulse();
        #32000;
      end
      #2000000;
      check(trigger_lost, "no trigger lost");
      if (trigger_lost) n_lost++;
      drain(4000);
      for (int c = 0; c < NCH; c++) begin
        chan_words(c, q);
        nh = 0;
        foreach (q[i]) if (q[i].w.hdr) nh++;
        check(nh >= 4 && nh <= 5, $sformatf("ch%0d: %0d headers", c, nh));
        check(q.size() == nh + 12, $sformatf("ch%0d: %0d words", c, q.size()));
        if (q.size() > 0) check(q[0].w.hdr && q[0].w.payload[15:10] == 6'(first_ev), "first header");
        for (int i = 1; i <= 12 && i < q.size(); i++)
          check(!q[i].w.hdr && q[i].w.payload == 16'(kt - 3000 + 200 * (i - 1) - kref), "stalled hit");
      end
      rx.delete();
      send(8'd2, 16'd60);
      send(8'd3, 16'd40);
    end

    // ---------- 3: hit buffer overflow ----------
    for (int i = 0; i < 20; i++) begin
      goto_bin(200, 75);
      hit_pulse(2, 0);
    end
    #200000;
    check(hit_overflow[2] && !hit_overflow[1], "hit buffer overflow flag");
    if (hit_overflow[2]) n_hbovf++;
    trig_pulse();  // clear the old hits (all before the window)
    #2000000;
    rx.delete();

    // ---------- 4: 8-bit readout ----------
    rd_en = 1'b0;
    send(8'd0, 16'h0004);  // standard mode, bus8
    bus8 = 1;
    beat = 0;
    rd_en = 1'b1;
    begin
      longint k;
      goto_bin(2000, 75);
      k = bin_now();
      hit_pulse(5, 0);
      goto_bin(1333, 60);  // 200 ns later
      trig_pulse();
      #3000000;
      chan_words(5, q);
      check(q.size() == 2 && q[1].w.payload == 16'(k - kref) && q[1].w.chan == 3'd5, "8-bit readout word");
      rx.delete();
    end
    rd_en = 1'b0;
    send(8'd0, 16'h0001);  // high resolution, 24-bit bus
    bus8 = 0;
    rd_en = 1'b1;

    // ---------- 5: high resolution ----------
    #500000;
    for (int i = 0; i < 4; i++) begin
      longint t;
      logic [15:0] want;
      goto_bin(2000, 7 + 37 * i);
      t = $time - T0;
      want = 16'((2 * t) / 150 - 2 * kref);
      hit_pulse(2 * i, 0);
      goto_bin(1333, 60);
      trig_pulse();
      #3000000;
      chan_words(2 * i, q);
      check(q.size() == 2 && q[1].w.payload == want,
            $sformatf("hires ch%0d: got %h want %h", 2 * i, q.size() > 1 ? q[1].w.payload : 0, want));
      if (q.size() == 2 && q[1].w.payload == want) n_hires++;
      chan_words(2 * i + 1, q);
      check(q.size() == 0, "odd channel output in hires mode");
      rx.delete();
    end

    // ---------- 6: latch mode ----------
    send(8'd0, 16'h0002);
    send(8'd4, 16'd10);
    for (int i = 0; i < 4; i++) begin
      logic [3:0] pat;
      pat = 4'($urandom_range(1, 15));
      goto_bin(2000, 75);
      for (int w = 0; w < 4; w++) if (pat[w]) fork begin automatic int ww = w; hit_pulse(3, ww); end join_none
      goto_bin(1333, 60);
      trig_pulse();
      #3000000;
      chan_words(3, q);
      check(q.size() == 2 && q[1].w.payload[3:0] == pat, $sformatf("latch pattern %b", pat));
      if (q.size() == 2 && q[1].w.payload[3:0] == pat) n_latch++;
      rx.delete();
    end

    // ---------- 7: common start ----------
    send(8'd0, 16'h0003);
    ref_pulse();  // the start signal
    for (int i = 0; i < 5; i++) begin
      longint k;
      goto_bin(300, 75);
      k = bin_now();
      hit_pulse(6, 0);
      #1000000;
      chan_words(6, q);
      check(q.size() == 1 && !q[0].w.hdr && q[0].w.payload == 16'(k - kref), "common start time");
      if (q.size() == 1 && q[0].w.payload == 16'(k - kref)) n_cstart++;
      rx.delete();
    end
    check(!data_lost, "common start data lost");

    // ---------- 8: periodic internal reference reset ----------
    send(8'd5, 16'd4);  // every 4 reference clocks (103 ns, 686 bins)
    for (int i = 0; i < 5; i++) begin
      goto_bin(997, 75);
      hit_pulse(7, 0);
      #1000000;
      chan_words(7, q);
      // a hit up to three core cycles (114 bins) before an internal reset is
      // referenced to that reset and reads as a small negative time
      check(q.size() == 1 && (q[0].w.payload < 16'd700 || q[0].w.payload > 16'd65416), $sformatf("time after periodic reset %0d",
            q.size() ? q[0].w.payload : 16'hFFFF));
      if (q.size() == 1 && (q[0].w.payload < 16'd700 || q[0].w.payload > 16'd65416)) n_periodic++;
      rx.delete();
    end
    send(8'd5, 16'd0);

    // ---------- 10: trailing edges (still in common start mode) ----------
    // switching the select while the input is low gives the channel one
    // edge of its own; that word is discarded
    send(8'd6, 16'h0010);
    ref_pulse();  // new start: phase 8 left the reference at an internal reset
    #1000000;
    rx.delete();
    for (int i = 0; i < 3; i++) begin
      longint k1, k2;
      goto_bin(300, 75);
      k1 = bin_now();
      hits[4][0] = 1'b1;
      goto_bin(40 + 13 * i, 75);
      k2 = bin_now();
      hits[4][0] = 1'b0;
      #1000000;
      chan_words(4, q);
      check(q.size() == 1 && q[0].w.payload == 16'(k2 - kref),
            $sformatf("trailing edge at bin %0d (leading at %0d)", k2 - kref, k1 - kref));
      if (q.size() == 1 && q[0].w.payload == 16'(k2 - kref)) n_fall++;
      rx.delete();
    end
    send(8'd6, 16'h0000);
    #1000000;
    rx.delete();

    // ---------- 9: thresholds ----------
    dac_loads.delete();
    send(8'd9, 16'h00A5);
    send(8'd15, 16'h003C);
    #3000000;
    check(dac_loads.size() == 2 && dac_loads[0] == 12'h2A5 && dac_loads[1] == 12'h83C, "DAC loads");
    if (dac_loads.size() == 2) n_dac = 2;

    // ---------- mechanisms ----------
    $display("mechanisms: match=%0d drop=%0d stall=%0d iffull=%0d lost=%0d hbovf=%0d bus8=%0d hires=%0d latch=%0d cstart=%0d periodic=%0d fall=%0d dac=%0d",
             n_match, n_drop, n_stall, n_iffull, n_lost, n_hbovf, n_bus8, n_hires, n_latch, n_cstart, n_periodic, n_fall, n_dac);
    check(n_match > 0, "trigger matching never happened");
    check(n_stall > 0, "matcher never stalled");
    check(n_iffull > 0, "interface FIFO never full");
    check(n_lost > 0, "no trigger lost");
    check(n_hbovf > 0, "no hit buffer overflow");
    check(n_bus8 > 0, "8-bit readout never used");
    check(n_hires > 0, "high resolution never worked");
    check(n_latch > 0, "latch mode never worked");
    check(n_cstart > 0, "common start never worked");
    check(n_periodic > 0, "periodic reference reset never seen");
    check(n_dac > 0, "DAC never loaded");
    check(n_fall > 0, "trailing edge never measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
