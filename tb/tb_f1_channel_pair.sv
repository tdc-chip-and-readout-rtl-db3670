// tb_f1_channel_pair: one channel pair on the real time base (ring model and
// coarse counter). The testbench plays the reference register and the
// trigger unit. Hits are placed at known times relative to the ring's bin
// grid, so every expected time is computed from the edge times alone:
//   standard      hits inside the window appear as header + relative times,
//                 hits outside do not; 20 hits without trigger overflow the
//                 hit buffer;
//   high res.     a hit at any point of a bin gives floor(2 dt / 150 ps);
//   latch         the recorded pattern and a time field within 2 units;
//   common start  every hit appears at once, without trigger.
`timescale 1ps/1ps
module tb_f1_channel_pair;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic ref_clk = 1'b0, rst_n = 1'b0, clk, locked;
  logic [NTAP-1:0] taps;
  logic [15:0] ccount, tbase, ref_ts, ref_time, now;
  logic ref_ev = 1'b0, ref_v;
  mode_e mode = MODE_STD;
  logic [1:0] ch_en = 2'b11;
  logic [4:0] latch_hold = 5'd8;
  logic [10:0] window = '0, trig_start = '0;
  logic [5:0] trig_evnum = '0;
  logic [1:0][3:0] hits = '0;
  logic hit_a_dly, trig_valid = 1'b0, release_i = 1'b0;
  logic [1:0] done, ob_valid, ob_pop, hb_overflow, ob_lost, stall;
  obuf_word_t [1:0] ob_head;
  obuf_word_t got [2][$];
  longint T0;
  int novf = 0;

  always #12860 ref_clk = ~ref_clk;

  f1_ring_pll       u_pll (.ref_clk, .taps, .osc_clk(clk), .locked);
  f1_coarse_counter u_cc  (.clk, .rst_n, .count(ccount), .tbase);
  f1_time_capture   u_ref (.clk, .rst_n, .ev(ref_ev), .taps, .tbase, .valid(ref_v), .tstamp(ref_ts));
  f1_half_lsb_delay u_dly (.din(hits[0][0]), .dout(hit_a_dly));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     ref_time <= '0;
    else if (ref_v) ref_time <= ref_ts;
  assign now = tbase - ref_time;

  f1_channel_pair dut (
    .clk, .rst_n, .mode, .ch_en, .latch_hold, .window, .hits, .hit_a_dly, .taps, .tbase,
    .ref_time, .now, .trig_valid, .trig_start, .trig_evnum, .release_i, .done, .ob_pop,
    .ob_valid, .ob_head, .hb_overflow, .ob_lost, .stall);

  assign ob_pop = ob_valid;
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++) if (ob_valid[c]) got[c].push_back(ob_head[c]);
    if (hb_overflow != 0) novf++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // bin index of the current time on the ring's grid
  function automatic longint bin_now();
    return ($time - T0) / 150;
  endfunction

  // wait until 'frac' ps into the next bin that starts at least 'gap' bins ahead
  task automatic goto_bin(input int gap, input int frac);
    longint b;
    b = bin_now() + gap;
    #((T0 + b * 150 + frac) - $time);
  endtask

  task automatic pulse(input int c, input int w);
    hits[c][w] = 1'b1;
    #10000 hits[c][w] = 1'b0;
  endtask

  task automatic trigger(input logic [10:0] s, input logic [10:0] w, input logic [5:0] ev);
    @(negedge clk);
    trig_start = s; window = w; trig_evnum = ev; trig_valid = 1'b1;
    while (done != 2'b11) @(negedge clk);
    release_i = 1'b1;
    @(negedge clk);
    release_i = 1'b0; trig_valid = 1'b0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #300000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint kref, ka [$], kb [$];
    #20000 rst_n = 1'b1;
    @(posedge clk);
    T0 = $time;
    // reference edge in the middle of a bin
    goto_bin(10, 75);
    kref = bin_now();
    ref_ev = 1'b1;
    #10000 ref_ev = 1'b0;
    #50000;

    // ---------- standard mode ----------
    for (int i = 0; i < 6; i++) begin
      goto_bin(200 + 37 * i, 20 + 20 * i);
      ka.push_back(bin_now());
      pulse(0, 0);
      goto_bin(50, 130);
      kb.push_back(bin_now());
      pulse(1, 0);
    end
    #100000;
    begin
      logic [15:0] ra [6], rb [6];
      logic [10:0] s;
      int nin;
      foreach (ra[i]) begin ra[i] = 16'(ka[i] - kref); rb[i] = 16'(kb[i] - kref); end
      // window from hit a[1] to just after hit a[3]
      s = ra[1][15:5];
      for (int r = 0; r < 2; r++) got[r].delete();
      trigger(s, 11'(ra[3][15:5] - s + 1), 6'd5);
      check(got[0].size() > 0 && got[0][0] == '{hdr: 1'b1, payload: {6'd5, s[9:0]}}, "header a");
      nin = 0;
      foreach (ra[i]) if (ra[i][15:5] - s < ra[3][15:5] - s + 1 && ra[i][15:5] >= s) begin
        nin++;
        check(got[0].size() > nin && got[0][nin] == '{hdr: 1'b0, payload: ra[i]},
              $sformatf("hit a%0d: got %h want %h", i, got[0].size() > nin ? got[0][nin] : '0, ra[i]));
      end
      check(got[0].size() == nin + 1, $sformatf("channel a words %0d want %0d", got[0].size(), nin + 1));
      nin = 0;
      foreach (rb[i]) if (rb[i][15:5] - s < ra[3][15:5] - s + 1 && rb[i][15:5] >= s) begin
        nin++;
        check(got[1].size() > nin && got[1][nin] == '{hdr: 1'b0, payload: rb[i]}, $sformatf("hit b%0d", i));
      end
      check(got[1].size() == nin + 1, "channel b words");
      check(nin >= 1, "no b hit inside the window");
    end

    // ---------- hit buffer overflow ----------
    for (int i = 0; i < 20; i++) begin
      goto_bin(200, 75);
      pulse(0, 0);
    end
    #100000;
    check(novf > 0, "hit buffer never overflowed");
    trigger(11'(bin_now() - kref >> 5) - 11'd1, 11'd2, 6'd6);  // flush old hits

    // ---------- high resolution mode ----------
    mode = MODE_HIRES;
    #100000;
    for (int i = 0; i < 8; i++) begin
      longint tabs;
      logic [15:0] want;
      goto_bin(300, 5 + 19 * i);
      tabs = $time - T0;
      want = 16'((2 * tabs) / 150 - 2 * kref * 1);  // floor(2t/150) - 2*kref
      pulse(0, 0);
      #100000;
      for (int r = 0; r < 2; r++) got[r].delete();
      trigger(11'(want[15:6]) - 11'd1, 11'd4, 6'(10 + i));
      check(got[0].size() == 2 && got[0][1] == '{hdr: 1'b0, payload: want},
            $sformatf("hires %0d: got %h want %h", i, got[0].size() > 1 ? got[0][1] : '0, want));
      check(got[1].size() == 0, "odd channel output in hires mode");
    end

    // ---------- latch mode ----------
    mode = MODE_LATCH;
    #100000;
    for (int i = 0; i < 6; i++) begin
      logic [3:0] pat;
      longint kfirst;
      int tf;
      pat = 4'($urandom_range(1, 15));
      goto_bin(400, 75);
      kfirst = bin_now();
      for (int w = 0; w < 4; w++) if (pat[w]) fork pulse(0, w); join_none
      #200000;
      for (int r = 0; r < 2; r++) got[r].delete();
      trigger(11'((kfirst - kref) >> 5) - 11'd2, 11'd24, 6'(20 + i));
      check(got[0].size() == 2 && got[0][1].payload[3:0] == pat, $sformatf("latch pattern %0d: %0d words, %h want %b", i, got[0].size(), got[0].size() > 1 ? got[0][1] : 0, pat));
      // closing time: hold + ~3 periods of 38 bins after the first edge
      tf = int'((kfirst - kref + (8 + 3) * 38) >> 4);
      if (got[0].size() == 2)
        check(int'(got[0][1].payload[15:4]) - tf <= 3 && tf - int'(got[0][1].payload[15:4]) <= 3,
              $sformatf("latch time %0d want ~%0d", got[0][1].payload[15:4], tf));
    end

    // ---------- common start ----------
    mode = MODE_CSTART;
    #100000;
    for (int r = 0; r < 2; r++) got[r].delete();
    for (int i = 0; i < 5; i++) begin
      goto_bin(100, 75);
      ka[i] = bin_now();
      pulse(1, 0);
    end
    #100000;
    check(got[1].size() == 5, "common start words");
    foreach (got[1][i])
      check(got[1][i] == '{hdr: 1'b0, payload: 16'(ka[i] - kref)}, "common start time");
    check(got[0].size() == 0, "common start channel a output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
