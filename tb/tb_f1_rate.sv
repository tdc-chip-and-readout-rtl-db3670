// tb_f1_rate: the chip at its default sizes under the load of the most
// demanding detector, a scintillating-fibre plane: every channel sees hits at
// a mean rate of 6 MHz (spacing 30 ns plus a uniform 0..274 ns, mean 167 ns),
// triggers come about every 10 us (100 kHz), the trigger latency (offset)
// is 1 us (208 units of 4.8 ns) and the window 100 ns (21 units).
// At this rate the 16-word hit buffer holds the last ~2.7 us of hits, so it
// overwrites old hits between triggers (counted, expected), but every hit of
// a window must still be read out: for each trigger and channel the test
// compares the hit words against the hits whose 4.8 ns unit lies inside the
// window the header reports, and checks that header start against the
// trigger time (to within the one-unit rounding of the trigger time).
// No trigger or data may be lost.
`timescale 1ps/1ps
module tb_f1_rate;
  import f1_pkg::*;
  localparam int NTRIG = 20, OFFSET = 208, WINDOW = 21;
  int checks = 0, failures = 0;

  logic rst_n = 1'b1, ref_clk = 1'b0, ref_reset = 1'b0, trigger = 1'b0;
  logic [NCH-1:0][NWIRE-1:0] hits = '0;
  logic setup_sclk = 1'b0, setup_sdata = 1'b0, setup_sen = 1'b0;
  logic rd_clk = 1'b0, rd_en = 1'b1;
  logic [23:0] data_out;
  logic data_valid;
  logic [5:0] event_number;
  logic dac_clk, dac_sdi, dac_ld, pll_locked, core_clk;
  logic [NCH-1:0] hit_overflow;
  logic trigger_lost, data_lost;

  always #12860 ref_clk = ~ref_clk;
  always #10000 rd_clk = ~rd_clk;

  f1_tdc dut (.*);

  ro_word_t rx [$];
  longint T0, kref;
  longint khit [NCH][$];
  longint ktrig [$];
  bit running = 1'b1;
  int n_ovf = 0, n_matched = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge rd_clk) if (data_valid) rx.push_back(ro_word_t'(data_out));
  always @(posedge core_clk) if (|dut.hb_ovf) n_ovf++;

  function automatic longint bin_now();
    return ($time - T0) / 150;
  endfunction

  task automatic at_bin(input longint b, input int frac);
    if (T0 + b * 150 + frac > $time) #(T0 + b * 150 + frac - $time);
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

  task automatic channel_hits(input int c);
    longint k;
    while (running) begin
      k = bin_now() + 200 + longint'($urandom_range(0, 1827));  // 30 ns + 0..274 ns
      at_bin(k, 75);
      if (!running) break;
      khit[c].push_back(k);
      hits[c][0] = 1'b1;
      #8000 hits[c][0] = 1'b0;
    end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nh;
    #100 rst_n = 1'b0;
    #30000 rst_n = 1'b1;
    @(posedge core_clk);
    T0 = $time;
    wait (pll_locked);
    send(8'd2, 16'(OFFSET));
    send(8'd3, 16'(WINDOW));
    at_bin(bin_now() + 20, 75);
    kref = bin_now();
    ref_reset = 1'b1;
    #8000 ref_reset = 1'b0;
    #200000;
    for (int c = 0; c < NCH; c++) fork automatic int cc = c; channel_hits(cc); join_none
    for (int t = 0; t < NTRIG; t++) begin
      longint k;
      k = bin_now() + 60000 + longint'($urandom_range(0, 13333));  // 9 to 11 us
      at_bin(k, 60);
      ktrig.push_back(k);
      trigger = 1'b1;
      #8000 trigger = 1'b0;
    end
    #3000000;
    running = 1'b0;
    #3000000;

    check(!trigger_lost, "trigger lost");
    check(!data_lost, "data lost");
    for (int c = 0; c < NCH; c++) begin
      ro_word_t q [$];
      int t;
      q.delete();
      foreach (rx[i]) if (int'(rx[i].chan) == c) q.push_back(rx[i]);
      t = -1;
      nh = 0;
      foreach (q[i]) if (q[i].hdr) nh++;
      check(nh == NTRIG, $sformatf("ch%0d: %0d headers for %0d triggers", c, nh, NTRIG));
      for (int i = 0; i < q.size(); ) begin
        logic [9:0] start;
        longint want [$];
        int s0;
        if (!q[i].hdr) begin
          check(0, $sformatf("ch%0d: hit word without header", c));
          i++;
          continue;
        end
        t++;
        want.delete();
        start = q[i].payload[9:0];
        s0 = int'(((ktrig[t] - kref) >> 5) - OFFSET) & 1023;
        check(start == 10'(s0) || start == 10'(s0 + 1) || start == 10'(s0 - 1),
              $sformatf("ch%0d trigger %0d: start %0d, expected about %0d", c, t, start, s0));
        foreach (khit[c][j]) begin
          logic [9:0] u;
          u = 10'((khit[c][j] - kref) >> 5);
          if (10'(u - start) < 10'(WINDOW) && khit[c][j] < ktrig[t] &&
              khit[c][j] > ktrig[t] - 2 * 32 * OFFSET) want.push_back(khit[c][j]);
        end
        i++;
        for (int j = 0; j < want.size(); j++) begin
          check(i < q.size() && !q[i].hdr && q[i].payload == 16'(want[j] - kref),
                $sformatf("ch%0d trigger %0d: hit %0d of %0d missing or wrong", c, t, j, want.size()));
          if (i < q.size() && !q[i].hdr) begin i++; n_matched++; end
        end
        check(i >= q.size() || q[i].hdr, $sformatf("ch%0d trigger %0d: extra hit word", c, t));
        while (i < q.size() && !q[i].hdr) i++;
      end
    end
    $display("hits per channel %0d, matched %0d, hit buffer overwrites %0d", khit[0].size(), n_matched, n_ovf);
    check(n_matched > 0, "no hit matched");
    check(n_ovf > 0, "buffer never overwrote old hits at this rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
