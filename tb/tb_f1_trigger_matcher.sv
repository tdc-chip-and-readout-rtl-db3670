// tb_f1_trigger_matcher: the testbench plays hit buffer (a queue of hit
// words in time order) and output buffer (randomly full, to make the matcher
// stall). For each trigger the output must be one header {event, start[9:0]}
// followed by exactly the hits whose time, on the 4.8 ns scale, lies in
// [start, start + window); hits before the window must be removed, hits after
// it kept for the next trigger. Matching must not start before the current
// time has passed the window end by MARGIN. Also run in high resolution mode
// (bits 15:6 compared) and disabled (done without output).
`timescale 1ps/1ps
module tb_f1_trigger_matcher;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b1, hires = 1'b0, trig_valid = 1'b0, release_i = 1'b0;
  logic [10:0] trig_start = '0, window = '0, now = '0;
  logic [5:0] trig_evnum = '0;
  logic hit_valid, hit_pop, ob_full = 1'b0, ob_wr, done, stall;
  logic [15:0] hit_data;
  obuf_word_t ob_data;
  logic [15:0] hb [$];
  obuf_word_t got [$];
  int nstall = 0;

  always #2850 clk = ~clk;

  // queue head, refreshed after every change of the queue
  function automatic void upd();
    hit_valid = hb.size() > 0;
    hit_data  = hb.size() > 0 ? hb[0] : 16'h0;
  endfunction

  f1_trigger_matcher #(.MARGIN(8)) dut (
    .clk, .rst_n, .enable, .hires, .trig_valid, .trig_start, .trig_evnum, .window, .now,
    .release_i, .hit_valid, .hit_data, .hit_pop, .ob_full, .ob_wr, .ob_data, .done, .stall);

  always @(posedge clk) begin
    if (ob_wr) begin
      if (ob_full) begin failures++; $display("FAIL write while full"); end
      got.push_back(ob_data);
    end
    if (hit_pop && hb.size() > 0) void'(hb.pop_front());
    upd();
    if (stall) nstall++;
    ob_full <= $urandom_range(0, 99) < 30;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;  // hit time in the compared unit (4.8 ns, or 2.4 ns in hi-res)
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 200; r++) begin
      int n, s, w, sh;
      logic [15:0] words [$];
      obuf_word_t want [$];
      words.delete();
      want.delete();
      if (r == 150) hires = 1'b1;
      if (r == 0 || r == 150 || t > 800) begin
        @(negedge clk);
        hb.delete();
        upd();
        t = 100;
      end
      sh = hires ? 6 : 5;
      s  = t + $urandom_range(0, 30);
      w  = $urandom_range(1, 40);
      n  = $urandom_range(0, 12);
      // hits spread over [t, s + w + 20): some before, some inside, some after
      for (int i = 0; i < n; i++) begin
        if (s + w + 20 > t) t += $urandom_range(0, (s + w + 20 - t) / (n - i) * 2);
        words.push_back(16'(t << sh) | 16'($urandom_range(0, (1 << sh) - 1)));
      end
      @(negedge clk);
      foreach (words[i]) hb.push_back(words[i]);
      upd();
      // expected: leftovers from the previous round that are still before
      // this window are dropped, inside ones copied
      want.push_back('{hdr: 1'b1, payload: {6'(r), 10'(s)}});
      foreach (hb[i]) begin
        int ht;
        ht = hires ? int'(hb[i][15:6]) : int'(hb[i][15:5]);
        if (ht >= s && ht < s + w)
          want.push_back('{hdr: 1'b0, payload: hb[i]});
        else if (ht >= s + w) break;
      end
      trig_start = 11'(s);
      trig_evnum = 6'(r);
      window     = 11'(w);
      now        = 11'(s + w + 7);  // one unit short of ready
      got.delete();
      trig_valid = 1'b1;
      repeat (10) @(negedge clk);
      check(got.size() == 0 && !done, "matching started too early");
      now = 11'(s + w + 8);
      fork
        begin : wait_done
          while (!done) @(negedge clk);
        end
      join
      check(got.size() == want.size(), $sformatf("round %0d: %0d words, want %0d", r, got.size(), want.size()));
      foreach (want[i])
        if (i < got.size()) check(got[i] == want[i], $sformatf("round %0d word %0d: %h want %h", r, i, got[i], want[i]));
      foreach (hb[i]) begin
        int ht;
        ht = hires ? int'(hb[i][15:6]) : int'(hb[i][15:5]);
        check(ht >= s + w, $sformatf("round %0d: hit %0d left, window %0d+%0d", r, ht, s, w));
      end
      release_i = 1'b1;
      @(negedge clk);
      release_i  = 1'b0;
      trig_valid = 1'b0;
      @(negedge clk);
      if (t < s + w) t = s + w;
    end
    // disabled: done without output
    enable = 1'b0;
    got.delete();
    trig_valid = 1'b1;
    repeat (3) @(negedge clk);
    check(done && got.size() == 0, "disabled matcher");
    check(nstall > 0, "never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
