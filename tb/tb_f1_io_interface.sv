// tb_f1_io_interface: a queue plays the interface FIFO. In 24-bit mode each
// valid cycle must carry one whole word; in 8-bit mode three bytes, most
// significant first. The event number must be the header's own for header
// words and that of the last header of the same channel for hit words.
`timescale 1ps/1ps
module tb_f1_io_interface;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic rclk = 1'b0, rst_n = 1'b0, bus8 = 1'b0, fifo_empty, fifo_pop, rd_en = 1'b0, data_valid;
  ro_word_t fifo_data;
  logic [23:0] data_out;
  logic [5:0] event_number;
  ro_word_t q [$];
  logic [23:0] exp_bytes [$];
  logic [5:0] exp_ev [$];
  logic [5:0] lastev [8];
  int nwords = 0;
  logic pop_seen = 1'b0;
  bit hold = 0;
  logic go_seen = 1'b0;
  int beat_m = 0;

  always #10000 rclk = ~rclk;

  f1_io_interface dut (.rclk, .rrst_n(rst_n), .bus8, .fifo_empty, .fifo_data, .fifo_pop,
                       .rd_en, .data_out, .data_valid, .event_number);

  function automatic void upd();
    fifo_empty = q.size() == 0;
    fifo_data  = q.size() > 0 ? q[0] : '0;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // new words: a header per channel now and then, hits otherwise
  function automatic ro_word_t gen();
    ro_word_t w;
    w.chan = 3'($urandom);
    w.hdr  = $urandom_range(0, 3) == 0;
    w.rsvd = '0;
    w.payload = 16'($urandom);
    return w;
  endfunction

  always @(posedge rclk) if (rst_n) begin
    if (data_valid) begin
      check(exp_bytes.size() > 0 && data_out == exp_bytes[0], $sformatf("data %h want %h at word %0d bus8 %0d", data_out, exp_bytes[0], nwords, bus8));
      check(exp_ev.size() > 0 && event_number == exp_ev[0], "event number");
      if (exp_bytes.size() > 0) void'(exp_bytes.pop_front());
      if (exp_ev.size() > 0) void'(exp_ev.pop_front());
    end
    pop_seen <= fifo_pop;
    go_seen  <= rd_en && !fifo_empty;
  end

  // the FIFO model changes at the falling edge only, away from the DUT's edge
  always @(negedge rclk) if (rst_n) begin
    if (go_seen) begin
      ro_word_t w;
      logic [5:0] ev;
      bit last;
      w = q[0];
      ev = w.hdr ? w.payload[15:10] : lastev[w.chan];
      if (bus8) begin
        exp_bytes.push_back({16'b0, 8'(w >> (8 * (2 - beat_m)))});
        last = (beat_m == 2);
        beat_m = last ? 0 : beat_m + 1;
      end else begin
        exp_bytes.push_back(w);
        last = 1;
      end
      exp_ev.push_back(ev);
      check(pop_seen == last, "FIFO pop on the wrong beat");
      if (last) begin
        if (w.hdr) lastev[w.chan] = w.payload[15:10];
        void'(q.pop_front());
        nwords++;
      end
    end
    if (q.size() < 20 && $urandom_range(0, 99) < 60) q.push_back(gen());
    pop_seen = 1'b0;
    go_seen  = 1'b0;
    upd();
    rd_en = !hold && $urandom_range(0, 99) < 70;
  end

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) lastev[c] = '0;
    upd();
    #30000 rst_n = 1'b1;
    wait (nwords >= 1000);
    // switch to 8-bit mode while the reader pauses
    hold = 1;
    repeat (5) @(negedge rclk);
    bus8 = 1'b1;
    repeat (5) @(negedge rclk);
    hold = 0;
    wait (nwords >= 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
