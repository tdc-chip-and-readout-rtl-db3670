// tb_f1_trigger_unit: triggers at random times with a random reference and
// offset. The buffered window start must be
// trig[15:5] - ref[15:5] - offset (mod 2^11) and the event number the count
// of triggers so far; a fifth trigger with four buffered is lost while the
// count still advances; 'release' follows 'all_done'.
`timescale 1ps/1ps
module tb_f1_trigger_unit;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, trig_valid = 1'b0, all_done = 1'b0;
  logic [15:0] trig_time = '0, ref_time = '0;
  logic [10:0] offset = '0, head_start;
  logic head_valid, release_o, lost;
  logic [5:0] head_evnum, evcount;
  typedef struct { logic [10:0] start; logic [5:0] ev; } ent_t;
  ent_t q [$];
  int nlost = 0, ntrig = 0;

  always #2850 clk = ~clk;

  f1_trigger_unit dut (.clk, .rst_n, .trig_valid, .trig_time, .ref_time, .offset, .all_done,
                       .head_valid, .head_start, .head_evnum, .release_o, .lost, .evcount);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      bit exp_lost;
      int sz0;
      @(negedge clk);
      check(head_valid == (q.size() > 0), "head_valid");
      if (q.size() > 0)
        check(head_start == q[0].start && head_evnum == q[0].ev,
              $sformatf("head %0d/%0d want %0d/%0d", head_start, head_evnum, q[0].start, q[0].ev));
      if (i % 500 == 0) begin ref_time = 16'($urandom); offset = 11'($urandom_range(0, 300)); end
      trig_valid = $urandom_range(0, 99) < 25;
      trig_time  = 16'($urandom);
      all_done   = $urandom_range(0, 99) < ((i / 300) % 2 ? 10 : 40);
      #1;
      check(release_o == (all_done && q.size() > 0), "release");
      @(posedge clk);
      exp_lost = 0;
      sz0 = q.size();
      if (release_o) void'(q.pop_front());
      if (trig_valid) begin
        ent_t e;
        e.start = 11'(trig_time[15:5] - ref_time[15:5] - offset);
        e.ev    = 6'(ntrig);
        ntrig++;
        if (sz0 < 4) q.push_back(e);  // fullness seen before the pop
        else exp_lost = 1;
      end
      #1;
      check(lost == exp_lost, "lost flag");
      check(evcount == 6'(ntrig), "event counter");
      if (exp_lost) nlost++;
    end
    check(nlost > 0, "no trigger was ever lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
