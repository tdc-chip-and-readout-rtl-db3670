// tb_f1_fifo: random pushes and pops against a queue model, at the output
// buffer's size (8 x 17). Checks data order, empty/full flags and count.
`timescale 1ps/1ps
module tb_f1_fifo;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0, empty, full;
  logic [16:0] din = '0, dout;
  logic [3:0] count;
  logic [16:0] q [$];
  int nfull = 0;

  always #2850 clk = ~clk;

  f1_fifo #(.W(17), .DEPTH(8)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0) && full == (q.size() == 8) && count == 4'(q.size()),
            $sformatf("flags size=%0d count=%0d", q.size(), count));
      if (q.size() > 0) check(dout == q[0], "head data");
      if (full) nfull++;
      // phases of mostly-push and mostly-pop traffic
      push = !full && ($urandom_range(0, 99) < ((i / 200) % 2 ? 30 : 70));
      pop  = !empty && ($urandom_range(0, 99) < ((i / 200) % 2 ? 70 : 30));
      din  = 17'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    check(nfull > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
