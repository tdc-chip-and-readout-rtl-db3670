// tb_f1_ref_reset_counter: with period P the internal reset must come every
// P reference-clock periods; an external reset restarts the count; period 0
// gives no reset at all.
`timescale 1ps/1ps
module tb_f1_ref_reset_counter;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, ref_clk = 1'b0, ext_reset = 1'b0, int_reset;
  logic [15:0] period = '0;
  longint last = -1;
  int npulse = 0;

  always #2850 clk = ~clk;
  always #12500 ref_clk = ~ref_clk;  // 40 MHz

  f1_ref_reset_counter dut (.clk, .rst_n, .ref_clk, .ext_reset, .period, .int_reset);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (int_reset) begin npulse++; end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000 rst_n = 1'b1;
    npulse = 0;
    #200000;
    check(npulse == 0, "pulse with period 0");
    @(posedge clk) period <= 16'd5;
    // measure intervals of successive pulses
    for (int i = 0; i < 8; i++) begin
      @(posedge clk iff int_reset);
      if (last >= 0) check($time - last > 125000 - 5700 && $time - last < 125000 + 5700, $sformatf("interval %0d", $time - last));
      last = $time;
    end
    // external reset 2 reference clocks after a pulse restarts the count
    @(posedge clk iff int_reset);
    last = $time;
    repeat (2) @(posedge ref_clk);
    repeat (2) @(posedge clk);
    ext_reset <= 1'b1;
    @(posedge clk) ext_reset <= 1'b0;
    @(posedge clk iff int_reset);
    check($time - last > 125000 + 40000, $sformatf("no restart, interval %0d", $time - last));
    @(posedge clk) period <= '0;
    npulse = 0;
    #500000;
    check(npulse == 0, "pulse after switching off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
