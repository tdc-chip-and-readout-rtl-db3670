// tb_f1_ring_pll: checks the behavioural ring oscillator model. Sampling in
// the middle of every bin, the decoded ring phase must equal
// floor((t - t0) / 150 ps) mod 38, t0 being a rising edge of osc_clk; osc_clk must rise once per 38 bins (5.7 ns);
// 'locked' must rise after four reference-clock edges.
`timescale 1ps/1ps
module tb_f1_ring_pll;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic ref_clk = 1'b0;
  logic [NTAP-1:0] taps;
  logic osc_clk, locked;
  longint last_rise = -1;
  int nrise = 0;

  always #12860 ref_clk = ~ref_clk;  // 38.88 MHz

  f1_ring_pll dut (.ref_clk, .taps, .osc_clk, .locked);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge osc_clk) begin
    if (last_rise >= 10000) check(($time - last_rise) == 5700, $sformatf("osc period %0d", $time - last_rise));
    last_rise = $time;
    nrise++;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(!locked, "locked at start");
    #20000;
    @(posedge osc_clk);  // phase 0 starts here
    for (int k = 0; k < 400; k++) begin
      #((k == 0) ? 75 : 150);
      check(ring_phase(taps) == 6'(k % 38), $sformatf("phase at bin %0d: %0d", k, ring_phase(taps)));
    end
    repeat (5) @(posedge ref_clk);
    #1;
    check(locked, "not locked after 5 reference edges");
    check(nrise >= 10, "osc_clk not running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
