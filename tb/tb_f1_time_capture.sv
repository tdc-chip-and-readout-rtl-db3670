// tb_f1_time_capture: edges at random times (never on a bin boundary) are
// measured with the ring model and the coarse counter as time base. The
// difference of two time stamps must equal the difference of
// floor(t / 150 ps), modulo 2^16, computed from the edge times themselves;
// 'valid' must come 3 to 4 core cycles after the edge.
`timescale 1ps/1ps
module tb_f1_time_capture;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic ref_clk = 1'b0, rst_n = 1'b0, ev = 1'b0;
  logic [NTAP-1:0] taps;
  logic clk, locked, valid;
  logic [15:0] count, tbase, tstamp;
  longint t_ev, t_prev;
  logic [15:0] ts_prev;
  bit have_prev = 0;

  always #12860 ref_clk = ~ref_clk;

  f1_ring_pll       u_pll (.ref_clk, .taps, .osc_clk(clk), .locked);
  f1_coarse_counter u_cc  (.clk, .rst_n, .count, .tbase);
  f1_time_capture   dut   (.clk, .rst_n, .ev, .taps, .tbase, .valid, .tstamp);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000 rst_n = 1'b1;
    #20000;
    for (int i = 0; i < 300; i++) begin
      longint t;
      int ncyc;
      // next edge: a whole number of bins later plus 10..140 ps into the bin
      t = ($time / 150 + longint'($urandom_range(150, 5000))) * 150 + $urandom_range(10, 140);
      #(t - $time);
      ev = 1'b1;
      t_ev = $time;
      ncyc = 0;
      while (!valid) begin
        @(posedge clk);
        #1;
        ncyc++;
      end
      check(ncyc >= 3 && ncyc <= 4, $sformatf("latency %0d cycles", ncyc));
      if (have_prev)
        check(tstamp - ts_prev == 16'((t_ev / 150) - (t_prev / 150)),
              $sformatf("dt: got %0d want %0d", 16'(tstamp - ts_prev), 16'((t_ev / 150) - (t_prev / 150))));
      have_prev = 1;
      ts_prev = tstamp;
      t_prev  = t_ev;
      #3000 ev = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
