// tb_f1_wire_latch: a first edge opens the register; edges within the hold
// time are added to the pattern, later ones start a new recording. The
// pattern must appear hold+3 cycles after the first edge; a disabled latch
// records nothing.
`timescale 1ps/1ps
module tb_f1_wire_latch;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, valid;
  logic [3:0] wires = '0, pattern;
  logic [4:0] hold = 5'd10;
  int cyc = 0, vcyc = -1;
  logic [3:0] vpat;

  always #2850 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (valid) begin vcyc <= cyc; vpat <= pattern; end
  end

  f1_wire_latch dut (.clk, .rst_n, .en, .wires, .hold, .valid, .pattern);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic pulse(input int w);
    wires[w] = 1'b1;
    #12000 wires[w] = 1'b0;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000 rst_n = 1'b1;
    for (int trial = 0; trial < 40; trial++) begin
      int h, c0, first, nxt;
      logic [3:0] want;
      h = $urandom_range(5, 26);
      hold = 5'(h);
      #20000;
      @(negedge clk);
      c0 = cyc;
      first = $urandom_range(0, 3);
      want = 4'b1 << first;
      fork pulse(first); join_none
      // a second wire h/2 cycles later: inside the window
      repeat (h / 2) @(negedge clk);
      nxt = (first + 1 + $urandom_range(0, 2)) % 4;
      want[nxt] = 1'b1;
      fork pulse(nxt); join_none
      vcyc = -1;
      repeat (h + 8) @(negedge clk);
      check(vpat == want, $sformatf("pattern %b want %b", vpat, want));
      check(vcyc - c0 >= h + 2 && vcyc - c0 <= h + 4, $sformatf("latency %0d hold %0d", vcyc - c0, h));
      #200000;
    end
    // disabled: nothing recorded
    en = 1'b0;
    vcyc = -1;
    pulse(2);
    #300000;
    check(vcyc == -1, "output while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
