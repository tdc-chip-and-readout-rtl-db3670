// tb_f1_dac_interface: writes threshold values and decodes the three-wire
// output as an AD8842 would: 12 bits sampled on rising dac_clk, taken over
// on dac_ld. Each load must carry address k+1 and the value written; writes
// to several registers in a row must all arrive, lowest register first.
`timescale 1ps/1ps
module tb_f1_dac_interface;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, wr = 1'b0;
  logic [2:0] addr = '0;
  logic [7:0] data = '0;
  logic [7:0] regs [8];
  logic dac_clk, dac_sdi, dac_ld, busy;
  logic [11:0] sh = '0;
  int nbit = 0;
  logic [11:0] loads [$];

  always #2850 clk = ~clk;

  f1_dac_interface #(.CLK_DIV(4)) dut (.clk, .rst_n, .wr, .addr, .data, .regs, .dac_clk, .dac_sdi, .dac_ld, .busy);

  // AD8842 side
  always @(posedge dac_clk) begin sh = {sh[10:0], dac_sdi}; nbit++; end
  always @(posedge dac_ld) begin
    if (nbit != 12) begin failures++; $display("FAIL %0d bits before load", nbit); end
    loads.push_back(sh);
    nbit = 0;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic write(input int a, input logic [7:0] d);
    @(negedge clk);
    wr = 1'b1; addr = 3'(a); data = d;
    @(negedge clk);
    wr = 1'b0;
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
    for (int r = 0; r < 20; r++) begin
      int a;
      logic [7:0] d;
      a = $urandom_range(0, 7);
      d = 8'($urandom);
      write(a, d);
      check(regs[a] == d, "register");
      wait (!busy);
      repeat (3) @(negedge clk);
      wait (!busy);
      check(loads.size() == 1 && loads[0] == {4'(a + 1), d},
            $sformatf("load %h want %h", loads.size() ? loads[0] : 12'h0, {4'(a + 1), d}));
      loads.delete();
    end
    // burst: 7, 2, 5 written back to back; sent 2, 5, 7 (7 already started)
    write(7, 8'h77);
    write(2, 8'h22);
    write(5, 8'h55);
    repeat (2000) @(negedge clk);
    check(loads.size() == 3, "burst count");
    if (loads.size() == 3)
      check(loads[0] == 12'h877 && loads[1] == 12'h322 && loads[2] == 12'h655, "burst order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
