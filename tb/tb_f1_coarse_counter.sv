// tb_f1_coarse_counter: after n clock edges the count must be n and the time
// base n*38 mod 2^16, also across the wrap of the 16-bit count.
`timescale 1ps/1ps
module tb_f1_coarse_counter;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] count, tbase;

  always #2850 clk = ~clk;

  f1_coarse_counter dut (.clk, .rst_n, .count, .tbase);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #100 rst_n = 1'b1;
    check(count == 0 && tbase == 0, "reset values");
    for (int n = 1; n <= 66000; n++) begin
      @(posedge clk);
      #1;
      if (n % 97 == 0 || n > 65530)
        check(count == 16'(n) && tbase == 16'((n * 38) % 65536),
              $sformatf("n=%0d count=%0d tbase=%0d", n, count, tbase));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
