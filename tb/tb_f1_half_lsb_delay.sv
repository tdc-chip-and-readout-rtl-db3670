// tb_f1_half_lsb_delay: the delayed copy must follow each input change
// exactly 75 ps later: unchanged at +74 ps, changed at +76 ps.
`timescale 1ps/1ps
module tb_f1_half_lsb_delay;
  int checks = 0, failures = 0;
  logic din = 1'b0, dout;

  f1_half_lsb_delay dut (.din, .dout);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    for (int i = 0; i < 50; i++) begin
      logic v;
      v = ~din;
      din = v;
      #74;
      check(dout == ~v, "changed too early");
      #2;
      check(dout == v, "not changed after 76 ps");
      #($urandom_range(300, 3000));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
