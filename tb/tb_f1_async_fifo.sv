// tb_f1_async_fifo: 16 x 24 dual-clock FIFO with the writer at the core
// clock (5.7 ns) and the reader at 20 ns (50 MHz), both sides throttled at
// random. Words must arrive complete and in order; the writer must see
// 'full' at some point and never more than 16 words may be in flight.
`timescale 1ps/1ps
module tb_f1_async_fifo;
  int checks = 0, failures = 0;
  logic wclk = 1'b0, rclk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0, full, empty;
  logic [23:0] wdata = '0, rdata;
  logic [23:0] q [$];
  int nfull = 0, nread = 0;
  logic [23:0] cnt = '0;

  always #2850 wclk = ~wclk;
  always #10000 rclk = ~rclk;

  f1_async_fifo dut (.wclk, .wrst_n(rst_n), .wr_en, .wdata, .full,
                     .rclk, .rrst_n(rst_n), .rd_en, .rdata, .empty);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge wclk) if (rst_n) begin
    if (wr_en && !full) begin q.push_back(wdata); cnt <= cnt + 1; end
    if (full) nfull++;
    check(q.size() <= 16, "more than 16 words in flight");
  end
  always @(negedge wclk) begin
    wr_en = $urandom_range(0, 99) < 40;
    wdata = {cnt[11:0], 12'($urandom)};
  end

  always @(posedge rclk) if (rst_n) begin
    if (rd_en && !empty) begin
      check(q.size() > 0 && rdata == q[0], "read data");
      if (q.size() > 0) void'(q.pop_front());
      nread++;
    end
  end
  always @(negedge rclk) rd_en = $urandom_range(0, 99) < ((nread / 300) % 2 ? 90 : 30);

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #30000 rst_n = 1'b1;
    wait (nread >= 3000);
    check(nfull > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
