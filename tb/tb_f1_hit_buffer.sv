// tb_f1_hit_buffer: random writes and pops on both channels against two
// queue models, first split (2 x 16), then joined (1 x 32). A write into a
// full buffer must drop the oldest hit and pulse 'overflow'.
`timescale 1ps/1ps
module tb_f1_hit_buffer;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, joined = 1'b0;
  logic [1:0] wr = '0, pop = '0, rd_valid, overflow;
  logic [1:0][15:0] wdata = '0, rd_data;
  logic [15:0] q0 [$], q1 [$];
  int novf = 0, maxsz = 0;

  always #2850 clk = ~clk;

  f1_hit_buffer dut (.clk, .rst_n, .joined, .wr, .wdata, .pop, .rd_valid, .rd_data, .overflow);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input int n, input int cap);
    for (int i = 0; i < n; i++) begin
      bit exp_ovf [2];
      @(negedge clk);
      check(rd_valid[0] == (q0.size() > 0), "valid 0");
      if (q0.size() > 0) check(rd_data[0] == q0[0], $sformatf("data 0 %h %h", rd_data[0], q0[0]));
      if (!joined) begin
        check(rd_valid[1] == (q1.size() > 0), "valid 1");
        if (q1.size() > 0) check(rd_data[1] == q1[0], "data 1");
      end else check(!rd_valid[1], "channel 1 valid while joined");
      for (int c = 0; c < 2; c++) begin
        wr[c]    = $urandom_range(0, 99) < ((i / 100) % 2 ? 60 : 30);
        pop[c]   = $urandom_range(0, 99) < ((i / 100) % 2 ? 20 : 60);
        wdata[c] = 16'($urandom);
      end
      @(posedge clk);
      for (int c = 0; c < 2; c++) begin
        exp_ovf[c] = 0;
        if (c == 1 && joined) continue;
        if (c == 0) begin
          if (pop[0] && q0.size() > 0) void'(q0.pop_front());
          if (wr[0]) begin
            if (q0.size() == cap) begin void'(q0.pop_front()); exp_ovf[0] = 1; end
            q0.push_back(wdata[0]);
          end
          if (q0.size() > maxsz) maxsz = q0.size();
        end else begin
          if (pop[1] && q1.size() > 0) void'(q1.pop_front());
          if (wr[1]) begin
            if (q1.size() == cap) begin void'(q1.pop_front()); exp_ovf[1] = 1; end
            q1.push_back(wdata[1]);
          end
        end
      end
      #1;
      check(overflow[0] == exp_ovf[0] && overflow[1] == exp_ovf[1], "overflow flag");
      if (exp_ovf[0]) novf++;
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(3000, 16);
    check(maxsz == 16 && novf > 0, "split buffer never filled");
    @(negedge clk);
    wr = '0; pop = '0; joined = 1'b1;
    q0.delete(); q1.delete();
    @(negedge clk);  // buffers flush on the mode change
    maxsz = 0; novf = 0;
    run(3000, 32);
    check(maxsz == 32 && novf > 0, "joined buffer never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
