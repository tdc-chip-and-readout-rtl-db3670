// tb_f1_readout_arbiter: eight queues play the output buffers and the
// interface FIFO is randomly full. Every word must come out once, with its
// channel number, in order within its channel; no channel may wait more than
// seven grants to others while it has data (round robin).
`timescale 1ps/1ps
module tb_f1_readout_arbiter;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, fifo_full = 1'b0, fifo_wr;
  logic [7:0] ob_valid, ob_pop;
  obuf_word_t [7:0] ob_head;
  ro_word_t fifo_data;
  obuf_word_t q [8][$];
  int waitc [8];
  int nout = 0, nin = 0;

  always #2850 clk = ~clk;

  f1_readout_arbiter dut (.clk, .rst_n, .ob_valid, .ob_head, .ob_pop, .fifo_full, .fifo_wr, .fifo_data);

  function automatic void upd();
    for (int c = 0; c < 8; c++) begin
      ob_valid[c] = q[c].size() > 0;
      ob_head[c]  = q[c].size() > 0 ? q[c][0] : '0;
    end
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (fifo_wr) begin
      int c;
      c = int'(fifo_data.chan);
      check(ob_pop == (8'b1 << c), "pop matches channel");
      check(q[c].size() > 0 && fifo_data.hdr == q[c][0].hdr && fifo_data.payload == q[c][0].payload
            && fifo_data.rsvd == 0, "word");
      if (q[c].size() > 0) void'(q[c].pop_front());
      nout++;
      for (int k = 0; k < 8; k++)
        if (k != c && q[k].size() > 0) begin
          waitc[k]++;
          check(waitc[k] <= 7, $sformatf("channel %0d starved", k));
        end
      waitc[c] = 0;
    end else check(ob_pop == 0, "pop without write");
    for (int c = 0; c < 8; c++)
      if ($urandom_range(0, 99) < 10) begin
        q[c].push_back('{hdr: 1'($urandom), payload: 16'($urandom)});
        nin++;
      end
    fifo_full <= $urandom_range(0, 99) < 20;
    upd();
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (5000) @(posedge clk);
    check(nout > 1000, "too few words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
