// tb_f1_setup_interface: sends frames over the serial link at 10 Mbit/s
// (sclk period 100 ns) and checks each configuration register, the DAC
// write strobe with address and data, the reset values, and that a frame of
// the wrong length changes nothing.
`timescale 1ps/1ps
module tb_f1_setup_interface;
  import f1_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, sclk = 1'b0, sdata = 1'b0, sen = 1'b0;
  cfg_t cfg;
  logic dac_wr;
  logic [2:0] dac_addr;
  logic [7:0] dac_data;
  int ndac = 0;
  logic [2:0] last_a;
  logic [7:0] last_d;

  always #2850 clk = ~clk;

  f1_setup_interface dut (.clk, .rst_n, .sclk, .sdata, .sen, .cfg, .dac_wr, .dac_addr, .dac_data);

  always @(posedge clk) if (dac_wr) begin ndac++; last_a = dac_addr; last_d = dac_data; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input logic [7:0] a, input logic [15:0] d, input int nbits = 24);
    logic [23:0] f;
    f = {a, d};
    sen = 1'b1;
    #50000;
    for (int i = 0; i < nbits; i++) begin
      sdata = f[23 - i];
      #50000 sclk = 1'b1;
      #50000 sclk = 1'b0;
    end
    #50000 sen = 1'b0;
    #200000;
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000 rst_n = 1'b1;
    #10000;
    check(cfg.mode == MODE_STD && cfg.ch_enable == 8'hFF && cfg.trig_offset == 64 &&
          cfg.trig_window == 32 && cfg.latch_hold == 10 && cfg.ref_period == 0 && !cfg.bus8 && cfg.edge_fall == 8'h00,
          "reset values");
    for (int r = 0; r < 10; r++) begin
      logic [15:0] v;
      v = 16'($urandom);
      send(8'd0, v);
      check(cfg.mode == mode_e'(v[1:0]) && cfg.bus8 == v[2], "mode register");
      v = 16'($urandom); send(8'd1, v); check(cfg.ch_enable == v[7:0], "enable register");
      v = 16'($urandom); send(8'd2, v); check(cfg.trig_offset == v[10:0], "offset register");
      v = 16'($urandom); send(8'd3, v); check(cfg.trig_window == v[10:0], "window register");
      v = 16'($urandom); send(8'd4, v); check(cfg.latch_hold == v[4:0], "hold register");
      v = 16'($urandom); send(8'd5, v); check(cfg.ref_period == v, "period register");
      v = 16'($urandom); send(8'd6, v); check(cfg.edge_fall == v[7:0], "edge select register");
      begin
        int k, n0;
        k = $urandom_range(0, 7);
        v = 16'($urandom);
        n0 = ndac;
        send(8'(8 + k), v);
        check(ndac == n0 + 1 && last_a == 3'(k) && last_d == v[7:0], "DAC write");
      end
    end
    begin
      cfg_t before_frame;
      before_frame = cfg;
      send(8'd2, 16'h0123, 23);
      check(cfg == before_frame, "short frame accepted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
