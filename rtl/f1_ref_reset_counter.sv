// f1_ref_reset_counter: the "reference time reset counter" of the chip
// outline. It counts rising edges of the reference clock and, when a period
// has been programmed, issues an internal reference reset every 'period'
// reference-clock cycles, so that time stamps are kept relative to a
// regularly renewed reference without an external reset. period = 0 turns it
// off. An external reference reset ('ext_reset', a one-cycle pulse) restarts
// the count. The paper gives only the block's name and its connection to the
// reference clock and the reference reset; the periodic behaviour is this
// design's reading of it.
// Timing: ref_clk is sampled by two flip-flops in the osc_clk domain (which
// is more than 4 times faster); 'int_reset' is a one-cycle pulse in that domain
// 3 cycles after the ref_clk edge that completes a period.
`timescale 1ps/1ps
module f1_ref_reset_counter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ref_clk,
  input  logic        ext_reset,
  input  logic [15:0] period,
  output logic        int_reset
);
  logic [2:0]  rs;
  logic [15:0] cnt;
  logic        ref_rise;

  assign ref_rise = rs[1] & ~rs[2];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rs        <= '0;
      cnt       <= '0;
      int_reset <= 1'b0;
    end else begin
      rs        <= {rs[1:0], ref_clk};
      int_reset <= 1'b0;
      if (ext_reset || period == '0) begin
        cnt <= '0;
      end else if (ref_rise) begin
        if (cnt >= period - 16'd1) begin
          cnt       <= '0;
          int_reset <= 1'b1;
        end else begin
          cnt <= cnt + 16'd1;
        end
      end
    end
endmodule
