// f1_setup_interface: receiver of the 10 Mbit/s serial initialization link
// and holder of the chip's configuration registers.
// Frame: while 'sen' is high, 24 bits are shifted in MSB first on rising
// edges of 'sclk': an 8-bit register address, then 16 data bits. When 'sen'
// falls after exactly 24 bits the register is written; other lengths are
// ignored. Register map (this design's; the paper gives only the link rate):
//   0  [1:0] mode (0 standard, 1 high resolution, 2 latch, 3 common start),
//      [2] bus8 (1: 8-bit readout)
//   1  [7:0]  channel enable
//   2  [10:0] trigger offset   (4.8 ns units)
//   3  [10:0] trigger window   (4.8 ns units)
//   4  [4:0]  latch hold time  (coarse periods of 5.7 ns)
//   5  [15:0] internal reference reset period (reference clocks, 0 = off)
//   6  [7:0]  edge select per channel (0 leading, 1 trailing edge)
//   8..15 [7:0] threshold DAC registers 0..7: forwarded as 'dac_wr'
// The link is sampled by the core clock (5.7 ns, 17 samples per 100 ns bit)
// through two flip-flops, so all registers live in the core domain.
// Reset values: standard mode, 24-bit bus, all channels on, offset 64,
// window 32, hold 10, periodic reset off, leading edges.
`timescale 1ps/1ps
module f1_setup_interface (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sclk,
  input  logic          sdata,
  input  logic          sen,
  output f1_pkg::cfg_t  cfg,
  output logic          dac_wr,
  output logic [2:0]    dac_addr,
  output logic [7:0]    dac_data
);
  import f1_pkg::*;

  logic [2:0]  sclk_s;
  logic [1:0]  sdata_s;
  logic [2:0]  sen_s;
  logic [23:0] sr;
  logic [5:0]  nbits;
  logic        sclk_rise, sen_fall;
  logic [7:0]  a;
  logic [15:0] d;

  assign sclk_rise = sclk_s[1] & ~sclk_s[2];
  assign sen_fall  = ~sen_s[1] & sen_s[2];
  assign a         = sr[23:16];
  assign d         = sr[15:0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sclk_s   <= '0;
      sdata_s  <= '0;
      sen_s    <= '0;
      sr       <= '0;
      nbits    <= '0;
      dac_wr   <= 1'b0;
      dac_addr <= '0;
      dac_data <= '0;
      cfg      <= '{mode: MODE_STD, bus8: 1'b0, ch_enable: 8'hFF,
                    trig_offset: 11'd64, trig_window: 11'd32,
                    latch_hold: 5'd10, ref_period: 16'd0, edge_fall: 8'h00};
    end else begin
      sclk_s  <= {sclk_s[1:0], sclk};
      sdata_s <= {sdata_s[0], sdata};
      sen_s   <= {sen_s[1:0], sen};
      dac_wr  <= 1'b0;
      if (sen_s[1] && sclk_rise) begin
        sr <= {sr[22:0], sdata_s[1]};
        if (nbits != '1) nbits <= nbits + 6'd1;
      end
      if (sen_fall) begin
        nbits <= '0;
        if (nbits == 6'd24) begin
          unique case (a)
            8'd0: begin
              cfg.mode <= mode_e'(d[1:0]);
              cfg.bus8 <= d[2];
            end
            8'd1: cfg.ch_enable   <= d[7:0];
            8'd2: cfg.trig_offset <= d[10:0];
            8'd3: cfg.trig_window <= d[10:0];
            8'd4: cfg.latch_hold  <= d[4:0];
            8'd5: cfg.ref_period  <= d;
            8'd6: cfg.edge_fall   <= d[7:0];
            default:
              if (a[7:3] == 5'd1) begin
                dac_wr   <= 1'b1;
                dac_addr <= a[2:0];
                dac_data <= d[7:0];
              end
          endcase
        end
      end
    end
endmodule
