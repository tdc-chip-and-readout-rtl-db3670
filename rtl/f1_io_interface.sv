// f1_io_interface: the readout port of the chip, in the reader's clock
// domain (rclk, up to 50 MHz). While the reader holds 'rd_en' high, each rclk
// cycle presents the next part of the oldest readout word and raises
// 'data_valid':
//   24-bit mode (bus8 = 0): one cycle per word on data_out[23:0];
//   8-bit mode  (bus8 = 1): three cycles per word, bits 23:16, 15:8, 7:0, on
//                           data_out[7:0] (data_out[23:8] are zero).
// With every word it gives the 6-bit event number it belongs to: for a
// header word the number it carries, for a hit word the number of the last
// header read from the same channel. The bus widths, the 24-to-8 split and
// the event-number port are the paper's; byte order, handshake and the
// per-channel event tracking are this design's. The outline draws data and
// event-number lines with arrows both ways; here they are outputs only.
// 'bus8' comes from the setup registers in the core domain and is brought in
// through two flip-flops; it must not change while words are being read.
// Timing: outputs are registered, valid one cycle after the cycle in which
// rd_en was seen with a word available.
`timescale 1ps/1ps
module f1_io_interface (
  input  logic                   rclk,
  input  logic                   rrst_n,
  input  logic                   bus8,
  input  logic                   fifo_empty,
  input  f1_pkg::ro_word_t       fifo_data,
  output logic                   fifo_pop,
  input  logic                   rd_en,
  output logic [23:0]            data_out,
  output logic                   data_valid,
  output logic [f1_pkg::EVW-1:0] event_number
);
  import f1_pkg::*;

  logic [1:0]     b8s;
  logic [1:0]     beat;
  logic [EVW-1:0] evt [NCH];
  logic [EVW-1:0] ev_now;
  logic           go;
  logic [23:0]    w;

  assign w      = fifo_data;
  assign go     = rd_en && !fifo_empty;
  assign ev_now = fifo_data.hdr ? fifo_data.payload[15 -: EVW] : evt[fifo_data.chan];
  assign fifo_pop = go && (!b8s[1] || beat == 2'd2);

  always_ff @(posedge rclk or negedge rrst_n)
    if (!rrst_n) begin
      b8s          <= '0;
      beat         <= '0;
      data_out     <= '0;
      data_valid   <= 1'b0;
      event_number <= '0;
      for (int i = 0; i < NCH; i++) evt[i] <= '0;
    end else begin
      b8s        <= {b8s[0], bus8};
      data_valid <= go;
      if (go) begin
        event_number <= ev_now;
        if (fifo_data.hdr && fifo_pop) evt[fifo_data.chan] <= ev_now;
        if (!b8s[1]) begin
          data_out <= w;
        end else begin
          unique case (beat)
            2'd0:    data_out <= {16'b0, w[23:16]};
            2'd1:    data_out <= {16'b0, w[15:8]};
            default: data_out <= {16'b0, w[7:0]};
          endcase
          beat <= (beat == 2'd2) ? 2'd0 : beat + 2'd1;
        end
      end
    end
endmodule
