// f1_wire_latch: the fourfold latch register of the pattern recognition
// (latch) mode. Four inputs belong to one channel. The first leading edge on
// any of them opens the register for a preset hold time ('hold' osc_clk
// periods, 30-150 ns in the paper, i.e. 5..26 periods of 5.7 ns); every
// leading edge that arrives while it is open sets its bit. When the hold time
// has passed, the 4-bit pattern is handed on ('valid' for one cycle) and the
// register is cleared for the next recording.
// The register opens on the OR (">=1" in the outline) of the four inputs.
// The inputs are sampled by osc_clk (two flip-flops), which matches the
// 5.7 ns time bin the paper gives for this mode; the sampling scheme is this
// design's choice. Timing: 'valid' comes hold+3 cycles after the first edge.
`timescale 1ps/1ps
module f1_wire_latch #(
  parameter int unsigned NW = f1_pkg::NWIRE
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [NW-1:0] wires,
  input  logic [4:0]    hold,
  output logic          valid,
  output logic [NW-1:0] pattern
);
  logic [NW-1:0] s1, s2, s3, rise, pat;
  logic          open;
  logic [4:0]    cnt;

  assign rise    = s2 & ~s3;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
      open    <= 1'b0;
      cnt     <= '0;
      pat     <= '0;
      valid   <= 1'b0;
      pattern <= '0;
    end else begin
      s1    <= wires;
      s2    <= s1;
      s3    <= s2;
      valid <= 1'b0;
      if (!open) begin
        if (en && |rise) begin
          open <= 1'b1;
          pat  <= rise;
          cnt  <= hold;
        end
      end else if (cnt == '0) begin
        open    <= 1'b0;
        valid   <= 1'b1;
        pattern <= pat | rise;
        pat     <= '0;
      end else begin
        pat <= pat | rise;
        cnt <= cnt - 5'd1;
      end
    end
endmodule
