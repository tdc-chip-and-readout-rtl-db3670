// f1_half_lsb_delay: BEHAVIOURAL MODEL (not synthesizable) of the analog
// "+1/2 LSB" delay element. In high resolution mode the input of an even
// channel is also routed, through this element, to the odd channel next to
// it, so that the two channels sample the same edge half a bin apart. The
// element delays its input by DELAY_PS (75 ps = half of the 150 ps bin).
// In silicon the delay would be tuned by the same control voltage as the ring
// stages; here it is a fixed transport delay. Ports: din in, dout out.
`timescale 1ps/1ps
module f1_half_lsb_delay #(
  parameter int unsigned DELAY_PS = 75
) (
  input  logic din,
  output logic dout
);
  assign #(DELAY_PS) dout = din;
endmodule
