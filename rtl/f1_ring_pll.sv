// f1_ring_pll: BEHAVIOURAL MODEL (not synthesizable) of the analog timing core
// of the F1 TDC: a ring oscillator of 19 voltage-controlled delay elements
// held by a phase locked loop against the reference clock.
//
// The ring is modelled as 19 inverting stages of BIN_PS delay each (150 ps
// nominal). An odd ring of inverters has a period of 2 * 19 = 38 stage delays
// and passes through 38 distinct states, one per bin. 'taps' gives the stage
// outputs with every odd stage re-inverted, so the state reads as a
// thermometer code: stages 0..p-1 high for phase p < 19, stages p-19..18 high
// for p >= 19 (see f1_pkg::phase_taps). 'osc_clk' is the inverted last stage:
// it rises when the ring enters phase 0 and clocks all synchronous logic of
// the chip (period 38 * BIN_PS = 5.7 ns).
//
// The control loop (phase detector, charge pump, control voltage) is not
// given in enough detail to model: the stage delay is fixed at its locked
// value, the ring starts 601 ps after time zero, and 'locked' rises after
// LOCK_CYCLES reference-clock edges. When read by a tool that ignores delays
// the ring is a combinational loop of inverters, as it is in silicon.
// Ports: ref_clk in; taps[18:0], osc_clk, locked out.
`timescale 1ps/1ps
module f1_ring_pll #(
  parameter int unsigned BIN_PS      = 150,
  parameter int unsigned LOCK_CYCLES = 4
) (
  input  logic                    ref_clk,
  output logic [f1_pkg::NTAP-1:0] taps,
  output logic                    osc_clk,
  output logic                    locked
);
  import f1_pkg::*;

  // odd stages carry the inverted signal
  localparam logic [NTAP-1:0] ODD = NTAP'({(NTAP + 1) / 2 {2'b10}});

  logic            start;
  logic [NTAP-1:0] stage;
  int unsigned     nref;

  // Start-up: hold every stage at phase 0 for a few bins, then release.
  initial begin
    start = 1'b0;
    #1 start = 1'b1;
    #(4 * BIN_PS) start = 1'b0;
  end

  always @(stage[NTAP-1] or start)
    stage[0] <= #(BIN_PS) start ? ODD[0] : ~stage[NTAP-1];

  for (genvar i = 1; i < NTAP; i++) begin : g_stage
    always @(stage[i-1] or start)
      stage[i] <= #(BIN_PS) start ? ODD[i] : ~stage[i-1];
  end

  initial nref = 0;

  always @(posedge ref_clk)
    if (nref < LOCK_CYCLES) nref <= nref + 1;

  assign taps    = stage ^ ODD;
  assign osc_clk = ~stage[NTAP-1];
  assign locked  = (nref >= LOCK_CYCLES);

endmodule
