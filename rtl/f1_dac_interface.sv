// f1_dac_interface: the 8 x 8 DAC register and the serial interface to an
// external AD8842 octal 8-bit DAC, used to set the thresholds of the
// discriminators on the front-end card. A write to register k (from the
// setup link) stores the value and marks DAC k for loading; pending loads are
// sent lowest number first over three lines:
//   dac_clk  serial clock, high and low for CLK_DIV core cycles each,
//   dac_sdi  data, changed while dac_clk is low, 12 bits MSB first:
//            4-bit DAC address (k+1) followed by the 8-bit value,
//   dac_ld   load strobe, high for CLK_DIV cycles after the 12th bit.
// The register size and the three lines are the paper's; the 12-bit word
// with addresses 1..8 follows the AD8842 data sheet as this design reads it.
// Timing: one load takes (24 + 2) * CLK_DIV core cycles.
`timescale 1ps/1ps
module f1_dac_interface #(
  parameter int unsigned CLK_DIV = 9
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr,
  input  logic [2:0] addr,
  input  logic [7:0] data,
  output logic [7:0] regs [8],
  output logic       dac_clk,
  output logic       dac_sdi,
  output logic       dac_ld,
  output logic       busy
);
  typedef enum logic [1:0] {D_IDLE, D_LOW, D_HIGH, D_LOAD} dstate_e;

  dstate_e     st;
  logic [7:0]  pending;
  logic [11:0] sh;
  logic [3:0]  nbit;
  logic [$clog2(CLK_DIV+1)-1:0] div;
  logic [2:0]  sel;
  logic        any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = 7; i >= 0; i--)
      if (pending[i]) begin
        any = 1'b1;
        sel = 3'(i);
      end
  end

  assign busy = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st      <= D_IDLE;
      pending <= '0;
      sh      <= '0;
      nbit    <= '0;
      div     <= '0;
      dac_clk <= 1'b0;
      dac_sdi <= 1'b0;
      dac_ld  <= 1'b0;
      for (int i = 0; i < 8; i++) regs[i] <= '0;
    end else begin
      if (wr) begin
        regs[addr]    <= data;
        pending[addr] <= 1'b1;
      end
      unique case (st)
        D_IDLE:
          if (any && !(wr && addr == sel)) begin
            pending[sel] <= 1'b0;
            sh      <= {4'(sel) + 4'd1, regs[sel]};
            nbit    <= '0;
            div     <= '0;
            dac_sdi <= 1'b0;
            st      <= D_LOW;
          end
        D_LOW: begin
          if (div == '0) dac_sdi <= sh[11];
          if (div == ($clog2(CLK_DIV+1))'(CLK_DIV - 1)) begin
            div     <= '0;
            dac_clk <= 1'b1;
            st      <= D_HIGH;
          end else div <= div + 1'b1;
        end
        D_HIGH:
          if (div == ($clog2(CLK_DIV+1))'(CLK_DIV - 1)) begin
            div     <= '0;
            dac_clk <= 1'b0;
            sh      <= {sh[10:0], 1'b0};
            if (nbit == 4'd11) begin
              dac_ld <= 1'b1;
              st     <= D_LOAD;
            end else begin
              nbit <= nbit + 4'd1;
              st   <= D_LOW;
            end
          end else div <= div + 1'b1;
        D_LOAD:
          if (div == ($clog2(CLK_DIV+1))'(CLK_DIV - 1)) begin
            div    <= '0;
            dac_ld <= 1'b0;
            st     <= D_IDLE;
          end else div <= div + 1'b1;
        default: st <= D_IDLE;
      endcase
    end
endmodule
