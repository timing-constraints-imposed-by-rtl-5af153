// clock_manager: behavioural model of the FPGA mixed-mode clock manager.
//
// Not synthesizable: it stands for the vendor clock macro that derives the
// two internal clocks from the photon clock Xp (CLKIN1):
//   CLKOUT0 = Xs, the measurement sample clock, PHASE_XS_DEG after Xp
//   CLKOUT1 = Xr, the latch reset / correction clock, PHASE_XR_DEG after Xp
// The defaults are the paper's timing-closure point on the 7-series part:
// 190 MHz with Xs at 220 degrees and Xr at 300 degrees. Xs is high for half
// a period. Xr is high for XR_HIGH_DEG only, so the level-sensitive
// measurement latch is released before the next photon; that duty cycle,
// and locking after LOCK_CYCLES input edges, are this model's choices.
// The outputs follow each Xp edge with fixed delays computed from
// CLKIN_PERIOD_NS, as a real clock manager configured for that period does.
`timescale 1ns / 1ps
module clock_manager #(
  parameter real         CLKIN_PERIOD_NS = 1000.0 / 190.0,
  parameter real         PHASE_XS_DEG    = 220.0,
  parameter real         PHASE_XR_DEG    = 300.0,
  parameter real         XR_HIGH_DEG     = 40.0,
  parameter int unsigned LOCK_CYCLES     = 4
) (
  input  logic CLKIN1,
  input  logic RST,
  output logic CLKOUT0,
  output logic CLKOUT1,
  output logic LOCKED
);

  localparam real XS_DLY = CLKIN_PERIOD_NS * PHASE_XS_DEG / 360.0;
  localparam real XS_HI  = CLKIN_PERIOD_NS / 2.0;
  localparam real XR_DLY = CLKIN_PERIOD_NS * PHASE_XR_DEG / 360.0;
  localparam real XR_HI  = CLKIN_PERIOD_NS * XR_HIGH_DEG / 360.0;

  int unsigned edges;

  initial begin
    CLKOUT0 = 1'b0;
    CLKOUT1 = 1'b0;
    LOCKED  = 1'b0;
    edges   = 0;
  end

  always @(posedge CLKIN1 or posedge RST) begin
    if (RST) begin
      edges  <= 0;
      LOCKED <= 1'b0;
    end else begin
      if (edges < LOCK_CYCLES) edges <= edges + 1;
      else                     LOCKED <= 1'b1;
    end
  end

  // Each Xp edge schedules one rising and one falling edge of each output.
  always @(posedge CLKIN1) begin
    CLKOUT0 <= #(XS_DLY) 1'b1;
    CLKOUT0 <= #(XS_DLY + XS_HI) 1'b0;
    CLKOUT1 <= #(XR_DLY) 1'b1;
    CLKOUT1 <= #(XR_DLY + XR_HI) 1'b0;
  end

endmodule
