// adaptive_setting: adaptive measurement setting s of one logical qubit.
//
// The sign bit s of the next measurement angle, phi = (-1)^s * theta, is a
// parity of earlier outcomes of this qubit and of its stored byproduct
// operators. The own latched outcome is shifted into a 3-bit register on
// each rising edge of Xs; S[2] holds the newest outcome, S[0] the oldest.
// The mask A_m is registered on the same edge, because the program word
// changes on the next Xp edge while s must stay valid. Then, combinationally,
//   s = XOR(A_m & S) ^ byp_term
// so s is ready a gate delay after Xs, for the measurement at the next Xp.
//
// The bit order of S follows the paper's worked example program (the mask
// bit A_m[2] picks the newest outcome); the paper's prose numbers the
// outcomes the other way round. s is left unregistered as in the paper, so
// it can glitch after Xs; that does not affect the synchronous logic.
// ce gates the registers; reset (asynchronous, active high) clears them.
`timescale 1ns / 1ps
module adaptive_setting
  import mbqc_pkg::*;
(
  input  logic            xs,
  input  logic            rst,
  input  logic            ce,
  input  logic            m_own,
  input  logic [HIST-1:0] am,
  input  logic            byp_term,
  output logic            s
);

  logic [HIST-1:0] shift_reg;
  logic [HIST-1:0] am_q;

  always_ff @(posedge xs or posedge rst) begin
    if (rst) begin
      shift_reg <= '0;
      am_q      <= '0;
    end else if (ce) begin
      shift_reg <= {m_own, shift_reg[HIST-1:1]};
      am_q      <= am;
    end
  end

  assign s = ^(am_q & shift_reg) ^ byp_term;

endmodule
