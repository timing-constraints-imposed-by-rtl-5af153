// comm_correct: commutation-correction and constant-addition register.
//
// Before a CNOT the byproduct operators of the control (c) and target (t)
// qubits must be commuted through the gate: z_c ^= z_t and x_t ^= x_c. The
// CNOT pattern also adds a constant 1 to z_c. Both are driven by the 5-bit
// field C of the program word:
//   C[1] correction: C[2]=1 this qubit is the control, else the target;
//        C[3]=1 the partner is the qubit above, else the one below.
//   C[4] add constants: C[2] is added to z, C[3] to x.
//   C[0] store request (handled in stored_ops).
// C[1] and C[4] are mutually exclusive; an assertion checks it, and the
// correction wins if both are set.
//
// On the rising edge of the reset clock Xr, after Xs has produced the
// round's byproduct pairs, this block registers the term {x, z} that the
// next Xs edge XORs into this qubit's pair. Only the partner's pair is
// needed: the own pair keeps its value and gets the partner's bit added.
// ce gates the register; reset (asynchronous, active high) clears it.
`timescale 1ns / 1ps
module comm_correct
  import mbqc_pkg::*;
(
  input  logic           xr,
  input  logic           rst,
  input  logic           ce,
  input  logic [C_W-1:0] c,
  input  ops_t           ops_above,
  input  ops_t           ops_below,
  output ops_t           cc_term
);

  ops_t partner;
  ops_t term;

  always_comb begin
    partner = c[C_BIT3] ? ops_above : ops_below;
    term    = '0;
    if (c[C_CORRECT]) begin
      if (c[C_BIT2]) term.z = partner.z;   // control: z_c ^= z_t
      else           term.x = partner.x;   // target:  x_t ^= x_c
    end else if (c[C_ADD]) begin
      term.z = c[C_BIT2];
      term.x = c[C_BIT3];
    end
  end

  always_ff @(posedge xr or posedge rst) begin
    if (rst)     cc_term <= '0;
    else if (ce) cc_term <= term;
  end

  // Bits 1 and 4 of C must not be set together.
  a_c_exclusive : assert property (@(posedge xr) disable iff (rst)
                                   ce |-> !(c[C_CORRECT] && c[C_ADD]));

endmodule
