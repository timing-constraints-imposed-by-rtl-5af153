// stored_ops: stored byproduct operators and their term of s.
//
// The one-qubit gate's adaptive settings need the byproduct pair as it was
// before the gate started, while the live pair keeps changing. When C[0] of
// the program word is set, the live pair is copied into ops_stored on the
// rising edge of Xr (after that round's Xs update). On each rising edge of
// Xs the term A_b[1]&x_s ^ A_b[0]&z_s is registered as byp_term, so it
// stays valid through the next Xp edge when the program word changes.
//
// Ports: xr, xs clocks; ce gates both registers; store = C[0]; ops is the
// live pair; ab the mask A_b; byp_term the registered term. Reset is
// asynchronous, active high, and clears both registers.
`timescale 1ns / 1ps
module stored_ops
  import mbqc_pkg::*;
(
  input  logic       xr,
  input  logic       xs,
  input  logic       rst,
  input  logic       ce,
  input  logic       store,
  input  ops_t       ops,
  input  logic [1:0] ab,
  output logic       byp_term
);

  ops_t ops_stored;

  always_ff @(posedge xr or posedge rst) begin
    if (rst)               ops_stored <= '0;
    else if (ce && store)  ops_stored <= ops;
  end

  always_ff @(posedge xs or posedge rst) begin
    if (rst)     byp_term <= 1'b0;
    else if (ce) byp_term <= (ab[1] & ops_stored.x) ^ (ab[0] & ops_stored.z);
  end

endmodule
