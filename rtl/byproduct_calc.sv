// byproduct_calc: byproduct-operator register of one logical qubit.
//
// The pair (x, z) records the Pauli correction Z^z X^x that the measurements
// so far have left on the logical qubit. On every rising edge of the sample
// clock Xs it is updated from the three latched outcomes
// m = {m_above, m_own, m_below}:
//   x' = x ^ XOR_j(B_x[j] & m[j])
//   z' = z ^ XOR_j(B_z[j] & m[j])
// and, in the same step, the 2-bit term {x, z} that the commutation
// correction register computed on the previous Xr is XORed in as well. As
// in the paper's control-system diagram, the ops D input is the XOR of the
// masked update, the ops feedback and the correction term.
//
// Timing: the new pair appears shortly after Xs. ce (the registered enable)
// gates the update. Reset (asynchronous, active high) clears the pair.
`timescale 1ns / 1ps
module byproduct_calc
  import mbqc_pkg::*;
(
  input  logic       xs,
  input  logic       rst,
  input  logic       ce,
  input  logic [2:0] bx,
  input  logic [2:0] bz,
  input  logic [2:0] m,
  input  ops_t       cc_term,
  output ops_t       ops
);

  ops_t update;

  // ops_update look-up table of the diagram: masked parity of the outcomes.
  always_comb begin
    update.x = ^(bx & m);
    update.z = ^(bz & m);
  end

  always_ff @(posedge xs or posedge rst) begin
    if (rst)     ops <= '0;
    else if (ce) ops <= ops ^ update ^ cc_term;
  end

endmodule
