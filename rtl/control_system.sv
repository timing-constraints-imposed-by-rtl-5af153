// control_system: measurement-processing logic of one logical qubit.
//
// Splits the program word P = {C, A_b, A_m, B_x, B_z} and connects the four
// parts of the paper's control-system diagram:
//   byproduct_calc    byproduct pair (x, z), updated on Xs
//   comm_correct      CNOT commutation / constant term, registered on Xr
//   stored_ops        stored pair (loaded on Xr when C[0]) and its s term
//   adaptive_setting  outcome shift register and the setting s
// Inputs m = {m_above, m_own, m_below} are latched outcomes; ops_above and
// ops_below are the neighbours' byproduct pairs. Outputs: the pair `ops`
// (valid after Xs) and the adaptive setting `s` (valid after Xs, used by
// the analog output stage before the next Xp edge).
`timescale 1ns / 1ps
module control_system
  import mbqc_pkg::*;
(
  input  logic              xs,
  input  logic              xr,
  input  logic              rst,
  input  logic              ce,
  input  logic [PROG_W-1:0] p,
  input  logic [2:0]        m,
  input  ops_t              ops_above,
  input  ops_t              ops_below,
  output ops_t              ops,
  output logic              s
);

  prog_word_t pw;
  ops_t       cc_term;
  logic       byp_term;

  assign pw = prog_word_t'(p);

  byproduct_calc u_byproduct (
    .xs, .rst, .ce,
    .bx(pw.bx), .bz(pw.bz), .m,
    .cc_term, .ops
  );

  comm_correct u_comm (
    .xr, .rst, .ce,
    .c(pw.c), .ops_above, .ops_below,
    .cc_term
  );

  stored_ops u_stored (
    .xr, .xs, .rst, .ce,
    .store(pw.c[C_STORE]), .ops, .ab(pw.ab),
    .byp_term
  );

  adaptive_setting u_adaptive (
    .xs, .rst, .ce,
    .m_own(m[1]), .am(pw.am), .byp_term,
    .s
  );

endmodule
