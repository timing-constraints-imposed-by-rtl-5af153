// mbqc_pkg: types and constants shared by the MBQC measurement-processing logic.
//
// The control logic of every logical qubit is driven by a 16-bit program
// word, one per measurement round, laid out as P = {C, A_b, A_m, B_x, B_z}
// with C in the most significant bits:
//   C   [15:11]  commutation-correction / constant-addition control
//   A_b [10:9]   mask selecting the stored byproduct bits {x_s, z_s} for s
//   A_m [8:6]    mask selecting shift-register outcomes for s
//   B_x [5:3]    mask selecting outcomes {above, own, below} XORed into x
//   B_z [2:0]    mask selecting outcomes {above, own, below} XORed into z
// The field order and widths follow the paper; the exact bit positions were
// confirmed against its worked example program. A byproduct-operator pair is
// packed as {x, z}, z in the least significant bit, as in that example.
`timescale 1ns / 1ps
package mbqc_pkg;

  localparam int unsigned PROG_W = 16;  // program word width
  localparam int unsigned C_W    = 5;   // control field width
  localparam int unsigned HIST   = 3;   // outcomes kept for adaptive settings

  // Bit positions inside the C field.
  localparam int unsigned C_STORE     = 0;  // load stored byproduct register
  localparam int unsigned C_CORRECT   = 1;  // CNOT commutation correction
  localparam int unsigned C_BIT2      = 2;  // correct: I am control / add: 1 to z
  localparam int unsigned C_BIT3      = 3;  // correct: partner is above / add: 1 to x
  localparam int unsigned C_ADD       = 4;  // add constants to the byproduct pair

  // Byproduct operator pair of one logical qubit.
  typedef struct packed {
    logic x;
    logic z;
  } ops_t;

  // Program word, most significant field first.
  typedef struct packed {
    logic [C_W-1:0]  c;
    logic [1:0]      ab;
    logic [HIST-1:0] am;
    logic [2:0]      bx;
    logic [2:0]      bz;
  } prog_word_t;

endpackage
