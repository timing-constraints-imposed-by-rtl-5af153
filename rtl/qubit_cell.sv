// qubit_cell: the unit cell repeated once per logical qubit.
//
// Holds the measurement latch, the program memory and the control system
// of one logical qubit (cluster-state row). The latched outcome goes to the
// own control system and, through m_latched, to the neighbours; the
// neighbours' outcomes and byproduct pairs come in on m_above/m_below and
// ops_above/ops_below. "Above" is the qubit with the next lower index.
//
// Timing in each photon-clock cycle: the program word for the round is
// read on Xp; the detector pulse sets the latch after Xp; Xs samples it and
// updates s and the byproduct pair; Xr computes the commutation term, loads
// the stored pair if asked, and clears the latch for the next photon.
// The program load port (prog_we, prog_waddr, prog_wdata) writes this
// cell's memory on Xp.
`timescale 1ns / 1ps
module qubit_cell
  import mbqc_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              xp,
  input  logic              xs,
  input  logic              xr,
  input  logic              rst,
  input  logic              run,
  input  logic              outcome,
  input  logic [AW-1:0]     addr,
  input  logic              m_above,
  input  logic              m_below,
  input  ops_t              ops_above,
  input  ops_t              ops_below,
  output logic              m_latched,
  output ops_t              ops,
  output logic              s,
  input  logic              prog_we,
  input  logic [AW-1:0]     prog_waddr,
  input  logic [PROG_W-1:0] prog_wdata
);

  logic [PROG_W-1:0] p;

  measurement_latch u_latch (
    .set_pulse(outcome), .xr, .q(m_latched)
  );

  program_memory #(.DEPTH(DEPTH)) u_mem (
    .xp, .rst, .addr, .rd_data(p),
    .we(prog_we), .waddr(prog_waddr), .wdata(prog_wdata)
  );

  control_system u_ctrl (
    .xs, .xr, .rst, .ce(run), .p,
    .m({m_above, m_latched, m_below}),
    .ops_above, .ops_below, .ops, .s
  );

endmodule
