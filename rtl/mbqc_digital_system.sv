// mbqc_digital_system: digital measurement processing for N logical qubits.
//
// Top level of the design: the clock manager, which makes the sample clock
// Xs and the reset clock Xr from the photon clock Xp, and mbqc_core, which
// holds the N unit cells (one per cluster-state row), their shared program
// counter and the wiring between neighbouring rows.
//
// Pins: xp (photon clock), rst, enable, locked (as in the paper: 4 common
// pins), and per qubit the detector pulse outcome[i], the adaptive setting
// s[i] and the byproduct pair b[i] = {x, z}. A program load port
// (prog_we[i] selects the cell; prog_waddr, prog_wdata) is added by this
// design so the program memories can be filled from outside.
//
// Operation: raise enable; each Xp cycle is one measurement round that
// uses program word k of every cell. s[i] is valid a logic delay after Xs
// and is the sign setting for qubit i's next measurement; b[i] changes
// only on Xs.
`timescale 1ns / 1ps
module mbqc_digital_system
  import mbqc_pkg::*;
#(
  parameter int unsigned N     = 20,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              xp,
  input  logic              rst,
  input  logic              enable,
  output logic              locked,
  input  logic [N-1:0]      outcome,
  output logic [N-1:0]      s,
  output ops_t [N-1:0]      b,
  input  logic [N-1:0]      prog_we,
  input  logic [AW-1:0]     prog_waddr,
  input  logic [PROG_W-1:0] prog_wdata
);

  logic xs, xr;

  clock_manager u_clk (
    .CLKIN1(xp), .RST(rst), .CLKOUT0(xs), .CLKOUT1(xr), .LOCKED(locked)
  );

  mbqc_core #(.N(N), .DEPTH(DEPTH)) u_core (
    .xp, .xs, .xr, .rst, .enable, .outcome, .s, .b,
    .prog_we, .prog_waddr, .prog_wdata
  );

endmodule
