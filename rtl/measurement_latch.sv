// measurement_latch: input latch that turns a detector pulse into a level.
//
// The photon detector amplifier delivers a short pulse when a photon is
// detected in the |1> rail. The latch is set by that pulse (S) and holds the
// outcome until the reset clock Xr clears it (R), so the control logic can
// sample a steady level on the rising edge of Xs. Reset dominates set.
//
// The latch is level-sensitive, like the FPGA input latch the paper relies
// on: it stays cleared for as long as Xr is high. The high phase of Xr must
// therefore end before the next photon arrives (the clock manager gives Xr a
// short high time); the paper speaks only of the rising edge of Xr.
//
// Ports: set_pulse (S, from the amplifier), xr (R), q (latched outcome).
// This is an intended latch: the design's first stage is a latch by choice.
`timescale 1ns / 1ps
module measurement_latch (
  input  logic set_pulse,
  input  logic xr,
  output logic q
);

  // Transparent while S or R is high; the data input ~xr makes R dominate.
  always_latch begin
    if (set_pulse || xr) q = ~xr;
  end

endmodule
