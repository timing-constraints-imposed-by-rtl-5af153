// program_memory: the per-qubit program store.
//
// Holds one 16-bit program word per measurement round. The word at `addr`
// is read on the rising edge of the photon clock Xp and held on `rd_data`
// for the rest of the cycle, so it is stable for the Xs and Xr edges that
// use it. Reset clears the read register (program word 0 is a no-op).
//
// The paper uses a ROM filled from a coefficients file; here the array has
// a synchronous write port on Xp (we, waddr, wdata) so a program can be
// loaded from outside. The depth is this design's choice; the paper does
// not give one.
`timescale 1ns / 1ps
module program_memory #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = mbqc_pkg::PROG_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             xp,
  input  logic             rst,
  input  logic [AW-1:0]    addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge xp) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge xp or posedge rst) begin
    if (rst) rd_data <= '0;
    else     rd_data <= mem[addr];
  end

endmodule
