// program_counter: program address shared by all logical-qubit unit cells.
//
// Every measurement round uses one program word per logical qubit, all at
// the same address. This counter advances that address by one on each rising
// edge of the photon clock Xp while the enable pin is high, and wraps at
// DEPTH. It also registers enable on Xp as `run`, which the control logic
// uses as a clock enable, so round k is the Xp cycle that starts with the
// k-th enabled Xp edge and uses program word k.
//
// The paper draws only a "program address" bus entering the unit cells and
// lists an enable pin; the counter and the meaning of enable are this
// design's own choices. Reset is asynchronous and active high.
`timescale 1ns / 1ps
module program_counter #(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          xp,
  input  logic          rst,
  input  logic          enable,
  output logic [AW-1:0] addr,
  output logic          run
);

  always_ff @(posedge xp or posedge rst) begin
    if (rst) begin
      addr <= '0;
      run  <= 1'b0;
    end else begin
      run <= enable;
      if (enable) addr <= (addr == AW'(DEPTH - 1)) ? '0 : addr + 1'b1;
    end
  end

endmodule
