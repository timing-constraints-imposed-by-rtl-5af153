// mbqc_core: the synchronous part of the digital system, for N rows.
//
// N unit cells (one per cluster-state row) share one program counter.
// Neighbouring cells exchange their latched outcomes and byproduct pairs:
// cell i takes cell i-1 as "above" and cell i+1 as "below"; the missing
// neighbours of cell 0 and cell N-1 read as 0.
//
// The clocks Xs and Xr come in as ports, so this module holds all the
// synthesizable logic of the design and can be synthesized on its own;
// mbqc_digital_system adds the clock manager that makes Xs and Xr from Xp.
// Splitting it off this way is this design's choice.
//
// Timing: the program word of round k is read and the address advanced on
// the k-th rising edge of xp with enable high; s[i] is valid a logic delay
// after that cycle's Xs and is the sign for row i's next measurement; b[i]
// changes only on Xs. The load port (prog_we[i] selects the row's memory,
// prog_waddr, prog_wdata) writes on xp.
`timescale 1ns / 1ps
module mbqc_core
  import mbqc_pkg::*;
#(
  parameter int unsigned N     = 20,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              xp,
  input  logic              xs,
  input  logic              xr,
  input  logic              rst,
  input  logic              enable,
  input  logic [N-1:0]      outcome,
  output logic [N-1:0]      s,
  output ops_t [N-1:0]      b,
  input  logic [N-1:0]      prog_we,
  input  logic [AW-1:0]     prog_waddr,
  input  logic [PROG_W-1:0] prog_wdata
);

  logic [AW-1:0] addr;
  logic          run;
  logic [N-1:0]  m_latched;

  program_counter #(.DEPTH(DEPTH)) u_pc (
    .xp, .rst, .enable, .addr, .run
  );

  for (genvar i = 0; i < N; i++) begin : g_cell
    logic m_above, m_below;
    ops_t ops_above, ops_below;

    if (i == 0) begin : g_top_edge
      assign m_above   = 1'b0;
      assign ops_above = '0;
    end else begin : g_top_link
      assign m_above   = m_latched[i-1];
      assign ops_above = b[i-1];
    end

    if (i == N - 1) begin : g_bottom_edge
      assign m_below   = 1'b0;
      assign ops_below = '0;
    end else begin : g_bottom_link
      assign m_below   = m_latched[i+1];
      assign ops_below = b[i+1];
    end

    qubit_cell #(.DEPTH(DEPTH)) u_cell (
      .xp, .xs, .xr, .rst, .run,
      .outcome(outcome[i]), .addr,
      .m_above, .m_below, .ops_above, .ops_below,
      .m_latched(m_latched[i]), .ops(b[i]), .s(s[i]),
      .prog_we(prog_we[i]), .prog_waddr, .prog_wdata(prog_wdata)
    );
  end

endmodule
