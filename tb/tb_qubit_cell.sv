// tb_qubit_cell: one unit cell (latch, program memory, control system)
// with hand-made clocks: in each 10 ns round Xp rises at 0, the detector
// pulse arrives at 1 ns, Xs rises at 6 ns and Xr is high from 8 to 9 ns.
// The cell first plays the lower qubit of the paper's worked example (its
// "above" neighbour is driven from the example's upper-qubit column), then,
// after a reset, the upper qubit (its "below" neighbour driven from the
// lower-qubit column). s and the byproduct pair must match the example's
// table in every round, which also checks that the program word of round k
// is read at the k-th enabled Xp edge and that outcomes reach the control
// system only through the latch. A last part gives random outcomes to both
// neighbours and a program that XORs the upper one into x and the lower
// one into z, which pins down the order of the three outcome inputs.
`timescale 1ns / 1ps
module tb_qubit_cell;
  import mbqc_pkg::*;
  logic xp = 1'b0, xs = 1'b0, xr = 1'b0, rst = 1'b0, run = 1'b0, outcome = 1'b0;
  logic [7:0] addr = '0, prog_waddr = '0;
  logic m_above = 1'b0, m_below = 1'b0, m_latched, s, prog_we = 1'b0;
  ops_t ops_above = '0, ops_below = '0, ops;
  logic [15:0] prog_wdata = '0;
  int checks = 0, failures = 0;

  localparam logic [15:0] P0 [10] = '{16'h0302, 16'h0510, 16'h0342, 16'h3010, 16'h0003,
                                      16'h0010, 16'ha013, 16'h0002, 16'h0012, 16'h0010};
  localparam logic [15:0] P1 [10] = '{16'h0002, 16'h0010, 16'h0002, 16'h5010, 16'h0002,
                                      16'h0030, 16'h0022, 16'h0010, 16'h0002, 16'h0010};
  localparam logic M0 [10] = '{0, 1, 1, 0, 1, 0, 0, 1, 1, 1};
  localparam logic M1 [10] = '{0, 1, 0, 1, 0, 1, 0, 1, 0, 0};
  localparam logic S0 [10] = '{0, 1, 1, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [1:0] B0 [10] = '{2'b00, 2'b10, 2'b11, 2'b11, 2'b10,
                                     2'b10, 2'b10, 2'b10, 2'b01, 2'b11};
  localparam logic [1:0] B1 [10] = '{2'b00, 2'b10, 2'b10, 2'b00, 2'b10,
                                     2'b00, 2'b00, 2'b10, 2'b10, 2'b10};

  qubit_cell #(.DEPTH(256)) dut (
    .xp, .xs, .xr, .rst, .run, .outcome, .addr,
    .m_above, .m_below, .ops_above, .ops_below,
    .m_latched, .ops, .s, .prog_we, .prog_waddr, .prog_wdata
  );

  task automatic expect_bits(input logic [1:0] got, input logic [1:0] exp, input string what, input int k);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s round %0d: got %b expected %b", what, k, got, exp);
    end
  endtask

  task automatic xp_edge();
    xp = 1'b1; #5 xp = 1'b0; #5;
  endtask

  // Play one column of the example; lower = 1 plays the lower qubit.
  task automatic play(input bit lower);
    rst = 1'b0; run = 1'b0; addr = '0; #0.2 rst = 1'b1; #1 rst = 1'b0;
    for (int k = 0; k < 10; k++) begin
      prog_we = 1'b1; prog_waddr = 8'(k); prog_wdata = lower ? P1[k] : P0[k];
      xp_edge();
    end
    prog_we = 1'b0;
    run = 1'b1;
    for (int k = 0; k < 10; k++) begin
      addr = 8'(k);
      xp = 1'b1;
      #1 outcome = lower ? M1[k] : M0[k];
      m_above = lower ? M0[k] : 1'b0;   // neighbour latches
      m_below = lower ? 1'b0 : M1[k];
      #1 outcome = 1'b0;
      #3 xp = 1'b0;
      checks++;
      if (m_latched != (lower ? M1[k] : M0[k])) begin failures++; $display("FAIL latch round %0d", k); end
      #1 xs = 1'b1;
      #1 xs = 1'b0;
      expect_bits({1'b0, s}, {1'b0, lower ? 1'b0 : S0[k]}, "s", k);
      expect_bits(ops, lower ? B1[k] : B0[k], "b", k);
      ops_above = lower ? ops_t'(B0[k]) : '0;
      ops_below = lower ? '0 : ops_t'(B1[k]);
      #1 xr = 1'b1;
      #1 xr = 1'b0;
      checks++;
      if (m_latched) begin failures++; $display("FAIL latch not cleared round %0d", k); end
      #1;
    end
    run = 1'b0;
  endtask

  // Program word 0x0021 (B_x = 100, B_z = 001): x takes the upper
  // neighbour's outcomes, z the lower neighbour's. Random outcomes.
  task automatic neighbours();
    logic ex, ez;
    rst = 1'b0; run = 1'b0; addr = '0; #0.2 rst = 1'b1; #1 rst = 1'b0;
    ops_above = '0; ops_below = '0;
    ex = 1'b0; ez = 1'b0;
    for (int k = 0; k < 40; k++) begin
      prog_we = 1'b1; prog_waddr = 8'(k); prog_wdata = 16'h0021;
      xp_edge();
    end
    prog_we = 1'b0;
    run = 1'b1;
    for (int k = 0; k < 40; k++) begin
      addr = 8'(k);
      xp = 1'b1;
      #1 outcome = 1'($urandom);
      m_above = 1'($urandom);
      m_below = 1'($urandom);
      ex ^= m_above;
      ez ^= m_below;
      #1 outcome = 1'b0;
      #3 xp = 1'b0;
      #1 xs = 1'b1;
      #1 xs = 1'b0;
      expect_bits(ops, {ex, ez}, "neighbour b", k);
      #1 xr = 1'b1;
      #1 xr = 1'b0;
      #1;
    end
    run = 1'b0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xr = 1'b1; #1 xr = 1'b0;   // start with the latch clear
    play(1'b1);
    play(1'b0);
    neighbours();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
