// tb_fig1_circuit: two small builds of the design run the paper's example
// circuits with random measurement outcomes.
//
// dut3 (N = 3) runs the three-qubit circuit of the paper's introduction:
// a one-qubit gate U followed by a two-round identity on qubit 0, and a
// CNOT with qubit 1 as control and qubit 2 as target, six rounds in all.
// The circuit is repeated 40 times back to back, so every repeat starts
// with a store request (qubit 0) and a commutation request (qubits 1, 2).
// dut1 (N = 1) is the single-qubit configuration and runs the same U plus
// identity on its only qubit 40 times.
//
// Expected s and byproduct pairs come from the closed forms of the
// patterns (see tb_mbqc_digital_system), not from the program words.
`timescale 1ns / 1ps
module tb_fig1_circuit;
  import mbqc_pkg::*;

  localparam int  REPS = 40;
  localparam real T    = 1000.0 / 190.0;

  logic xp = 1'b0, rst = 1'b0, enable = 1'b0, locked3, locked1;
  logic [2:0] outcome3 = '0, s3, we3 = '0;
  logic [0:0] outcome1 = '0, s1, we1 = '0;
  ops_t [2:0] b3;
  ops_t [0:0] b1;
  logic [7:0]  waddr = '0;
  logic [15:0] wdata = '0;
  int checks = 0, failures = 0;

  mbqc_digital_system #(.N(3), .DEPTH(256)) dut3 (
    .xp, .rst, .enable, .locked(locked3), .outcome(outcome3), .s(s3), .b(b3),
    .prog_we(we3), .prog_waddr(waddr), .prog_wdata(wdata));

  mbqc_digital_system #(.N(1), .DEPTH(256)) dut1 (
    .xp, .rst, .enable, .locked(locked1), .outcome(outcome1), .s(s1), .b(b1),
    .prog_we(we1), .prog_waddr(waddr), .prog_wdata(wdata));

  always #(T / 2.0) xp = ~xp;

  // Program words of one repeat, per round, with the request bits for the
  // next repeat in round 5.
  localparam logic [15:0] PU [6] = '{16'h0302, 16'h0510, 16'h0342, 16'h0010, 16'h0002, 16'h0810};
  localparam logic [15:0] PC [6] = '{16'h0003, 16'h0010, 16'ha013, 16'h0002, 16'h0012, 16'h3010};
  localparam logic [15:0] PT [6] = '{16'h0002, 16'h0030, 16'h0022, 16'h0010, 16'h0002, 16'h5010};

  task automatic expect_bits(input logic [1:0] got, input logic [1:0] exp, input string what, input int r);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s round %0d: got %b expected %b", what, r, got, exp);
    end
  endtask

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ops_t e0, ec, et, e1, st0, st1;
    logic [5:0] m0, mc, mt, m1;
    #0.2 rst = 1'b1;
    repeat (2) @(negedge xp);
    rst = 1'b0;
    for (int r = 0; r < REPS; r++)
      for (int k = 0; k < 6; k++) begin
        @(negedge xp);
        waddr = 8'(r * 6 + k);
        we3 = 3'b001; wdata = PU[k]; @(negedge xp);
        we3 = 3'b010; wdata = PC[k]; @(negedge xp);
        we3 = 3'b100; wdata = PT[k]; @(negedge xp);
        we3 = 3'b000; we1 = 1'b1; wdata = PU[k]; @(negedge xp);
        we1 = 1'b0;
      end
    repeat (6) @(negedge xp);
    checks++;
    if (!locked3 || !locked1) begin failures++; $display("FAIL clock manager not locked"); end

    e0 = '0; ec = '0; et = '0; e1 = '0;
    enable = 1'b1;
    for (int r = 0; r < REPS; r++) begin
      // Boundary: store for U, commutation for the CNOT.
      st0 = e0; st1 = e1;
      {ec.z, et.x} = {ec.z ^ et.z, et.x ^ ec.x};
      m0 = 6'($urandom); mc = 6'($urandom); mt = 6'($urandom); m1 = 6'($urandom);
      for (int k = 0; k < 6; k++) begin
        logic e_s0, e_s1;
        @(posedge xp);
        #0.5 begin
          outcome3 = {mt[k], mc[k], m0[k]};
          outcome1 = m1[k];
        end
        #1.0 begin outcome3 = '0; outcome1 = '0; end
        #3.5;
        case (k)
          0: begin e_s0 = m0[0] ^ st0.z; e_s1 = m1[0] ^ st1.z; end
          1: begin e_s0 = m0[1] ^ st0.x; e_s1 = m1[1] ^ st1.x; end
          2: begin e_s0 = m0[0] ^ m0[2] ^ st0.z; e_s1 = m1[0] ^ m1[2] ^ st1.z; end
          default: begin e_s0 = 1'b0; e_s1 = 1'b0; end
        endcase
        expect_bits({1'b0, s3[0]}, {1'b0, e_s0}, "N=3 s of qubit 0", r * 6 + k);
        expect_bits({s3[2], s3[1]}, 2'b00, "N=3 s of CNOT qubits", r * 6 + k);
        expect_bits({1'b0, s1[0]}, {1'b0, e_s1}, "N=1 s", r * 6 + k);
      end
      e0.z ^= m0[0] ^ m0[2] ^ m0[4];
      e0.x ^= m0[1] ^ m0[3] ^ m0[5];
      e1.z ^= m1[0] ^ m1[2] ^ m1[4];
      e1.x ^= m1[1] ^ m1[3] ^ m1[5];
      ec.z ^= 1'b1 ^ mc[0] ^ mc[2] ^ mc[3] ^ mc[4] ^ mt[0] ^ mt[2];
      ec.x ^= mc[1] ^ mc[2] ^ mc[4] ^ mc[5];
      et.z ^= mt[0] ^ mt[2] ^ mt[4];
      et.x ^= mc[1] ^ mc[2] ^ mt[1] ^ mt[3] ^ mt[5];
      expect_bits(b3[0], e0, "N=3 b of qubit 0", r);
      expect_bits(b3[1], ec, "N=3 b of control", r);
      expect_bits(b3[2], et, "N=3 b of target", r);
      expect_bits(b1[0], e1, "N=1 b", r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
