// tb_control_system: two control systems run the paper's worked example,
// a one-qubit gate U on qubit 0 followed by a CNOT with qubit 0 as control
// and qubit 1 as target (10 rounds). Program words, outcomes and expected
// settings s and byproduct pairs b are the example's own numbers; the
// neighbour inputs of each instance are fed from the example's columns,
// not from the other instance. Then qubit 0 runs 30 more one-qubit gates
// with random outcomes, each preceded by a store request (C[0]), checked
// against the pattern's closed form:
//   s1 = m0^z, s2 = m1^x, s3 = m0^m2^z, z' = z^m0^m2, x' = x^m1^m3
// with (x, z) the pair stored before the gate.
`timescale 1ns / 1ps
module tb_control_system;
  import mbqc_pkg::*;
  logic xs = 1'b0, xr = 1'b0, rst = 1'b0, ce = 1'b1;
  logic [15:0] p0, p1;
  logic [2:0] mv0, mv1;
  ops_t a0, bl0, a1, bl1, ops0, ops1;
  logic s0, s1;
  int checks = 0, failures = 0;

  // Worked example of the paper (rounds 0..9).
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

  control_system q0 (.xs, .xr, .rst, .ce, .p(p0), .m(mv0), .ops_above(a0), .ops_below(bl0), .ops(ops0), .s(s0));
  control_system q1 (.xs, .xr, .rst, .ce, .p(p1), .m(mv1), .ops_above(a1), .ops_below(bl1), .ops(ops1), .s(s1));

  task automatic expect_eq(input logic [1:0] got, input logic [1:0] exp, input string what, input int k);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s round %0d: got %b expected %b", what, k, got, exp);
    end
  endtask

  initial #0.2 rst = 1'b1;   // rising edge for the asynchronous reset

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ops_t st;
    logic [3:0] mm;
    p0 = '0; p1 = '0; mv0 = '0; mv1 = '0; a0 = '0; bl0 = '0; a1 = '0; bl1 = '0;
    #1 rst = 1'b0;
    for (int k = 0; k < 10; k++) begin
      p0 = P0[k]; p1 = P1[k];
      mv0 = {1'b0, M0[k], M1[k]};
      mv1 = {M0[k], M1[k], 1'b0};
      #1 xs = 1'b1; #1 xs = 1'b0;
      expect_eq({1'b0, s0}, {1'b0, S0[k]}, "s0", k);
      expect_eq({1'b0, s1}, 2'b00, "s1", k);
      expect_eq(ops0, B0[k], "b0", k);
      expect_eq(ops1, B1[k], "b1", k);
      a0 = '0; bl0 = ops_t'(B1[k]); a1 = ops_t'(B0[k]); bl1 = '0;   // neighbours from the example
      if (k == 9) p0 = P0[k] | 16'h0800;   // store before the next gate
      #1 xr = 1'b1; #1 xr = 1'b0;
    end
    // Random one-qubit gates on qubit 0.
    st = ops0;
    for (int g = 0; g < 30; g++) begin
      mm = 4'($urandom);
      for (int r = 0; r < 4; r++) begin
        logic [15:0] pw;
        case (r)
          0: pw = 16'h0302;
          1: pw = 16'h0510;
          2: pw = 16'h0342;
          default: pw = 16'h0810;   // last round plus store for the next gate
        endcase
        p0 = pw; mv0 = {1'b0, mm[r], 1'b0};
        p1 = 16'h0000; mv1 = '0;
        #1 xs = 1'b1; #1 xs = 1'b0;
        case (r)
          0: expect_eq({1'b0, s0}, {1'b0, mm[0] ^ st.z}, "U s1", g);
          1: expect_eq({1'b0, s0}, {1'b0, mm[1] ^ st.x}, "U s2", g);
          2: expect_eq({1'b0, s0}, {1'b0, mm[0] ^ mm[2] ^ st.z}, "U s3", g);
          default: expect_eq({1'b0, s0}, 2'b00, "U s after gate", g);
        endcase
        #1 xr = 1'b1; #1 xr = 1'b0;
      end
      st = '{x: st.x ^ mm[1] ^ mm[3], z: st.z ^ mm[0] ^ mm[2]};
      expect_eq(ops0, st, "U byproduct", g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
