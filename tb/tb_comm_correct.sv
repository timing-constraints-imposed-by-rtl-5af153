// tb_comm_correct: every legal value of C (bits 1 and 4 not both set) with
// every pair of neighbour byproduct operators. The expected term is worked
// out from the paper's table of C bits and its CNOT commutation rule
// (z_c ^= z_t, x_t ^= x_c); constant addition puts C[2] into z and C[3]
// into x; otherwise the term is zero. Also checks that ce low holds it.
`timescale 1ns / 1ps
module tb_comm_correct;
  import mbqc_pkg::*;
  logic xr = 1'b0, rst = 1'b0, ce = 1'b1;
  logic [4:0] c = '0;
  ops_t ops_above = '0, ops_below = '0, cc_term;
  int checks = 0, failures = 0;

  comm_correct dut (.xr, .rst, .ce, .c, .ops_above, .ops_below, .cc_term);

  function automatic logic [1:0] expected(logic [4:0] cv, logic [1:0] ab, logic [1:0] be);
    logic [1:0] partner;
    partner = cv[3] ? ab : be;             // {x, z}
    case ({cv[4], cv[2], cv[1]})
      3'b011:  return {1'b0, partner[0]};  // control: add partner z to z
      3'b001:  return {partner[1], 1'b0};  // target: add partner x to x
      3'b100,
      3'b110:  return {cv[3], cv[2]};      // constants
      default: return 2'b00;
    endcase
  endfunction

  initial #0.2 rst = 1'b1;   // rising edge for the asynchronous reset

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] held;
    #1 checks++;
    if (cc_term != 0) begin failures++; $display("FAIL reset"); end
    rst = 1'b0;
    for (int cv = 0; cv < 32; cv++) begin
      if (cv[1] && cv[4]) continue;
      for (int o = 0; o < 16; o++) begin
        c = 5'(cv); ops_above = ops_t'(o[3:2]); ops_below = ops_t'(o[1:0]);
        ce = 1'b1;
        #1 xr = 1'b1; #1 xr = 1'b0;
        checks++;
        if (cc_term != expected(5'(cv), 2'(o[3:2]), 2'(o[1:0]))) begin
          failures++;
          $display("FAIL C=%b above=%b below=%b term=%b exp=%b", c, ops_above, ops_below,
                   cc_term, expected(5'(cv), 2'(o[3:2]), 2'(o[1:0])));
        end
        // With ce low the register must hold.
        held = cc_term;
        c = 5'b00110; ops_above = ops_t'(~o[3:2]); ops_below = ops_t'(~o[1:0]); ce = 1'b0;
        #1 xr = 1'b1; #1 xr = 1'b0;
        checks++;
        if (cc_term != held) begin failures++; $display("FAIL hold with ce low"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
