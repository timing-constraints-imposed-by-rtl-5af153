// tb_byproduct_calc: random masks, outcomes and correction terms; after
// each Xs edge the pair must equal a reference that applies the paper's
// update rule bit by bit, x' = x ^ sum_j B_x[j] m[j] ^ term.x (likewise z).
// Also checks that ce low holds the pair and that reset clears it.
`timescale 1ns / 1ps
module tb_byproduct_calc;
  import mbqc_pkg::*;
  logic xs = 1'b0, rst = 1'b0, ce = 1'b0;
  logic [2:0] bx = '0, bz = '0, m = '0;
  ops_t cc_term = '0, ops;
  logic ref_x = 1'b0, ref_z = 1'b0;
  int checks = 0, failures = 0;

  byproduct_calc dut (.xs, .rst, .ce, .bx, .bz, .m, .cc_term, .ops);

  initial #0.2 rst = 1'b1;   // rising edge for the asynchronous reset

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 checks++;
    if (ops != 0) begin failures++; $display("FAIL reset"); end
    rst = 1'b0;
    for (int k = 0; k < 2000; k++) begin
      bx = 3'($urandom); bz = 3'($urandom); m = 3'($urandom);
      cc_term = ops_t'($urandom_range(0, 3));
      ce = ($urandom_range(0, 4) != 0);
      #1 xs = 1'b1;
      if (ce) begin
        for (int j = 0; j < 3; j++) begin
          if (bx[j] && m[j]) ref_x = ~ref_x;
          if (bz[j] && m[j]) ref_z = ~ref_z;
        end
        ref_x ^= cc_term.x;
        ref_z ^= cc_term.z;
      end
      #1 xs = 1'b0;
      checks++;
      if (ops.x != ref_x || ops.z != ref_z) begin
        failures++;
        $display("FAIL k=%0d ops=%b ref=%b%b", k, ops, ref_x, ref_z);
      end
    end
    rst = 1'b1; #1 rst = 1'b0;
    checks++;
    if (ops != 0) begin failures++; $display("FAIL reset at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
