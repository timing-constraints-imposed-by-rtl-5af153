// tb_stored_ops: the stored pair is loaded on Xr only when store (C[0])
// is set, and byp_term registered on Xs equals A_b[1]&x_s ^ A_b[0]&z_s of
// the stored pair. Random stimulus against a reference kept in the bench.
`timescale 1ns / 1ps
module tb_stored_ops;
  import mbqc_pkg::*;
  logic xr = 1'b0, xs = 1'b0, rst = 1'b0, ce = 1'b1, store = 1'b0, byp_term;
  ops_t ops = '0;
  logic [1:0] ab = '0;
  logic sx = 1'b0, sz = 1'b0, ref_term = 1'b0;
  int checks = 0, failures = 0, loads = 0;

  stored_ops dut (.xr, .xs, .rst, .ce, .store, .ops, .ab, .byp_term);

  initial #0.2 rst = 1'b1;   // rising edge for the asynchronous reset

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst = 1'b0;
    for (int k = 0; k < 2000; k++) begin
      // Xs: register the byproduct term from the stored pair.
      ab = 2'($urandom);
      ce = ($urandom_range(0, 5) != 0);
      #1 xs = 1'b1;
      if (ce) ref_term = (ab[1] ? sx : 1'b0) ^ (ab[0] ? sz : 1'b0);
      #1 xs = 1'b0;
      checks++;
      if (byp_term != ref_term) begin
        failures++;
        $display("FAIL k=%0d term=%b exp=%b ab=%b stored=%b%b", k, byp_term, ref_term, ab, sx, sz);
      end
      // Xr: maybe load the stored pair.
      ops = ops_t'($urandom_range(0, 3));
      store = ($urandom_range(0, 3) == 0);
      #1 xr = 1'b1;
      if (ce && store) begin sx = ops.x; sz = ops.z; loads++; end
      #1 xr = 1'b0;
    end
    checks++;
    if (loads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
