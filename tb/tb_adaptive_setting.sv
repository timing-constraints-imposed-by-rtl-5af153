// tb_adaptive_setting: random outcomes, masks and byproduct terms. The
// bench keeps the last three own outcomes (newest first) and checks after
// each Xs edge that s = newest&A_m[2] ^ previous&A_m[1] ^ oldest&A_m[0]
// ^ byp_term, and that s does not change when A_m changes between Xs
// edges (the mask is registered), but follows byp_term combinationally.
`timescale 1ns / 1ps
module tb_adaptive_setting;
  logic xs = 1'b0, rst = 1'b0, ce = 1'b1, m_own = 1'b0, byp_term = 1'b0, s;
  logic [2:0] am = '0, am_q = '0;
  logic h0 = 1'b0, h1 = 1'b0, h2 = 1'b0;   // newest, previous, oldest
  int checks = 0, failures = 0;

  adaptive_setting dut (.xs, .rst, .ce, .m_own, .am, .byp_term, .s);

  function automatic logic ref_s();
    return (am_q[2] & h0) ^ (am_q[1] & h1) ^ (am_q[0] & h2) ^ byp_term;
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
    #1 rst = 1'b0;
    for (int k = 0; k < 3000; k++) begin
      m_own = 1'($urandom); am = 3'($urandom); ce = ($urandom_range(0, 6) != 0);
      #1 xs = 1'b1;
      if (ce) begin h2 = h1; h1 = h0; h0 = m_own; am_q = am; end
      #1 xs = 1'b0;
      byp_term = 1'($urandom);
      #0.5 checks++;
      if (s != ref_s()) begin
        failures++;
        $display("FAIL k=%0d s=%b exp=%b am_q=%b hist=%b%b%b", k, s, ref_s(), am_q, h0, h1, h2);
      end
      am = 3'($urandom);  // program word changes at Xp: s must not move
      #0.5 checks++;
      if (s != ref_s()) begin failures++; $display("FAIL k=%0d mask not held", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
