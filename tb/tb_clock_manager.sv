// tb_clock_manager: drives Xp at the default 190 MHz and measures, for
// each Xp rising edge, the delay to the next rising edge of Xs and Xr.
// Expected: 220/360 and 300/360 of the period (the paper's phases), Xr
// falling before the next Xp edge, and LOCKED rising after a few cycles.
`timescale 1ns / 1ps
module tb_clock_manager;
  localparam real T = 1000.0 / 190.0;
  logic xp = 1'b0, rst = 1'b0, xs, xr, locked;
  realtime t_xp, t_xs, t_xr, t_xr_fall;
  int checks = 0, failures = 0;

  clock_manager dut (.CLKIN1(xp), .RST(rst), .CLKOUT0(xs), .CLKOUT1(xr), .LOCKED(locked));

  always #(T / 2.0) xp = ~xp;

  function automatic bit near(realtime a, real b);
    return (a > b - 0.01) && (a < b + 0.01);
  endfunction

  initial begin
    #2000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #0.2 rst = 1'b1;
    #3 rst = 1'b0;
    checks++;
    if (locked) begin failures++; $display("FAIL locked too early"); end
    repeat (8) @(posedge xp);
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked"); end
    for (int k = 0; k < 50; k++) begin
      @(posedge xp) t_xp = $realtime;
      @(posedge xs) t_xs = $realtime;
      @(posedge xr) t_xr = $realtime;
      @(negedge xr) t_xr_fall = $realtime;
      checks++;
      if (!near(t_xs - t_xp, T * 220.0 / 360.0) || !near(t_xr - t_xp, T * 300.0 / 360.0)
          || !(t_xr_fall - t_xp < T)) begin
        failures++;
        $display("FAIL k=%0d xs at %f, xr at %f, xr falls at %f (period %f)", k,
                 t_xs - t_xp, t_xr - t_xp, t_xr_fall - t_xp, T);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
