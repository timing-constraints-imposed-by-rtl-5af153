// tb_measurement_latch: checks that a detector pulse is held as a level
// until the reset clock Xr rises, that Xr clears it, that a pulse while Xr
// is high is not captured (reset dominates, also during the pulse), and that no pulse leaves q low.
`timescale 1ns / 1ps
module tb_measurement_latch;
  logic set_pulse = 1'b0, xr = 1'b1, q;
  int checks = 0, failures = 0;

  measurement_latch dut (.set_pulse, .xr, .q);

  task automatic check(input logic exp, input string what);
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL %s: q=%0b expected %0b at %0t", what, q, exp, $time);
    end
  endtask

  initial begin
    #100;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 check(1'b0, "cleared while xr high");
    xr = 1'b0;
    #1 check(1'b0, "idle after xr low");
    for (int r = 0; r < 8; r++) begin
      logic hit;
      hit = r[0] ^ r[2];
      if (hit) begin
        set_pulse = 1'b1; #0.5; set_pulse = 1'b0;
      end else #0.5;
      #1 check(hit, "held after pulse");
      #1 check(hit, "still held before xr");
      xr = 1'b1;
      #0.5 check(1'b0, "cleared by xr");
      set_pulse = 1'b1;
      #0.1 check(1'b0, "reset dominates during a pulse");
      #0.1 set_pulse = 1'b0;
      #0.2 check(1'b0, "pulse ignored while xr high");
      xr = 1'b0;
      #0.5 check(1'b0, "stays clear after xr falls");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
