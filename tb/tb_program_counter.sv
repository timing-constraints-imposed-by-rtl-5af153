// tb_program_counter: the address advances by one per Xp edge only while
// enable is high, holds while it is low, wraps at DEPTH, and run follows
// enable one edge later.
`timescale 1ns / 1ps
module tb_program_counter;
  localparam int unsigned DEPTH = 256;
  logic xp = 1'b0, rst = 1'b0, enable = 1'b0, run;
  logic [7:0] addr;
  int checks = 0, failures = 0;
  int exp_addr = 0;

  program_counter #(.DEPTH(DEPTH)) dut (.xp, .rst, .enable, .addr, .run);

  always #2 xp = ~xp;

  initial #0.2 rst = 1'b1;   // rising edge for the asynchronous reset

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5 rst = 1'b0;
    checks++; if (addr != 0 || run) begin failures++; $display("FAIL reset"); end
    for (int k = 0; k < 700; k++) begin
      logic en;
      en = ($urandom_range(0, 3) != 0);
      @(negedge xp) enable = en;
      @(posedge xp) #0.1;
      if (en) exp_addr = (exp_addr + 1) % DEPTH;
      checks++;
      if (addr != 8'(exp_addr) || run != en) begin
        failures++;
        $display("FAIL k=%0d addr=%0d exp=%0d run=%0b en=%0b", k, addr, exp_addr, run, en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
