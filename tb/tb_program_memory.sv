// tb_program_memory: fills the memory through the write port with words
// from a linear congruential formula, reads them back in a shuffled order
// and checks that rd_data shows the addressed word one Xp edge later.
`timescale 1ns / 1ps
module tb_program_memory;
  localparam int unsigned DEPTH = 256;
  logic xp = 1'b0, rst = 1'b0, we = 1'b0;
  logic [7:0] addr = '0, waddr = '0;
  logic [15:0] wdata = '0, rd_data;
  int checks = 0, failures = 0;

  program_memory #(.DEPTH(DEPTH)) dut (.xp, .rst, .addr, .rd_data, .we, .waddr, .wdata);

  function automatic logic [15:0] word(int a);
    return 16'((a * 40503 + 12345) ^ (a << 7));
  endfunction

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
    #1 checks++;
    if (rd_data != 0) begin failures++; $display("FAIL reset value"); end
    #4 rst = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge xp) begin we = 1'b1; waddr = 8'(a); wdata = word(a); end
    end
    @(negedge xp) we = 1'b0;
    for (int k = 0; k < 2 * DEPTH; k++) begin
      int a;
      a = (k * 37 + 11) % DEPTH;
      @(negedge xp) addr = 8'(a);
      @(posedge xp) #0.1;
      checks++;
      if (rd_data != word(a)) begin
        failures++;
        $display("FAIL addr=%0d rd=%h exp=%h", a, rd_data, word(a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
