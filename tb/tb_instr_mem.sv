// tb_instr_mem: self-checking test of the 1024x32 instruction memory: fills it with a
// pattern on the write port, reads it back on the read port, checks the one-cycle latency.
`timescale 1ns/1ps
module tb_instr_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we = 0;
  logic [9:0]  waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  int checks = 0, failures = 0;

  instr_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = 32'(i * 32'h01000193) ^ 32'hc0ffee00;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1024; i++) begin
      raddr = 10'(i * 7);
      @(negedge clk);
      checks++;
      if (rdata !== (32'((i * 7 % 1024) * 32'h01000193) ^ 32'hc0ffee00)) begin
        failures++; $display("FAIL im[%0d]=%h", i * 7 % 1024, rdata);
      end
    end
    raddr = 10'd1; #1;
    checks++;
    if (rdata !== (32'((1023 * 7 % 1024) * 32'h01000193) ^ 32'hc0ffee00)) begin
      failures++; $display("FAIL read latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
