// tb_data_memory: self-checking test of the two-port 1024x64 Data Memory.
//
// Writes the whole memory through port a and port b in alternating halves with a
// pseudo-random pattern, reads every word back through the other port, checks the one-cycle
// read latency and that a write on one port is seen by a later read on the other.
`timescale 1ns/1ps
module tb_data_memory;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        a_we = 0, b_we = 0;
  logic [9:0]  a_addr = 0, b_addr = 0;
  logic [63:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  int checks = 0, failures = 0;

  data_memory dut (.clk, .a_we, .a_addr, .a_wdata, .a_rdata, .b_we, .b_addr, .b_wdata, .b_rdata);

  function automatic logic [63:0] pat(input int i);
    return {32'(i * 32'h9e3779b9), 32'(i ^ 32'h5a5a0000)};
  endfunction

  initial begin
    // port a writes the lower half, port b the upper half, in the same cycles
    for (int i = 0; i < 512; i++) begin
      @(negedge clk);
      a_we = 1; a_addr = 10'(i);       a_wdata = pat(i);
      b_we = 1; b_addr = 10'(i + 512); b_wdata = pat(i + 512);
    end
    @(negedge clk); a_we = 0; b_we = 0;
    // read all words back through the opposite port
    for (int i = 0; i < 1024; i++) begin
      a_addr = 10'(1023 - i); b_addr = 10'(i);
      @(negedge clk);
      checks += 2;
      if (b_rdata !== pat(i))        begin failures++; $display("FAIL b[%0d]=%h", i, b_rdata); end
      if (a_rdata !== pat(1023 - i)) begin failures++; $display("FAIL a[%0d]=%h", 1023 - i, a_rdata); end
    end
    // read data changes only on the clock edge
    a_addr = 10'd5; #1;
    checks++;
    if (a_rdata !== pat(0)) begin failures++; $display("FAIL read latency"); end
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
