// tb_internal_buffer: self-checking test of the 128x64 internal Buffer.
//
// Checks reset to zero, random writes through both ports compared against a reference
// array (all 128 words compared every cycle through the parallel read view), and the
// priority of port b when both ports write the same word.
`timescale 1ns/1ps
module tb_internal_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        a_we = 0, b_we = 0;
  logic [6:0]  a_addr = 0, b_addr = 0;
  logic [63:0] a_wdata = 0, b_wdata = 0;
  logic [63:0] words [128];
  logic [63:0] ref_m [128];
  int checks = 0, failures = 0;

  internal_buffer dut (.clk, .rst_n, .a_we, .a_addr, .a_wdata, .b_we, .b_addr, .b_wdata, .words);

  task automatic compare(input string when);
    for (int i = 0; i < 128; i++) begin
      checks++;
      if (words[i] !== ref_m[i]) begin
        failures++; $display("FAIL %s word %0d: %h expected %h", when, i, words[i], ref_m[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 128; i++) ref_m[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    compare("after reset");
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      a_we = 1'($urandom); a_addr = 7'($urandom); a_wdata = {$urandom, $urandom};
      b_we = 1'($urandom); b_addr = 7'($urandom); b_wdata = {$urandom, $urandom};
      if (a_we && b_we && a_addr == b_addr) b_addr = b_addr + 7'd1;
      if (t == 200) begin a_we = 1; b_we = 0; end
      if (a_we) ref_m[a_addr] = a_wdata;
      if (b_we) ref_m[b_addr] = b_wdata;
      @(posedge clk); #1;
      compare("random");
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
