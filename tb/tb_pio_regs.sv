// tb_pio_regs: self-checking test of the PIO register block: IM write decode, the start
// pulse, the status/counter read mux with its one-cycle latency, and the run-cycle counter.
`timescale 1ns/1ps
module tb_pio_regs;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        pio_we = 0, pio_re = 0;
  logic [11:0] pio_addr = 0;
  logic [31:0] pio_wdata = 0, pio_rdata;
  logic        im_we, go;
  logic [9:0]  im_waddr;
  logic [31:0] im_wdata;
  logic        running = 0, halted = 0;
  int checks = 0, failures = 0, gos = 0;

  pio_regs dut (.clk, .rst_n, .pio_we, .pio_re, .pio_addr, .pio_wdata, .pio_rdata,
                .im_we, .im_waddr, .im_wdata, .go, .running, .halted,
                .stall_cycles(32'd11), .overlap_cycles(32'd22), .cmd_count(32'd33));

  always @(posedge clk) if (go) gos++;

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  task automatic rd(input logic [11:0] a, input logic [31:0] exp, input string what);
    @(negedge clk); pio_re = 1; pio_addr = a;
    @(negedge clk); pio_re = 0;
    expect_eq(what, pio_rdata, exp);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // IM write
    @(negedge clk); pio_we = 1; pio_addr = 12'h123; pio_wdata = 32'hfeed_0001; #1;
    expect_eq("im_we", 32'(im_we), 1); expect_eq("im_waddr", 32'(im_waddr), 32'h123);
    expect_eq("im_wdata", im_wdata, 32'hfeed_0001); expect_eq("no go", 32'(go), 0);
    // control write: go
    @(negedge clk); pio_addr = 12'h800; pio_wdata = 32'h1; #1;
    expect_eq("go", 32'(go), 1); expect_eq("no im_we", 32'(im_we), 0);
    @(negedge clk); pio_we = 0; running = 1;
    repeat (9) @(negedge clk);
    running = 0; halted = 1;
    rd(12'h801, 32'h2, "status");
    rd(12'h802, 32'd11, "stall");
    rd(12'h803, 32'd22, "overlap");
    rd(12'h804, 32'd33, "cmds");
    rd(12'h805, 32'd9, "cycles");   // running was high for 9 clock edges
    expect_eq("go count", 32'(gos), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
