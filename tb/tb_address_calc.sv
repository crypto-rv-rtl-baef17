// tb_address_calc: self-checking test of the DM <-> Buffer transfer engine.
//
// Connects the engine to a Data Memory and an internal Buffer and runs: a 128-word Load,
// a 16-word Store to another DM region, a Load that wraps around the end of DM (ring use),
// and a 1-word Store; after each, compares memory contents with a reference model and
// checks the busy time (n+1 cycles for a Load, n for a Store).
`timescale 1ns/1ps
module tb_address_calc;
  import crypto_rv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 0, is_store = 0, busy;
  logic [DM_AW-1:0]  dm_addr = 0;
  logic [BUF_AW-1:0] b_addr = 0;
  logic [7:0]        len = 0;
  logic              dm_we, b_we;
  logic [DM_AW-1:0]  dm_a;
  logic [BUF_AW-1:0] b_a;
  word_t             dm_wdata, dm_rdata, b_wdata;
  word_t             b_words [BUF_DEPTH];
  logic              ha_we = 0;
  logic [DM_AW-1:0]  ha_addr = 0;
  word_t             ha_wdata = 0, ha_rdata;
  word_t             ref_dm [DM_DEPTH];
  word_t             ref_b  [BUF_DEPTH];
  int checks = 0, failures = 0;

  address_calc dut (.clk, .rst_n, .start, .is_store, .dm_addr, .b_addr, .len, .busy,
                    .dm_we, .dm_a, .dm_wdata, .dm_rdata, .b_we, .b_a, .b_wdata, .b_words);
  data_memory u_dm (.clk, .a_we(ha_we), .a_addr(ha_addr), .a_wdata(ha_wdata), .a_rdata(ha_rdata),
                    .b_we(dm_we), .b_addr(dm_a), .b_wdata(dm_wdata), .b_rdata(dm_rdata));
  internal_buffer u_b (.clk, .rst_n, .a_we(b_we), .a_addr(b_a), .a_wdata(b_wdata),
                       .b_we(1'b0), .b_addr('0), .b_wdata('0), .words(b_words));

  task automatic xfer(input logic st, input int dm, input int b, input int n);
    int cyc;
    @(negedge clk); start = 1; is_store = st; dm_addr = DM_AW'(dm); b_addr = BUF_AW'(b); len = 8'(n);
    @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    for (int i = 0; i < n; i++)
      if (st) ref_dm[(dm + i) % DM_DEPTH] = ref_b[(b + i) % BUF_DEPTH];
      else    ref_b[(b + i) % BUF_DEPTH]  = ref_dm[(dm + i) % DM_DEPTH];
    checks++;
    if (cyc != (st ? n : n + 1)) begin
      failures++; $display("FAIL busy %0d cycles for %s of %0d", cyc, st ? "store" : "load", n);
    end
  endtask

  task automatic compare_all();
    for (int i = 0; i < BUF_DEPTH; i++) begin
      checks++;
      if (b_words[i] !== ref_b[i]) begin failures++; $display("FAIL B[%0d]=%h exp %h", i, b_words[i], ref_b[i]); end
    end
    for (int i = 0; i < DM_DEPTH; i++) begin
      @(negedge clk); ha_addr = DM_AW'(i); @(negedge clk);
      checks++;
      if (ha_rdata !== ref_dm[i]) begin failures++; $display("FAIL DM[%0d]=%h exp %h", i, ha_rdata, ref_dm[i]); end
    end
  endtask

  initial begin
    for (int i = 0; i < BUF_DEPTH; i++) ref_b[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < DM_DEPTH; i++) begin
      @(negedge clk); ha_we = 1; ha_addr = DM_AW'(i); ha_wdata = {$urandom, $urandom}; ref_dm[i] = ha_wdata;
    end
    @(negedge clk); ha_we = 0;
    xfer(1'b0, 100, 0, 128);
    xfer(1'b1, 600, 20, 16);
    xfer(1'b0, 1020, 64, 8);     // wraps DM 1020..1023, 0..3
    xfer(1'b1, 1023, 127, 1);
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
