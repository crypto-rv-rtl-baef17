// tb_crypto_controller: self-checking test of the command sequencer.
//
// The sequencer is connected to real instruction memory, Data Memory, Buffer, transfer
// engine and crypto units. A short program loads operands, runs SHA-256 (one block, lane 0),
// SHA3-256, a SHAKE-256 absorb followed by a squeeze, and AES-128, with loads placed right
// after crypto commands so they overlap. The testbench checks
//   * the results written back into the Buffer at the addresses the commands name,
//   * the issue rules, cycle by cycle: no crypto unit starts while the transfer engine or
//     the compute engine is busy, no transfer starts while the transfer engine is busy,
//     at most one unit starts per cycle,
//   * that stalls and overlaps happened and that the command count and halt are right.
`timescale 1ns/1ps
module tb_crypto_controller;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic go = 0, running, halted;
  logic [9:0] im_addr;  logic [31:0] im_rdata;
  logic im_we = 0; logic [9:0] im_waddr = 0; logic [31:0] im_wdata = 0;
  logic mv_start, mv_store, mv_busy; logic [DM_AW-1:0] mv_dm; logic [BUF_AW-1:0] mv_b; logic [7:0] mv_len;
  word_t b_words [BUF_DEPTH];
  logic wb_we; logic [BUF_AW-1:0] wb_addr; word_t wb_data;
  logic s2_start, s2_busy, s2_done; sha2_mode_e s2_mode; word_t s2_state [8], s2_msg [16], s2_out [8];
  logic [6:0] s2_k_idx; word_t s2_k;
  logic s3_start, s3_busy, s3_done; logic [1599:0] s3_state_in, s3_state_out;
  logic ae_start, ae_busy, ae_done; aes_mode_e ae_mode; word_t ae_in [8], ae_key [8], ae_out [8];
  logic [6:0] ae_key_addr;
  logic [31:0] stall_cycles, overlap_cycles, cmd_count;
  logic dmb_we; logic [DM_AW-1:0] dmb_addr; word_t dmb_wdata, dmb_rdata;
  logic ba_we; logic [BUF_AW-1:0] ba_addr; word_t ba_wdata;
  logic dma_we = 0; logic [DM_AW-1:0] dma_addr = 0; word_t dma_wdata = 0, dma_rdata;
  int checks = 0, failures = 0, rule_viol = 0;

  crypto_controller dut (.clk, .rst_n, .go, .running, .halted, .im_addr, .im_rdata,
    .mv_start, .mv_store, .mv_dm, .mv_b, .mv_len, .mv_busy,
    .b_words, .wb_we, .wb_addr, .wb_data,
    .s2_start, .s2_mode, .s2_state, .s2_msg, .s2_k_idx, .s2_k, .s2_busy, .s2_done, .s2_out,
    .s3_start, .s3_state_in, .s3_busy, .s3_done, .s3_state_out,
    .ae_start, .ae_mode, .ae_in, .ae_key_addr, .ae_key, .ae_busy, .ae_done, .ae_out,
    .stall_cycles, .overlap_cycles, .cmd_count);
  instr_mem u_im (.clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .raddr(im_addr), .rdata(im_rdata));
  data_memory u_dm (.clk, .a_we(dma_we), .a_addr(dma_addr), .a_wdata(dma_wdata), .a_rdata(dma_rdata),
                    .b_we(dmb_we), .b_addr(dmb_addr), .b_wdata(dmb_wdata), .b_rdata(dmb_rdata));
  internal_buffer u_b (.clk, .rst_n, .a_we(ba_we), .a_addr(ba_addr), .a_wdata(ba_wdata),
                       .b_we(wb_we), .b_addr(wb_addr), .b_wdata(wb_data), .words(b_words));
  address_calc u_mv (.clk, .rst_n, .start(mv_start), .is_store(mv_store), .dm_addr(mv_dm), .b_addr(mv_b),
                     .len(mv_len), .busy(mv_busy), .dm_we(dmb_we), .dm_a(dmb_addr), .dm_wdata(dmb_wdata),
                     .dm_rdata(dmb_rdata), .b_we(ba_we), .b_a(ba_addr), .b_wdata(ba_wdata), .b_words(b_words));
  sha2_sm3_unit u_s2 (.clk, .rst_n, .start(s2_start), .mode(s2_mode), .state_in(s2_state), .msg_in(s2_msg),
                      .k_idx(s2_k_idx), .k_word(s2_k), .busy(s2_busy), .done(s2_done), .state_out(s2_out));
  sha3_unit u_s3 (.clk, .rst_n, .start(s3_start), .load(1'b1), .state_in(s3_state_in), .busy(s3_busy),
                  .done(s3_done), .state_out(s3_state_out));
  aes_haraka_unit u_ae (.clk, .rst_n, .start(ae_start), .mode(ae_mode), .in_words(ae_in), .key_addr(ae_key_addr),
                        .key_words(ae_key), .busy(ae_busy), .done(ae_done), .out_words(ae_out));

  // issue-rule monitor (compute engine = any unit busy, finishing, or writing back)
  logic wb_pending;
  always @(posedge clk) if (rst_n) begin
    wb_pending = s2_busy || s3_busy || ae_busy || s2_done || s3_done || ae_done || wb_we;
    if ((s2_start || s3_start || ae_start) && (mv_busy || wb_pending)) begin
      rule_viol++; $display("FAIL crypto start while an engine is busy at %0t", $time);
    end
    if (mv_start && mv_busy) begin rule_viol++; $display("FAIL transfer start while busy"); end
    if (int'(s2_start) + int'(s3_start) + int'(ae_start) > 1) rule_viol++;
  end

  logic [31:0] k256 [64];
  logic [31:0] prog [$];

  task automatic dm_wr(input int a, input word_t d);
    @(negedge clk); dma_we = 1; dma_addr = DM_AW'(a); dma_wdata = d;
    @(negedge clk); dma_we = 0;
  endtask

  task automatic expect_b(input string what, input int a, input logic [63:0] exp);
    checks++;
    if (b_words[a] !== exp) begin failures++; $display("FAIL %s B[%0d]=%h expected %h", what, a, b_words[a], exp); end
  endtask

  initial begin
    $readmemh("tb/sha256_k.hex", k256);
    repeat (3) @(negedge clk); rst_n = 1;
    // DM: K256 at 0, IV at 64, SHA-256 block (seed 1, 20 bytes) at 72, SHA3 block at 88,
    // SHAKE-256 block at 105, AES round keys + plaintext at 122
    for (int j = 0; j < 64; j++) dm_wr(j, {32'd0, k256[j]});
    for (int i = 0; i < 8; i++)  dm_wr(64 + i, {32'd0, IV256[i]});
    for (int j = 0; j < 16; j++) dm_wr(72 + j, {32'd0, md_w32(1, 20, j)});
    for (int j = 0; j < 17; j++) dm_wr(88 + j, sha3_w64(7, 60, 136, 8'h06, j));
    for (int j = 0; j < 17; j++) dm_wr(105 + j, sha3_w64(9, 40, 136, 8'h1f, j));
    for (int j = 0; j < 22; j++) dm_wr(122 + j, AES_RK_U[j]);
    dm_wr(144, raw_w64(111, 0)); dm_wr(145, raw_w64(111, 1));
    for (int j = 0; j < 22; j++) dm_wr(146 + j, AES_DK_U[j]);

    prog.push_back({OP_LOAD, 10'd0, 7'd0, 7'd87, 4'd0});  // DM[0..87] -> B[0..87]
    prog.push_back({OP_SHA2, SHA2_256, 7'd64, 7'd72, 7'd0, 5'd0});  // state B64, msg B72, K B0
    prog.push_back({OP_LOAD, 10'd88, 7'd88, 7'd33, 4'd0});  // SHA3/SHAKE blocks, overlapped
    prog.push_back({OP_SHA3, SHA3_256, 1'b1, 1'b1, 7'd88, 7'd124, 5'd4, 5'd0});  // digest -> B[124..127]
    prog.push_back({OP_SHA3, SHAKE_256, 1'b1, 1'b1, 7'd105, 7'd114, 5'd1, 5'd0});  // absorb, 1 word -> B114
    prog.push_back({OP_SHA3, SHAKE_256, 1'b0, 1'b0, 7'd0, 7'd72, 5'd4, 5'd0});  // squeeze -> B[72..75]
    prog.push_back({OP_WAIT, 26'd0, 2'd3});
    prog.push_back({OP_LOAD, 10'd122, 7'd0, 7'd23, 4'd0});  // AES keys + pt -> B[0..23]
    prog.push_back({OP_AES, AES_128, 7'd22, 7'd0, 7'd120, 4'd0});  // ct -> B[120..121]
    prog.push_back({OP_LOAD, 10'd146, 7'd24, 7'd21, 4'd0});  // decryption keys -> B[24..45]
    prog.push_back({OP_AES, AES_128_DEC, 7'd120, 7'd24, 7'd122, 4'd0});  // pt -> B[122..123]
    prog.push_back({OP_WAIT, 26'd0, 2'd2});
    prog.push_back(32'd0);
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); im_we = 1; im_waddr = 10'(i); im_wdata = prog[i];
    end
    @(negedge clk); im_we = 0; go = 1;
    @(negedge clk); go = 0;
    while (!halted) @(negedge clk);

    // lane 0 carries the message; lane 1 compressed a zero block and is not compared
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (b_words[64 + i][31:0] !== EXP_SHA256_U[i][31:0]) begin
        failures++; $display("FAIL SHA-256 B[%0d]=%h", 64 + i, b_words[64 + i]);
      end
    end
    for (int i = 0; i < 4; i++) expect_b("SHA3-256", 124 + i, EXP_SHA3_256_U[i]);
    for (int i = 0; i < 4; i++) expect_b("SHAKE-256 squeeze", 72 + i, EXP_SHAKE256_U[i]);
    for (int i = 0; i < 2; i++) expect_b("AES-128", 120 + i, EXP_AES_U[i]);
    for (int i = 0; i < 2; i++) expect_b("AES-128 decryption", 122 + i, raw_w64(111, i));
    checks++; if (rule_viol != 0) begin failures++; $display("FAIL %0d issue-rule violations", rule_viol); end
    checks++; if (cmd_count != 32'(prog.size())) begin failures++; $display("FAIL cmd_count %0d", cmd_count); end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (overlap_cycles == 0) begin failures++; $display("FAIL no overlap"); end
    checks++; if (running) begin failures++; $display("FAIL still running after halt"); end
    $display("  stalls=%0d overlap=%0d commands=%0d", stall_cycles, overlap_cycles, cmd_count);
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
