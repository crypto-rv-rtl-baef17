// tb_aes_haraka_unit: self-checking test of the unified AES-128/Haraka engine.
//
// Runs AES-128 encryption (round keys served from a table as the buffer would), Haraka-256,
// Haraka-512 and the bare Haraka-512 permutation, with round constants generated by
// rc_word(), and compares every output word with independently computed references.
// Each command must take 44 cycles (11 passes through the 4-stage pipeline).
`timescale 1ns/1ps
module tb_aes_haraka_unit;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0;
  aes_mode_e  mode = AES_128;
  word_t      in_words [8];
  logic [6:0] key_addr;
  word_t      key_words [8];
  logic       busy, done;
  word_t      out_words [8];
  word_t      keymem [128];
  int checks = 0, failures = 0;

  aes_haraka_unit dut (.clk, .rst_n, .start, .mode, .in_words, .key_addr, .key_words,
                       .busy, .done, .out_words);

  always_comb for (int i = 0; i < 8; i++) key_words[i] = keymem[7'(key_addr + 7'(i))];

  task automatic run(input aes_mode_e m);
    int lat;
    @(negedge clk); mode = m; start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 44) begin failures++; $display("FAIL latency %0d, expected 44", lat); end
  endtask

  task automatic check(input string what, input int n, input logic [63:0] exp [8]);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (out_words[i] !== exp[i]) begin
        failures++; $display("FAIL %s word %0d: %h expected %h", what, i, out_words[i], exp[i]);
      end
    end
  endtask

  initial begin
    logic [63:0] e [8];
    for (int i = 0; i < 8; i++) in_words[i] = '0;
    for (int i = 0; i < 128; i++) keymem[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;

    // AES-128: key schedule in words 0..21, plaintext from seed 111
    for (int i = 0; i < 22; i++) keymem[i] = AES_RK_U[i];
    in_words[0] = raw_w64(111, 0); in_words[1] = raw_w64(111, 1);
    run(AES_128);
    e = '{default: '0}; e[0] = EXP_AES_U[0]; e[1] = EXP_AES_U[1];
    check("AES-128", 2, e);

    // AES-128 decryption of that ciphertext with the decryption key schedule
    for (int i = 0; i < 22; i++) keymem[i] = AES_DK_U[i];
    in_words[0] = EXP_AES_U[0]; in_words[1] = EXP_AES_U[1];
    run(AES_128_DEC);
    e = '{default: '0}; e[0] = raw_w64(111, 0); e[1] = raw_w64(111, 1);
    check("AES-128 decryption", 2, e);

    for (int i = 0; i < 80; i++) keymem[i] = rc_word(i);
    for (int i = 0; i < 8; i++) in_words[i] = (i < 4) ? raw_w64(13, i) : 64'hdead_beef_0bad_f00d;
    run(HARAKA_256);
    for (int i = 0; i < 4; i++) e[i] = EXP_H256_U[i];
    check("Haraka-256", 4, e);

    for (int i = 0; i < 8; i++) in_words[i] = raw_w64(14, i);
    run(HARAKA_512);
    for (int i = 0; i < 4; i++) e[i] = EXP_H512_U[i];
    check("Haraka-512", 4, e);

    for (int i = 0; i < 8; i++) in_words[i] = raw_w64(15, i);
    run(HARAKA_512P);
    e = EXP_H512P_U;
    check("Haraka-512 permutation", 8, e);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
