// tb_sha2_sm3_unit: self-checking test of the unified SHA-256/SM3/SHA-512 unit.
//
// Compresses single-block messages and compares the new chaining state (which for a
// one-block message is the digest) with reference digests: SHA-256 and SM3 with two
// different messages in the two 32-bit lanes, SHA-512 on the full 64-bit datapath. The
// round constants are served from tables on k_idx as the buffer would. Also checks the
// start-to-done latency (ROUNDS+1 cycles).
`timescale 1ns/1ps
module tb_sha2_sm3_unit;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0;
  sha2_mode_e mode = SHA2_256;
  word_t      state_in [8];
  word_t      msg_in [16];
  logic [6:0] k_idx;
  word_t      k_word;
  logic       busy, done;
  word_t      state_out [8];
  int checks = 0, failures = 0;

  logic [31:0] k256 [64];
  logic [63:0] k512 [80];

  sha2_sm3_unit dut (.clk, .rst_n, .start, .mode, .state_in, .msg_in, .k_idx, .k_word,
                     .busy, .done, .state_out);

  always_comb begin
    case (mode)
      SHA2_512: k_word = k512[k_idx];
      SHA2_SM3: k_word = {32'd0, sm3_t(int'(k_idx))};
      default:  k_word = {32'd0, k256[k_idx[5:0]]};
    endcase
  end

  task automatic run(input sha2_mode_e m, input int exp_lat);
    int lat;
    @(negedge clk); mode = m; start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 0;   // clock edges from the edge that accepts start to the edge that raises done
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != exp_lat) begin
      failures++; $display("FAIL latency mode %0d: %0d cycles, expected %0d", m, lat, exp_lat);
    end
  endtask

  task automatic check(input string what, input logic [63:0] exp [8]);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (state_out[i] !== exp[i]) begin
        failures++; $display("FAIL %s word %0d: %h expected %h", what, i, state_out[i], exp[i]);
      end
    end
  endtask

  initial begin
    $readmemh("tb/sha256_k.hex", k256);
    $readmemh("tb/sha512_k.hex", k512);
    for (int i = 0; i < 8; i++) state_in[i] = '0;
    for (int i = 0; i < 16; i++) msg_in[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;

    for (int i = 0; i < 8; i++)  state_in[i] = {IV256[i], IV256[i]};
    for (int j = 0; j < 16; j++) msg_in[j] = {md_w32(2, 50, j), md_w32(1, 20, j)};
    run(SHA2_256, 65);
    check("SHA-256", EXP_SHA256_U);

    for (int i = 0; i < 8; i++)  state_in[i] = {IVSM3[i], IVSM3[i]};
    run(SHA2_SM3, 65);
    check("SM3", EXP_SM3_U);

    for (int i = 0; i < 8; i++)  state_in[i] = IV512[i];
    for (int j = 0; j < 16; j++) msg_in[j] = md_w64(5, 100, j);
    run(SHA2_512, 81);
    check("SHA-512", EXP_SHA512_U);

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
