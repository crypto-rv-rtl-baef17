// tb_sha3_unit: self-checking test of the two-round-per-cycle Keccak-f[1600] engine.
//
// 1) Loads a padded one-block SHA3-256 message (state = 0 XOR block), permutes once and
//    compares the first four lanes with the reference SHA3-256 digest.
// 2) Loads a padded SHAKE-256 block, permutes, then permutes again from the fed-back state
//    (load = 0, a squeeze step) and compares lanes 0-3 with output bytes 136..167 of the
//    reference SHAKE-256 stream.
// Every permutation must take 12 clock edges (24 rounds, two per edge), the first being the
// edge that accepts start, so done rises 11 edges after that one.
`timescale 1ns/1ps
module tb_sha3_unit;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0, load = 1'b0;
  logic [1599:0] state_in = '0;
  logic          busy, done;
  logic [1599:0] state_out;
  int checks = 0, failures = 0;

  sha3_unit dut (.clk, .rst_n, .start, .load, .state_in, .busy, .done, .state_out);

  task automatic permute(input logic ld);
    int lat;
    @(negedge clk); load = ld; start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    // 12 round-pair edges: the edge that accepts start computes the first pair
    if (lat != 11) begin failures++; $display("FAIL latency %0d, expected 11", lat); end
  endtask

  task automatic check4(input string what, input logic [63:0] exp [4]);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (state_out[64*i +: 64] !== exp[i]) begin
        failures++; $display("FAIL %s lane %0d: %h expected %h", what, i, state_out[64*i +: 64], exp[i]);
      end
    end
  endtask

  initial begin
    logic [63:0] e [4];
    repeat (3) @(negedge clk); rst_n = 1'b1;

    for (int j = 0; j < 17; j++) state_in[64*j +: 64] = sha3_w64(7, 60, 136, 8'h06, j);
    permute(1'b1);
    for (int i = 0; i < 4; i++) e[i] = EXP_SHA3_256_U[i];
    check4("SHA3-256", e);

    state_in = '0;
    for (int j = 0; j < 17; j++) state_in[64*j +: 64] = sha3_w64(9, 40, 136, 8'h1f, j);
    permute(1'b1);
    state_in = '0;         // must be ignored: the next permutation continues from state_out
    permute(1'b0);
    for (int i = 0; i < 4; i++) e[i] = EXP_SHAKE256_U[i];
    check4("SHAKE-256 squeeze", e);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
