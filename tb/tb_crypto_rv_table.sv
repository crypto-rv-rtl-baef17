// tb_crypto_rv_table: one complete operation per algorithm at the message sizes of the published
// cycle comparison, run on the full-size co-processor, with the cycle count of each.
//
// For each algorithm the host writes Data Memory (round constants or keys, initial state,
// padded message), writes a short program over PIO, starts it and waits for it to halt. The
// program loads everything into the Buffer, runs the unit (a second message block is loaded
// while the first is compressed), stores the result to DM[200..] and halts; CYCLES is then
// the whole operation from start to halt, constant loading included. Sizes: SHA-256 64 bytes,
// SM3 64 bytes, SHA-512 128 bytes, SHAKE-128 and SHAKE-256 100 bytes (32 bytes out, the output
// length is this test's choice), SHA3-256 64 bytes, SHA3-512 64 bytes (no published count),
// AES-128 16 bytes, Haraka-256 32 bytes, Haraka-512 64 bytes. The 32-bit algorithms use lane 0 only, as a single message would.
// Checked: every result against a standard library (Haraka against a software Haraka v2
// model with the same round constants), and the cycle count against an upper bound worked out
// from the program with no overlap at all (2 cycles per command, n+1 per LOAD of n words, n
// per STORE, the unit latency plus one cycle plus its write-back words), so any unexpected
// stall fails; programs with a second block must come in below that bound, which shows the
// overlap. The published totals are printed next to each result for comparison only: this
// design's command set differs from the published instruction set, so they are not checked.
`timescale 1ns/1ps
module tb_crypto_rv_table;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  localparam logic [31:0] E_SHA256 [8] = '{32'h390ced49, 32'h339b1606, 32'h4b4e926d, 32'h819bc8b8,
                                           32'hf9da5c2b, 32'hcac4a3e7, 32'h72cf66d6, 32'h82ec5871};
  localparam logic [31:0] E_SM3 [8]    = '{32'h1d5f7b0f, 32'hbc7a928a, 32'h6a4757eb, 32'hc0fdfad9,
                                           32'h84106082, 32'h0d9d4786, 32'h7b0a18cf, 32'h29fef399};
  localparam logic [63:0] E_SHA512 [8] = '{64'he637952b62c1cb33, 64'h03e9361e51202ded,
                                           64'hcd14ba56d4ecb180, 64'had9dea04a10e5ac5,
                                           64'h43c038c0b4d8ccef, 64'he99ec29173d41bc0,
                                           64'h89ab21f6c6df7559, 64'he4b2a1528c1de7e9};
  localparam logic [63:0] E_SHAKE128 [4] = '{64'h275d30515ec14d3a, 64'hbce90c9eb4d314b1,
                                             64'hd021254fdb1b9f47, 64'h6f3ca28f5e4d1ec5};
  localparam logic [63:0] E_SHAKE256 [4] = '{64'hf27871274dfba778, 64'h2cf058a2d26829c1,
                                             64'h5803af9c95df1fe7, 64'hd54ad3c8e93937ba};
  localparam logic [63:0] E_SHA3 [4]     = '{64'h5a37a13079696494, 64'h4a529c8f7664eebb,
                                             64'ha0b25e1dbc51d942, 64'h58eefd6b5eabace0};
  localparam logic [63:0] E_SHA3_512 [8] = '{64'hf38386b3ab22d994, 64'h107053d3eceaaeb9,
                                             64'h8e14a02f7b4b7090, 64'h0137aa7fe6af9ea1,
                                             64'haf7cad58dcf7e5d2, 64'he8577b6ff436ef5d,
                                             64'ha8cdfdc9b27f9e8b, 64'h23e8afc3bbcfa4b7};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             dma_we = 0;
  logic [DM_AW-1:0] dma_addr = 0;
  word_t            dma_wdata = 0, dma_rdata;
  logic             pio_we = 0, pio_re = 0;
  logic [11:0]      pio_addr = 0;
  logic [31:0]      pio_wdata = 0, pio_rdata;
  logic             irq;
  int checks = 0, failures = 0;
  logic [31:0] k256 [64];
  logic [63:0] k512 [80];

  crypto_rv_top dut (.clk, .rst_n, .dma_we, .dma_addr, .dma_wdata, .dma_rdata,
                     .pio_we, .pio_re, .pio_addr, .pio_wdata, .pio_rdata, .irq);

  // ---------------- command encoders ----------------
  function automatic logic [31:0] c_ld(input int dm, input int b, input int n);
    return {OP_LOAD, 10'(dm), 7'(b), 7'(n - 1), 4'd0};
  endfunction
  function automatic logic [31:0] c_st(input int dm, input int b, input int n);
    return {OP_STORE, 10'(dm), 7'(b), 7'(n - 1), 4'd0};
  endfunction
  function automatic logic [31:0] c_sha2(input sha2_mode_e m, input int sb, input int mb, input int kb);
    return {OP_SHA2, m, 7'(sb), 7'(mb), 7'(kb), 5'd0};
  endfunction
  function automatic logic [31:0] c_sha3(input sha3_mode_e m, input int mb, input int ob, input int n);
    return {OP_SHA3, m, 1'b1, 1'b1, 7'(mb), 7'(ob), 5'(n), 5'd0};
  endfunction
  function automatic logic [31:0] c_aes(input aes_mode_e m, input int ib, input int kb, input int ob);
    return {OP_AES, m, 7'(ib), 7'(kb), 7'(ob), 4'd0};
  endfunction
  function automatic logic [31:0] c_wait(input int mask);
    return {OP_WAIT, 26'd0, 2'(mask)};
  endfunction

  // cycles a command takes when nothing overlaps
  function automatic int cost(input logic [31:0] c);
    case (opcode_e'(c[31:28]))
      OP_LOAD:  return 2 + int'(c[10:4]) + 2;
      OP_STORE: return 2 + int'(c[10:4]) + 1;
      OP_SHA2:  return 2 + ((sha2_mode_e'(c[27:26]) == SHA2_512) ? 81 : 65) + 1 + 8;
      OP_SHA3:  return 2 + 12 + 1 + int'(c[9:5]);
      OP_AES:   return 2 + 44 + 1 + ((aes_mode_e'(c[27:25]) == AES_128) ? 2 : 4);
      default:  return 2;
    endcase
  endfunction

  // ---------------- host accesses ----------------
  task automatic dma_wr(input int a, input word_t d);
    @(negedge clk); dma_we = 1; dma_addr = DM_AW'(a); dma_wdata = d;
    @(negedge clk); dma_we = 0;
  endtask
  task automatic dma_rd(input int a, output word_t d);
    @(negedge clk); dma_addr = DM_AW'(a);
    @(negedge clk); d = dma_rdata;
  endtask
  task automatic pio_wr(input int a, input logic [31:0] d);
    @(negedge clk); pio_we = 1; pio_addr = 12'(a); pio_wdata = d;
    @(negedge clk); pio_we = 0;
  endtask
  task automatic pio_rd(input int a, output logic [31:0] d);
    @(negedge clk); pio_re = 1; pio_addr = 12'(a);
    @(negedge clk); pio_re = 0; d = pio_rdata;
  endtask
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // runs a program, checks its cycle count and leaves the count in `cyc`
  int n_overlapped = 0;
  task automatic run(input string name, input int paper_cycles, input logic [31:0] p [$],
                     input bit overlaps, output int cyc);
    logic [31:0] s, c;
    int bound;
    bound = 0;
    foreach (p[i]) begin pio_wr(i, p[i]); bound += cost(p[i]); end
    pio_wr(12'h800, 32'd1);
    do pio_rd(12'h801, s); while (!s[1]);
    pio_rd(12'h805, c);
    cyc = int'(c);
    $display("  %-11s %4d cycles (no-overlap bound %4d, published total %4d)", name, cyc, bound, paper_cycles);
    check($sformatf("%s cycle count %0d within bound %0d", name, cyc, bound), cyc <= bound);
    if (overlaps) begin
      check($sformatf("%s: second block loaded during the first", name), cyc < bound);
      if (cyc < bound) n_overlapped++;
    end
  endtask

  task automatic expect_words(input string name, input int n, input logic [63:0] e [8], input bit lane0);
    word_t d;
    for (int i = 0; i < n; i++) begin
      dma_rd(200 + i, d);
      if (lane0) check($sformatf("%s word %0d: %h", name, i, d), d[31:0] == e[i][31:0]);
      else       check($sformatf("%s word %0d: %h", name, i, d), d == e[i]);
    end
  endtask

  initial begin
    logic [31:0] prog [$];
    logic [63:0] e [8];
    int cyc;
    $readmemh("tb/sha256_k.hex", k256);
    $readmemh("tb/sha512_k.hex", k512);
    repeat (3) @(negedge clk); rst_n = 1;
    $display("operation     cycles");

    // SHA-256, 64 bytes = 2 padded blocks
    for (int j = 0; j < 64; j++) dma_wr(j, {32'd0, k256[j]});
    for (int i = 0; i < 8; i++)  dma_wr(64 + i, {32'd0, IV256[i]});
    for (int j = 0; j < 32; j++) dma_wr(72 + j, {32'd0, md_w32(41, 64, j)});
    prog = {c_ld(0, 0, 64), c_ld(64, 64, 8), c_ld(72, 72, 16), c_sha2(SHA2_256, 64, 72, 0),
            c_ld(88, 88, 16), c_sha2(SHA2_256, 64, 88, 0), c_wait(2), c_st(200, 64, 8), c_wait(1), 32'd0};
    run("SHA-256", 146, prog, 1'b1, cyc);
    for (int i = 0; i < 8; i++) e[i] = {32'd0, E_SHA256[i]};
    expect_words("SHA-256", 8, e, 1'b1);

    // SM3, 64 bytes = 2 padded blocks
    for (int j = 0; j < 64; j++) dma_wr(j, {32'd0, sm3_t(j)});
    for (int i = 0; i < 8; i++)  dma_wr(64 + i, {32'd0, IVSM3[i]});
    for (int j = 0; j < 32; j++) dma_wr(72 + j, {32'd0, md_w32(43, 64, j)});
    prog[3] = c_sha2(SHA2_SM3, 64, 72, 0); prog[5] = c_sha2(SHA2_SM3, 64, 88, 0);
    run("SM3", 144, prog, 1'b1, cyc);
    for (int i = 0; i < 8; i++) e[i] = {32'd0, E_SM3[i]};
    expect_words("SM3", 8, e, 1'b1);

    // SHA-512, 128 bytes = 2 padded blocks
    for (int j = 0; j < 80; j++) dma_wr(j, k512[j]);
    for (int i = 0; i < 8; i++)  dma_wr(80 + i, IV512[i]);
    for (int j = 0; j < 32; j++) dma_wr(88 + j, md_w64(44, 128, j));
    prog = {c_ld(0, 0, 80), c_ld(80, 80, 8), c_ld(88, 88, 16), c_sha2(SHA2_512, 80, 88, 0),
            c_ld(104, 104, 16), c_sha2(SHA2_512, 80, 104, 0), c_wait(2), c_st(200, 80, 8), c_wait(1), 32'd0};
    run("SHA-512", 263, prog, 1'b1, cyc);
    for (int i = 0; i < 8; i++) e[i] = E_SHA512[i];
    expect_words("SHA-512", 8, e, 1'b0);

    // SHAKE-128 and SHAKE-256, 100 bytes in, 32 bytes out; SHA3-256, 64 bytes
    for (int j = 0; j < 21; j++) dma_wr(j, sha3_w64(45, 100, 168, 8'h1f, j));
    prog = {c_ld(0, 0, 21), c_sha3(SHAKE_128, 0, 32, 4), c_wait(2), c_st(200, 32, 4), c_wait(1), 32'd0};
    run("SHAKE-128", 265, prog, 1'b0, cyc);
    for (int i = 0; i < 4; i++) e[i] = E_SHAKE128[i];
    expect_words("SHAKE-128", 4, e, 1'b0);

    for (int j = 0; j < 17; j++) dma_wr(j, sha3_w64(46, 100, 136, 8'h1f, j));
    prog = {c_ld(0, 0, 17), c_sha3(SHAKE_256, 0, 32, 4), c_wait(2), c_st(200, 32, 4), c_wait(1), 32'd0};
    run("SHAKE-256", 261, prog, 1'b0, cyc);
    for (int i = 0; i < 4; i++) e[i] = E_SHAKE256[i];
    expect_words("SHAKE-256", 4, e, 1'b0);

    for (int j = 0; j < 17; j++) dma_wr(j, sha3_w64(47, 64, 136, 8'h06, j));
    prog[1] = c_sha3(SHA3_256, 0, 32, 4);
    run("SHA3-256", 261, prog, 1'b0, cyc);
    for (int i = 0; i < 4; i++) e[i] = E_SHA3[i];
    expect_words("SHA3-256", 4, e, 1'b0);

    // SHA3-512, 64 bytes (rate 9 words, 8 words out); no published count, 0 is printed
    for (int j = 0; j < 9; j++) dma_wr(j, sha3_w64(48, 64, 72, 8'h06, j));
    prog = {c_ld(0, 0, 9), c_sha3(SHA3_512, 0, 32, 8), c_wait(2), c_st(200, 32, 8), c_wait(1), 32'd0};
    run("SHA3-512", 0, prog, 1'b0, cyc);
    for (int i = 0; i < 8; i++) e[i] = E_SHA3_512[i];
    expect_words("SHA3-512", 8, e, 1'b0);

    // AES-128, one 16-byte block
    for (int j = 0; j < 22; j++) dma_wr(j, AES_RK_T[j]);
    dma_wr(22, raw_w64(112, 0)); dma_wr(23, raw_w64(112, 1));
    prog = {c_ld(0, 0, 24), c_aes(AES_128, 22, 0, 24), c_wait(2), c_st(200, 24, 2), c_wait(1), 32'd0};
    run("AES-128", 98, prog, 1'b0, cyc);
    for (int i = 0; i < 2; i++) e[i] = EXP_AES_T[i];
    expect_words("AES-128", 2, e, 1'b0);

    // Haraka-256 (32 bytes) and Haraka-512 (64 bytes), round constants in B[0..79]
    for (int j = 0; j < 80; j++) dma_wr(j, rc_word(j));
    for (int j = 0; j < 4; j++)  dma_wr(80 + j, raw_w64(14, j));
    prog = {c_ld(0, 0, 40), c_ld(80, 80, 4), c_aes(HARAKA_256, 80, 0, 96), c_wait(2),
            c_st(200, 96, 4), c_wait(1), 32'd0};
    run("Haraka-256", 110, prog, 1'b0, cyc);
    for (int i = 0; i < 4; i++) e[i] = EXP_H256_T[i];
    expect_words("Haraka-256", 4, e, 1'b0);

    for (int j = 0; j < 8; j++) dma_wr(80 + j, raw_w64(15, j));
    prog = {c_ld(0, 0, 88), c_aes(HARAKA_512, 80, 0, 96), c_wait(2), c_st(200, 96, 4), c_wait(1), 32'd0};
    run("Haraka-512", 205, prog, 1'b0, cyc);
    for (int i = 0; i < 4; i++) e[i] = EXP_H512_T[i];
    expect_words("Haraka-512", 4, e, 1'b0);

    check("every two-block program overlapped its second load", n_overlapped == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
