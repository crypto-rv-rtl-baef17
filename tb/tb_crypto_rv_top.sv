// tb_crypto_rv_top: end-to-end test of the Crypto-RV co-processor at its default sizes.
//
// Acting as the host, the testbench fills Data Memory over the DMA port with round constants
// (SHA-256 K, SM3 T_j, SHA-512 K, AES round keys, Haraka RC), initial states and padded
// messages, writes a 50-command program over PIO and starts it. The program runs:
//   * SHA-256 and SM3 on two messages of two blocks each at once (two 32-bit lanes),
//     with the second block loaded into the Buffer while the first is compressed;
//   * SHA-512 on a two-block message, also double buffered;
//   * SHA3-256 (one block) and SHAKE-128 (one block absorbed, 336 bytes squeezed);
//   * AES-128 encryption and decryption, Haraka-256, Haraka-512 and the Haraka-512 permutation;
// and stores every result to Data Memory, the last one with a store that wraps from the end
// of DM to its start. While the program runs the host also writes a DM region over DMA.
// Afterwards all results are read back over DMA and compared with independently computed
// references. The mechanisms are counted and each must occur: command stalls, transfer/
// compute overlap, both SHA-2 lane modes and SHA-512, sponge absorb and squeeze, every
// AES/Haraka mode, DM address wrap, and host DMA traffic during a run.
`timescale 1ns/1ps
module tb_crypto_rv_top;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

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
  function automatic logic [31:0] c_sha3(input sha3_mode_e m, input bit init, input bit absorb,
                                         input int mb, input int ob, input int n);
    return {OP_SHA3, m, init, absorb, 7'(mb), 7'(ob), 5'(n), 5'd0};
  endfunction
  function automatic logic [31:0] c_aes(input aes_mode_e m, input int ib, input int kb, input int ob);
    return {OP_AES, m, 7'(ib), 7'(kb), 7'(ob), 4'd0};
  endfunction
  function automatic logic [31:0] c_wait(input int mask);
    return {OP_WAIT, 26'd0, 2'(mask)};
  endfunction

  // ---------------- host helpers ----------------
  logic [31:0] k256 [64];
  logic [63:0] k512 [80];
  logic [31:0] prog [$];

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
  task automatic expect_dm(input string what, input int a, input int n, input logic [63:0] exp [], input int off = 0);
    word_t d;
    for (int i = 0; i < n; i++) begin
      dma_rd((a + i) % DM_DEPTH, d);
      checks++;
      if (d !== exp[off + i]) begin
        failures++; $display("FAIL %s word %0d: %h expected %h", what, i, d, exp[off + i]);
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_sha256 = 0, n_sm3 = 0, n_sha512 = 0, n_absorb = 0, n_squeeze = 0;
  int n_aes = 0, n_dec = 0, n_h256 = 0, n_h512 = 0, n_h512p = 0, n_wrap = 0, n_dma_busy = 0, n_wb = 0;
  always @(posedge clk) begin
    if (dut.s2_start && dut.s2_mode == SHA2_256) n_sha256++;
    if (dut.s2_start && dut.s2_mode == SHA2_SM3) n_sm3++;
    if (dut.s2_start && dut.s2_mode == SHA2_512) n_sha512++;
    if (dut.s3_start) begin if (dut.u_ctrl.s3_absorb) n_absorb++; else n_squeeze++; end
    if (dut.ae_start) case (dut.ae_mode)
      AES_128: n_aes++; AES_128_DEC: n_dec++; HARAKA_256: n_h256++; HARAKA_512: n_h512++; default: n_h512p++;
    endcase
    if (dut.dmb_we && dut.dmb_addr == '0 && dut.u_mv.store_q) n_wrap++;
    if (dma_we && dut.running) n_dma_busy++;
    if (dut.bb_we) n_wb++;
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    word_t e [];
    logic [31:0] r, stall, ovl, cmds, cyc;
    $readmemh("tb/sha256_k.hex", k256);
    $readmemh("tb/sha512_k.hex", k512);
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- Data Memory image (DMA writes) ----
    for (int j = 0; j < 64; j++) dma_wr(j, {32'd0, k256[j]});
    for (int j = 0; j < 64; j++) dma_wr(64 + j, {32'd0, sm3_t(j)});
    for (int j = 0; j < 80; j++) dma_wr(128 + j, k512[j]);
    for (int i = 0; i < 8; i++) begin
      dma_wr(208 + i, {IV256[i], IV256[i]});
      dma_wr(216 + i, {IVSM3[i], IVSM3[i]});
      dma_wr(224 + i, IV512[i]);
    end
    for (int j = 0; j < 32; j++) begin
      dma_wr(232 + j, {md_w32(4, 90, j), md_w32(3, 100, j)});
      dma_wr(264 + j, {md_w32(4, 90, j), md_w32(3, 100, j)});
      dma_wr(296 + j, md_w64(6, 150, j));
    end
    for (int j = 0; j < 17; j++) dma_wr(328 + j, sha3_w64(8, 100, 136, 8'h06, j));
    for (int j = 0; j < 21; j++) dma_wr(345 + j, sha3_w64(10, 100, 168, 8'h1f, j));
    for (int j = 0; j < 22; j++) dma_wr(366 + j, AES_RK_T[j]);
    dma_wr(388, raw_w64(112, 0)); dma_wr(389, raw_w64(112, 1));
    for (int j = 0; j < 80; j++) dma_wr(390 + j, rc_word(j));
    for (int j = 0; j < 4; j++) dma_wr(470 + j, raw_w64(14, j));
    for (int j = 0; j < 8; j++) dma_wr(474 + j, raw_w64(15, j));
    for (int j = 0; j < 8; j++) dma_wr(482 + j, raw_w64(16, j));
    for (int j = 0; j < 22; j++) dma_wr(490 + j, AES_DK_T[j]);

    // ---- program ----
    prog = {
      // SHA-256, two lanes, two blocks, second block loaded during the first compression
      c_ld(0, 0, 64), c_ld(208, 64, 8), c_ld(232, 72, 16),
      c_sha2(SHA2_256, 64, 72, 0), c_ld(248, 88, 16), c_sha2(SHA2_256, 64, 88, 0),
      c_wait(3), c_st(512, 64, 8),
      // SM3, same shape
      c_ld(64, 0, 64), c_ld(216, 64, 8), c_ld(264, 72, 16),
      c_sha2(SHA2_SM3, 64, 72, 0), c_ld(280, 88, 16), c_sha2(SHA2_SM3, 64, 88, 0),
      c_wait(3), c_st(520, 64, 8),
      // SHA-512
      c_ld(128, 0, 80), c_ld(224, 80, 8), c_ld(296, 88, 16),
      c_sha2(SHA2_512, 80, 88, 0), c_ld(312, 104, 16), c_sha2(SHA2_512, 80, 104, 0),
      c_wait(3), c_st(528, 80, 8),
      // SHA3-256, then SHAKE-128 absorb + one extra squeeze
      c_ld(328, 0, 17), c_sha3(SHA3_256, 1, 1, 0, 32, 4), c_ld(345, 40, 21),
      c_wait(3), c_st(536, 32, 4),
      c_sha3(SHAKE_128, 1, 1, 40, 64, 21), c_sha3(SHAKE_128, 0, 0, 0, 85, 21),
      c_wait(3), c_st(540, 64, 42),
      // AES-128, then decryption of the ciphertext with the decryption keys loaded meanwhile
      c_ld(366, 0, 24), c_aes(AES_128, 22, 0, 24), c_ld(490, 26, 22),
      c_aes(AES_128_DEC, 24, 26, 48), c_wait(3), c_st(582, 24, 2), c_st(592, 48, 2),
      // Haraka with round constants RC in B[0..79]
      c_ld(390, 0, 80), c_ld(470, 80, 20),
      c_aes(HARAKA_256, 80, 0, 100), c_aes(HARAKA_512, 84, 0, 104), c_aes(HARAKA_512P, 92, 0, 108),
      c_wait(3), c_st(584, 100, 8), c_st(1020, 108, 8),
      c_wait(1), 32'd0
    };
    for (int i = 0; i < prog.size(); i++) pio_wr(i, prog[i]);

    // ---- run; the host keeps writing DM[700..763] over DMA meanwhile ----
    pio_wr('h800, 32'd1);
    for (int j = 0; j < 64; j++) dma_wr(700 + j, {32'hcafe0000 + 32'(j), 32'(j)});
    while (!irq) @(negedge clk);

    pio_rd('h802, stall); pio_rd('h803, ovl); pio_rd('h804, cmds); pio_rd('h805, cyc);
    pio_rd('h801, r);
    checks++; if (r !== 32'h2) begin failures++; $display("FAIL status %h", r); end
    checks++; if (cmds !== 32'(prog.size())) begin failures++; $display("FAIL cmds %0d", cmds); end
    $display("  program: %0d commands in %0d cycles", cmds, cyc);

    // ---- results ----
    e = new[8]; foreach (e[i]) e[i] = EXP_SHA256_T[i]; expect_dm("SHA-256 x2", 512, 8, e);
    foreach (e[i]) e[i] = EXP_SM3_T[i];    expect_dm("SM3 x2", 520, 8, e);
    foreach (e[i]) e[i] = EXP_SHA512_T[i]; expect_dm("SHA-512", 528, 8, e);
    e = new[4]; foreach (e[i]) e[i] = EXP_SHA3_256_T[i]; expect_dm("SHA3-256", 536, 4, e);
    e = new[42]; foreach (e[i]) e[i] = EXP_SHAKE128_T[i]; expect_dm("SHAKE-128", 540, 42, e);
    e = new[2]; foreach (e[i]) e[i] = EXP_AES_T[i]; expect_dm("AES-128", 582, 2, e);
    foreach (e[i]) e[i] = raw_w64(112, i); expect_dm("AES-128 decryption", 592, 2, e);
    e = new[4]; foreach (e[i]) e[i] = EXP_H256_T[i]; expect_dm("Haraka-256", 584, 4, e);
    foreach (e[i]) e[i] = EXP_H512_T[i]; expect_dm("Haraka-512", 588, 4, e);
    e = new[8]; foreach (e[i]) e[i] = EXP_H512P_T[i]; expect_dm("Haraka-512 perm (wrapped)", 1020, 8, e);
    e = new[64]; foreach (e[i]) e[i] = {32'hcafe0000 + 32'(i), 32'(i)}; expect_dm("host DMA during run", 700, 64, e);

    $display("  mechanisms:");
    need("command stall cycles", int'(stall));
    need("transfer/compute overlap cycles", int'(ovl));
    need("SHA-256 two-lane compressions", n_sha256);
    need("SM3 two-lane compressions", n_sm3);
    need("SHA-512 compressions", n_sha512);
    need("sponge absorb permutations", n_absorb);
    need("sponge squeeze permutations", n_squeeze);
    need("AES-128 encryptions", n_aes);
    need("AES-128 decryptions", n_dec);
    need("Haraka-256", n_h256);
    need("Haraka-512", n_h512);
    need("Haraka-512 permutations", n_h512p);
    need("DM address wrap on store", n_wrap);
    need("host DMA writes during a run", n_dma_busy);
    need("result write-back words", n_wb);

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
