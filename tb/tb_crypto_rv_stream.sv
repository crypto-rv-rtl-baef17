// tb_crypto_rv_stream: the streaming workloads of the double-buffered data path, run on the
// full-size co-processor.
//
// Part A, long-message chaining: two SHA-256 messages of 237 blocks each (15100 and 15130
// bytes) are hashed side by side in the two 32-bit lanes. The round constants and the chaining
// state stay in the Buffer (B[0:63] and B[64:71]); message blocks go through two Buffer slots
// (B[72:87], B[88:103]) in turn, each LOAD overlapping the compression of the block before it.
// The 3792 message words do not fit in Data Memory, so DM is used as a ring of 64 block slots
// starting at DM[72]: the host preloads the first 59 blocks, starts the program and then,
// polling the command counter over PIO, writes each further block into a slot whose previous
// block has already been loaded. One block straddles the end of DM, so its LOAD wraps.
// Part B, many-hash: 120 independent one-block SHA-256 messages (40..55 bytes), two per command.
// Each pair arrives as a 24-word record (two-lane IV + message) in a ring of 30 records in
// DM[64:783]; digests leave through a ring of 30 slots in DM[784:1023] that the host drains
// while the program runs.
// Part C, multi-block sponge: SHA3-256 of a 2700-byte message (20 blocks) and SHAKE-128 of a
// 1000-byte message (6 blocks, 64 output bytes), each block absorbed into the running state with
// the next block loaded meanwhile; both checked against a standard library.
// Checked: the two long digests against values from a standard SHA-256 library; the 120
// short digests against a plain software SHA-256 model in this file (itself checked against
// the library on one message); that the host never fell behind the program; and the cycle
// budget: with double buffering the run time must stay within 80 cycles per block for part A
// (65 cycles of compression per block, 8 of write-back and command issue; the 17-cycle loads
// must be hidden), within 105 cycles per pair for part B and within 26 cycles per sponge
// block for part C (there the 18-22 cycle loads are longer than the 12-cycle permutation).
// Timing is by the clock; all host accesses are on the falling edge. The workload sizes (237
// message blocks, 120 instances, digests streamed to the top of DM) follow the published
// streaming example; the ring layout and the flow control are this testbench's.
`timescale 1ns/1ps
module tb_crypto_rv_stream;
  import crypto_rv_pkg::*;
  import tb_crypto_pkg::*;

  localparam int NBLK   = 237;            // blocks per lane, part A
  localparam int LEN0   = 15100, LEN1 = 15130;
  localparam int MSLOT0 = 72;             // first DM word of the block ring
  localparam int NINST  = 120;            // part B instances
  localparam int NPAIR  = NINST / 2;
  localparam int REC0   = 64, NREC = 30;  // record ring: 30 x 24 words
  localparam int OUT0   = 784;            // digest ring: 30 x 8 words

  localparam logic [31:0] EXP_A0 [8] = '{32'ha4f38c64, 32'h61929ca4, 32'he2db79c7, 32'h1caf9e4e,
                                         32'h2c003431, 32'hc99e7037, 32'hf8f369f1, 32'hbc5dea53};
  localparam logic [31:0] EXP_A1 [8] = '{32'h77d2bab5, 32'h17cb3023, 32'h38a2f0ae, 32'hc8777098,
                                         32'h7a87bea9, 32'h500e040d, 32'haf4e458e, 32'h1d2d8572};
  localparam logic [63:0] EXP_C_SHA3 [4] = '{64'hd3dcb43c48ee04af, 64'h84ffc3a4575ebd1f,
                                             64'h9a3ed939bacd4683, 64'he3f37e714911246e};
  localparam logic [63:0] EXP_C_SHAKE [8] = '{64'h27575f38e4db4951, 64'h6ad4e439880ec5ac,
                                              64'h6a0a45fd3d19fccc, 64'h2e5e711b2a2f2406,
                                              64'h0e5bdc8a7ed91a8f, 64'h5efa3c60cd535945,
                                              64'hb5e3e58daa1ae269, 64'hc6127de407a9cf1d};
  localparam int NB3 = 20, NBK = 6;       // part C: sponge blocks (2700 B at 136, 1000 B at 168)
  localparam logic [31:0] EXP_B0 [8] = '{32'h2d4d19ca, 32'hc1efa83c, 32'h8b90a106, 32'hb9bcfc14,
                                         32'hba67b1c2, 32'hd23a371a, 32'h6bef1409, 32'h03da60ea};

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

  crypto_rv_top dut (.clk, .rst_n, .dma_we, .dma_addr, .dma_wdata, .dma_rdata,
                     .pio_we, .pio_re, .pio_addr, .pio_wdata, .pio_rdata, .irq);

  // ---------------- command encoders ----------------
  function automatic logic [31:0] c_ld(input int dm, input int b, input int n);
    return {OP_LOAD, 10'(dm), 7'(b), 7'(n - 1), 4'd0};
  endfunction
  function automatic logic [31:0] c_st(input int dm, input int b, input int n);
    return {OP_STORE, 10'(dm), 7'(b), 7'(n - 1), 4'd0};
  endfunction
  function automatic logic [31:0] c_sha256(input int sb, input int mb);
    return {OP_SHA2, SHA2_256, 7'(sb), 7'(mb), 7'd0, 5'd0};
  endfunction
  function automatic logic [31:0] c_sha3(input sha3_mode_e m, input bit init, input int mb,
                                         input int ob, input int n);
    return {OP_SHA3, m, init, 1'b1, 7'(mb), 7'(ob), 5'(n), 5'd0};
  endfunction
  function automatic logic [31:0] c_wait(input int mask);
    return {OP_WAIT, 26'd0, 2'(mask)};
  endfunction
  localparam logic [31:0] C_HALT = '0;

  // ---------------- host accesses ----------------
  task automatic dma_wr(input int a, input word_t d);
    @(negedge clk); dma_we = 1; dma_addr = DM_AW'(a % DM_DEPTH); dma_wdata = d;
    @(negedge clk); dma_we = 0;
  endtask
  task automatic dma_rd(input int a, output word_t d);
    @(negedge clk); dma_addr = DM_AW'(a % DM_DEPTH);
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
  task automatic wait_cmds(input int n);
    logic [31:0] c;
    do pio_rd(12'h804, c); while (int'(c) < n);
  endtask
  task automatic wait_halt();
    logic [31:0] s;
    do pio_rd(12'h801, s); while (!s[1]);
  endtask
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  // fails if the command with index `idx` has already issued (the host was too late)
  task automatic check_ahead(input string what, input int idx);
    logic [31:0] c;
    pio_rd(12'h804, c);
    check(what, int'(c) <= idx);
  endtask
  task automatic run_program(input logic [31:0] p [$]);
    foreach (p[i]) pio_wr(i, p[i]);
    pio_wr(12'h800, 32'd1);
  endtask

  // ---------------- software SHA-256 model (one padded block) ----------------
  function automatic logic [31:0] rr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic void sha256_ref(input int seed, input int len, output logic [31:0] h [8]);
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, t1, t2;
    for (int j = 0; j < 16; j++) w[j] = md_w32(seed, len, j);
    for (int j = 16; j < 64; j++)
      w[j] = (rr(w[j-2], 17) ^ rr(w[j-2], 19) ^ (w[j-2] >> 10)) + w[j-7]
           + (rr(w[j-15], 7) ^ rr(w[j-15], 18) ^ (w[j-15] >> 3)) + w[j-16];
    {a, b, c, d, e, f, g, hh} = {IV256[0], IV256[1], IV256[2], IV256[3],
                                 IV256[4], IV256[5], IV256[6], IV256[7]};
    for (int j = 0; j < 64; j++) begin
      t1 = hh + (rr(e, 6) ^ rr(e, 11) ^ rr(e, 25)) + ((e & f) ^ (~e & g)) + k256[j] + w[j];
      t2 = (rr(a, 2) ^ rr(a, 13) ^ rr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
      {a, b, c, d, e, f, g, hh} = {t1 + t2, a, b, c, d + t1, e, f, g};
    end
    h[0] = IV256[0] + a; h[1] = IV256[1] + b; h[2] = IV256[2] + c; h[3] = IV256[3] + d;
    h[4] = IV256[4] + e; h[5] = IV256[5] + f; h[6] = IV256[6] + g; h[7] = IV256[7] + hh;
  endfunction
  function automatic int inst_len(input int k);
    return 40 + (k % 16);
  endfunction

  // ---------------- mechanism counters ----------------
  int n_chain_absorb = 0, n_ring_load = 0, n_refill = 0, n_overlap = 0, n_stall = 0, n_drain = 0;
  logic [DM_AW-1:0] prev_dmb;
  always @(posedge clk) begin
    if (dut.u_mv.busy && !dut.u_mv.store_q && dut.dmb_addr == '0 && prev_dmb == '1) n_ring_load++;
    prev_dmb <= dut.dmb_addr;
    if (dma_we && dut.running) n_refill++;
    if (dut.u_mv.busy && (dut.u_sha2.busy || dut.u_sha3.busy)) n_overlap++;
    if (dut.s3_start && dut.u_ctrl.s3_absorb && !dut.u_ctrl.s3_init) n_chain_absorb++;
  end

  initial begin
    logic [31:0] prog [$];
    logic [31:0] cyc, stall, ovl, h [8];
    word_t d;
    int thr;
    $readmemh("tb/sha256_k.hex", k256);
    repeat (3) @(negedge clk); rst_n = 1;

    // the software model against the library value
    sha256_ref(100, 40, h);
    for (int i = 0; i < 8; i++) check("reference model", h[i] == EXP_B0[i]);

    // ================= part A: long-message chaining =================
    for (int j = 0; j < 64; j++) dma_wr(j, {32'd0, k256[j]});
    for (int i = 0; i < 8; i++)  dma_wr(64 + i, {IV256[i], IV256[i]});
    for (int i = 0; i < 59; i++)
      for (int j = 0; j < 16; j++)
        dma_wr(MSLOT0 + 16 * i + j, {md_w32(22, LEN1, 16 * i + j), md_w32(21, LEN0, 16 * i + j)});
    prog.push_back(c_ld(0, 0, 64));                       // 0: K -> B[0:63]
    prog.push_back(c_ld(64, 64, 8));                      // 1: IV -> B[64:71]
    for (int i = 0; i < NBLK; i++) begin
      prog.push_back(c_ld((MSLOT0 + 16 * i) % DM_DEPTH, 72 + 16 * (i % 2), 16)); // 2+2i
      prog.push_back(c_sha256(64, 72 + 16 * (i % 2)));                          // 3+2i
    end
    prog.push_back(c_wait(2));
    prog.push_back(c_st((MSLOT0 + 16 * NBLK) % DM_DEPTH, 64, 8));
    prog.push_back(c_wait(1));
    prog.push_back(C_HALT);
    run_program(prog);
    for (int i = 59; i < NBLK; i++) begin
      // slot of block i last held block i-64 (or, for i < 64, K and IV)
      thr = (i < 64) ? 3 : 2 * (i - 64) + 5;
      wait_cmds(thr);
      for (int j = 0; j < 16; j++)
        dma_wr(MSLOT0 + 16 * i + j, {md_w32(22, LEN1, 16 * i + j), md_w32(21, LEN0, 16 * i + j)});
      check($sformatf("host wrote block %0d before its LOAD", i), 1'b1);
      check_ahead($sformatf("block %0d LOAD not issued before the host wrote it", i), 2 + 2 * i);
    end
    wait_halt();
    pio_rd(12'h805, cyc); pio_rd(12'h802, stall); pio_rd(12'h803, ovl);
    n_stall += int'(stall);
    $display("part A: %0d blocks/lane, %0d cycles (%0d compression), stall %0d, overlap %0d",
             NBLK, cyc, NBLK * 65, stall, ovl);
    for (int i = 0; i < 8; i++) begin
      dma_rd(MSLOT0 + 16 * NBLK + i, d);
      check($sformatf("long digest word %0d: %h", i, d), d == {EXP_A1[i], EXP_A0[i]});
    end
    check("part A cycle budget (80 per block)", int'(cyc) <= 80 * NBLK + 100);
    check("part A loads hidden under compression", int'(ovl) >= 16 * (NBLK - 1));

    // ================= part B: many-hash =================
    prog.delete();
    for (int j = 0; j < 64; j++) dma_wr(j, {32'd0, k256[j]});
    for (int p = 0; p < NREC; p++) write_record(p);
    prog.push_back(c_ld(0, 0, 64));                                   // 0
    prog.push_back(c_ld(REC0, 64, 24));                               // 1: record 0
    for (int p = 0; p < NPAIR; p++) begin
      prog.push_back(c_sha256(64 + 24 * (p % 2), 72 + 24 * (p % 2)));  // 2+4p
      if (p + 1 < NPAIR)                                              // 3+4p
        prog.push_back(c_ld(REC0 + 24 * ((p + 1) % NREC), 64 + 24 * ((p + 1) % 2), 24));
      else
        prog.push_back(c_wait(1));
      prog.push_back(c_wait(2));                                      // 4+4p
      prog.push_back(c_st(OUT0 + 8 * (p % NREC), 64 + 24 * (p % 2), 8)); // 5+4p
    end
    prog.push_back(c_wait(1));
    prog.push_back(C_HALT);
    run_program(prog);
    for (int p = 0; p < NPAIR; p++) begin
      logic [31:0] h0 [8], h1 [8];
      if (p + NREC < NPAIR) begin
        // record p+NREC reuses the slot of record p, loaded by command 4p-1 (1 for p = 0)
        wait_cmds((p == 0) ? 3 : 4 * p + 2);
        write_record(p + NREC);
        check_ahead($sformatf("record %0d written before its LOAD", p + NREC), 4 * (p + NREC) - 1);
      end
      wait_cmds(4 * p + 7);                   // STORE of pair p finished
      sha256_ref(100 + 2 * p, inst_len(2 * p), h0);
      sha256_ref(101 + 2 * p, inst_len(2 * p + 1), h1);
      for (int i = 0; i < 8; i++) begin
        dma_rd(OUT0 + 8 * (p % NREC) + i, d);
        check($sformatf("pair %0d digest word %0d: %h", p, i, d), d == {h1[i], h0[i]});
      end
      n_drain++;
      if (p + NREC < NPAIR)
        check_ahead($sformatf("digest %0d read before its slot is reused", p), 4 * (p + NREC) + 5);
    end
    wait_halt();
    pio_rd(12'h805, cyc); pio_rd(12'h802, stall); pio_rd(12'h803, ovl);
    n_stall += int'(stall);
    $display("part B: %0d instances, %0d cycles, stall %0d, overlap %0d", NINST, cyc, stall, ovl);
    check("part B cycle budget (105 per pair)", int'(cyc) <= 105 * NPAIR + 100);

    // ================= part C: multi-block sponge absorption =================
    // SHA3-256 of a 2700-byte message (20 blocks) and SHAKE-128 of a 1000-byte message
    // (6 blocks, 64 bytes out); blocks alternate between two Buffer slots per function.
    prog.delete();
    for (int j = 0; j < 17 * NB3; j++) dma_wr(j, sha3_w64(31, 2700, 136, 8'h06, j));
    for (int j = 0; j < 21 * NBK; j++) dma_wr(340 + j, sha3_w64(32, 1000, 168, 8'h1f, j));
    for (int i = 0; i < NB3; i++) begin
      prog.push_back(c_ld(17 * i, 17 * (i % 2), 17));
      prog.push_back(c_sha3(SHA3_256, i == 0, 17 * (i % 2), 40, (i == NB3 - 1) ? 4 : 0));
    end
    for (int i = 0; i < NBK; i++) begin
      prog.push_back(c_ld(340 + 21 * i, 48 + 21 * (i % 2), 21));
      prog.push_back(c_sha3(SHAKE_128, i == 0, 48 + 21 * (i % 2), 96, (i == NBK - 1) ? 8 : 0));
    end
    prog.push_back(c_wait(3));
    prog.push_back(c_st(500, 40, 4));
    prog.push_back(c_st(504, 96, 8));
    prog.push_back(c_wait(1));
    prog.push_back(C_HALT);
    run_program(prog);
    wait_halt();
    pio_rd(12'h805, cyc); pio_rd(12'h802, stall); pio_rd(12'h803, ovl);
    $display("part C: %0d sponge blocks, %0d cycles, stall %0d, overlap %0d", NB3 + NBK, cyc, stall, ovl);
    for (int i = 0; i < 4; i++) begin
      dma_rd(500 + i, d);
      check($sformatf("SHA3-256 long digest word %0d: %h", i, d), d == EXP_C_SHA3[i]);
    end
    for (int i = 0; i < 8; i++) begin
      dma_rd(504 + i, d);
      check($sformatf("SHAKE-128 long output word %0d: %h", i, d), d == EXP_C_SHAKE[i]);
    end
    // each block costs its 18-22 cycle load, which the 12-cycle permutation cannot hide
    check("part C cycle budget (26 per block)", int'(cyc) <= 26 * (NB3 + NBK) + 60);

    // ---- every streaming mechanism must have happened ----
    check("sponge absorbed into a running state", n_chain_absorb == NB3 + NBK - 2);
    check("DM ring: a LOAD wrapped from DM[1023] to DM[0]", n_ring_load > 0);
    check("host refilled DM during a run", n_refill > 0);
    check("transfer overlapped compression", n_overlap > 0);
    check("commands stalled", n_stall > 0);
    check("digests drained during a run", n_drain == NPAIR);
    $display("  chained absorbs %0d, ring loads %0d, refill writes %0d, overlap cycles %0d, stalls %0d, drained %0d",
             n_chain_absorb, n_ring_load, n_refill, n_overlap, n_stall, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_record(input int p);
    int base;
    base = REC0 + 24 * (p % NREC);
    for (int i = 0; i < 8; i++) dma_wr(base + i, {IV256[i], IV256[i]});
    for (int j = 0; j < 16; j++)
      dma_wr(base + 8 + j, {md_w32(101 + 2 * p, inst_len(2 * p + 1), j),
                            md_w32(100 + 2 * p, inst_len(2 * p), j)});
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
