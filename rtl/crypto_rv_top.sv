// crypto_rv_top: the Crypto-RV cryptographic co-processor.
//
// The host loads constants, chaining states and messages into the 1024x64 Data Memory
// over the 64-bit DMA port, writes a command program into instruction memory over the
// 32-bit PIO port, and starts it. The sequencer then runs on its own: it moves blocks of
// up to 128 words between Data Memory and the 128x64 internal Buffer, and starts the three
// crypto units (SHA-256/SM3/SHA-512, SHA3-256/SHA3-512/SHAKE-128/SHAKE-256, AES-128
// encryption and decryption/Haraka-256/Haraka-512), which take their operands from the
// Buffer and write their results back into it. Transfers overlap computation (double buffering), and the
// host can read and write Data Memory through the DMA port at any time, also while a
// program runs.
// Ports: the DMA port is a plain synchronous RAM port (read data one cycle after the
// address); the PIO port is described in pio_regs; `irq` is high once the program halts.
// What the paper gives: the blocks, their sizes and the way they are connected (DMA to DM,
// PIO to IM and control registers, DM <-> Buffer <-> crypto units). Its five-stage RISC-V
// pipeline is replaced here by a command sequencer, because the paper gives no instruction
// encoding; the AXI bridge and the host are outside the design.
module crypto_rv_top
  import crypto_rv_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // 64-bit DMA channel into Data Memory
  input  logic             dma_we,
  input  logic [DM_AW-1:0] dma_addr,
  input  word_t            dma_wdata,
  output word_t            dma_rdata,
  // 32-bit PIO channel
  input  logic             pio_we,
  input  logic             pio_re,
  input  logic [11:0]      pio_addr,
  input  logic [31:0]      pio_wdata,
  output logic [31:0]      pio_rdata,
  output logic             irq
);
  localparam int unsigned IM_AW = 10;

  // PIO / IM
  logic             im_we, go, running, halted;
  logic [IM_AW-1:0] im_waddr, im_raddr;
  logic [31:0]      im_wdata, im_rdata;
  logic [31:0]      stall_cycles, overlap_cycles, cmd_count;

  // DM core port
  logic             dmb_we;
  logic [DM_AW-1:0] dmb_addr;
  word_t            dmb_wdata, dmb_rdata;

  // buffer
  logic              ba_we, bb_we;
  logic [BUF_AW-1:0] ba_addr, bb_addr;
  word_t             ba_wdata, bb_wdata;
  word_t             b_words [BUF_DEPTH];

  // transfer engine
  logic              mv_start, mv_store, mv_busy;
  logic [DM_AW-1:0]  mv_dm;
  logic [BUF_AW-1:0] mv_b;
  logic [7:0]        mv_len;

  // units
  logic          s2_start, s2_busy, s2_done;
  sha2_mode_e    s2_mode;
  word_t         s2_state [8];
  word_t         s2_msg [16];
  word_t         s2_out [8];
  word_t         s2_k;
  logic [6:0]    s2_k_idx;
  logic          s3_start, s3_busy, s3_done;
  logic [1599:0] s3_state_in, s3_state_out;
  logic          ae_start, ae_busy, ae_done;
  aes_mode_e     ae_mode;
  word_t         ae_in [8];
  word_t         ae_key [8];
  word_t         ae_out [8];
  logic [6:0]    ae_key_addr;

  assign irq = halted;

  pio_regs #(.IM_AW(IM_AW)) u_pio (
    .clk, .rst_n, .pio_we, .pio_re, .pio_addr, .pio_wdata, .pio_rdata,
    .im_we, .im_waddr, .im_wdata, .go, .running, .halted,
    .stall_cycles, .overlap_cycles, .cmd_count);

  instr_mem #(.DEPTH(1 << IM_AW)) u_im (
    .clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .raddr(im_raddr), .rdata(im_rdata));

  data_memory #(.DEPTH(DM_DEPTH), .WIDTH(WORD_W)) u_dm (
    .clk,
    .a_we(dma_we), .a_addr(dma_addr), .a_wdata(dma_wdata), .a_rdata(dma_rdata),
    .b_we(dmb_we), .b_addr(dmb_addr), .b_wdata(dmb_wdata), .b_rdata(dmb_rdata));

  internal_buffer #(.DEPTH(BUF_DEPTH), .WIDTH(WORD_W)) u_buf (
    .clk, .rst_n,
    .a_we(ba_we), .a_addr(ba_addr), .a_wdata(ba_wdata),
    .b_we(bb_we), .b_addr(bb_addr), .b_wdata(bb_wdata),
    .words(b_words));

  address_calc u_mv (
    .clk, .rst_n, .start(mv_start), .is_store(mv_store), .dm_addr(mv_dm), .b_addr(mv_b),
    .len(mv_len), .busy(mv_busy),
    .dm_we(dmb_we), .dm_a(dmb_addr), .dm_wdata(dmb_wdata), .dm_rdata(dmb_rdata),
    .b_we(ba_we), .b_a(ba_addr), .b_wdata(ba_wdata), .b_words(b_words));

  crypto_controller #(.IM_AW(IM_AW)) u_ctrl (
    .clk, .rst_n, .go, .running, .halted,
    .im_addr(im_raddr), .im_rdata,
    .mv_start, .mv_store, .mv_dm, .mv_b, .mv_len, .mv_busy,
    .b_words, .wb_we(bb_we), .wb_addr(bb_addr), .wb_data(bb_wdata),
    .s2_start, .s2_mode, .s2_state, .s2_msg, .s2_k_idx, .s2_k, .s2_busy, .s2_done, .s2_out,
    .s3_start, .s3_state_in, .s3_busy, .s3_done, .s3_state_out,
    .ae_start, .ae_mode, .ae_in, .ae_key_addr, .ae_key, .ae_busy, .ae_done, .ae_out,
    .stall_cycles, .overlap_cycles, .cmd_count);

  sha2_sm3_unit u_sha2 (
    .clk, .rst_n, .start(s2_start), .mode(s2_mode), .state_in(s2_state), .msg_in(s2_msg),
    .k_idx(s2_k_idx), .k_word(s2_k), .busy(s2_busy), .done(s2_done), .state_out(s2_out));

  sha3_unit u_sha3 (
    .clk, .rst_n, .start(s3_start), .load(1'b1), .state_in(s3_state_in),
    .busy(s3_busy), .done(s3_done), .state_out(s3_state_out));

  aes_haraka_unit u_aes (
    .clk, .rst_n, .start(ae_start), .mode(ae_mode), .in_words(ae_in),
    .key_addr(ae_key_addr), .key_words(ae_key), .busy(ae_busy), .done(ae_done),
    .out_words(ae_out));
endmodule
