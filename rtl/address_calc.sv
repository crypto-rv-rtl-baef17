// address_calc: the transfer engine that moves blocks of words between Data Memory and
// the internal Buffer.
//
// One command moves 1..128 consecutive words: a Load copies DM[dm_addr..] to B[b_addr..],
// a Store copies B[b_addr..] to DM[dm_addr..]. One word moves per cycle. A Load presents the
// DM read address in one cycle and writes the returned word into B in the next, so a Load of
// n words keeps `busy` high for n+1 cycles and a Store for n cycles. DM addresses wrap modulo
// the DM depth (DM can be used as a ring of blocks) and B addresses modulo 128.
// `start` is accepted only while `busy` is low. The bulk-transfer function and the 128-word
// maximum are the paper's; the one-word-per-cycle rate and the handshake are this design's.
module address_calc
  import crypto_rv_pkg::*;
#(
  parameter int unsigned MAX_LEN = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  logic              is_store,
  input  logic [DM_AW-1:0]  dm_addr,
  input  logic [BUF_AW-1:0] b_addr,
  input  logic [7:0]        len,       // number of words, 1..MAX_LEN
  output logic              busy,
  // Data Memory core port
  output logic              dm_we,
  output logic [DM_AW-1:0]  dm_a,
  output word_t             dm_wdata,
  input  word_t             dm_rdata,
  // Buffer write port and read view
  output logic              b_we,
  output logic [BUF_AW-1:0] b_a,
  output word_t             b_wdata,
  input  word_t             b_words [BUF_DEPTH]
);
  logic              store_q;
  logic [DM_AW-1:0]  dm_ptr;
  logic [BUF_AW-1:0] b_ptr, b_wr_ptr;
  logic [7:0]        remaining;   // words still to be issued
  logic              rd_pending;  // a DM read issued last cycle waits to be written into B

  assign busy = (remaining != 0) || rd_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      store_q <= 1'b0; dm_ptr <= '0; b_ptr <= '0; b_wr_ptr <= '0;
      remaining <= '0; rd_pending <= 1'b0;
    end else if (start && !busy) begin
      store_q   <= is_store;
      dm_ptr    <= dm_addr;
      b_ptr     <= b_addr;
      remaining <= (len > 8'(MAX_LEN)) ? 8'(MAX_LEN) : len;
      rd_pending <= 1'b0;
    end else begin
      rd_pending <= !store_q && (remaining != 0);
      b_wr_ptr   <= b_ptr;
      if (remaining != 0) begin
        remaining <= remaining - 8'd1;
        dm_ptr    <= dm_ptr + 1'b1;
        b_ptr     <= b_ptr + 1'b1;
      end
    end
  end

  always_comb begin
    dm_a     = dm_ptr;
    dm_we    = store_q && (remaining != 0);
    dm_wdata = b_words[b_ptr];
    b_we     = rd_pending;
    b_a      = b_wr_ptr;
    b_wdata  = dm_rdata;
  end
endmodule
