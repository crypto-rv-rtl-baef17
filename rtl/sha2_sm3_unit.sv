// sha2_sm3_unit: unified SHA-256 / SM3 / SHA-512 compression engine.
//
// One command compresses one message block into a chaining state:
//   * SHA-512 (mode SHA2_512): eight 64-bit state words, sixteen 64-bit message words,
//     80 rounds, the full 64-bit datapath.
//   * SHA-256 and SM3 (SHA2_256, SHA2_SM3): the 64-bit datapath splits into two 32-bit
//     lanes that compress two independent blocks at once. Every 64-bit word carries lane 0
//     in bits [31:0] and lane 1 in bits [63:32]; 64 rounds.
// It is built from the three parts the paper names: a Message Expander (a 16-word sliding
// window that produces W[j+16] each round: SHA sigma functions or the SM3 P1 expansion), a
// Message Compressor (one round per cycle with shared adders; the SHA Sigma/Ch/Maj and the
// SM3 <<<12, <<<7, FF/GG, <<<9, <<<19 paths are selected by the mode) and the Value Rotator
// (the final feed-forward: addition for SHA-2, XOR for SM3, giving the new state that the
// sequencer writes back to the buffer).
// Round constants are not stored here: each round the unit presents the round index on
// `k_idx` and takes that round's constant from the buffer on `k_word` in the same cycle
// (SHA-512: K[j]; SHA-256: K[j] in bits [31:0]; SM3: T_j <<< (j mod 32) in bits [31:0]),
// following the paper's layout that keeps the constants K in the buffer.
// Timing: `start` (accepted while not busy) latches state_in and msg_in; the rounds run in
// the next ROUNDS cycles; in the cycle after the last round `done` pulses for one cycle
// with the new state on state_out (held until the next start). Latency start->done is
// ROUNDS+1 cycles (65 for SHA-256/SM3, 81 for SHA-512).
// Departure from the paper: the paper's unit spreads each round over a four-stage pipeline
// with one adder per stage (Fig. 2(a)); this implementation computes a whole round in one
// cycle. Four register stages per round would cost four cycles per round, more than the
// published cycle count for a whole SHA-256 block allows, so one round per cycle is kept: the
// same throughput with a longer combinational path.
module sha2_sm3_unit
  import crypto_rv_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  sha2_mode_e mode,
  input  word_t      state_in [8],
  input  word_t      msg_in   [16],
  output logic [6:0] k_idx,
  input  word_t      k_word,
  output logic       busy,
  output logic       done,
  output word_t      state_out [8]
);
  sha2_mode_e mode_q;
  word_t      h_q   [8];   // chaining input, kept for the feed-forward
  word_t      v_q   [8];   // working variables a..h
  word_t      w_q   [16];  // message window W[j..j+15]
  logic [6:0] round_q;
  logic       run_q;

  logic [6:0] last_round;
  assign last_round = (mode_q == SHA2_512) ? 7'd79 : 7'd63;
  assign k_idx      = round_q;
  assign busy       = run_q;

  // ---- 32-bit lane round (SHA-256 or SM3) ----
  typedef logic [31:0] w32_t;

  function automatic void round32(input logic sm3, input logic [6:0] j, input w32_t v [8],
                                  input w32_t w0, input w32_t w4, input w32_t k,
                                  output w32_t o [8]);
    w32_t t1, t2, ss1, ss2, ff, gg, a12;
    if (!sm3) begin
      t1 = v[7] + (rotr32(v[4], 6) ^ rotr32(v[4], 11) ^ rotr32(v[4], 25))
                + ((v[4] & v[5]) ^ (~v[4] & v[6])) + k + w0;
      t2 = (rotr32(v[0], 2) ^ rotr32(v[0], 13) ^ rotr32(v[0], 22))
                + ((v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]));
      o[0] = t1 + t2; o[1] = v[0]; o[2] = v[1]; o[3] = v[2];
      o[4] = v[3] + t1; o[5] = v[4]; o[6] = v[5]; o[7] = v[6];
    end else begin
      a12 = rotl32(v[0], 12);
      ss1 = rotl32(a12 + v[4] + k, 7);
      ss2 = ss1 ^ a12;
      ff  = (j < 16) ? (v[0] ^ v[1] ^ v[2]) : ((v[0] & v[1]) | (v[0] & v[2]) | (v[1] & v[2]));
      gg  = (j < 16) ? (v[4] ^ v[5] ^ v[6]) : ((v[4] & v[5]) | (~v[4] & v[6]));
      t1  = ff + v[3] + ss2 + (w0 ^ w4);
      t2  = gg + v[7] + ss1 + w0;
      o[0] = t1; o[1] = v[0]; o[2] = rotl32(v[1], 9); o[3] = v[2];
      o[4] = t2 ^ rotl32(t2, 9) ^ rotl32(t2, 17);
      o[5] = v[4]; o[6] = rotl32(v[5], 19); o[7] = v[6];
    end
  endfunction

  function automatic w32_t expand32(input logic sm3, input w32_t w [16]);
    w32_t x;
    if (!sm3)
      return (rotr32(w[14], 17) ^ rotr32(w[14], 19) ^ (w[14] >> 10)) + w[9]
           + (rotr32(w[1], 7) ^ rotr32(w[1], 18) ^ (w[1] >> 3)) + w[0];
    x = w[0] ^ w[7] ^ rotl32(w[13], 15);
    return (x ^ rotl32(x, 15) ^ rotl32(x, 23)) ^ rotl32(w[3], 7) ^ w[10];
  endfunction

  // ---- next-state logic ----
  word_t v_nx [8];
  word_t w_new;
  word_t fin  [8];

  always_comb begin
    w32_t vl [8];
    w32_t ol [8];
    w32_t wl [16];
    word_t t1, t2;
    t1 = '0; t2 = '0; w_new = '0;
    for (int i = 0; i < 8; i++)  begin v_nx[i] = '0; fin[i] = '0; vl[i] = '0; ol[i] = '0; end
    for (int i = 0; i < 16; i++) wl[i] = '0;
    if (mode_q == SHA2_512) begin
      t1 = v_q[7] + (rotr64(v_q[4], 14) ^ rotr64(v_q[4], 18) ^ rotr64(v_q[4], 41))
                  + ((v_q[4] & v_q[5]) ^ (~v_q[4] & v_q[6])) + k_word + w_q[0];
      t2 = (rotr64(v_q[0], 28) ^ rotr64(v_q[0], 34) ^ rotr64(v_q[0], 39))
                  + ((v_q[0] & v_q[1]) ^ (v_q[0] & v_q[2]) ^ (v_q[1] & v_q[2]));
      v_nx[0] = t1 + t2; v_nx[1] = v_q[0]; v_nx[2] = v_q[1]; v_nx[3] = v_q[2];
      v_nx[4] = v_q[3] + t1; v_nx[5] = v_q[4]; v_nx[6] = v_q[5]; v_nx[7] = v_q[6];
      w_new = (rotr64(w_q[14], 19) ^ rotr64(w_q[14], 61) ^ (w_q[14] >> 6)) + w_q[9]
            + (rotr64(w_q[1], 1) ^ rotr64(w_q[1], 8) ^ (w_q[1] >> 7)) + w_q[0];
      for (int i = 0; i < 8; i++) fin[i] = h_q[i] + v_q[i];
    end else begin
      for (int l = 0; l < 2; l++) begin
        for (int i = 0; i < 8; i++)  vl[i] = v_q[i][32*l +: 32];
        for (int i = 0; i < 16; i++) wl[i] = w_q[i][32*l +: 32];
        round32(mode_q == SHA2_SM3, round_q, vl, wl[0], wl[4], k_word[31:0], ol);
        for (int i = 0; i < 8; i++) v_nx[i][32*l +: 32] = ol[i];
        w_new[32*l +: 32] = expand32(mode_q == SHA2_SM3, wl);
        for (int i = 0; i < 8; i++)
          fin[i][32*l +: 32] = (mode_q == SHA2_SM3) ? (h_q[i][32*l +: 32] ^ vl[i])
                                                    : (h_q[i][32*l +: 32] + vl[i]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= SHA2_256; round_q <= '0; run_q <= 1'b0; done <= 1'b0;
      for (int i = 0; i < 8; i++)  begin h_q[i] <= '0; v_q[i] <= '0; state_out[i] <= '0; end
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        mode_q  <= mode;
        round_q <= '0;
        run_q   <= 1'b1;
        for (int i = 0; i < 8; i++)  begin h_q[i] <= state_in[i]; v_q[i] <= state_in[i]; end
        for (int i = 0; i < 16; i++) w_q[i] <= msg_in[i];
      end else if (run_q) begin
        if (round_q == last_round + 7'd1) begin
          // Value Rotator: feed-forward into the chaining state
          for (int i = 0; i < 8; i++) state_out[i] <= fin[i];
          run_q <= 1'b0;
          done  <= 1'b1;
        end else begin
          for (int i = 0; i < 8; i++)  v_q[i] <= v_nx[i];
          for (int i = 0; i < 15; i++) w_q[i] <= w_q[i+1];
          w_q[15] <= w_new;
          round_q <= round_q + 7'd1;
        end
      end
    end
  end
endmodule
