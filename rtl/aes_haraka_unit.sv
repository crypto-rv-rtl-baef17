// aes_haraka_unit: unified AES-128 (encryption and decryption) / Haraka-256 / Haraka-512 engine.
//
// The datapath is four 128-bit lanes (lane i = buffer words {2i+1, 2i}, byte 0 in bits
// [7:0]) that pass through a four-stage round pipeline:
//   Stage 1  Load_input mux (new input or the fed-back state) and SubBytes
//   Stage 2  ShiftRows and MixColumns, with a ByPass mux that skips MixColumns in the last
//            AES round
//   Stage 3  AddRoundKey; the key comes from the buffer as an AES round key (AES-128) or as
//            Haraka round constants RC (one per lane); on the first pass the Initialize mux
//            takes the input block W_In instead of the stage-2 result (AES: W_In ^ RK0,
//            Haraka: W_In)
//   Stage 4  output stage: the Haraka mix layer (32-bit unpack of MIX2/MIX4) after every
//            second AES round, and after the last pass the Davies-Meyer feed-forward
//            (XOR with the input) and the Haraka-512 truncation to 256 bits.
// A command runs 11 passes through the pipeline: the initial pass and 10 AES rounds.
// AES-128 uses lane 0 and round keys RK0..RK10. AES-128 decryption (mode AES_128_DEC) runs the
// equivalent inverse cipher through the same stages: inverse S-box in stage 1, InvShiftRows and
// InvMixColumns in stage 2 (InvMixColumns bypassed in the last round), AddRoundKey in stage 3,
// with the decryption key schedule in the buffer (RK10, InvMixColumns(RK9..RK1), RK0).
// Haraka-256 runs 5 rounds of two AES rounds on
// lanes 0-1 with RC[4r..4r+3]; Haraka-512 the same on lanes 0-3 with RC[8r..8r+7] (Haraka v2).
// Mode HARAKA_512P returns the full 512-bit permutation output with no feed-forward and no
// truncation, the primitive from which RC values are derived from a public seed.
// Key/RC fetch: during each pass the unit presents `key_addr` (relative word index
// 2*p for AES and AES decryption, 4*(p-1) for Haraka-256, 8*(p-1) for Haraka-512, p = pass number) and reads the
// eight buffer words starting there on `key_words` in the same cycle.
// Timing: `start` (accepted while not busy) latches mode and input; each pass takes 4 cycles
// (one per stage), so `done` pulses 44 cycles after start, with the result on out_words:
// AES 2 words, Haraka-256/512 4 words, HARAKA_512P 8 words.
// What follows the paper: the four stages, the bypass/initialise/key-RC multiplexers, the
// mix layer, Davies-Meyer and truncation blocks (Fig. 2(b) and Sec. II-C.2). This design's
// own choices: the single block in flight (the pipeline carries one round at a time), the
// stage of SubBytes (the paper's figure feeds precomputed S-box inputs to stage 1), the
// key/RC addressing, and the pass count of Haraka (Haraka v2 has 20/40 lane-rounds; the paper
// quotes 32/64 rounds), and the use of the equivalent inverse cipher for decryption (its key
// schedule is prepared by software like the encryption keys).
module aes_haraka_unit
  import crypto_rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  aes_mode_e   mode,
  input  word_t       in_words  [8],
  output logic [6:0]  key_addr,
  input  word_t       key_words [8],
  output logic        busy,
  output logic        done,
  output word_t       out_words [8]
);
  localparam int unsigned NPASS = 11;

  typedef logic [127:0] lane_t;

  aes_mode_e  mode_q;
  lane_t      din_q [4];
  lane_t      r1 [4], r2 [4], r3 [4], r4 [4];
  logic [3:0] pass_q;     // 0 = initial pass, 1..10 = AES rounds
  logic [1:0] stage_q;    // stage holding the token in this cycle
  logic       run_q;

  logic haraka, aes, dec, last_pass, mix_now;
  assign dec       = (mode_q == AES_128_DEC);
  assign aes       = (mode_q == AES_128) || dec;
  assign haraka    = !aes;
  assign last_pass = (pass_q == 4'(NPASS - 1));
  assign mix_now   = haraka && (pass_q != 0) && !pass_q[0];  // after every 2nd AES round
  assign busy      = run_q;

  always_comb begin
    case (mode_q)
      AES_128, AES_128_DEC: key_addr = {2'b00, pass_q, 1'b0};
      HARAKA_256: key_addr = (pass_q == 0) ? 7'd0 : {1'b0, pass_q - 4'd1, 2'b00};
      default:    key_addr = (pass_q == 0) ? 7'd0 : {pass_q[3:0] - 4'd1, 3'b000};
    endcase
  end

  // unpack of 32-bit words: lo(a,b) = {b1,a1,b0,a0}, hi(a,b) = {b3,a3,b2,a2}
  function automatic lane_t unpack_lo(input lane_t a, input lane_t b);
    return {b[63:32], a[63:32], b[31:0], a[31:0]};
  endfunction
  function automatic lane_t unpack_hi(input lane_t a, input lane_t b);
    return {b[127:96], a[127:96], b[95:64], a[95:64]};
  endfunction

  function automatic void mix_layer(input logic four, input lane_t s [4], output lane_t o [4]);
    lane_t s0, s1, s2, s3, t;
    s0 = s[0]; s1 = s[1]; s2 = s[2]; s3 = s[3];
    if (four) begin
      t  = unpack_lo(s0, s1);
      s0 = unpack_hi(s0, s1);
      s1 = unpack_lo(s2, s3);
      s2 = unpack_hi(s2, s3);
      s3 = unpack_lo(s0, s2);
      s0 = unpack_hi(s0, s2);
      s2 = unpack_hi(s1, t);
      s1 = unpack_lo(s1, t);
    end else begin
      t  = unpack_lo(s0, s1);
      s1 = unpack_hi(s0, s1);
      s0 = t;
    end
    o[0] = s0; o[1] = s1; o[2] = s2; o[3] = s3;
  endfunction

  // stage combinational results
  lane_t s1_nx [4], s2_nx [4], s3_nx [4], s4_nx [4];
  lane_t key   [4];

  always_comb begin
    lane_t m [4];
    for (int i = 0; i < 4; i++) begin
      key[i]   = (pass_q == 0 && haraka) ? '0
               : aes ? ((i == 0) ? {key_words[1], key_words[0]} : '0)
               : {key_words[2*i+1], key_words[2*i]};
      s1_nx[i] = dec ? inv_sub_bytes(r4[i]) : sub_bytes(r4[i]);
      if (dec)
        s2_nx[i] = last_pass ? inv_shift_rows(r1[i]) : inv_mix_columns(inv_shift_rows(r1[i]));
      else
        s2_nx[i] = (aes && last_pass) ? shift_rows(r1[i]) : mix_columns(shift_rows(r1[i]));
      s3_nx[i] = ((pass_q == 0) ? din_q[i] : r2[i]) ^ key[i];
    end
    mix_layer(mode_q != HARAKA_256, r3, m);
    for (int i = 0; i < 4; i++) s4_nx[i] = mix_now ? m[i] : r3[i];
  end

  // result formatting after the last pass (Davies-Meyer and truncation)
  word_t res [8];
  always_comb begin
    lane_t f [4];
    for (int i = 0; i < 4; i++) f[i] = s4_nx[i] ^ ((mode_q == HARAKA_256 || mode_q == HARAKA_512) ? din_q[i] : '0);
    for (int i = 0; i < 8; i++) res[i] = '0;
    case (mode_q)
      AES_128, AES_128_DEC: begin res[0] = f[0][63:0]; res[1] = f[0][127:64]; end
      HARAKA_256: begin
        res[0] = f[0][63:0]; res[1] = f[0][127:64]; res[2] = f[1][63:0]; res[3] = f[1][127:64];
      end
      HARAKA_512: begin
        res[0] = f[0][127:64]; res[1] = f[1][127:64]; res[2] = f[2][63:0]; res[3] = f[3][63:0];
      end
      default:
        for (int i = 0; i < 4; i++) begin res[2*i] = f[i][63:0]; res[2*i+1] = f[i][127:64]; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= AES_128; pass_q <= '0; stage_q <= '0; run_q <= 1'b0; done <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        din_q[i] <= '0; r1[i] <= '0; r2[i] <= '0; r3[i] <= '0; r4[i] <= '0;
      end
      for (int i = 0; i < 8; i++) out_words[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        mode_q  <= mode;
        pass_q  <= '0;
        stage_q <= 2'd0;
        run_q   <= 1'b1;
        for (int i = 0; i < 4; i++) begin
          din_q[i] <= {in_words[2*i+1], in_words[2*i]};
          r4[i]    <= {in_words[2*i+1], in_words[2*i]};   // Load_input path into stage 1
        end
      end else if (run_q) begin
        stage_q <= stage_q + 2'd1;
        case (stage_q)
          2'd0: for (int i = 0; i < 4; i++) r1[i] <= s1_nx[i];
          2'd1: for (int i = 0; i < 4; i++) r2[i] <= s2_nx[i];
          2'd2: for (int i = 0; i < 4; i++) r3[i] <= s3_nx[i];
          default: begin
            for (int i = 0; i < 4; i++) r4[i] <= s4_nx[i];
            if (last_pass) begin
              for (int i = 0; i < 8; i++) out_words[i] <= res[i];
              run_q <= 1'b0;
              done  <= 1'b1;
            end else begin
              pass_q <= pass_q + 4'd1;
            end
          end
        endcase
      end
    end
  end
endmodule
