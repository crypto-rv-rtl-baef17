// crypto_rv_pkg: types, command encoding and pure functions shared by the Crypto-RV blocks.
//
// Holds the sizes of the two memories (1024x64 Data Memory, 128x64 internal Buffer, both
// from the paper), the command-word format of the sequencer (this design's own encoding:
// the paper does not publish its custom-instruction encoding), the mode enums of the three
// crypto units, and the round functions they share:
//   * AES SubBytes/ShiftRows/MixColumns and their inverses on a 128-bit lane, byte i at bits [8i+7:8i]
//     (byte order of the lane as it sits in two little-endian 64-bit buffer words).
//     The S-box table is computed at elaboration: S(x) = A * x^-1 + 0x63 in GF(2^8) with
//     the AES polynomial x^8+x^4+x^3+x+1 (x^-1 taken as x^254, 0 maps to 0); the inverse
//     table is the same table inverted.
//   * One Keccak-f[1600] round (theta, rho, pi, chi, iota); lane (x,y) at bits 64*(x+5y).
//     The 24 iota constants come from the standard LFSR x^8+x^6+x^5+x^4+1, computed at
//     elaboration.
//   * SHA-256/SHA-512/SM3 Boolean and sigma functions.
// Nothing here has state; every function is combinational.
package crypto_rv_pkg;

  localparam int DM_DEPTH  = 1024;  // Data Memory words (paper)
  localparam int DM_AW     = 10;
  localparam int BUF_DEPTH = 128;   // internal Buffer words (paper)
  localparam int BUF_AW    = 7;
  localparam int WORD_W    = 64;    // datapath width (paper)

  typedef logic [WORD_W-1:0] word_t;

  // ---------------- command word (own encoding, 32 bits as delivered over PIO) -------------
  typedef enum logic [3:0] {
    OP_HALT  = 4'd0,  // stop fetching, raise done
    OP_LOAD  = 4'd1,  // DM -> B : [27:18] dm addr, [17:11] b addr, [10:4] len-1
    OP_STORE = 4'd2,  // B -> DM : same fields
    OP_SHA2  = 4'd3,  // [27:26] sha2_mode, [25:19] state base, [18:12] msg base, [11:5] K base
    OP_SHA3  = 4'd4,  // [27:26] sha3_mode, [25] init, [24] absorb, [23:17] msg base,
                      // [16:10] out base, [9:5] words out
    OP_AES   = 4'd5,  // [27:25] aes_mode, [24:18] in base, [17:11] key/RC base, [10:4] out base
    OP_WAIT  = 4'd6   // [1] wait for the compute engine, [0] wait for the transfer engine
  } opcode_e;

  typedef enum logic [1:0] {SHA2_256 = 2'd0, SHA2_SM3 = 2'd1, SHA2_512 = 2'd2} sha2_mode_e;
  typedef enum logic [1:0] {SHA3_256 = 2'd0, SHAKE_128 = 2'd1, SHAKE_256 = 2'd2,
                            SHA3_512 = 2'd3} sha3_mode_e;
  typedef enum logic [2:0] {AES_128 = 3'd0, HARAKA_256 = 3'd1, HARAKA_512 = 3'd2,
                            HARAKA_512P = 3'd3, AES_128_DEC = 3'd4} aes_mode_e;

  // Sponge rate in 64-bit words per SHA3 mode (FIPS 202).
  function automatic int unsigned sha3_rate_words(sha3_mode_e m);
    case (m)
      SHAKE_128: return 21;  // 1344 bits
      SHA3_512:  return 9;   // 576 bits
      default:   return 17;  // 1088 bits for SHA3-256 and SHAKE-256
    endcase
  endfunction

  // ---------------- AES helpers ----------------
  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p = '0; aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = {aa[6:0], 1'b0} ^ (aa[7] ? 8'h1b : 8'h00);
    end
    return p;
  endfunction

  function automatic logic [2047:0] gen_sbox();
    logic [2047:0] t;
    logic [7:0] inv, x, s;
    for (int v = 0; v < 256; v++) begin
      x = 8'(v);
      inv = 8'h01;                       // x^254 by square-and-multiply
      for (int k = 7; k >= 0; k--) begin
        inv = gf_mul(inv, inv);
        if (((254 >> k) & 1) == 1) inv = gf_mul(inv, x);
      end
      if (v == 0) inv = 8'h00;
      for (int b = 0; b < 8; b++)
        s[b] = inv[b] ^ inv[(b+4)%8] ^ inv[(b+5)%8] ^ inv[(b+6)%8] ^ inv[(b+7)%8];
      t[8*v +: 8] = s ^ 8'h63;
    end
    return t;
  endfunction

  localparam logic [2047:0] SBOX = gen_sbox();

  // inverse S-box: the table SBOX read backwards
  function automatic logic [2047:0] gen_inv_sbox();
    logic [2047:0] t;
    for (int v = 0; v < 256; v++) t[8*SBOX[8*v +: 8] +: 8] = 8'(v);
    return t;
  endfunction

  localparam logic [2047:0] INV_SBOX = gen_inv_sbox();

  function automatic logic [127:0] inv_sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = INV_SBOX[8*s[8*i +: 8] +: 8];
    return o;
  endfunction

  // byte r + 4c of the result is byte r + 4((c-r) mod 4) of the input
  function automatic logic [127:0] inv_shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[8*(r+4*c) +: 8] = s[8*(r + 4*((c-r+4)%4)) +: 8];
    return o;
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = SBOX[8*s[8*i +: 8] +: 8];
    return o;
  endfunction

  // byte r + 4c of the result is byte r + 4((c+r) mod 4) of the input
  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[8*(r+4*c) +: 8] = s[8*(r + 4*((c+r)%4)) +: 8];
    return o;
  endfunction

  function automatic logic [7:0] xt(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[8*(4*c+0) +: 8]; a1 = s[8*(4*c+1) +: 8];
      a2 = s[8*(4*c+2) +: 8]; a3 = s[8*(4*c+3) +: 8];
      o[8*(4*c+0) +: 8] = xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3;
      o[8*(4*c+1) +: 8] = a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3;
      o[8*(4*c+2) +: 8] = a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3;
      o[8*(4*c+3) +: 8] = xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3);
    end
    return o;
  endfunction

  // columns multiplied by {0e, 0b, 0d, 09}
  function automatic logic [127:0] inv_mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a [4];
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 4; r++) a[r] = s[8*(4*c+r) +: 8];
      for (int r = 0; r < 4; r++)
        o[8*(4*c+r) +: 8] = gf_mul(a[r], 8'h0e) ^ gf_mul(a[(r+1)%4], 8'h0b)
                          ^ gf_mul(a[(r+2)%4], 8'h0d) ^ gf_mul(a[(r+3)%4], 8'h09);
    end
    return o;
  endfunction

  // ---------------- Keccak helpers ----------------
  function automatic logic [24*64-1:0] gen_keccak_rc();
    logic [24*64-1:0] t;
    logic [7:0] r;
    logic [63:0] c;
    r = 8'h01;
    for (int i = 0; i < 24; i++) begin
      c = '0;
      for (int j = 0; j < 7; j++) begin
        c[(1 << j) - 1] = r[0];
        r = r[7] ? ({r[6:0], 1'b0} ^ 8'h71) : {r[6:0], 1'b0};
      end
      t[64*i +: 64] = c;
    end
    return t;
  endfunction

  localparam logic [24*64-1:0] KECCAK_RC = gen_keccak_rc();

  // rho offsets for lane x+5y
  localparam int RHO [25] = '{ 0,  1, 62, 28, 27,
                              36, 44,  6, 55, 20,
                               3, 10, 43, 25, 39,
                              41, 45, 15, 21,  8,
                              18,  2, 61, 56, 14};

  function automatic logic [63:0] rotl64(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [1599:0] keccak_round(input logic [1599:0] a, input logic [63:0] rc);
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [63:0] b [25];
    logic [1599:0] o;
    for (int x = 0; x < 5; x++)
      c[x] = a[64*x +: 64] ^ a[64*(x+5) +: 64] ^ a[64*(x+10) +: 64] ^ a[64*(x+15) +: 64] ^ a[64*(x+20) +: 64];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl64(c[(x+1)%5], 1);
    // theta, rho and pi: B[y, 2x+3y] = rot(A[x,y] ^ D[x], r[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl64(a[64*(x+5*y) +: 64] ^ d[x], RHO[x+5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[64*(x+5*y) +: 64] = b[x+5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    o[63:0] = o[63:0] ^ rc;
    return o;
  endfunction

  // ---------------- SHA-2 / SM3 helpers ----------------
  function automatic logic [31:0] rotr32(input logic [31:0] v, input int n);
    return (v >> n) | (v << (32 - n));
  endfunction
  function automatic logic [31:0] rotl32(input logic [31:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (32 - n)));
  endfunction
  function automatic logic [63:0] rotr64(input logic [63:0] v, input int n);
    return (v >> n) | (v << (64 - n));
  endfunction

endpackage
