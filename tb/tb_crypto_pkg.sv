// tb_crypto_pkg: stimulus generators and reference results shared by the Crypto-RV
// testbenches.
//
// Messages are generated, not stored: byte i of message (seed, n) is
// (seed + 13*i + i/8) mod 256. The functions below apply the standard paddings
// (SHA-2/SM3 Merkle-Damgard padding, SHA3 pad10*1 with domain bits 0x06 and SHAKE 0x1F)
// and return the words in the order the hardware expects: SHA-256/SM3 32-bit big-endian
// words, SHA-512 64-bit big-endian words, Keccak and AES/Haraka 64-bit little-endian words.
// The EXP_* constants are digests and ciphertexts of those messages computed by independent
// software (standard hash/cipher libraries, and a software Haraka v2 model using the
// round constants from rc_word()).
package tb_crypto_pkg;

  function automatic logic [7:0] msg_byte(input int seed, input int i);
    return 8'((seed + 13*i + (i >> 3)) & 255);
  endfunction

  // byte k of the Merkle-Damgard padded message (block 64 or 128 bytes)
  function automatic logic [7:0] md_byte(input int seed, input int n, input int blk, input int lenb, input int k);
    int total;
    longint unsigned bits;
    total = ((n + 1 + lenb + blk - 1) / blk) * blk;
    bits  = longint'(n) * 8;
    if (k < n) return msg_byte(seed, k);
    if (k == n) return 8'h80;
    if (k >= total - 8) return 8'(bits >> (8 * (total - 1 - k)));
    return 8'h00;
  endfunction

  // 32-bit big-endian word j of the padded message (SHA-256, SM3)
  function automatic logic [31:0] md_w32(input int seed, input int n, input int j);
    logic [31:0] w;
    for (int b = 0; b < 4; b++) w[31-8*b -: 8] = md_byte(seed, n, 64, 8, 4*j + b);
    return w;
  endfunction

  // 64-bit big-endian word j of the padded message (SHA-512)
  function automatic logic [63:0] md_w64(input int seed, input int n, input int j);
    logic [63:0] w;
    for (int b = 0; b < 8; b++) w[63-8*b -: 8] = md_byte(seed, n, 128, 16, 8*j + b);
    return w;
  endfunction

  // 64-bit little-endian word j of the pad10*1-padded Keccak input (rate in bytes)
  function automatic logic [63:0] sha3_w64(input int seed, input int n, input int rate,
                                           input logic [7:0] dom, input int j);
    logic [63:0] w;
    int total, k;
    logic [7:0] b;
    total = ((n + 1 + rate - 1) / rate) * rate;
    for (int q = 0; q < 8; q++) begin
      k = 8*j + q;
      b = (k < n) ? msg_byte(seed, k) : 8'h00;
      if (k == n) b = b | dom;
      if (k == total - 1) b = b | 8'h80;
      w[8*q +: 8] = b;
    end
    return w;
  endfunction

  // 64-bit little-endian word j of the raw message (AES / Haraka inputs)
  function automatic logic [63:0] raw_w64(input int seed, input int j);
    logic [63:0] w;
    for (int q = 0; q < 8; q++) w[8*q +: 8] = msg_byte(seed, 8*j + q);
    return w;
  endfunction

  // Haraka round-constant words: xorshift64 (13, 7, 17) from seed 0x1234567, word i
  function automatic logic [63:0] rc_word(input int i);
    logic [63:0] x;
    x = 64'h1234567;
    for (int k = 0; k <= i; k++) begin
      x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    end
    return x;
  endfunction

  // SM3 round constant T_j rotated left by j mod 32
  function automatic logic [31:0] sm3_t(input int j);
    logic [31:0] t;
    int r;
    t = (j < 16) ? 32'h79cc4519 : 32'h7a879d8a;
    r = j % 32;
    return (r == 0) ? t : ((t << r) | (t >> (32 - r)));
  endfunction

  localparam logic [31:0] IV256 [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                        32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
  localparam logic [31:0] IVSM3 [8] = '{32'h7380166f, 32'h4914b2b9, 32'h172442d7, 32'hda8a0600,
                                        32'ha96f30bc, 32'h163138aa, 32'he38dee4d, 32'hb0fb0e4e};
  localparam logic [63:0] IV512 [8] = '{64'h6a09e667f3bcc908, 64'hbb67ae8584caa73b,
                                        64'h3c6ef372fe94f82b, 64'ha54ff53a5f1d36f1,
                                        64'h510e527fade682d1, 64'h9b05688c2b3e6c1f,
                                        64'h1f83d9abfb41bd6b, 64'h5be0cd19137e2179};

  // ---- reference results (U: unit testbenches, T: end-to-end testbench) ----
  // SHA-256/SM3 entries pack lane 0 in [31:0] and lane 1 in [63:32].
  localparam logic [63:0] EXP_SHA256_U [8] = '{64'he4261ab44d6cd95a, 64'hfa18284fb3fd7206, 64'ha37459a98f1fe7d7, 64'h98b849d16ea47598, 64'h7123c8924e7516c5, 64'h856ee857b7717e72, 64'h4ac56bf45530fbd2, 64'h9f1f8ac4b0d5213f};
  localparam logic [63:0] EXP_SM3_U [8] = '{64'hb99ab28e103d785e, 64'hb576e38d289a59f9, 64'hb005a82c059ab20b, 64'h718e4bada639aa8e, 64'ha1bf69293f7c23b5, 64'ha06ee4310b039457, 64'ha0d345aaece704d1, 64'h77222e3bde82bdd4};
  localparam logic [63:0] EXP_SHA256_T [8] = '{64'h29b255271e72f128, 64'ha20ad6eedf9924b3, 64'h2316e07812f99239, 64'h642e433a0e2c9000, 64'hbe58cb0d8ae2a063, 64'h52e28815aa4494b2, 64'h5f5685a448882113, 64'h09e76364343fb114};
  localparam logic [63:0] EXP_SM3_T [8] = '{64'hfdfbd517d4290a2f, 64'h2db400112d2f3e1b, 64'ha850b63ea3fa081c, 64'h80cdf7240c2990d8, 64'hd41630a8db36c0ce, 64'h6c8a6f8b5b4edb22, 64'hbda9c5b750f29879, 64'he6ad84fb882b452b};
  localparam logic [63:0] EXP_SHA512_U [8] = '{64'h222f1522b43827b4, 64'h42096156884423d1, 64'hcfd45531a01b895d, 64'h12738b8d22dacc80, 64'hdc66e7c2e04ec135, 64'hfd3fd6e1a2cb3ead, 64'h4900b859beafc95f, 64'h2652632736edebc1};
  localparam logic [63:0] EXP_SHA512_T [8] = '{64'h0cff3e01fb9e2ec5, 64'hedb355212f4626a8, 64'ha1ab4afbd82ed9e6, 64'hbbe298184cb65215, 64'hdb0b74d3bab6d34d, 64'hd4f5f5128b653d78, 64'h20d75d7a2bf3aaad, 64'h9b89f61928f3311f};
  localparam logic [63:0] EXP_SHA3_256_U [4] = '{64'h69923a3de5f96ff6, 64'h5bf3af102cc83488, 64'hb69b801749733ba3, 64'h091b6c1b1b899c54};
  localparam logic [63:0] EXP_SHA3_256_T [4] = '{64'h333f8b47961f21e2, 64'h306f35ccc0a4653d, 64'h4eb371c474de1eca, 64'h87a7e2f8ec2f1380};
  localparam logic [63:0] EXP_SHAKE256_U [4] = '{64'h3f2ea892bd274b95, 64'hdc67945c1828a555, 64'h0d75756008a00295, 64'h9633cc75f61483ac};
  localparam logic [63:0] EXP_SHAKE128_T [42] = '{64'hb105c8deb464f638, 64'h6fb1521d2340349a, 64'h75c6930574899b03, 64'hfea0668b8c38b7a4, 64'h2d5bcc6a388a2f74, 64'h678a82987f5f229e, 64'h8e37eb633124edfe, 64'he36a23ab0e7d3ecd, 64'h44e18d62d638873b, 64'hd79c17a7e12e0ff1, 64'ha9434a2c2c81769c, 64'h563887cb5456a408, 64'hbaca2de9e8ddc9f4, 64'h8733495be028f6fd, 64'h1ceed2106e5fb62f, 64'hab1c59aab8df9085, 64'ha45e396fe6bdffa0, 64'h9d235f01aea7fe7f, 64'h7914a66e5fa24467, 64'h42db4673e4d9592a, 64'h0f6747c48b3e51ab, 64'he9d2a1e3c5a9d96d, 64'h47ab9d758438ad9a, 64'hc23397cad44922cd, 64'hc015120b1070719f, 64'h24badeea319c53bc, 64'hc609f05d7ca966eb, 64'h720eee16d88878ed, 64'h744d80399c97a06d, 64'h0166882a8ddcb24f, 64'h9d21ec24a5b0e9dc, 64'h7b7a4f32e20df236, 64'hda910f0e7018aee9, 64'h9f7f0763d894cae7, 64'h568ff091ef8e96d0, 64'h8a317434360124d5, 64'hc1f0636c434ebdbf, 64'h378fb9b6bb562c6b, 64'ha91a0792ccd718fd, 64'h0c7b027c486ce84c, 64'hf67f0640cc4cf792, 64'h808bad79757196ca};
  localparam logic [63:0] AES_RK_U [22] = '{64'h66594c3f3225180b, 64'hcfc2b5a89b8e8174, 64'h96f671e0f0af3ddf, 64'hc2ba453c0d78f094, 64'h8d7cb8531b8ac9b3, 64'h42be0dfb800448c7, 64'h99dadf3314a66760, 64'h5b609a0f19de97f4, 64'hfb4568e3629fb7d0, 64'hb9fb6518e29bff17, 64'h348cd06ecfc9b88d, 64'h6fec4a61d6172f79, 64'h14eda6152061767b, 64'had16c30dc2fa896c, 64'he3199700f7f43115, 64'h8cf5dd6121e31e6c, 64'hfb8940541890d754, 64'h569f8359da6a5e38, 64'h28a84cf7d3210ca3, 64'ha45d9196f2c212cf, 64'h6bc00ce343684014, 64'h3d5f8fba99021e2c};
  localparam logic [63:0] EXP_AES_U [2] = '{64'hc6bba3f04359f959, 64'hce1fcdf89f89bb90};
  localparam logic [63:0] AES_RK_T [22] = '{64'h675a4d403326190c, 64'hd0c3b6a99c8f8275, 64'h870c7a03e0563743, 64'hcb404edf1b83f876, 64'hf945446d7e493e6e, 64'h2986f2c4e2c6bc1b, 64'h9ba93e8e62ec7ae3, 64'h50e97051796f8295, 64'h28165a34b3bf64ba, 64'h0190a8f05179d8a1, 64'h17d55e5c3fc30468, 64'h473c2e0d46ac86fd, 64'hffb6b125e863ef79, 64'hfe2619d5b91a37d8, 64'h146ea9c8ebd818ed, 64'h535287c5ad749e10, 64'h595bb1b24d35187a, 64'ha77da867f42f2fa2, 64'h91325611c869e7a3, 64'hc260d1d4651d79b3, 64'h117e61ba804c37ab, 64'hb603c9dd74631809};
  localparam logic [63:0] EXP_AES_T [2] = '{64'he48077ba85168c7b, 64'hf03222b814c69451};
  // decryption key schedules of the same keys: RK10, InvMixColumns(RK9..RK1), RK0
  localparam logic [63:0] AES_DK_U [22] = '{64'h6bc00ce343684014, 64'h3d5f8fba99021e2c, 64'hfe2cec05e163845b, 64'h5bfa89d6e152c09e, 64'h1f4f685ec2f51b27, 64'hbaa849481f7e2c9b, 64'hddba7379195f91f0, 64'ha5d665d3003144c5, 64'hc4e5e289cf910113, 64'ha5e72116dd8b37bc, 64'h0b74e39a3c7e2d5c, 64'h786c16aa196ed535, 64'h370acec6427fb81f, 64'h6102c39f121a36af, 64'h757576d941864331, 64'h7318f5302510f869, 64'h34f335e8c7a5d851, 64'h56080d5950658eb0, 64'hf356edb995e839f9, 64'h066d83e96496bb58, 64'h66594c3f3225180b, 64'hcfc2b5a89b8e8174};
  localparam logic [63:0] AES_DK_T [22] = '{64'h117e61ba804c37ab, 64'hb603c9dd74631809, 64'h3e662a962eb9d0a2, 64'h4a310cd0f73694e7, 64'h10dffa34a628c753, 64'hbd079837c950be71, 64'hb6f73d67aac6ce64, 64'h74572646d98f4445, 64'h1c31f30338f305d3, 64'hadd862036f787922, 64'h24c2f6d001c60156, 64'hc2a01b2173498a21, 64'h2504f786c8aba011, 64'hb1e99100578b7cf1, 64'hedaf5797b4788259, 64'he662edf1728f8b77, 64'h59d7d5ce37c9b920, 64'h94ed66869f20dce0, 64'h6e1e6cee44fd0c77, 64'h0bcdba66c6f7092e, 64'h675a4d403326190c, 64'hd0c3b6a99c8f8275};
  localparam logic [63:0] EXP_H256_U [4] = '{64'hf2020dd1df122bd0, 64'h43fb0207ae11e2a0, 64'hec80e6e2943c92e7, 64'h9a0ad4955693601c};
  localparam logic [63:0] EXP_H512_U [4] = '{64'h344c53009701d7f1, 64'hfdb796ef556a5aa4, 64'hc6b629407fef3bd1, 64'hac9fdc55e85079ad};
  localparam logic [63:0] EXP_H512P_U [8] = '{64'h4337f47cee7415b7, 64'h766f6d94f5cb87bb, 64'h6792131b02424c56, 64'h4e8643e795c390b6, 64'h51e3f34a5961c3f8, 64'hbd27c56a66822a74, 64'hd1b0dfab6bc888b2, 64'h2e40b73cd2bcb83b};
  localparam logic [63:0] EXP_H256_T [4] = '{64'hcdb83213bf13dfb0, 64'haa1d5600439e00ab, 64'he4ad3d3dc435dfb4, 64'h6eed24337a206e92};
  localparam logic [63:0] EXP_H512_T [4] = '{64'ha5a9d4386a5902c3, 64'heb1ec899e4a7c7fc, 64'h5fe207ad83ac034b, 64'h31631912c7571a37};
  localparam logic [63:0] EXP_H512P_T [8] = '{64'hae219742acdbd4f0, 64'hdae6a9d6a211b861, 64'h83eab7bad7bfffc7, 64'h3accb44987e9aa33, 64'hf753291fd0f7142a, 64'hbe29b8444d9d7476, 64'h79b9536268e640a4, 64'h217fd90765ec2a63};
endpackage
