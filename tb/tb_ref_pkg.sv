// tb_ref_pkg: behavioural reference models for the testbenches.
//
// Written independently of the RTL: the AES S-box is found by searching for
// multiplicative inverses, the SHA-256 constants are computed from cube and
// square roots of primes with real arithmetic, and AES works on byte arrays.
// Also holds the MAC definition used by the design,
//   MAC = AES_key(H[255:128] ^ H[127:0])[127:64],  H = SHA-256(message),
// and the CTR counter-block layout of the EPC.
package tb_ref_pkg;

  typedef logic [511:0] rline_t;
  typedef logic [7:0]   bytes16_t [16];

  function automatic logic [7:0] r_xt(logic [7:0] a);
    return (a << 1) ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] r_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] r = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = r_xt(a);
    end
    return r;
  endfunction

  function automatic logic [7:0] r_sbox(logic [7:0] x);
    logic [7:0] inv = 0, s;
    for (int c = 1; c < 256; c++) if (r_mul(x, 8'(c)) == 8'h01) inv = 8'(c);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  // SHA-256 constants from their definition.
  function automatic logic [31:0] r_frac32(real v);
    real f = v - $floor(v);
    return 32'($floor(f * 4294967296.0));
  endfunction

  logic [7:0]  SB [256];
  logic [31:0] KK [64];
  bit sb_init = 0;

  function automatic logic [31:0] r_k(int t);
    int n = 0, p = 1;
    while (n <= t) begin
      bit prime;
      p++;
      prime = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) prime = 0;
      if (prime) n++;
    end
    return r_frac32(real'(p) ** (1.0 / 3.0));
  endfunction

  function automatic void r_init();
    if (!sb_init) begin
      for (int i = 0; i < 256; i++) SB[i] = r_sbox(8'(i));
      for (int i = 0; i < 64; i++) KK[i] = r_k(i);
      sb_init = 1;
    end
  endfunction

  // AES-256 encryption of one 16-byte block (big-endian in a 128-bit vector).
  function automatic logic [127:0] ref_aes_enc(logic [255:0] key, logic [127:0] pt);
    logic [7:0] w [240];
    logic [7:0] s [16], t [16];
    logic [7:0] rc = 8'h01;
    logic [7:0] tmp [4];
    logic [127:0] out;
    r_init();
    for (int i = 0; i < 32; i++) w[i] = key[255 - 8*i -: 8];
    for (int i = 8; i < 60; i++) begin
      for (int j = 0; j < 4; j++) tmp[j] = w[4*(i-1) + j];
      if (i % 8 == 0) begin
        logic [7:0] t0 = tmp[0];
        tmp[0] = SB[tmp[1]] ^ rc; tmp[1] = SB[tmp[2]]; tmp[2] = SB[tmp[3]]; tmp[3] = SB[t0];
        rc = r_xt(rc);
      end else if (i % 8 == 4) begin
        for (int j = 0; j < 4; j++) tmp[j] = SB[tmp[j]];
      end
      for (int j = 0; j < 4; j++) w[4*i + j] = w[4*(i-8) + j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) s[i] = pt[127 - 8*i -: 8] ^ w[i];
    for (int r = 1; r <= 14; r++) begin
      for (int i = 0; i < 16; i++) s[i] = SB[s[i]];
      for (int c = 0; c < 4; c++) for (int row = 0; row < 4; row++) t[4*c + row] = s[4*((c + row) % 4) + row];
      if (r < 14)
        for (int c = 0; c < 4; c++) begin
          s[4*c]   = r_mul(t[4*c],2) ^ r_mul(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c] ^ r_mul(t[4*c+1],2) ^ r_mul(t[4*c+2],3) ^ t[4*c+3];
          s[4*c+2] = t[4*c] ^ t[4*c+1] ^ r_mul(t[4*c+2],2) ^ r_mul(t[4*c+3],3);
          s[4*c+3] = r_mul(t[4*c],3) ^ t[4*c+1] ^ t[4*c+2] ^ r_mul(t[4*c+3],2);
        end
      else s = t;
      for (int i = 0; i < 16; i++) s[i] ^= w[16*r + i];
    end
    for (int i = 0; i < 16; i++) out[127 - 8*i -: 8] = s[i];
    return out;
  endfunction



  function automatic logic [255:0] ref_h0();
    int pr [8] = '{2, 3, 5, 7, 11, 13, 17, 19};
    logic [255:0] h;
    for (int i = 0; i < 8; i++) h[255 - 32*i -: 32] = r_frac32($sqrt(real'(pr[i])));
    return h;
  endfunction

  function automatic logic [31:0] ror(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] ref_compress(logic [255:0] hin, rline_t blk);
    logic [31:0] w [64];
    logic [31:0] v [8];
    logic [31:0] t1, t2;
    logic [255:0] hout;
    r_init();
    for (int i = 0; i < 16; i++) w[i] = blk[511 - 32*i -: 32];
    for (int i = 16; i < 64; i++)
      w[i] = (ror(w[i-2],17) ^ ror(w[i-2],19) ^ (w[i-2] >> 10)) + w[i-7] +
             (ror(w[i-15],7) ^ ror(w[i-15],18) ^ (w[i-15] >> 3)) + w[i-16];
    for (int i = 0; i < 8; i++) v[i] = hin[255 - 32*i -: 32];
    for (int i = 0; i < 64; i++) begin
      t1 = v[7] + (ror(v[4],6) ^ ror(v[4],11) ^ ror(v[4],25)) + ((v[4] & v[5]) ^ (~v[4] & v[6])) + KK[i] + w[i];
      t2 = (ror(v[0],2) ^ ror(v[0],13) ^ ror(v[0],22)) + ((v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]));
      v[7] = v[6]; v[6] = v[5]; v[5] = v[4]; v[4] = v[3] + t1;
      v[3] = v[2]; v[2] = v[1]; v[1] = v[0]; v[0] = t1 + t2;
    end
    for (int i = 0; i < 8; i++) hout[255 - 32*i -: 32] = hin[255 - 32*i -: 32] + v[i];
    return hout;
  endfunction

  // SHA-256 of a message of whole 512-bit blocks.
  function automatic logic [255:0] ref_sha(rline_t msg []);
    logic [255:0] h = ref_h0();
    foreach (msg[i]) h = ref_compress(h, msg[i]);
    return ref_compress(h, {1'b1, 447'd0, 64'(msg.size()) * 64'd512});
  endfunction

  function automatic logic [63:0] ref_mac(rline_t msg [], logic [255:0] key);
    logic [255:0] h = ref_sha(msg);
    logic [127:0] c = ref_aes_enc(key, h[255:128] ^ h[127:0]);
    return c[127:64];
  endfunction

  // ECB on a 64-byte line (four 16-byte chunks, chunk 0 in bits [511:384]).
  function automatic rline_t ref_ecb(logic [255:0] key, rline_t p);
    rline_t c;
    for (int i = 0; i < 4; i++) c[511 - 128*i -: 128] = ref_aes_enc(key, p[511 - 128*i -: 128]);
    return c;
  endfunction

  function automatic rline_t ref_ctr(logic [255:0] key, logic [127:0] iv, rline_t p);
    rline_t c;
    for (int i = 0; i < 4; i++)
      c[511 - 128*i -: 128] = p[511 - 128*i -: 128] ^ ref_aes_enc(key, {iv[127:2], 2'(i)});
    return c;
  endfunction

  // EPC counter block: {frame, block, counter, zeros}.
  function automatic logic [127:0] ref_ctr_iv(logic [14:0] frame, logic [5:0] blk, logic [55:0] ctr);
    return {frame, blk, ctr, 51'd0};
  endfunction

endpackage
