// tb_ref_pkg - independent reference models for the testbenches.
//
// Plain behavioural arithmetic written directly from the definitions, with
// no shared code with the RTL: modular arithmetic on wide integers, affine
// elliptic-curve addition and doubling, SHA-256 over a byte message, and
// AES-128 block encryption (FIPS-197), used to create ciphertext that the
// decryption hardware must undo.
package tb_ref_pkg;
  import kac_pkg::*;

  // ---------------- modular arithmetic ----------------
  function automatic fp_t addm(fp_t a, fp_t b, fp_t p);
    logic [FP_W:0] s = {1'b0, a} + {1'b0, b};
    return fp_t'(s % {1'b0, p});
  endfunction
  function automatic fp_t subm(fp_t a, fp_t b, fp_t p);
    logic [FP_W:0] s = {1'b0, a} + {1'b0, p} - {1'b0, b};
    return fp_t'(s % {1'b0, p});
  endfunction
  function automatic fp_t mulm(fp_t a, fp_t b, fp_t p);
    logic [2*FP_W-1:0] s = {{FP_W{1'b0}}, a} * {{FP_W{1'b0}}, b};
    return fp_t'(s % {{FP_W{1'b0}}, p});
  endfunction
  function automatic fp_t powm(fp_t a, fp_t e, fp_t p);
    fp_t r = 1;
    fp_t x = a;
    for (int i = 0; i < FP_W; i++) begin
      if (e[i]) r = mulm(r, x, p);
      x = mulm(x, x, p);
    end
    return r;
  endfunction
  function automatic fp_t invm(fp_t a, fp_t p);
    return powm(a, p - 2, p);
  endfunction
  function automatic fp_t rand_fp(fp_t p);
    logic [FP_W+31:0] r;
    for (int i = 0; i < FP_W/32 + 1; i++) r[i*32 +: 32] = $urandom;
    return fp_t'(r % {32'd0, p});
  endfunction

  // ---------------- affine curve y^2 = x^3 + 3 ----------------
  function automatic ec_affine_t ec_add(ec_affine_t a, ec_affine_t b, fp_t p);
    fp_t l = mulm(subm(b.y, a.y, p), invm(subm(b.x, a.x, p), p), p);
    ec_affine_t r;
    r.x = subm(subm(mulm(l, l, p), a.x, p), b.x, p);
    r.y = subm(mulm(l, subm(a.x, r.x, p), p), a.y, p);
    return r;
  endfunction
  function automatic ec_affine_t ec_dbl(ec_affine_t a, fp_t p);
    fp_t l = mulm(mulm(3, mulm(a.x, a.x, p), p), invm(addm(a.y, a.y, p), p), p);
    ec_affine_t r;
    r.x = subm(mulm(l, l, p), addm(a.x, a.x, p), p);
    r.y = subm(mulm(l, subm(a.x, r.x, p), p), a.y, p);
    return r;
  endfunction
  function automatic ec_affine_t ec_smul(fp_t k, ec_affine_t g, fp_t p);
    // k >= 1; plain double-and-add from the top set bit
    ec_affine_t r = g;
    int top = 0;
    for (int i = 0; i < FP_W; i++) if (k[i]) top = i;
    for (int i = top - 1; i >= 0; i--) begin
      r = ec_dbl(r, p);
      if (k[i]) r = ec_add(r, g, p);
    end
    return r;
  endfunction

  // ---------------- SHA-256 ----------------
  function automatic logic [31:0] rotr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [31:0] kconst(int i);
    logic [31:0] k [64] = '{
      32'h428a2f98,32'h71374491,32'hb5c0fbcf,32'he9b5dba5,32'h3956c25b,32'h59f111f1,32'h923f82a4,32'hab1c5ed5,
      32'hd807aa98,32'h12835b01,32'h243185be,32'h550c7dc3,32'h72be5d74,32'h80deb1fe,32'h9bdc06a7,32'hc19bf174,
      32'he49b69c1,32'hefbe4786,32'h0fc19dc6,32'h240ca1cc,32'h2de92c6f,32'h4a7484aa,32'h5cb0a9dc,32'h76f988da,
      32'h983e5152,32'ha831c66d,32'hb00327c8,32'hbf597fc7,32'hc6e00bf3,32'hd5a79147,32'h06ca6351,32'h14292967,
      32'h27b70a85,32'h2e1b2138,32'h4d2c6dfc,32'h53380d13,32'h650a7354,32'h766a0abb,32'h81c2c92e,32'h92722c85,
      32'ha2bfe8a1,32'ha81a664b,32'hc24b8b70,32'hc76c51a3,32'hd192e819,32'hd6990624,32'hf40e3585,32'h106aa070,
      32'h19a4c116,32'h1e376c08,32'h2748774c,32'h34b0bcb5,32'h391c0cb3,32'h4ed8aa4a,32'h5b9cca4f,32'h682e6ff3,
      32'h748f82ee,32'h78a5636f,32'h84c87814,32'h8cc70208,32'h90befffa,32'ha4506ceb,32'hbef9a3f7,32'hc67178f2};
    return k[i];
  endfunction
  // Hash of a message of nbytes bytes, msg[0] is the first byte.
  function automatic logic [255:0] sha256(input logic [7:0] msg [], input int nbytes);
    logic [31:0] h [8] = '{32'h6a09e667,32'hbb67ae85,32'h3c6ef372,32'ha54ff53a,
                           32'h510e527f,32'h9b05688c,32'h1f83d9ab,32'h5be0cd19};
    int total = ((nbytes + 9 + 63) / 64) * 64;
    logic [7:0] m [] = new[total];
    logic [63:0] bitlen = 64'(nbytes) * 8;
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, t1, t2;
    for (int i = 0; i < total; i++) m[i] = 8'h00;
    for (int i = 0; i < nbytes; i++) m[i] = msg[i];
    m[nbytes] = 8'h80;
    for (int i = 0; i < 8; i++) m[total - 1 - i] = bitlen[8*i +: 8];
    for (int blk = 0; blk < total / 64; blk++) begin
      for (int t = 0; t < 16; t++)
        w[t] = {m[blk*64 + 4*t], m[blk*64 + 4*t + 1], m[blk*64 + 4*t + 2], m[blk*64 + 4*t + 3]};
      for (int t = 16; t < 64; t++)
        w[t] = (rotr(w[t-2], 17) ^ rotr(w[t-2], 19) ^ (w[t-2] >> 10)) + w[t-7] +
               (rotr(w[t-15], 7) ^ rotr(w[t-15], 18) ^ (w[t-15] >> 3)) + w[t-16];
      a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4]; f = h[5]; g = h[6]; hh = h[7];
      for (int t = 0; t < 64; t++) begin
        t1 = hh + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + kconst(t) + w[t];
        t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
        hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e; h[5] += f; h[6] += g; h[7] += hh;
    end
    return {h[0], h[1], h[2], h[3], h[4], h[5], h[6], h[7]};
  endfunction
  // Hash of an F_p12 element, serialised coefficient 11 first, big-endian.
  function automatic logic [255:0] sha256_fp12(fp12_t g);
    logic [7:0] m [] = new[FP12_N * FP_W / 8];
    logic [FP12_N*FP_W-1:0] flat = g;
    for (int i = 0; i < FP12_N * FP_W / 8; i++) m[i] = flat[FP12_N*FP_W - 1 - 8*i -: 8];
    return sha256(m, FP12_N * FP_W / 8);
  endfunction

  // ---------------- AES-128 encryption ----------------
  function automatic logic [7:0] xt(logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h1b : 8'h00);
  endfunction
  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] r = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = xt(a);
    end
    return r;
  endfunction
  function automatic logic [7:0] sbox(logic [7:0] x);
    logic [7:0] inv = 0, s;
    if (x != 0) for (int c = 1; c < 256; c++) if (gmul(x, 8'(c)) == 8'h01) inv = 8'(c);
    s = inv;
    for (int i = 0; i < 8; i++)
      s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8] ^ ((8'h63 >> i) & 1);
    return s;
  endfunction
  // Block and key are big-endian byte strings (byte 0 in bits 127:120).
  function automatic aes_blk_t aes128_enc(aes_blk_t key, aes_blk_t pt);
    logic [7:0] st [16], k [16], t [16], rcon;
    logic [7:0] sb [256];
    for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
    for (int i = 0; i < 16; i++) begin
      st[i] = pt[127 - 8*i -: 8] ^ key[127 - 8*i -: 8];
      k[i] = key[127 - 8*i -: 8];
    end
    rcon = 8'h01;
    for (int r = 1; r <= 10; r++) begin
      // next round key
      k[0] ^= sb[k[13]] ^ rcon; k[1] ^= sb[k[14]]; k[2] ^= sb[k[15]]; k[3] ^= sb[k[12]];
      for (int i = 4; i < 16; i++) k[i] ^= k[i-4];
      rcon = xt(rcon);
      // SubBytes + ShiftRows (state byte i = row i%4, column i/4)
      for (int i = 0; i < 16; i++) t[i] = sb[st[((i/4 + i%4) % 4)*4 + i%4]];
      // MixColumns
      for (int c = 0; c < 4; c++) begin
        if (r != 10) begin
          st[4*c]   = gmul(t[4*c],2) ^ gmul(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          st[4*c+1] = t[4*c] ^ gmul(t[4*c+1],2) ^ gmul(t[4*c+2],3) ^ t[4*c+3];
          st[4*c+2] = t[4*c] ^ t[4*c+1] ^ gmul(t[4*c+2],2) ^ gmul(t[4*c+3],3);
          st[4*c+3] = gmul(t[4*c],3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul(t[4*c+3],2);
        end else begin
          for (int j = 0; j < 4; j++) st[4*c+j] = t[4*c+j];
        end
      end
      for (int i = 0; i < 16; i++) st[i] ^= k[i];
    end
    for (int i = 0; i < 16; i++) aes128_enc[127 - 8*i -: 8] = st[i];
  endfunction

  // ---------------- stand-ins for the pairing and F_p12 cores ----------------
  // Not a pairing: a fixed, deterministic mixing of the two points into
  // twelve F_p coefficients, so that the data path around the pairing can be
  // checked end to end. The F_p12 "product" is taken coefficient-wise.
  function automatic fp12_t model_pair(ec_affine_t a, ec_affine_t b);
    fp12_t r;
    for (int k = 0; k < FP12_N; k++)
      r[k] = addm(mulm(a.x, addm(b.x, fp_t'(k), BN_P), BN_P),
                  mulm(addm(a.y, fp_t'(2*k+1), BN_P), b.y, BN_P), BN_P);
    return r;
  endfunction
  function automatic fp12_t model_gtm(fp12_t a, fp12_t b);
    fp12_t r;
    for (int k = 0; k < FP12_N; k++) r[k] = mulm(a[k], b[k], BN_P);
    return r;
  endfunction

  // F_p12 = F_p[w] / (w^12 - 18 w^6 + 82): plain polynomial product, then
  // w^12 replaced by 18 w^6 - 82 from the top degree down.
  function automatic fp12_t fp12_mul_ref(fp12_t a, fp12_t b);
    fp_t c [23];
    fp12_t r;
    for (int n = 0; n < 23; n++) c[n] = 0;
    for (int x = 0; x < 12; x++)
      for (int z = 0; z < 12; z++) c[x+z] = addm(c[x+z], mulm(a[x], b[z], BN_P), BN_P);
    for (int d = 22; d >= 12; d--) begin
      c[d-6]  = addm(c[d-6], mulm(18, c[d], BN_P), BN_P);
      c[d-12] = subm(c[d-12], mulm(82, c[d], BN_P), BN_P);
    end
    for (int n = 0; n < 12; n++) r[n] = c[n];
    return r;
  endfunction

endpackage
