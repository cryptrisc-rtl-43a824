// tb_ref_pkg: reference models used by the testbenches.
//
// Everything here is written differently from the RTL so that a shared
// mistake is unlikely: GF(2^8) products are carry-less multiplications
// followed by long division, inverses are found by exhaustive search, the
// AES S-box uses the rotation form of the affine map, inverse S-boxes are
// found by inverting the forward table, ShiftRows works on a 4x4 row/column
// matrix and MixColumns is a matrix product. ref_init() must be called once
// before the tables are used. ref_exec() gives the architectural result of
// any crypto operation.
package tb_ref_pkg;
  import cryptrisc_pkg::*;

  byte unsigned aes_t [256];
  byte unsigned aes_it[256];
  byte unsigned sm4_t [256];
  bit           ready = 0;

  function automatic byte unsigned rmul(byte unsigned a, byte unsigned b, int unsigned poly9);
    int unsigned p;
    p = 0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= (int'(a) << i);
    for (int i = 14; i >= 8; i--) if (p[i]) p ^= (poly9 << (i - 8));
    return byte'(p);
  endfunction

  function automatic byte unsigned rinv(byte unsigned a, int unsigned poly9);
    if (a == 0) return 0;
    for (int b = 1; b < 256; b++) if (rmul(a, byte'(b), poly9) == 1) return byte'(b);
    return 0;
  endfunction

  function automatic byte unsigned rotl8(byte unsigned x, int n);
    return byte'((x << n) | (x >> (8 - n)));
  endfunction

  function automatic void ref_init();
    byte unsigned b, m, r;
    for (int x = 0; x < 256; x++) begin
      b = rinv(byte'(x), 'h11B);
      aes_t[x] = b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
    end
    for (int x = 0; x < 256; x++) aes_it[aes_t[x]] = byte'(x);
    // SM4: circulant matrix with first row 0xD3 (MSB-first), constant 0xD3
    for (int x = 0; x < 256; x++) begin
      m = 0;
      for (int i = 0; i < 8; i++) m[7-i] = ^(rotr8(8'hD3, i) & byte'(x));
      m = rinv(m ^ 8'hD3, 'h1F5);
      r = 0;
      for (int i = 0; i < 8; i++) r[7-i] = ^(rotr8(8'hD3, i) & m);
      sm4_t[x] = r ^ 8'hD3;
    end
    ready = 1;
  endfunction

  function automatic byte unsigned rotr8(byte unsigned x, int n);
    return byte'((x >> n) | (x << (8 - n)));
  endfunction

  function automatic logic [31:0] rol32(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction
  function automatic logic [31:0] ror32(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [63:0] ror64(logic [63:0] x, int n);
    return (x >> n) | (x << (64 - n));
  endfunction
  function automatic logic [63:0] sext32(logic [31:0] x);
    return {{32{x[31]}}, x};
  endfunction

  // column c as 4 bytes, row 0 first
  function automatic logic [31:0] ref_mix(logic [31:0] col, bit inverse);
    byte unsigned m [4][4];
    byte unsigned in_b [4];
    logic [31:0] o;
    byte unsigned fwd_row [4] = '{2, 3, 1, 1};
    byte unsigned inv_row [4] = '{14, 11, 13, 9};
    for (int i = 0; i < 4; i++) in_b[i] = col[8*i +: 8];
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        m[r][c] = inverse ? inv_row[(c - r + 4) % 4] : fwd_row[(c - r + 4) % 4];
    for (int r = 0; r < 4; r++) begin
      byte unsigned acc;
      acc = 0;
      for (int c = 0; c < 4; c++) acc ^= rmul(m[r][c], in_b[c], 'h11B);
      o[8*r +: 8] = acc;
    end
    return o;
  endfunction

  function automatic logic [63:0] ref_exec(crypto_op_e op, logic [63:0] rs1, logic [63:0] rs2,
                                           logic [3:0] rnum, logic [1:0] bs);
    byte unsigned s [4][4];
    byte unsigned t [4][4];
    logic [63:0] half;
    logic [31:0] w, x, y;
    byte unsigned rc [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40, 8'h80, 8'h1B, 8'h36};
    if (!ready) ref_init();
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        s[r][c] = (c < 2) ? rs1[8*(r + 4*c) +: 8] : rs2[8*(r + 4*(c-2)) +: 8];
    case (op)
      OP_AES64ES, OP_AES64ESM, OP_AES64DS, OP_AES64DSM: begin
        bit enc;
        enc = op inside {OP_AES64ES, OP_AES64ESM};
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++)
            t[r][c] = enc ? aes_t[s[r][(c + r) % 4]] : aes_it[s[r][(c - r + 4) % 4]];
        for (int c = 0; c < 2; c++)
          for (int r = 0; r < 4; r++) half[8*(r + 4*c) +: 8] = t[r][c];
        if (op == OP_AES64ESM) half = {ref_mix(half[63:32], 0), ref_mix(half[31:0], 0)};
        if (op == OP_AES64DSM) half = {ref_mix(half[63:32], 1), ref_mix(half[31:0], 1)};
        return half;
      end
      OP_AES64IM:  return {ref_mix(rs1[63:32], 1), ref_mix(rs1[31:0], 1)};
      OP_AES64KS1I: begin
        w = rs1[63:32];
        if (rnum != 4'hA) w = ror32(w, 8);
        for (int i = 0; i < 4; i++) x[8*i +: 8] = aes_t[w[8*i +: 8]];
        if (rnum < 4'hA) x[7:0] ^= rc[rnum];
        return {x, x};
      end
      OP_AES64KS2: begin
        w = rs1[63:32] ^ rs2[31:0];
        return {w ^ rs2[63:32], w};
      end
      OP_SHA256SIG0: return sext32(ror32(rs1[31:0], 7) ^ ror32(rs1[31:0], 18) ^ (rs1[31:0] >> 3));
      OP_SHA256SIG1: return sext32(ror32(rs1[31:0], 17) ^ ror32(rs1[31:0], 19) ^ (rs1[31:0] >> 10));
      OP_SHA256SUM0: return sext32(ror32(rs1[31:0], 2) ^ ror32(rs1[31:0], 13) ^ ror32(rs1[31:0], 22));
      OP_SHA256SUM1: return sext32(ror32(rs1[31:0], 6) ^ ror32(rs1[31:0], 11) ^ ror32(rs1[31:0], 25));
      OP_SHA512SIG0: return ror64(rs1, 1) ^ ror64(rs1, 8) ^ (rs1 >> 7);
      OP_SHA512SIG1: return ror64(rs1, 19) ^ ror64(rs1, 61) ^ (rs1 >> 6);
      OP_SHA512SUM0: return ror64(rs1, 28) ^ ror64(rs1, 34) ^ ror64(rs1, 39);
      OP_SHA512SUM1: return ror64(rs1, 14) ^ ror64(rs1, 18) ^ ror64(rs1, 41);
      OP_SM3P0: return sext32(rs1[31:0] ^ rol32(rs1[31:0], 9) ^ rol32(rs1[31:0], 17));
      OP_SM3P1: return sext32(rs1[31:0] ^ rol32(rs1[31:0], 15) ^ rol32(rs1[31:0], 23));
      OP_SM4ED, OP_SM4KS: begin
        x = {24'h0, sm4_t[rs2[8*bs +: 8]]};
        if (op == OP_SM4ED)
          y = x ^ rol32(x, 2) ^ rol32(x, 10) ^ rol32(x, 18) ^ rol32(x, 24);
        else
          y = x ^ rol32(x, 13) ^ rol32(x, 23);
        if (bs != 0) y = rol32(y, 8 * int'(bs));
        return sext32(y ^ rs1[31:0]);
      end
      default: return '0;
    endcase
  endfunction

  // RV64 encodings, built field by field
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f7, rs2, rs1, 3'b000, rd, 7'b0110011};
  endfunction
  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1, logic [4:0] rd);
    return {imm, rs1, 3'b001, rd, 7'b0010011};
  endfunction

  function automatic logic [31:0] encode(crypto_op_e op, logic [4:0] rd, logic [4:0] rs1,
                                         logic [4:0] rs2, logic [3:0] rnum, logic [1:0] bs);
    case (op)
      OP_AES64ES:    return enc_r(7'b0011001, rs2, rs1, rd);
      OP_AES64ESM:   return enc_r(7'b0011011, rs2, rs1, rd);
      OP_AES64DS:    return enc_r(7'b0011101, rs2, rs1, rd);
      OP_AES64DSM:   return enc_r(7'b0011111, rs2, rs1, rd);
      OP_AES64KS2:   return enc_r(7'b0111111, rs2, rs1, rd);
      OP_SM4ED:      return enc_r({bs, 5'b11000}, rs2, rs1, rd);
      OP_SM4KS:      return enc_r({bs, 5'b11010}, rs2, rs1, rd);
      OP_AES64IM:    return enc_i(12'h300, rs1, rd);
      OP_AES64KS1I:  return enc_i({8'h31, rnum}, rs1, rd);
      OP_SHA256SUM0: return enc_i(12'h100, rs1, rd);
      OP_SHA256SUM1: return enc_i(12'h101, rs1, rd);
      OP_SHA256SIG0: return enc_i(12'h102, rs1, rd);
      OP_SHA256SIG1: return enc_i(12'h103, rs1, rd);
      OP_SHA512SUM0: return enc_i(12'h104, rs1, rd);
      OP_SHA512SUM1: return enc_i(12'h105, rs1, rd);
      OP_SHA512SIG0: return enc_i(12'h106, rs1, rd);
      OP_SHA512SIG1: return enc_i(12'h107, rs1, rd);
      OP_SM3P0:      return enc_i(12'h108, rs1, rd);
      OP_SM3P1:      return enc_i(12'h109, rs1, rd);
      default:       return {7'b0000000, rs2, rs1, 3'b000, rd, 7'b0110011}; // add
    endcase
  endfunction

  function automatic bit op_uses_rs2(crypto_op_e op);
    return op inside {OP_AES64ES, OP_AES64ESM, OP_AES64DS, OP_AES64DSM, OP_AES64KS2,
                      OP_SM4ED, OP_SM4KS};
  endfunction

  // Field tag and masking mode as published (Tables 2 and 3)
  function automatic field_tag_e ref_tag(crypto_op_e op);
    if (op inside {OP_AES64ES, OP_AES64ESM, OP_AES64DS, OP_AES64DSM, OP_AES64IM,
                   OP_AES64KS1I, OP_AES64KS2, OP_SM4ED, OP_SM4KS}) return FIELD_GF2N;
    if (op inside {OP_SM3P0, OP_SHA256SIG0, OP_SHA256SIG1, OP_SHA512SIG0, OP_SHA512SIG1})
      return FIELD_GF2;
    if (op inside {OP_SM3P1, OP_SHA256SUM0, OP_SHA256SUM1, OP_SHA512SUM0, OP_SHA512SUM1})
      return FIELD_Z2N;
    return FIELD_NONE;
  endfunction

  function automatic logic [1:0] ref_mode(field_tag_e t);
    case (t)
      FIELD_GF2:  return 2'b01;
      FIELD_GF2N: return 2'b10;
      FIELD_Z2N:  return 2'b11;
      default:    return 2'b00;
    endcase
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom, $urandom};
  endfunction

  // ------------------------------------------------------ hash constants
  // Integer roots on 256-bit numbers, used to derive the SHA-2 constants
  // (fractional parts of square and cube roots of the first primes).
  function automatic logic [255:0] iroot(logic [255:0] n, int k);
    logic [255:0] lo, hi, mid, p;
    lo = 0; hi = 256'(1) << ((256 + k - 1) / k);
    while (hi - lo > 1) begin
      mid = (lo + hi) >> 1;
      p = (k == 2) ? mid * mid : mid * mid * mid;
      if (p <= n) lo = mid; else hi = mid;
    end
    return lo;
  endfunction

  function automatic int nth_prime(int idx);
    int n, c;
    n = 1; c = -1;
    while (c < idx) begin
      bit is_p;
      n++;
      is_p = 1;
      for (int d = 2; d * d <= n; d++) if (n % d == 0) is_p = 0;
      if (is_p) c++;
    end
    return n;
  endfunction

  // SHA-256: K = frac(cbrt(p)) * 2^32, H0 = frac(sqrt(p)) * 2^32
  function automatic logic [31:0] sha256_k(int i);
    logic [255:0] r = iroot(256'(nth_prime(i)) << 96, 3);
    return r[31:0];
  endfunction
  function automatic logic [31:0] sha256_h(int i);
    logic [255:0] r = iroot(256'(nth_prime(i)) << 64, 2);
    return r[31:0];
  endfunction
  function automatic logic [63:0] sha512_k(int i);
    logic [255:0] r = iroot(256'(nth_prime(i)) << 192, 3);
    return r[63:0];
  endfunction
  function automatic logic [63:0] sha512_h(int i);
    logic [255:0] r = iroot(256'(nth_prime(i)) << 128, 2);
    return r[63:0];
  endfunction

  // One masking layer and its inverse, written out per domain.
  function automatic logic [63:0] ref_layer(logic [1:0] mode, logic [63:0] x,
                                            logic [63:0] ra, logic [63:0] rb);
    logic [63:0] y;
    case (mode)
      2'b01: y = x ^ rb;
      2'b11: y = x + rb;
      2'b10: for (int j = 0; j < 8; j++) begin
               byte unsigned aa = ra[8*j +: 8];
               if (aa == 0) aa = 1;
               y[8*j +: 8] = rmul(aa, x[8*j +: 8], 'h11B) ^ rb[8*j +: 8];
             end
      default: y = x;
    endcase
    return y;
  endfunction

  function automatic logic [63:0] ref_unlayer(logic [1:0] mode, logic [63:0] y,
                                              logic [63:0] ra, logic [63:0] rb);
    logic [63:0] x;
    case (mode)
      2'b01: x = y ^ rb;
      2'b11: x = y - rb;
      2'b10: for (int j = 0; j < 8; j++)
               x[8*j +: 8] = rmul(rinv(ra[8*j +: 8], 'h11B), y[8*j +: 8] ^ rb[8*j +: 8], 'h11B);
      default: x = y;
    endcase
    return x;
  endfunction

endpackage
