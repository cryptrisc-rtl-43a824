// cryptrisc_pkg: types, constants and arithmetic helpers shared by the
// CryptRISC crypto execution path.
//
// What is here:
//   * crypto_op_e    - the 19 RV64 scalar crypto operations the path executes
//                      (AES, SHA-256, SHA-512, SM3, SM4).
//   * field_tag_e    - symbolic field tags produced by the Field Detection
//                      Layer: GF(2) Boolean logic, GF(2^n) finite-field
//                      arithmetic, Z/2^nZ modular arithmetic, or none.
//   * mask_mode_e    - the 2-bit MASK_MODE code (00 none, 01 Boolean,
//                      10 affine/multiplicative, 11 arithmetic); these four
//                      codes are the published mapping.
//   * mask_meta_t    - MASK_MODE plus the 2-bit MASK_SHARES count that
//                      travel with each instruction from decode onward.
//   * mask_pair_t    - the (A, B) pair of one affine masking layer.
//   * GF(2^8) helpers (multiply, inverse), the AES and SM4 S-boxes and the
//     AES (Inv)MixColumns word functions, all pure combinational functions.
//
// The binary encodings of the field tags and the op enumeration are local
// choices; the S-boxes are computed, not tabled: AES as x^254 over
// GF(2^8)/0x11B followed by the FIPS-197 affine map, SM4 as
// M * inv(M * x ^ 0xD3) ^ 0xD3 over GF(2^8)/0x1F5 with M the circulant
// matrix whose first row is 0xD3.
package cryptrisc_pkg;

  localparam int XLEN       = 64;
  localparam int MAX_SHARES = 3;   // MASK_SHARES is a 2-bit field

  typedef enum logic [4:0] {
    OP_NONE       = 5'd0,
    OP_AES64ES    = 5'd1,
    OP_AES64ESM   = 5'd2,
    OP_AES64DS    = 5'd3,
    OP_AES64DSM   = 5'd4,
    OP_AES64IM    = 5'd5,
    OP_AES64KS1I  = 5'd6,
    OP_AES64KS2   = 5'd7,
    OP_SHA256SIG0 = 5'd8,
    OP_SHA256SIG1 = 5'd9,
    OP_SHA256SUM0 = 5'd10,
    OP_SHA256SUM1 = 5'd11,
    OP_SHA512SIG0 = 5'd12,
    OP_SHA512SIG1 = 5'd13,
    OP_SHA512SUM0 = 5'd14,
    OP_SHA512SUM1 = 5'd15,
    OP_SM3P0      = 5'd16,
    OP_SM3P1      = 5'd17,
    OP_SM4ED      = 5'd18,
    OP_SM4KS      = 5'd19
  } crypto_op_e;

  typedef enum logic [1:0] {
    FIELD_NONE = 2'd0,
    FIELD_GF2  = 2'd1,
    FIELD_GF2N = 2'd2,
    FIELD_Z2N  = 2'd3
  } field_tag_e;

  typedef enum logic [1:0] {
    MASK_NONE   = 2'b00,
    MASK_BOOL   = 2'b01,
    MASK_AFFINE = 2'b10,
    MASK_ARITH  = 2'b11
  } mask_mode_e;

  typedef struct packed {
    mask_mode_e  mode;
    logic [1:0]  shares;
  } mask_meta_t;

  typedef struct packed {
    logic        is_crypto;
    crypto_op_e  op;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        uses_rs2;
    logic [3:0]  rnum;     // aes64ks1i round number
    logic [1:0]  bs;       // sm4ed/sm4ks byte select
  } crypto_dec_t;

  typedef struct packed {
    logic [XLEN-1:0] a;    // multiplicative mask (affine mode, one byte per lane)
    logic [XLEN-1:0] b;    // additive mask
  } mask_pair_t;

  typedef mask_pair_t [MAX_SHARES-1:0] mask_set_t;

  // Operations whose function is linear over GF(2) (rotations, shifts, XOR,
  // sign extension): f(x ^ m) = f(x) ^ f(m).
  function automatic logic op_is_gf2_linear(crypto_op_e op);
    return op inside {OP_SHA256SIG0, OP_SHA256SIG1, OP_SHA256SUM0, OP_SHA256SUM1,
                      OP_SHA512SIG0, OP_SHA512SIG1, OP_SHA512SUM0, OP_SHA512SUM1,
                      OP_SM3P0, OP_SM3P1};
  endfunction

  // ---------------------------------------------------------------- GF(2^8)
  localparam logic [7:0] POLY_AES = 8'h1B;   // x^8+x^4+x^3+x+1, x^8 term implied
  localparam logic [7:0] POLY_SM4 = 8'hF5;   // x^8+x^7+x^6+x^5+x^4+x^2+1

  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b, logic [7:0] poly);
    logic [7:0] r;
    logic [7:0] x;
    r = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= x;
      x = x[7] ? ((x << 1) ^ poly) : (x << 1);
    end
    return r;
  endfunction

  // a^254 = a^-1 for a != 0, and 0 for a = 0.
  function automatic logic [7:0] gf_inv(logic [7:0] a, logic [7:0] poly);
    logic [7:0] a2, a3, a12, a15, a240, a252, a254;
    a2   = gf_mul(a, a, poly);
    a3   = gf_mul(a2, a, poly);
    a12  = gf_mul(gf_mul(a3, a3, poly), gf_mul(a3, a3, poly), poly);
    a15  = gf_mul(a12, a3, poly);
    a240 = a15;
    for (int i = 0; i < 4; i++) a240 = gf_mul(a240, a240, poly);
    a252 = gf_mul(a240, a12, poly);
    a254 = gf_mul(a252, a2, poly);
    return a254;
  endfunction

  // ---------------------------------------------------------------- AES
  function automatic logic [7:0] aes_affine(logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++)
      y[i] = x[i] ^ x[(i+4)%8] ^ x[(i+5)%8] ^ x[(i+6)%8] ^ x[(i+7)%8];
    return y ^ 8'h63;
  endfunction

  function automatic logic [7:0] aes_inv_affine(logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++)
      y[i] = x[(i+2)%8] ^ x[(i+5)%8] ^ x[(i+7)%8];
    return y ^ 8'h05;
  endfunction

  function automatic logic [7:0] aes_sbox(logic [7:0] x);
    return aes_affine(gf_inv(x, POLY_AES));
  endfunction

  function automatic logic [7:0] aes_inv_sbox(logic [7:0] x);
    return gf_inv(aes_inv_affine(x), POLY_AES);
  endfunction

  function automatic logic [7:0] xt(logic [7:0] x);
    return gf_mul(x, 8'h02, POLY_AES);
  endfunction

  // Column word {b3,b2,b1,b0}, b0 in bits 7:0 (row 0).
  function automatic logic [31:0] aes_mixcol(logic [31:0] c);
    logic [7:0] b [4];
    logic [7:0] o [4];
    for (int i = 0; i < 4; i++) b[i] = c[8*i +: 8];
    for (int i = 0; i < 4; i++)
      o[i] = xt(b[i]) ^ xt(b[(i+1)%4]) ^ b[(i+1)%4] ^ b[(i+2)%4] ^ b[(i+3)%4];
    return {o[3], o[2], o[1], o[0]};
  endfunction

  function automatic logic [31:0] aes_inv_mixcol(logic [31:0] c);
    logic [7:0] b [4];
    logic [7:0] o [4];
    for (int i = 0; i < 4; i++) b[i] = c[8*i +: 8];
    for (int i = 0; i < 4; i++)
      o[i] = gf_mul(b[i], 8'h0E, POLY_AES) ^ gf_mul(b[(i+1)%4], 8'h0B, POLY_AES) ^
             gf_mul(b[(i+2)%4], 8'h0D, POLY_AES) ^ gf_mul(b[(i+3)%4], 8'h09, POLY_AES);
    return {o[3], o[2], o[1], o[0]};
  endfunction

  // ---------------------------------------------------------------- SM4
  // y = M x over GF(2), M circulant with first row 0xD3 (bit 7 = MSB).
  function automatic logic [7:0] sm4_mat(logic [7:0] x);
    logic [7:0] y;
    logic [7:0] row;
    for (int i = 0; i < 8; i++) begin
      row = (8'hD3 >> i) | (8'hD3 << (8 - i));
      y[7-i] = ^(row & x);
    end
    return y;
  endfunction

  function automatic logic [7:0] sm4_sbox(logic [7:0] x);
    return sm4_mat(gf_inv(sm4_mat(x) ^ 8'hD3, POLY_SM4)) ^ 8'hD3;
  endfunction

  // ---------------------------------------------------------------- masks
  // One affine masking layer on a 64-bit word in the given domain.
  function automatic logic [XLEN-1:0] mask_apply(mask_mode_e mode, logic [XLEN-1:0] x,
                                                 mask_pair_t m);
    logic [XLEN-1:0] y;
    case (mode)
      MASK_BOOL:   y = x ^ m.b;
      MASK_ARITH:  y = x + m.b;
      MASK_AFFINE: for (int j = 0; j < XLEN/8; j++)
                     y[8*j +: 8] = gf_mul(m.a[8*j +: 8], x[8*j +: 8], POLY_AES) ^ m.b[8*j +: 8];
      default:     y = x;
    endcase
    return y;
  endfunction

  // Inverse of mask_apply.
  function automatic logic [XLEN-1:0] mask_remove(mask_mode_e mode, logic [XLEN-1:0] y,
                                                  mask_pair_t m);
    logic [XLEN-1:0] x;
    case (mode)
      MASK_BOOL:   x = y ^ m.b;
      MASK_ARITH:  x = y - m.b;
      MASK_AFFINE: for (int j = 0; j < XLEN/8; j++)
                     x[8*j +: 8] = gf_mul(gf_inv(m.a[8*j +: 8], POLY_AES),
                                          y[8*j +: 8] ^ m.b[8*j +: 8], POLY_AES);
      default:     x = y;
    endcase
    return x;
  endfunction

endpackage
