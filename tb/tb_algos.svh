// tb_algos.svh: algorithm-level known-answer tests built from the scalar
// crypto operations. Included inside a testbench module, which must provide
//   task automatic exec(input crypto_op_e op, input logic [63:0] rs1, rs2,
//                       input logic [3:0] rnum, input logic [1:0] bs,
//                       output logic [63:0] rd);
//   task automatic check(input bit cond, input string what);
// Everything the operations do not cover (XOR, AND, additions, loads) is
// done here, as the rest of the core would. Expected results are the
// published test vectors: FIPS-197 appendix C (AES-128/192/256), FIPS 180
// "abc" (SHA-256, SHA-512), GB/T 32905 "abc" (SM3), GB/T 32907 example 1
// (SM4).

// AES with an Nk-word key: FIPS-197 expansion (non-linear word step by
// aes64ks1i), encryption with aes64esm/aes64es, decryption with aes64im on
// the round keys and aes64dsm/aes64ds.
task automatic run_aes(input int nk, output int ops);
  logic [31:0]  w [60];
  logic [63:0]  lo, hi, nlo, nhi, t, ct_lo, ct_hi, key_lo[15], key_hi[15], dk_lo[15], dk_hi[15];
  logic [127:0] ct_exp;
  int nr;
  ops = 0;
  nr = nk + 6;
  for (int i = 0; i < nk; i++)
    for (int j = 0; j < 4; j++) w[i][8*j +: 8] = 8'(4*i + j);
  for (int i = nk; i < 4*(nr+1); i++) begin
    logic [31:0] temp;
    temp = w[i-1];
    if (i % nk == 0) begin
      exec(OP_AES64KS1I, {temp, 32'h0}, 64'h0, 4'(i/nk - 1), 2'd0, t); ops++;
      temp = t[31:0];
    end else if (nk > 6 && i % nk == 4) begin
      exec(OP_AES64KS1I, {temp, 32'h0}, 64'h0, 4'hA, 2'd0, t); ops++;
      temp = t[31:0];
    end
    w[i] = w[i-nk] ^ temp;
  end
  for (int r = 0; r <= nr; r++) begin
    key_lo[r] = {w[4*r+1], w[4*r]};
    key_hi[r] = {w[4*r+3], w[4*r+2]};
  end
  lo = 64'h7766_5544_3322_1100 ^ key_lo[0];
  hi = 64'hFFEE_DDCC_BBAA_9988 ^ key_hi[0];
  for (int r = 1; r <= nr; r++) begin
    exec(r < nr ? OP_AES64ESM : OP_AES64ES, lo, hi, 4'h0, 2'd0, nlo); ops++;
    exec(r < nr ? OP_AES64ESM : OP_AES64ES, hi, lo, 4'h0, 2'd0, nhi); ops++;
    lo = nlo ^ key_lo[r];
    hi = nhi ^ key_hi[r];
  end
  case (nk)
    4:       ct_exp = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;
    6:       ct_exp = 128'hdda97ca4864cdfe06eaf70a0ec0d7191;
    default: ct_exp = 128'h8ea2b7ca516745bfeafc49904b496089;
  endcase
  for (int j = 0; j < 8; j++) begin
    ct_lo[8*j +: 8] = ct_exp[127 - 8*j -: 8];
    ct_hi[8*j +: 8] = ct_exp[63 - 8*j -: 8];
  end
  check(lo == ct_lo && hi == ct_hi, $sformatf("AES-%0d encrypt", 32*nk));
  // decryption: equivalent inverse cipher
  for (int r = 1; r < nr; r++) begin
    exec(OP_AES64IM, key_lo[r], 64'h0, 4'h0, 2'd0, dk_lo[r]); ops++;
    exec(OP_AES64IM, key_hi[r], 64'h0, 4'h0, 2'd0, dk_hi[r]); ops++;
  end
  lo ^= key_lo[nr];
  hi ^= key_hi[nr];
  for (int r = nr - 1; r >= 0; r--) begin
    exec(r > 0 ? OP_AES64DSM : OP_AES64DS, lo, hi, 4'h0, 2'd0, nlo); ops++;
    exec(r > 0 ? OP_AES64DSM : OP_AES64DS, hi, lo, 4'h0, 2'd0, nhi); ops++;
    lo = nlo ^ (r > 0 ? dk_lo[r] : key_lo[0]);
    hi = nhi ^ (r > 0 ? dk_hi[r] : key_hi[0]);
  end
  check(lo == 64'h7766_5544_3322_1100 && hi == 64'hFFEE_DDCC_BBAA_9988,
        $sformatf("AES-%0d decrypt", 32*nk));
endtask

task automatic run_sha256(output int ops);
  logic [31:0] wv [64];
  logic [31:0] hh [8];
  logic [31:0] a, b, c, d, e, f, g, h, t1, t2;
  logic [63:0] r0, r1;
  ops = 0;
  for (int i = 0; i < 16; i++) wv[i] = 0;
  wv[0] = 32'h6162_6380; wv[15] = 32'h18;
  for (int t = 16; t < 64; t++) begin
    exec(OP_SHA256SIG1, {32'h0, wv[t-2]}, 64'h0, 4'h0, 2'd0, r1); ops++;
    exec(OP_SHA256SIG0, {32'h0, wv[t-15]}, 64'h0, 4'h0, 2'd0, r0); ops++;
    check(r1[63:32] == {32{r1[31]}}, "sha256 sign extension");
    wv[t] = r1[31:0] + wv[t-7] + r0[31:0] + wv[t-16];
  end
  for (int i = 0; i < 8; i++) hh[i] = sha256_h(i);
  {a, b, c, d, e, f, g, h} = {hh[0], hh[1], hh[2], hh[3], hh[4], hh[5], hh[6], hh[7]};
  for (int t = 0; t < 64; t++) begin
    exec(OP_SHA256SUM1, {32'h0, e}, 64'h0, 4'h0, 2'd0, r1); ops++;
    exec(OP_SHA256SUM0, {32'h0, a}, 64'h0, 4'h0, 2'd0, r0); ops++;
    t1 = h + r1[31:0] + ((e & f) ^ (~e & g)) + sha256_k(t) + wv[t];
    t2 = r0[31:0] + ((a & b) ^ (a & c) ^ (b & c));
    h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
  end
  check({hh[0]+a, hh[1]+b, hh[2]+c, hh[3]+d, hh[4]+e, hh[5]+f, hh[6]+g, hh[7]+h} ==
        256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "SHA-256 abc");
endtask

task automatic run_sha512(output int ops);
  logic [63:0] wv [80];
  logic [63:0] hh [8];
  logic [63:0] a, b, c, d, e, f, g, h, t1, t2, r0, r1;
  ops = 0;
  for (int i = 0; i < 16; i++) wv[i] = 0;
  wv[0] = 64'h6162_6380_0000_0000; wv[15] = 64'h18;
  for (int t = 16; t < 80; t++) begin
    exec(OP_SHA512SIG1, wv[t-2], 64'h0, 4'h0, 2'd0, r1); ops++;
    exec(OP_SHA512SIG0, wv[t-15], 64'h0, 4'h0, 2'd0, r0); ops++;
    wv[t] = r1 + wv[t-7] + r0 + wv[t-16];
  end
  for (int i = 0; i < 8; i++) hh[i] = sha512_h(i);
  {a, b, c, d, e, f, g, h} = {hh[0], hh[1], hh[2], hh[3], hh[4], hh[5], hh[6], hh[7]};
  for (int t = 0; t < 80; t++) begin
    exec(OP_SHA512SUM1, e, 64'h0, 4'h0, 2'd0, r1); ops++;
    exec(OP_SHA512SUM0, a, 64'h0, 4'h0, 2'd0, r0); ops++;
    t1 = h + r1 + ((e & f) ^ (~e & g)) + sha512_k(t) + wv[t];
    t2 = r0 + ((a & b) ^ (a & c) ^ (b & c));
    h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
  end
  check({hh[0]+a, hh[1]+b, hh[2]+c, hh[3]+d} ==
        256'hddaf35a193617abacc417349ae20413112e6fa4e89a97ea20a9eeee64b55d39a &&
        {hh[4]+e, hh[5]+f, hh[6]+g, hh[7]+h} ==
        256'h2192992a274fc1a836ba3c23a3feebbd454d4423643ce80e2a9ac94fa54ca49f, "SHA-512 abc");
endtask

task automatic run_sm3(output int ops);
  logic [31:0] wv [68];
  logic [31:0] wp [64];
  logic [31:0] v [8];
  logic [31:0] a, b, c, d, e, f, g, h, ss1, ss2, tt1, tt2, tj, ff, gg;
  logic [63:0] r;
  ops = 0;
  for (int i = 0; i < 16; i++) wv[i] = 0;
  wv[0] = 32'h6162_6380; wv[15] = 32'h18;
  for (int j = 16; j < 68; j++) begin
    exec(OP_SM3P1, {32'h0, wv[j-16] ^ wv[j-9] ^ rol32(wv[j-3], 15)}, 64'h0, 4'h0, 2'd0, r); ops++;
    wv[j] = r[31:0] ^ rol32(wv[j-13], 7) ^ wv[j-6];
  end
  for (int j = 0; j < 64; j++) wp[j] = wv[j] ^ wv[j+4];
  v = '{32'h7380166f, 32'h4914b2b9, 32'h172442d7, 32'hda8a0600,
        32'ha96f30bc, 32'h163138aa, 32'he38dee4d, 32'hb0fb0e4e};
  {a, b, c, d, e, f, g, h} = {v[0], v[1], v[2], v[3], v[4], v[5], v[6], v[7]};
  for (int j = 0; j < 64; j++) begin
    tj  = (j < 16) ? 32'h79cc4519 : 32'h7a879d8a;
    ss1 = rol32(rol32(a, 12) + e + rol32(tj, j % 32), 7);
    ss2 = ss1 ^ rol32(a, 12);
    ff  = (j < 16) ? (a ^ b ^ c) : ((a & b) | (a & c) | (b & c));
    gg  = (j < 16) ? (e ^ f ^ g) : ((e & f) | (~e & g));
    tt1 = ff + d + ss2 + wp[j];
    tt2 = gg + h + ss1 + wv[j];
    d = c; c = rol32(b, 9); b = a; a = tt1;
    h = g; g = rol32(f, 19); f = e;
    exec(OP_SM3P0, {32'h0, tt2}, 64'h0, 4'h0, 2'd0, r); ops++;
    e = r[31:0];
  end
  check({v[0]^a, v[1]^b, v[2]^c, v[3]^d, v[4]^e, v[5]^f, v[6]^g, v[7]^h} ==
        256'h66c7f0f462eeedd9d1f2d46bdc10e4e24167c4875cf2f7a2297da02b8f4ba8e0, "SM3 abc");
endtask

task automatic run_sm4(output int ops);
  logic [31:0] k [36];
  logic [31:0] x [36];
  logic [31:0] rk [32];
  logic [31:0] fk [4] = '{32'ha3b1bac6, 32'h56aa3350, 32'h677d9197, 32'hb27022dc};
  logic [31:0] mk [4] = '{32'h01234567, 32'h89abcdef, 32'hfedcba98, 32'h76543210};
  logic [63:0] acc;
  ops = 0;
  for (int i = 0; i < 4; i++) k[i] = mk[i] ^ fk[i];
  for (int i = 0; i < 32; i++) begin
    logic [31:0] ck, s;
    for (int j = 0; j < 4; j++) ck[31 - 8*j -: 8] = 8'(((4*i + j) * 7) % 256);
    s = k[i+1] ^ k[i+2] ^ k[i+3] ^ ck;
    acc = {32'h0, k[i]};
    for (int bs = 0; bs < 4; bs++) begin
      exec(OP_SM4KS, acc, {32'h0, s}, 4'h0, 2'(bs), acc); ops++;
    end
    k[i+4] = acc[31:0];
    rk[i] = acc[31:0];
  end
  for (int i = 0; i < 4; i++) x[i] = mk[i];
  for (int i = 0; i < 32; i++) begin
    logic [31:0] s;
    s = x[i+1] ^ x[i+2] ^ x[i+3] ^ rk[i];
    acc = {32'h0, x[i]};
    for (int bs = 0; bs < 4; bs++) begin
      exec(OP_SM4ED, acc, {32'h0, s}, 4'h0, 2'(bs), acc); ops++;
    end
    x[i+4] = acc[31:0];
  end
  check({x[35], x[34], x[33], x[32]} == 128'h681edf34d206965e86b3e94f536e4246, "SM4 encrypt");
endtask
