// aes64_unit: the AES part of the Crypto Functional Unit (RV64 AES
// instructions).
//
// The 128-bit AES state is held in two 64-bit registers, rs1 = columns 0-1
// (bytes 0..7) and rs2 = columns 2-3 (bytes 8..15), byte 0 in bits 7:0.
//   aes64es   ShiftRows then SubBytes, lower half of the new state
//   aes64esm  as aes64es, then MixColumns on both 32-bit columns
//   aes64ds   InvShiftRows then InvSubBytes
//   aes64dsm  as aes64ds, then InvMixColumns on both columns
//   aes64im   InvMixColumns on both 32-bit columns of rs1
//   aes64ks1i key schedule: SubWord(RotWord(rs1[63:32])) ^ Rcon[rnum],
//             duplicated in both halves; rnum = 0xA skips RotWord and Rcon
//   aes64ks2  {rs1[63:32]^rs2[31:0]^rs2[63:32], rs1[63:32]^rs2[31:0]}
// Semantics follow the ratified RISC-V scalar crypto specification.
// Combinational, one result per cycle; the S-boxes are computed from the
// GF(2^8) inverse (see cryptrisc_pkg) rather than stored.
module aes64_unit
  import cryptrisc_pkg::*;
(
  input  crypto_op_e        op_i,
  input  logic [3:0]        rnum_i,
  input  logic [XLEN-1:0]   rs1_i,
  input  logic [XLEN-1:0]   rs2_i,
  output logic [XLEN-1:0]   rd_o
);

  logic [7:0]  st [16];
  logic [63:0] sr_fwd, sr_inv, sub_fwd, sub_inv;
  logic [31:0] ks_word, ks_sub;
  logic [7:0]  rcon;

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      st[i]   = rs1_i[8*i +: 8];
      st[i+8] = rs2_i[8*i +: 8];
    end
    // byte r + 4c of the output takes byte r + 4((c +/- r) mod 4)
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < 4; r++) begin
        sr_fwd[8*(r+4*c) +: 8] = st[r + 4*((c + r) % 4)];
        sr_inv[8*(r+4*c) +: 8] = st[r + 4*((c - r + 4) % 4)];
      end
    for (int i = 0; i < 8; i++) begin
      sub_fwd[8*i +: 8] = aes_sbox(sr_fwd[8*i +: 8]);
      sub_inv[8*i +: 8] = aes_inv_sbox(sr_inv[8*i +: 8]);
    end
  end

  always_comb begin
    unique case (rnum_i)
      4'h0: rcon = 8'h01;  4'h1: rcon = 8'h02;  4'h2: rcon = 8'h04;
      4'h3: rcon = 8'h08;  4'h4: rcon = 8'h10;  4'h5: rcon = 8'h20;
      4'h6: rcon = 8'h40;  4'h7: rcon = 8'h80;  4'h8: rcon = 8'h1B;
      4'h9: rcon = 8'h36;  default: rcon = 8'h00;
    endcase
    ks_word = rs1_i[63:32];
    if (rnum_i != 4'hA) ks_word = {ks_word[7:0], ks_word[31:8]};   // RotWord
    for (int i = 0; i < 4; i++) ks_sub[8*i +: 8] = aes_sbox(ks_word[8*i +: 8]);
    ks_sub[7:0] = ks_sub[7:0] ^ rcon;
  end

  always_comb begin
    unique case (op_i)
      OP_AES64ES:   rd_o = sub_fwd;
      OP_AES64ESM:  rd_o = {aes_mixcol(sub_fwd[63:32]), aes_mixcol(sub_fwd[31:0])};
      OP_AES64DS:   rd_o = sub_inv;
      OP_AES64DSM:  rd_o = {aes_inv_mixcol(sub_inv[63:32]), aes_inv_mixcol(sub_inv[31:0])};
      OP_AES64IM:   rd_o = {aes_inv_mixcol(rs1_i[63:32]), aes_inv_mixcol(rs1_i[31:0])};
      OP_AES64KS1I: rd_o = {ks_sub, ks_sub};
      OP_AES64KS2:  rd_o = {rs1_i[63:32] ^ rs2_i[31:0] ^ rs2_i[63:32],
                            rs1_i[63:32] ^ rs2_i[31:0]};
      default:      rd_o = '0;
    endcase
  end

endmodule
