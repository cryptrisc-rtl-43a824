// crypto_decoder: recognises the RV64 scalar cryptography instructions.
//
// Purely combinational. A 32-bit instruction word goes in; a crypto_dec_t
// comes out naming the operation, the register indices, whether rs2 is read,
// the aes64ks1i round number and the sm4 byte select. Any other instruction
// (or a reserved aes64ks1i round number above 0xA) gives is_crypto = 0 and
// op = OP_NONE; such instructions belong to the rest of the core.
//
// The set of instructions is the one listed for CryptRISC (AES round, key
// schedule and InvMixColumns steps, SHA-256/512 sigma and sum functions,
// SM3 P0/P1, SM4 ED/KS). Their bit encodings follow the ratified RISC-V
// Scalar Cryptography v1.0.1 specification (RV64 forms):
//   OP      (0110011), funct3 000: aes64es 0011001, aes64esm 0011011,
//           aes64ds 0011101, aes64dsm 0011111, aes64ks2 0111111,
//           sm4ed bs,11000, sm4ks bs,11010 (bs = bits 31:30)
//   OP-IMM  (0010011), funct3 001: imm[11:0] 0x300 aes64im,
//           0x100..0x103 sha256sum0/sum1/sig0/sig1,
//           0x104..0x107 sha512sum0/sum1/sig0/sig1, 0x108/0x109 sm3p0/p1,
//           imm[11:4] 0x31 aes64ks1i with rnum = imm[3:0].
//
// The register indices, rnum and bs are bit fields of the instruction word
// and leave the decoder as plain wires; only is_crypto, op and uses_rs2 are
// decoded logic.
module crypto_decoder
  import cryptrisc_pkg::*;
(
  input  logic [31:0]  instr_i,
  output crypto_dec_t  dec_o
);

  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_OP_IMM = 7'b0010011;

  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [6:0]  funct7;
  logic [11:0] imm12;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct7 = instr_i[31:25];
  assign imm12  = instr_i[31:20];

  always_comb begin
    crypto_op_e op;
    logic       two_src;
    op      = OP_NONE;
    two_src = 1'b0;
    if (opcode == OPC_OP && funct3 == 3'b000) begin
      two_src = 1'b1;
      unique casez (funct7)
        7'b0011001: op = OP_AES64ES;
        7'b0011011: op = OP_AES64ESM;
        7'b0011101: op = OP_AES64DS;
        7'b0011111: op = OP_AES64DSM;
        7'b0111111: op = OP_AES64KS2;
        7'b??11000: op = OP_SM4ED;
        7'b??11010: op = OP_SM4KS;
        default:    op = OP_NONE;
      endcase
    end else if (opcode == OPC_OP_IMM && funct3 == 3'b001) begin
      unique casez (imm12)
        12'h300:        op = OP_AES64IM;
        12'h100:        op = OP_SHA256SUM0;
        12'h101:        op = OP_SHA256SUM1;
        12'h102:        op = OP_SHA256SIG0;
        12'h103:        op = OP_SHA256SIG1;
        12'h104:        op = OP_SHA512SUM0;
        12'h105:        op = OP_SHA512SUM1;
        12'h106:        op = OP_SHA512SIG0;
        12'h107:        op = OP_SHA512SIG1;
        12'h108:        op = OP_SM3P0;
        12'h109:        op = OP_SM3P1;
        12'b0011_0001_????: op = (imm12[3:0] <= 4'hA) ? OP_AES64KS1I : OP_NONE;
        default:        op = OP_NONE;
      endcase
    end
    dec_o           = '0;
    dec_o.op        = op;
    dec_o.is_crypto = (op != OP_NONE);
    dec_o.uses_rs2  = (op != OP_NONE) && two_src;
    dec_o.rs1       = instr_i[19:15];
    dec_o.rs2       = instr_i[24:20];
    dec_o.rd        = instr_i[11:7];
    dec_o.rnum      = instr_i[23:20];
    dec_o.bs        = instr_i[31:30];
  end

endmodule
