// crypto_functional_unit (CFU): executes one scalar crypto instruction per
// cycle on the masked operands delivered by the Masking Control Unit.
//
// It holds the five algorithm submodules (aes64_unit, sha256_unit,
// sha512_unit, sm3_unit, sm4_unit) and selects the result by opcode. How the
// masked operands are turned into a correct result depends on the mask mode:
//   * Boolean mask on a GF(2)-linear function (SHA-256/512 sigma and sum,
//     SM3 P0/P1): the operand is never unmasked. The function is evaluated
//     on the masked operand x^m and, in a second lane, on the combined mask
//     m; since f(x^m) ^ f(m) = f(x) the XOR of the two lanes is the result.
//   * Affine and arithmetic masks (and a Boolean mask on a non-linear op):
//     the layers are removed right at the CFU input, in reverse order
//     (x = A^-1 (x' ^ B) per byte, or x = x' - B), then the plain function
//     is computed.
//   * No mask: operands pass straight to the submodules.
// The published description has the CFU process masked operands "as it
// would unmasked ones"; that cannot give correct results for the non-linear
// AES/SM4 steps or for arithmetic masks under XOR/rotate functions, so the
// recombination above is this design's own choice. The result leaves the
// CFU unmasked. Combinational, single cycle.
//
// Only the op, rnum and bs fields of the decoded instruction are needed
// here; the register indices travel in the same struct for the pipeline and
// are reported unused by lint.
module crypto_functional_unit
  import cryptrisc_pkg::*;
(
  input  crypto_dec_t       dec_i,
  input  mask_meta_t        meta_i,
  input  logic [XLEN-1:0]   op_a_i,
  input  logic [XLEN-1:0]   op_b_i,
  input  mask_set_t         mask_a_i,
  input  mask_set_t         mask_b_i,
  output logic [XLEN-1:0]   result_o,
  output logic              sharewise_o     // result computed without unmasking
);

  logic            sharewise;
  logic [XLEN-1:0] a_plain, b_plain, a_in, b_in, m_comb;
  logic [XLEN-1:0] r_aes, r_sha256, r_sha512, r_sm3, r_sm4;
  logic [XLEN-1:0] m_sha256, m_sha512, m_sm3;

  assign sharewise = (meta_i.mode == MASK_BOOL) && op_is_gf2_linear(dec_i.op);

  // Layer removal, outermost layer first: g_layer[k] takes the operand with
  // layers 0..k still applied and strips layer k; g_layer[0] yields the
  // plain operand. Each layer and byte lane is its own generate instance so
  // that no single procedure has to unroll the whole GF(2^8) inversion chain.
  for (genvar k = MAX_SHARES - 1; k >= 0; k--) begin : g_layer
    logic            active;
    logic [XLEN-1:0] in_a, in_b, in_m, aff_a, aff_b, out_a, out_b, out_m;
    if (k == MAX_SHARES - 1) begin : g_src
      assign in_a = op_a_i;
      assign in_b = op_b_i;
      assign in_m = '0;
    end else begin : g_src
      assign in_a = g_layer[k+1].out_a;
      assign in_b = g_layer[k+1].out_b;
      assign in_m = g_layer[k+1].out_m;
    end
    assign active = (meta_i.mode != MASK_NONE) && (k < int'(meta_i.shares));
    for (genvar j = 0; j < XLEN/8; j++) begin : g_byte
      logic [7:0] ainv_a, ainv_b;
      assign ainv_a = gf_inv(mask_a_i[k].a[8*j +: 8], POLY_AES);
      assign ainv_b = gf_inv(mask_b_i[k].a[8*j +: 8], POLY_AES);
      assign aff_a[8*j +: 8] = gf_mul(ainv_a, in_a[8*j +: 8] ^ mask_a_i[k].b[8*j +: 8], POLY_AES);
      assign aff_b[8*j +: 8] = gf_mul(ainv_b, in_b[8*j +: 8] ^ mask_b_i[k].b[8*j +: 8], POLY_AES);
    end
    always_comb begin
      out_a = in_a;
      out_b = in_b;
      out_m = in_m;
      if (active) begin
        out_m = in_m ^ mask_a_i[k].b;
        unique case (meta_i.mode)
          MASK_BOOL:   begin out_a = in_a ^ mask_a_i[k].b; out_b = in_b ^ mask_b_i[k].b; end
          MASK_ARITH:  begin out_a = in_a - mask_a_i[k].b; out_b = in_b - mask_b_i[k].b; end
          MASK_AFFINE: begin out_a = aff_a;                out_b = aff_b;                end
          default:     ;
        endcase
      end
    end
  end

  assign a_plain = g_layer[0].out_a;
  assign b_plain = g_layer[0].out_b;
  assign m_comb  = g_layer[0].out_m;
  assign a_in    = sharewise ? op_a_i : a_plain;
  assign b_in    = sharewise ? op_b_i : b_plain;

  // data lane
  aes64_unit  u_aes    (.op_i(dec_i.op), .rnum_i(dec_i.rnum), .rs1_i(a_in), .rs2_i(b_in), .rd_o(r_aes));
  sha256_unit u_sha256 (.op_i(dec_i.op), .rs1_i(a_in), .rd_o(r_sha256));
  sha512_unit u_sha512 (.op_i(dec_i.op), .rs1_i(a_in), .rd_o(r_sha512));
  sm3_unit    u_sm3    (.op_i(dec_i.op), .rs1_i(a_in), .rd_o(r_sm3));
  sm4_unit    u_sm4    (.op_i(dec_i.op), .bs_i(dec_i.bs), .rs1_i(a_in), .rs2_i(b_in), .rd_o(r_sm4));

  // mask lane for share-wise evaluation of the linear functions
  sha256_unit u_sha256_m (.op_i(dec_i.op), .rs1_i(m_comb), .rd_o(m_sha256));
  sha512_unit u_sha512_m (.op_i(dec_i.op), .rs1_i(m_comb), .rd_o(m_sha512));
  sm3_unit    u_sm3_m    (.op_i(dec_i.op), .rs1_i(m_comb), .rd_o(m_sm3));

  always_comb begin
    logic [XLEN-1:0] r, m;
    unique case (dec_i.op)
      OP_AES64ES, OP_AES64ESM, OP_AES64DS, OP_AES64DSM, OP_AES64IM,
      OP_AES64KS1I, OP_AES64KS2:                                 begin r = r_aes;    m = '0;       end
      OP_SHA256SIG0, OP_SHA256SIG1, OP_SHA256SUM0, OP_SHA256SUM1: begin r = r_sha256; m = m_sha256; end
      OP_SHA512SIG0, OP_SHA512SIG1, OP_SHA512SUM0, OP_SHA512SUM1: begin r = r_sha512; m = m_sha512; end
      OP_SM3P0, OP_SM3P1:                                         begin r = r_sm3;    m = m_sm3;    end
      OP_SM4ED, OP_SM4KS:                                         begin r = r_sm4;    m = '0;       end
      default:                                                    begin r = '0;       m = '0;       end
    endcase
    result_o = sharewise ? (r ^ m) : r;
  end

  assign sharewise_o = sharewise;

endmodule
