// field_detection_layer (FDL): maps each scalar crypto opcode to the
// algebraic field that dominates its computation.
//
// A combinational lookup table sitting in the decode stage, indexed only by
// the opcode, so the choice never depends on data. The table is the
// published classification:
//   AES (aes64es/esm/ds/dsm/im/ks1i/ks2), SM4 (ed/ks)   -> FIELD_GF2N
//   sm3p0, sha256sig0/sig1, sha512sig0/sig1              -> FIELD_GF2
//   sm3p1, sha256sum0/sum1, sha512sum0/sum1              -> FIELD_Z2N
//   anything else                                        -> FIELD_NONE
// The 2-bit tag encoding is a local choice (see cryptrisc_pkg). Extending the
// scheme to new instructions means adding rows here; nothing downstream
// changes.
module field_detection_layer
  import cryptrisc_pkg::*;
(
  input  crypto_op_e  op_i,
  output field_tag_e  tag_o
);

  always_comb begin
    unique case (op_i)
      OP_AES64ES, OP_AES64ESM, OP_AES64DS, OP_AES64DSM, OP_AES64IM,
      OP_AES64KS1I, OP_AES64KS2, OP_SM4ED, OP_SM4KS:
        tag_o = FIELD_GF2N;
      OP_SM3P0, OP_SHA256SIG0, OP_SHA256SIG1, OP_SHA512SIG0, OP_SHA512SIG1:
        tag_o = FIELD_GF2;
      OP_SM3P1, OP_SHA256SUM0, OP_SHA256SUM1, OP_SHA512SUM0, OP_SHA512SUM1:
        tag_o = FIELD_Z2N;
      default:
        tag_o = FIELD_NONE;
    endcase
  end

endmodule
