// sha512_unit: SHA-512 sigma/sum functions of the Crypto Functional Unit
// (RV64 single-register forms).
//   sha512sig0  ror1  ^ ror8  ^ shr7
//   sha512sig1  ror19 ^ ror61 ^ shr6
//   sha512sum0  ror28 ^ ror34 ^ ror39
//   sha512sum1  ror14 ^ ror18 ^ ror41
// Combinational, linear over GF(2).
module sha512_unit
  import cryptrisc_pkg::*;
(
  input  crypto_op_e        op_i,
  input  logic [XLEN-1:0]   rs1_i,
  output logic [XLEN-1:0]   rd_o
);

  function automatic logic [63:0] ror64(logic [63:0] x, int unsigned n);
    return (x >> n) | (x << (64 - n));
  endfunction

  always_comb begin
    unique case (op_i)
      OP_SHA512SIG0: rd_o = ror64(rs1_i, 1)  ^ ror64(rs1_i, 8)  ^ (rs1_i >> 7);
      OP_SHA512SIG1: rd_o = ror64(rs1_i, 19) ^ ror64(rs1_i, 61) ^ (rs1_i >> 6);
      OP_SHA512SUM0: rd_o = ror64(rs1_i, 28) ^ ror64(rs1_i, 34) ^ ror64(rs1_i, 39);
      OP_SHA512SUM1: rd_o = ror64(rs1_i, 14) ^ ror64(rs1_i, 18) ^ ror64(rs1_i, 41);
      default:       rd_o = '0;
    endcase
  end

endmodule
