// sha256_unit: SHA-256 sigma/sum functions of the Crypto Functional Unit.
//
// Works on x = rs1[31:0] and sign-extends the 32-bit result to 64 bits:
//   sha256sig0  ror7  ^ ror18 ^ shr3
//   sha256sig1  ror17 ^ ror19 ^ shr10
//   sha256sum0  ror2  ^ ror13 ^ ror22
//   sha256sum1  ror6  ^ ror11 ^ ror25
// (ratified RISC-V scalar crypto semantics). Combinational. All four are
// linear over GF(2), which the CFU uses to compute them share-wise on
// Boolean-masked operands.
//
// The port is the full 64-bit register value as the instruction reads it;
// bits 63:32 are ignored by definition of these 32-bit instructions, so a
// lint tool reports them as unused.
module sha256_unit
  import cryptrisc_pkg::*;
(
  input  crypto_op_e        op_i,
  input  logic [XLEN-1:0]   rs1_i,
  output logic [XLEN-1:0]   rd_o
);

  function automatic logic [31:0] ror32(logic [31:0] x, int unsigned n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] x, r;

  always_comb begin
    x = rs1_i[31:0];
    unique case (op_i)
      OP_SHA256SIG0: r = ror32(x, 7)  ^ ror32(x, 18) ^ (x >> 3);
      OP_SHA256SIG1: r = ror32(x, 17) ^ ror32(x, 19) ^ (x >> 10);
      OP_SHA256SUM0: r = ror32(x, 2)  ^ ror32(x, 13) ^ ror32(x, 22);
      OP_SHA256SUM1: r = ror32(x, 6)  ^ ror32(x, 11) ^ ror32(x, 25);
      default:       r = '0;
    endcase
    rd_o = {{32{r[31]}}, r};
  end

endmodule
