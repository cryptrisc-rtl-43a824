// sm3_unit: SM3 permutation functions of the Crypto Functional Unit.
// On x = rs1[31:0], result sign-extended to 64 bits:
//   sm3p0  x ^ rol9(x)  ^ rol17(x)
//   sm3p1  x ^ rol15(x) ^ rol23(x)
// Combinational, linear over GF(2).
//
// The port is the full 64-bit register value as the instruction reads it;
// bits 63:32 are ignored by definition of these 32-bit instructions, so a
// lint tool reports them as unused.
module sm3_unit
  import cryptrisc_pkg::*;
(
  input  crypto_op_e        op_i,
  input  logic [XLEN-1:0]   rs1_i,
  output logic [XLEN-1:0]   rd_o
);

  function automatic logic [31:0] rol32(logic [31:0] x, int unsigned n);
    return (x << n) | (x >> (32 - n));
  endfunction

  logic [31:0] x, r;

  always_comb begin
    x = rs1_i[31:0];
    unique case (op_i)
      OP_SM3P0: r = x ^ rol32(x, 9)  ^ rol32(x, 17);
      OP_SM3P1: r = x ^ rol32(x, 15) ^ rol32(x, 23);
      default:  r = '0;
    endcase
    rd_o = {{32{r[31]}}, r};
  end

endmodule
