// sm4_unit: SM4 round and key-schedule steps of the Crypto Functional Unit.
//
// Takes byte bs of rs2, passes it through the SM4 S-box, applies the SM4
// linear layer to the zero-extended byte, rotates left by 8*bs and XORs the
// low word of rs1; the 32-bit result is sign-extended.
//   sm4ed  L (x) = x ^ rol(x,2) ^ rol(x,10) ^ rol(x,18) ^ rol(x,24)
//   sm4ks  L'(x) = x ^ rol(x,13) ^ rol(x,23)
// which for a zero-extended byte reduce to plain left shifts (no bit wraps
// around). This is the operation of the RISC-V sm4ed/sm4ks instructions. Four sm4ed/sm4ks with bs = 0..3
// make one SM4 round function / key-schedule step. The S-box is computed as
// an affine-inverse-affine map over GF(2^8) (see cryptrisc_pkg).
// Combinational.
//
// The port is the full 64-bit register value as the instruction reads it;
// bits 63:32 are ignored by definition of these 32-bit instructions, so a
// lint tool reports them as unused.
module sm4_unit
  import cryptrisc_pkg::*;
(
  input  crypto_op_e        op_i,
  input  logic [1:0]        bs_i,
  input  logic [XLEN-1:0]   rs1_i,
  input  logic [XLEN-1:0]   rs2_i,
  output logic [XLEN-1:0]   rd_o
);

  logic [7:0]  sb_in;
  logic [31:0] x, y, z, r;

  always_comb begin
    sb_in = rs2_i[8*bs_i +: 8];
    x     = {24'h0, sm4_sbox(sb_in)};
    if (op_i == OP_SM4KS)
      y = x ^ (x << 13) ^ (x << 23);
    else
      y = x ^ (x << 2) ^ (x << 10) ^ (x << 18) ^ (x << 24);
    z = (y << (8*bs_i)) | (y >> (32 - 8*bs_i));
    r = z ^ rs1_i[31:0];
    rd_o = (op_i inside {OP_SM4ED, OP_SM4KS}) ? {{32{r[31]}}, r} : '0;
  end

endmodule
