// masking_control_unit (MCU): randomises both source operands of a crypto
// instruction before they reach the Crypto Functional Unit.
//
// Every operand x is replaced by x' = A*x + B, with fresh A and B from the
// PRNG, in the algebraic domain chosen by MASK_MODE:
//   01 Boolean     A = 1,           B = r : x' = x ^ r           (GF(2))
//   11 arithmetic  A = 1,           B = r : x' = x + r mod 2^64  (Z/2^64)
//   10 affine      A = r1 (!= 0),   B = r2, per byte over GF(2^8)/0x11B
//   00 none        x' = x
// MASK_SHARES = d applies d independent layers, x' = A_d(..(A_1 x + B_1)..)
// + B_d; the (A, B) pair of every layer is output next to the operand so
// that the consumer can compute on or remove the mask. Layers beyond d are
// reported as A = 1 per byte, B = 0.
//
// Purely combinational, to finish in the same cycle as register read (no
// stall). rnd_i slices: operand o (0 = rs1, 1 = rs2), layer k uses
// A = rnd_i[(o*MAX_SHARES+k)*128 +: 64] and B = the next 64 bits.
// A zero A byte is replaced by 0x01 to keep A invertible; this and the
// reduction polynomial are local choices, the masking formulas are the
// published ones.
module masking_control_unit
  import cryptrisc_pkg::*;
(
  input  mask_meta_t                        meta_i,
  input  logic [XLEN-1:0]                   op_a_i,
  input  logic [XLEN-1:0]                   op_b_i,
  input  logic [2*MAX_SHARES*2*XLEN-1:0]    rnd_i,
  output logic [XLEN-1:0]                   op_a_o,
  output logic [XLEN-1:0]                   op_b_o,
  output mask_set_t                         mask_a_o,
  output mask_set_t                         mask_b_o
);

  localparam logic [XLEN-1:0] ONES_A = {(XLEN/8){8'h01}};

  function automatic mask_pair_t pick(mask_mode_e mode, logic [2*XLEN-1:0] r);
    mask_pair_t m;
    m.b = r[2*XLEN-1:XLEN];
    if (mode == MASK_AFFINE) begin
      for (int j = 0; j < XLEN/8; j++)
        m.a[8*j +: 8] = (r[8*j +: 8] == 8'h00) ? 8'h01 : r[8*j +: 8];
    end else begin
      m.a = ONES_A;
    end
    return m;
  endfunction

  always_comb begin
    logic [XLEN-1:0] xa, xb;
    mask_pair_t      ma, mb;
    xa = op_a_i;
    xb = op_b_i;
    for (int k = 0; k < MAX_SHARES; k++) begin
      if (meta_i.mode != MASK_NONE && k < int'(meta_i.shares)) begin
        ma = pick(meta_i.mode, rnd_i[(0*MAX_SHARES+k)*2*XLEN +: 2*XLEN]);
        mb = pick(meta_i.mode, rnd_i[(1*MAX_SHARES+k)*2*XLEN +: 2*XLEN]);
        xa = mask_apply(meta_i.mode, xa, ma);
        xb = mask_apply(meta_i.mode, xb, mb);
      end else begin
        ma = '{a: ONES_A, b: '0};
        mb = '{a: ONES_A, b: '0};
      end
      mask_a_o[k] = ma;
      mask_b_o[k] = mb;
    end
    op_a_o = xa;
    op_b_o = xb;
  end

endmodule
