// mask_config: the decode-stage mapping unit that turns a field tag into the
// per-instruction masking metadata MASK_MODE (2 bits) and MASK_SHARES
// (2 bits).
//
// MASK_MODE is fixed by the published table: GF2 -> 01 (Boolean),
// GF2N -> 10 (affine / multiplicative), Z2N -> 11 (arithmetic), no tag -> 00
// (no masking). MASK_SHARES comes from a small programmable policy: one
// 2-bit register per tag, reset to the parameters below and rewritten
// through cfg_we_i / cfg_tag_i / cfg_shares_i (the port stands for whatever
// control register the core maps it to). The default of two shares for the
// GF2N class follows the published example for AES; one share for the other
// classes is a local choice. Lookup is combinational; a policy write takes
// effect from the next cycle. Reset is synchronous and active low.
module mask_config
  import cryptrisc_pkg::*;
#(
  parameter logic [1:0] SHARES_GF2  = 2'd1,
  parameter logic [1:0] SHARES_GF2N = 2'd2,
  parameter logic [1:0] SHARES_Z2N  = 2'd1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  field_tag_e  tag_i,
  input  logic        cfg_we_i,
  input  field_tag_e  cfg_tag_i,
  input  logic [1:0]  cfg_shares_i,
  output mask_meta_t  meta_o
);

  logic [1:0] shares_q [4];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      shares_q[FIELD_NONE] <= 2'd0;
      shares_q[FIELD_GF2]  <= SHARES_GF2;
      shares_q[FIELD_GF2N] <= SHARES_GF2N;
      shares_q[FIELD_Z2N]  <= SHARES_Z2N;
    end else if (cfg_we_i && cfg_tag_i != FIELD_NONE) begin
      shares_q[cfg_tag_i] <= cfg_shares_i;
    end
  end

  always_comb begin
    unique case (tag_i)
      FIELD_GF2:  meta_o.mode = MASK_BOOL;
      FIELD_GF2N: meta_o.mode = MASK_AFFINE;
      FIELD_Z2N:  meta_o.mode = MASK_ARITH;
      default:    meta_o.mode = MASK_NONE;
    endcase
    meta_o.shares = shares_q[tag_i];
  end

endmodule
