// cryptrisc_top: the CryptRISC crypto execution path - scalar crypto
// instructions flowing through decode with field detection, operand
// masking, the Crypto Functional Unit and write-back.
//
// Six cycles per instruction, one instruction per cycle in flight per stage:
//   cycle 1 IF   the fetched instruction is handed over (in_valid_i/in_ready_o)
//                and captured in R1
//   cycle 2 ID   crypto_decoder + field_detection_layer + mask_config turn it
//                into op, field tag, MASK_MODE and MASK_SHARES -> R2
//   cycle 3 RR   register read, forwarding multiplexers and the Masking
//                Control Unit (combinational, fresh PRNG bits) -> RX
//   cycle 4 EX   Crypto Functional Unit on the masked operands -> R3
//   cycle 5 MEM  crypto results pass through -> R4
//   cycle 6 WB   register-file write; retirement reported on wb_*_o
// So an instruction accepted at clock edge t is written at edge t+5.
//
// Forwarding: the cycle-3 operand multiplexers take the youngest of R3
// (MEM), R4 (WB) and the external write port, else the register file. An
// instruction whose source is the destination of the instruction now in EX
// (result not yet registered) stalls one cycle: R1/R2 hold, a bubble enters
// RX and in_ready_o is low. Nothing else stalls.
//
// Non-crypto instructions get no field tag, MASK_MODE 00, and retire without
// writing; in a full core they go to the ALU and load/store unit, which are
// outside this block, as are fetch, caches and CSRs. Their register writes
// enter through ext_we_i/ext_waddr_i/ext_wdata_i and dbg_raddr_i reads a
// register for them. seed_i is the entropy-source seed, loaded while rst_ni
// is low. cfg_* rewrites the MASK_SHARES policy of one field tag.
//
// Published: the stage placement (decode+FDL in cycle 2, MCU with register
// read in cycle 3, CFU in cycle 4, MEM 5, WB 6), the masking metadata and the
// extended forwarding. Own choices: the register between MCU and CFU, the
// forwarding sources and stall rule, the handshake details, the external
// ports, synchronous active-low reset.
module cryptrisc_top
  import cryptrisc_pkg::*;
#(
  parameter int unsigned PRNG_LANES = 2 * MAX_SHARES * 2
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // instruction hand-off from fetch
  input  logic                      in_valid_i,
  output logic                      in_ready_o,
  input  logic [31:0]               in_instr_i,
  // entropy-source seed for the mask PRNG
  input  logic [PRNG_LANES*64-1:0]  seed_i,
  // MASK_SHARES policy write
  input  logic                      cfg_we_i,
  input  logic [1:0]                cfg_tag_i,
  input  logic [1:0]                cfg_shares_i,
  // register access for the rest of the core
  input  logic                      ext_we_i,
  input  logic [4:0]                ext_waddr_i,
  input  logic [XLEN-1:0]           ext_wdata_i,
  input  logic [4:0]                dbg_raddr_i,
  output logic [XLEN-1:0]           dbg_rdata_o,
  // retirement
  output logic                      wb_valid_o,
  output logic                      wb_crypto_o,
  output logic                      wb_we_o,
  output logic [4:0]                wb_rd_o,
  output logic [XLEN-1:0]           wb_data_o,
  output logic [1:0]                wb_mode_o,
  output logic [1:0]                wb_shares_o,
  // status
  output logic                      stall_o,
  output logic                      ex_sharewise_o   // EX computes share-wise this cycle
);

  // ------------------------------------------------------------ stage regs
  logic            r1_valid;
  logic [31:0]     r1_instr;

  logic            r2_valid;
  crypto_dec_t     r2_dec;
  mask_meta_t      r2_meta;

  logic            rx_valid;
  crypto_dec_t     rx_dec;
  mask_meta_t      rx_meta;
  logic [XLEN-1:0] rx_a, rx_b;
  mask_set_t       rx_mask_a, rx_mask_b;

  typedef struct packed {
    logic            valid;
    logic            crypto;
    logic            we;
    logic [4:0]      rd;
    logic [XLEN-1:0] data;
    mask_meta_t      meta;
  } retire_t;

  retire_t r3, r4, ex_out;

  // ------------------------------------------------------------ ID
  crypto_dec_t id_dec;
  field_tag_e  id_tag;
  mask_meta_t  id_meta;
  logic        stall;

  crypto_decoder        u_dec (.instr_i(r1_instr), .dec_o(id_dec));
  field_detection_layer u_fdl (.op_i(id_dec.op), .tag_o(id_tag));
  mask_config           u_cfg (
    .clk_i, .rst_ni,
    .tag_i       (id_tag),
    .cfg_we_i,
    .cfg_tag_i   (field_tag_e'(cfg_tag_i)),
    .cfg_shares_i,
    .meta_o      (id_meta)
  );

  assign in_ready_o = !stall;
  assign stall_o    = stall;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      r1_valid <= 1'b0;
      r1_instr <= '0;
      r2_valid <= 1'b0;
      r2_dec   <= '0;
      r2_meta  <= '0;
    end else if (!stall) begin
      r1_valid <= in_valid_i;
      r1_instr <= in_instr_i;
      r2_valid <= r1_valid;
      r2_dec   <= id_dec;
      r2_meta  <= id_meta;
    end
  end

  // ------------------------------------------------------------ RR + MCU
  logic [XLEN-1:0]            rf_a, rf_b;
  logic [XLEN-1:0]            opnd_a, opnd_b;
  logic [PRNG_LANES*64-1:0]   rnd;
  logic [XLEN-1:0]            mcu_a, mcu_b;
  mask_set_t                  mcu_mask_a, mcu_mask_b;

  register_file u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i (r2_dec.rs1), .raddr_b_i (r2_dec.rs2),
    .rdata_a_o (rf_a),       .rdata_b_o (rf_b),
    .raddr_c_i (dbg_raddr_i), .rdata_c_o (dbg_rdata_o),
    .we0_i     (r4.valid && r4.we), .waddr0_i (r4.rd), .wdata0_i (r4.data),
    .we1_i     (ext_we_i),          .waddr1_i (ext_waddr_i), .wdata1_i (ext_wdata_i)
  );

  function automatic logic [XLEN-1:0] fwd(logic [4:0] rs, logic [XLEN-1:0] rf,
                                          logic w3, logic [4:0] a3, logic [XLEN-1:0] d3,
                                          logic w4, logic [4:0] a4, logic [XLEN-1:0] d4,
                                          logic we, logic [4:0] ae, logic [XLEN-1:0] de);
    if (rs == '0)            return '0;
    else if (w3 && a3 == rs) return d3;
    else if (w4 && a4 == rs) return d4;
    else if (we && ae == rs) return de;
    else                     return rf;
  endfunction

  assign opnd_a = fwd(r2_dec.rs1, rf_a, r3.valid && r3.we, r3.rd, r3.data,
                      r4.valid && r4.we, r4.rd, r4.data, ext_we_i, ext_waddr_i, ext_wdata_i);
  assign opnd_b = fwd(r2_dec.rs2, rf_b, r3.valid && r3.we, r3.rd, r3.data,
                      r4.valid && r4.we, r4.rd, r4.data, ext_we_i, ext_waddr_i, ext_wdata_i);

  // hazard on the instruction now in EX
  assign stall = r2_valid && r2_dec.is_crypto && rx_valid && rx_dec.is_crypto &&
                 rx_dec.rd != '0 &&
                 (rx_dec.rd == r2_dec.rs1 || (r2_dec.uses_rs2 && rx_dec.rd == r2_dec.rs2));

  mask_prng #(.LANES(PRNG_LANES)) u_prng (.clk_i, .rst_ni, .seed_i, .rnd_o(rnd));

  masking_control_unit u_mcu (
    .meta_i   (r2_meta),
    .op_a_i   (opnd_a), .op_b_i (opnd_b),
    .rnd_i    (rnd[2*MAX_SHARES*2*XLEN-1:0]),
    .op_a_o   (mcu_a),  .op_b_o (mcu_b),
    .mask_a_o (mcu_mask_a), .mask_b_o (mcu_mask_b)
  );

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rx_valid  <= 1'b0;
      rx_dec    <= '0;
      rx_meta   <= '0;
      rx_a      <= '0;
      rx_b      <= '0;
      rx_mask_a <= '0;
      rx_mask_b <= '0;
    end else begin
      rx_valid  <= r2_valid && !stall;
      rx_dec    <= r2_dec;
      rx_meta   <= r2_meta;
      rx_a      <= mcu_a;
      rx_b      <= mcu_b;
      rx_mask_a <= mcu_mask_a;
      rx_mask_b <= mcu_mask_b;
    end
  end

  // ------------------------------------------------------------ EX (CFU)
  logic [XLEN-1:0] cfu_result;
  logic            cfu_sharewise;

  crypto_functional_unit u_cfu (
    .dec_i    (rx_dec),  .meta_i (rx_meta),
    .op_a_i   (rx_a),    .op_b_i (rx_b),
    .mask_a_i (rx_mask_a), .mask_b_i (rx_mask_b),
    .result_o (cfu_result), .sharewise_o (cfu_sharewise)
  );

  assign ex_sharewise_o = rx_valid && cfu_sharewise;

  always_comb begin
    ex_out.valid  = rx_valid;
    ex_out.crypto = rx_dec.is_crypto;
    ex_out.we     = rx_dec.is_crypto && rx_dec.rd != '0;
    ex_out.rd     = rx_dec.rd;
    ex_out.data   = cfu_result;
    ex_out.meta   = rx_meta;
  end

  // ------------------------------------------------------------ MEM, WB
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      r3 <= '0;
      r4 <= '0;
    end else begin
      r3 <= ex_out;
      r4 <= r3;
    end
  end

  assign wb_valid_o  = r4.valid;
  assign wb_crypto_o = r4.crypto;
  assign wb_we_o     = r4.valid && r4.we;
  assign wb_rd_o     = r4.rd;
  assign wb_data_o   = r4.data;
  assign wb_mode_o   = r4.meta.mode;
  assign wb_shares_o = r4.meta.shares;

  // ------------------------------------------------------------ checks
  // a stalled instruction must not change while it waits
  property p_hold_r2;
    @(posedge clk_i) disable iff (!rst_ni) stall |=> $stable(r2_dec) && r2_valid;
  endproperty
  a_hold_r2: assert property (p_hold_r2);

  // hand-off rule for the sender: an offered instruction stays offered,
  // unchanged, until it is taken
  property p_in_hold;
    @(posedge clk_i) disable iff (!rst_ni)
      in_valid_i && !in_ready_o |=> in_valid_i && $stable(in_instr_i);
  endproperty
  a_in_hold: assert property (p_in_hold);

endmodule
