// tb_crypto_decoder: checks the scalar crypto decoder against encodings built
// field by field in tb_ref_pkg. Every operation is encoded with random
// registers and decoded; random words and single-bit mutations of valid
// encodings are decoded and compared with a search over all encodings;
// reserved aes64ks1i round numbers must be rejected.
module tb_crypto_decoder;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] instr;
  crypto_dec_t dec;
  int checks = 0, failures = 0;

  crypto_decoder dut (.instr_i(instr), .dec_o(dec));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s instr=%08h op=%0d", what, instr, dec.op);
    end
  endtask

  function automatic crypto_op_e expect_op(logic [31:0] w);
    for (int o = 1; o <= 19; o++) begin
      crypto_op_e op = crypto_op_e'(o);
      if (encode(op, w[11:7], w[19:15], w[24:20], w[23:20], w[31:30]) == w) begin
        if (op == OP_AES64KS1I && w[23:20] > 4'hA) return OP_NONE;
        return op;
      end
    end
    return OP_NONE;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++)
      for (int o = 1; o <= 19; o++) begin
        automatic crypto_op_e op = crypto_op_e'(o);
        automatic logic [4:0] rd = 5'($urandom), rs1 = 5'($urandom), rs2 = 5'($urandom);
        automatic logic [3:0] rnum = 4'($urandom_range(0, 10));
        automatic logic [1:0] bs = 2'($urandom);
        instr = encode(op, rd, rs1, rs2, rnum, bs);
        #1;
        check(dec.op == op && dec.is_crypto, "op");
        check(dec.rd == rd && dec.rs1 == rs1, "regs");
        check(dec.uses_rs2 == op_uses_rs2(op), "uses_rs2");
        if (op_uses_rs2(op)) check(dec.rs2 == rs2, "rs2");
        if (op == OP_AES64KS1I) check(dec.rnum == rnum, "rnum");
        if (op inside {OP_SM4ED, OP_SM4KS}) check(dec.bs == bs, "bs");
        // single-bit mutation
        instr ^= 32'(1) << $urandom_range(0, 31);
        #1;
        check(dec.op == expect_op(instr), "mutated");
      end
    for (int k = 11; k < 16; k++) begin
      instr = encode(OP_AES64KS1I, 5'd1, 5'd2, 5'd0, 4'(k), 2'd0);
      #1;
      check(!dec.is_crypto, "reserved rnum");
    end
    for (int i = 0; i < 2000; i++) begin
      instr = $urandom;
      if (i % 2 == 0) instr[6:0] = (i % 4 == 0) ? 7'b0110011 : 7'b0010011;
      #1;
      check(dec.op == expect_op(instr) && dec.is_crypto == (expect_op(instr) != OP_NONE), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
