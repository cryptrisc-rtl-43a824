// tb_sm3_unit: checks the SM3 unit of the Crypto Functional Unit. Random
// operands for every operation are compared with the reference model of
// tb_ref_pkg, then the unit alone computes the SM3 digest of "abc", which must match the
// published test vectors; a foreign opcode must give zero.
module tb_sm3_unit;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  crypto_op_e op;
  logic [63:0] rs1, rs2, rd;
  logic [3:0] rnum;
  logic [1:0] bs;
  int checks = 0, failures = 0;

  sm3_unit dut (.op_i(op), .rs1_i(rs1), .rd_o(rd));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic exec(input crypto_op_e o, input logic [63:0] a, b, input logic [3:0] rn,
                      input logic [1:0] s, output logic [63:0] r);
    op = o; rs1 = a; rs2 = b; rnum = rn; bs = s;
    #1;
    r = rd;
  endtask

  `include "tb/tb_algos.svh"

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    crypto_op_e ops [] = '{OP_SM3P0, OP_SM3P1};
    logic [63:0] r;
    ref_init();
    for (int i = 0; i < 300; i++) begin
      automatic crypto_op_e o = ops[i % ops.size()];
      automatic logic [63:0] a = rand64(), b = rand64();
      automatic logic [3:0] rn = 4'($urandom_range(0, 10));
      automatic logic [1:0] s = 2'($urandom);
      exec(o, a, b, rn, s, r);
      check(r == ref_exec(o, a, b, rn, s), $sformatf("op %0d a=%h b=%h got %h exp %h", o, a, b, r,
                                                     ref_exec(o, a, b, rn, s)));
    end
    exec(OP_AES64ES, rand64(), rand64(), 4'h0, 2'd0, r);
    check(r == 0, "foreign opcode");
    begin int n; run_sm3(n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
