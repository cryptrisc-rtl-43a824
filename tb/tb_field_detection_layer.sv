// tb_field_detection_layer: every opcode must get the published field tag
// (reference table in tb_ref_pkg), and no opcode may be left untagged except
// OP_NONE.
module tb_field_detection_layer;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  crypto_op_e op;
  field_tag_e tag;
  int checks = 0, failures = 0;
  int n_gf2 = 0, n_gf2n = 0, n_z2n = 0;

  field_detection_layer dut (.op_i(op), .tag_o(tag));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o <= 19; o++) begin
      op = crypto_op_e'(o);
      #1;
      checks++;
      if (tag != ref_tag(op)) begin
        failures++;
        $display("FAIL op=%0d tag=%0d expected %0d", o, tag, ref_tag(op));
      end
      if (tag == FIELD_GF2) n_gf2++;
      if (tag == FIELD_GF2N) n_gf2n++;
      if (tag == FIELD_Z2N) n_z2n++;
    end
    // 9 AES/SM4 ops, 5 Boolean, 5 arithmetic
    checks++;
    if (n_gf2n != 9 || n_gf2 != 5 || n_z2n != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
