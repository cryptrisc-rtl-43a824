// tb_masking_control_unit: drives random operands, random PRNG words and
// every MASK_MODE / MASK_SHARES combination. The expected masked operand is
// built here layer by layer with the reference GF(2^8) product; the masks
// reported for unused layers must be A = 1, B = 0; every affine A byte must
// be non-zero (zero bytes are forced into the random words to test this);
// and removing the reported layers with reference arithmetic must give back
// the original operand.
module tb_masking_control_unit;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  mask_meta_t meta;
  logic [63:0] a, b, am, bm;
  logic [2*MAX_SHARES*128-1:0] rnd;
  mask_set_t ma, mb;
  int checks = 0, failures = 0;

  masking_control_unit dut (.meta_i(meta), .op_a_i(a), .op_b_i(b), .rnd_i(rnd),
                            .op_a_o(am), .op_b_o(bm), .mask_a_o(ma), .mask_b_o(mb));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s mode=%b shares=%0d", what, meta.mode, meta.shares);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int changed = 0;
    for (int i = 0; i < 400; i++) begin
      logic [63:0] ea, eb, ra, rb;
      meta.mode = mask_mode_e'(i % 4);
      meta.shares = 2'((i / 4) % 4);
      a = rand64(); b = rand64();
      for (int w = 0; w < 2*MAX_SHARES*2; w++) rnd[w*64 +: 64] = rand64();
      if (i % 3 == 0) rnd[7:0] = 8'h00;      // zero A byte in operand a, layer 0
      #1;
      ea = a; eb = b;
      for (int k = 0; k < MAX_SHARES; k++) begin
        if (meta.mode != MASK_NONE && k < meta.shares) begin
          ea = ref_layer(meta.mode, ea, rnd[k*128 +: 64], rnd[k*128+64 +: 64]);
          eb = ref_layer(meta.mode, eb, rnd[(MAX_SHARES+k)*128 +: 64], rnd[(MAX_SHARES+k)*128+64 +: 64]);
          check(ma[k].b == rnd[k*128+64 +: 64], "B reported");
          for (int j = 0; j < 8; j++) check(ma[k].a[8*j +: 8] != 0, "A non-zero");
        end else begin
          check(ma[k].a == {8{8'h01}} && ma[k].b == 0 && mb[k].b == 0, "unused layer");
        end
      end
      check(am == ea && bm == eb, "masked value");
      if (am != a) changed++;
      ra = am; rb = bm;
      for (int k = MAX_SHARES - 1; k >= 0; k--)
        if (meta.mode != MASK_NONE && k < meta.shares) begin
          ra = ref_unlayer(meta.mode, ra, ma[k].a, ma[k].b);
          rb = ref_unlayer(meta.mode, rb, mb[k].a, mb[k].b);
        end
      check(ra == a && rb == b, "unmask round trip");
      if (meta.mode == MASK_NONE || meta.shares == 0) check(am == a && bm == b, "no masking");
    end
    check(changed > 180, "masking changes operands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
