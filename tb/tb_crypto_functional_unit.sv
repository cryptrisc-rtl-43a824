// tb_crypto_functional_unit: the CFU must return the unmasked architectural
// result whatever masking the operands carry. Each operation is fed operands
// masked here with reference arithmetic, in every MASK_MODE and with 0..3
// layers, and compared with the reference model. The algorithm known-answer
// tests (AES-128/192/256, SHA-256, SHA-512, SM3, SM4) are then run through
// the CFU with the masking the field detection layer would choose and
// random masks. The share-wise path (Boolean mask on a linear op) must be
// taken for exactly those cases.
module tb_crypto_functional_unit;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  crypto_dec_t dec;
  mask_meta_t meta;
  logic [63:0] a_m, b_m, res;
  mask_set_t ma, mb;
  logic sharewise;
  int checks = 0, failures = 0;
  int n_mode [4] = '{0, 0, 0, 0};
  int n_sharewise = 0;
  bit use_fdl_mode = 0;

  crypto_functional_unit dut (.dec_i(dec), .meta_i(meta), .op_a_i(a_m), .op_b_i(b_m),
                              .mask_a_i(ma), .mask_b_i(mb), .result_o(res),
                              .sharewise_o(sharewise));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s mode=%b shares=%0d", what, meta.mode, meta.shares);
    end
  endtask

  task automatic exec(input crypto_op_e o, input logic [63:0] a, b, input logic [3:0] rn,
                      input logic [1:0] s, output logic [63:0] r);
    logic [63:0] xa, xb;
    dec = '0;
    dec.is_crypto = 1'b1;
    dec.op = o; dec.rnum = rn; dec.bs = s;
    meta.mode   = mask_mode_e'(use_fdl_mode ? ref_mode(ref_tag(o)) : 2'($urandom));
    meta.shares = 2'($urandom);
    xa = a; xb = b;
    for (int k = 0; k < MAX_SHARES; k++) begin
      for (int j = 0; j < 8; j++) begin
        ma[k].a[8*j +: 8] = 8'($urandom_range(1, 255));
        mb[k].a[8*j +: 8] = 8'($urandom_range(1, 255));
      end
      ma[k].b = rand64(); mb[k].b = rand64();
      if (meta.mode != MASK_NONE && k < meta.shares) begin
        xa = ref_layer(meta.mode, xa, ma[k].a, ma[k].b);
        xb = ref_layer(meta.mode, xb, mb[k].a, mb[k].b);
      end else begin
        ma[k] = '{a: {8{8'h01}}, b: '0};
        mb[k] = '{a: {8{8'h01}}, b: '0};
      end
    end
    a_m = xa; b_m = xb;
    #1;
    r = res;
    n_mode[meta.mode]++;
    if (sharewise) n_sharewise++;
    check(sharewise == (meta.mode == MASK_BOOL && op_is_gf2_linear(o)), "share-wise selection");
  endtask

  `include "tb/tb_algos.svh"

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    int n;
    ref_init();
    for (int i = 0; i < 2000; i++) begin
      automatic crypto_op_e o = crypto_op_e'($urandom_range(1, 19));
      automatic logic [63:0] a = rand64(), b = rand64();
      automatic logic [3:0] rn = 4'($urandom_range(0, 10));
      automatic logic [1:0] s = 2'($urandom);
      exec(o, a, b, rn, s, r);
      check(r == ref_exec(o, a, b, rn, s), $sformatf("op %0d result", o));
    end
    use_fdl_mode = 1;
    run_aes(4, n); run_aes(6, n); run_aes(8, n);
    run_sha256(n); run_sha512(n); run_sm3(n); run_sm4(n);
    for (int m = 0; m < 4; m++) check(n_mode[m] > 100, $sformatf("mode %0d exercised", m));
    check(n_sharewise > 100, "share-wise path exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
