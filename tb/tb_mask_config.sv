// tb_mask_config: checks the field tag -> MASK_MODE table, the reset share
// policy (GF2 1, GF2N 2, Z2N 1, none 0), policy writes per tag, that writes
// to the no-field tag are ignored and that reset restores the defaults.
module tb_mask_config;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  field_tag_e tag, cfg_tag;
  logic cfg_we = 0;
  logic [1:0] cfg_sh;
  mask_meta_t meta;
  int checks = 0, failures = 0;
  logic [1:0] exp_sh [4];

  always #5 clk = ~clk;

  mask_config dut (.clk_i(clk), .rst_ni(rst_n), .tag_i(tag), .cfg_we_i(cfg_we),
                   .cfg_tag_i(cfg_tag), .cfg_shares_i(cfg_sh), .meta_o(meta));

  task automatic check_all();
    for (int t = 0; t < 4; t++) begin
      tag = field_tag_e'(t);
      #1;
      checks++;
      if (meta.mode != ref_mode(tag) || meta.shares != exp_sh[t]) begin
        failures++;
        $display("FAIL tag=%0d mode=%b shares=%0d expected %b %0d", t, meta.mode,
                 meta.shares, ref_mode(tag), exp_sh[t]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_tag = FIELD_NONE; cfg_sh = 0; tag = FIELD_NONE;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    exp_sh = '{2'd0, 2'd1, 2'd2, 2'd1};
    check_all();
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      cfg_we = 1;
      cfg_tag = field_tag_e'($urandom_range(0, 3));
      cfg_sh = 2'($urandom);
      if (cfg_tag != FIELD_NONE) exp_sh[cfg_tag] = cfg_sh;
      @(negedge clk);
      cfg_we = 0;
      check_all();
    end
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    exp_sh = '{2'd0, 2'd1, 2'd2, 2'd1};
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
