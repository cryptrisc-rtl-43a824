// tb_cryptrisc_workloads: the benchmark kernels run end to end through the
// crypto execution path at its default parameters.
//
// Each scalar crypto operation of the workloads is executed as the core
// would: its source values are written into x1/x2 through the external
// register write port, the instruction (rd = x3) is handed over, and the
// value is read at retirement. The glue work between the crypto instructions
// (XOR, AND, additions) is done in the testbench, standing in for the ALU.
// Workloads: AES-128, AES-192 and AES-256 (key expansion, encryption,
// decryption; one parameterised kernel for the three key sizes), SHA-256,
// SHA-512, SM3 and SM4, each checked against its published test vector.
// The whole set is run under two share policies - the reset policy and
// three shares for every field - so that every masking mode is exercised
// with real data. MASK_MODE at retirement is checked against the field of
// every instruction.
module tb_cryptrisc_workloads;
  import cryptrisc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [31:0] in_instr;
  logic [767:0] seed;
  logic cfg_we;
  logic [1:0] cfg_tag, cfg_sh;
  logic ext_we;
  logic [4:0] ext_waddr, dbg_raddr;
  logic [63:0] ext_wdata, dbg_rdata;
  logic wb_valid, wb_crypto, wb_we, stall, ex_sw;
  logic [4:0] wb_rd;
  logic [63:0] wb_data;
  logic [1:0] wb_mode, wb_shares;

  always #5 clk = ~clk;

  cryptrisc_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_instr_i(in_instr),
    .seed_i(seed),
    .cfg_we_i(cfg_we), .cfg_tag_i(cfg_tag), .cfg_shares_i(cfg_sh),
    .ext_we_i(ext_we), .ext_waddr_i(ext_waddr), .ext_wdata_i(ext_wdata),
    .dbg_raddr_i(dbg_raddr), .dbg_rdata_o(dbg_rdata),
    .wb_valid_o(wb_valid), .wb_crypto_o(wb_crypto), .wb_we_o(wb_we), .wb_rd_o(wb_rd),
    .wb_data_o(wb_data), .wb_mode_o(wb_mode), .wb_shares_o(wb_shares), .stall_o(stall),
    .ex_sharewise_o(ex_sw)
  );

  int checks = 0, failures = 0;
  int n_mode [4] = '{0, 0, 0, 0};

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic exec(input crypto_op_e op, input logic [63:0] rs1, rs2,
                      input logic [3:0] rnum, input logic [1:0] bs,
                      output logic [63:0] rd);
    @(negedge clk);
    ext_we = 1; ext_waddr = 5'd1; ext_wdata = rs1;
    @(negedge clk);
    ext_waddr = 5'd2; ext_wdata = rs2;
    in_valid = 1;
    in_instr = encode(op, 5'd3, 5'd1, 5'd2, rnum, bs);
    @(negedge clk);
    ext_we = 0;
    while (!in_ready) @(negedge clk);
    in_valid = 0;
    while (!wb_valid) @(posedge clk);
    check(wb_crypto && wb_we && wb_rd == 5'd3, "retirement");
    check(wb_mode == ref_mode(ref_tag(op)), "MASK_MODE");
    n_mode[wb_mode]++;
    rd = wb_data;
  endtask

  `include "tb/tb_algos.svh"

  initial begin
    int ops;
    longint t0;
    in_valid = 0; in_instr = 0; cfg_we = 0; cfg_tag = 0; cfg_sh = 0;
    ext_we = 0; ext_waddr = 0; ext_wdata = 0; dbg_raddr = 0;
    for (int l = 0; l < 24; l++) seed[l*32 +: 32] = $urandom;
    ref_init();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) begin
        for (int t = 1; t < 4; t++) begin
          @(negedge clk);
          cfg_we = 1; cfg_tag = 2'(t); cfg_sh = 2'd3;
        end
        @(negedge clk) cfg_we = 0;
      end
      for (int nk = 4; nk <= 8; nk += 2) begin
        t0 = $time; run_aes(nk, ops);
        $display("pass %0d AES-%0d: %0d crypto instructions, %0d cycles", pass, 32*nk, ops, ($time - t0) / 10);
      end
      t0 = $time; run_sha256(ops);
      $display("pass %0d SHA-256: %0d crypto instructions, %0d cycles", pass, ops, ($time - t0) / 10);
      t0 = $time; run_sha512(ops);
      $display("pass %0d SHA-512: %0d crypto instructions, %0d cycles", pass, ops, ($time - t0) / 10);
      t0 = $time; run_sm3(ops);
      $display("pass %0d SM3: %0d crypto instructions, %0d cycles", pass, ops, ($time - t0) / 10);
      t0 = $time; run_sm4(ops);
      $display("pass %0d SM4: %0d crypto instructions, %0d cycles", pass, ops, ($time - t0) / 10);
    end
    for (int m = 1; m < 4; m++) check(n_mode[m] > 0, $sformatf("MASK_MODE %0d used", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
