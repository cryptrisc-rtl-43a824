// tb_cryptrisc_top: end-to-end test of the crypto execution path at its
// default parameters.
//
// Phase 1 streams random crypto instructions (and some non-crypto ones)
// with random gaps over a small register window, so that back-to-back
// dependencies occur constantly. The expected result of each instruction is
// computed with the reference model at the moment it is accepted, in program
// order, and compared at retirement together with the destination, the
// write enable and the MASK_MODE/MASK_SHARES it carried; every instruction
// must retire exactly five clock edges after it was accepted (six-cycle
// pipeline). The share policy is reprogrammed between bursts.
// Phase 2 is a directed forwarding test from the external write port.
// Each mechanism is counted - hazard stall, hand-off back-pressure,
// forwarding from MEM, from WB and from the external port, every MASK_MODE,
// every MASK_SHARES value, the share-wise CFU path, non-crypto retirement and
// x0 destinations - and one that never happened counts as a failure.
module tb_cryptrisc_top;
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

  typedef struct {
    bit          crypto;
    bit          we;
    logic [4:0]  rd;
    logic [63:0] data;
    logic [1:0]  mode;
    logic [1:0]  shares;
    longint      t_acc;
    int          seq;
  } exp_t;

  exp_t        q [$];
  logic [63:0] model [32];
  logic [1:0]  policy [4];
  longint      cyc = 0;
  int          acc_seq = 0, rx_seq = 0;
  int          stall_at_acc [int];
  int          stall_at_rx [int];
  int checks = 0, failures = 0, retired = 0;
  int n_stall = 0, n_bp = 0, n_fwd3 = 0, n_fwd4 = 0, n_fwdx = 0, n_nc = 0, n_x0 = 0, n_sw = 0;
  int n_mode [4] = '{0, 0, 0, 0};
  int n_sh [4] = '{0, 0, 0, 0};

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // an instruction refused at this edge must be offered again unchanged
  bit held = 0;
  always @(posedge clk) held <= in_valid && !in_ready;

  // acceptance: compute the expected outcome in program order
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    crypto_dec_t d;
    exp_t e;
    d = '0;
    e.crypto = 0;
    for (int o = 1; o <= 19; o++)
      if (encode(crypto_op_e'(o), in_instr[11:7], in_instr[19:15], in_instr[24:20],
                 in_instr[23:20], in_instr[31:30]) == in_instr) begin
        d.op = crypto_op_e'(o);
        e.crypto = 1;
      end
    e.rd     = in_instr[11:7];
    e.we     = e.crypto && e.rd != 0;
    e.mode   = e.crypto ? ref_mode(ref_tag(d.op)) : 2'b00;
    e.shares = policy[ref_tag(d.op)];
    e.data   = e.crypto ? ref_exec(d.op, model[in_instr[19:15]], model[in_instr[24:20]],
                                   in_instr[23:20], in_instr[31:30]) : '0;
    e.t_acc  = cyc;
    e.seq    = acc_seq;
    stall_at_acc[acc_seq] = n_stall;
    acc_seq++;
    if (e.we) model[e.rd] = e.data;
    q.push_back(e);
  end

  // retirement
  always @(posedge clk) if (rst_n && wb_valid) begin
    exp_t e;
    retired++;
    if (q.size() == 0) check(0, "unexpected retirement");
    else begin
      e = q.pop_front();
      check(wb_crypto == e.crypto && wb_we == e.we, "kind");
      // five edges, plus one per hazard stall while it waited in IF/ID
      check(cyc - e.t_acc == 5 + stall_at_rx[e.seq] - stall_at_acc[e.seq],
            $sformatf("latency %0d", cyc - e.t_acc));
      if (e.crypto) begin
        check(wb_rd == e.rd && wb_mode == e.mode && wb_shares == e.shares, "rd/mode/shares");
        if (e.rd != 0) check(wb_data == e.data, $sformatf("data %h exp %h", wb_data, e.data));
        n_mode[wb_mode]++;
        n_sh[wb_shares]++;
        if (e.rd == 0) n_x0++;
      end else begin
        check(wb_mode == 2'b00, "non-crypto MASK_MODE");
        n_mode[wb_mode]++;
        n_nc++;
      end
    end
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.r2_valid && !stall) stall_at_rx[rx_seq++] = n_stall;
    if (stall) n_stall++;
    if (in_valid && !in_ready) n_bp++;
    if (dut.r2_valid && !stall && dut.r2_dec.is_crypto && dut.r2_dec.rs1 != 0) begin
      if (dut.r3.valid && dut.r3.we && dut.r3.rd == dut.r2_dec.rs1) n_fwd3++;
      else if (dut.r4.valid && dut.r4.we && dut.r4.rd == dut.r2_dec.rs1) n_fwd4++;
      else if (ext_we && ext_waddr == dut.r2_dec.rs1) n_fwdx++;
    end
    if (ex_sw) n_sw++;
  end

  task automatic ext_write(input logic [4:0] a, input logic [63:0] v);
    @(negedge clk);
    ext_we = 1; ext_waddr = a; ext_wdata = v;
    @(negedge clk);
    ext_we = 0;
    if (a != 0) model[a] = v;
  endtask

  task automatic drain();
    @(negedge clk);
    in_valid = 0;
    while (q.size() != 0) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_instr = 0; cfg_we = 0; cfg_tag = 0; cfg_sh = 0;
    ext_we = 0; ext_waddr = 0; ext_wdata = 0; dbg_raddr = 0;
    for (int l = 0; l < 24; l++) seed[l*32 +: 32] = $urandom;
    for (int i = 0; i < 32; i++) model[i] = 0;
    policy = '{2'd0, 2'd1, 2'd2, 2'd1};
    ref_init();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int r = 1; r < 8; r++) ext_write(5'(r), rand64());

    // phase 1: random streams, share policy changed between bursts
    for (int burst = 0; burst < 8; burst++) begin
      if (burst > 0) begin
        drain();
        for (int t = 1; t < 4; t++) begin
          @(negedge clk);
          cfg_we = 1; cfg_tag = 2'(t); cfg_sh = 2'((burst + t) % 4);
          policy[t] = cfg_sh;
        end
        @(negedge clk) cfg_we = 0;
      end
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        // an instruction refused at the last edge stays offered
        if (!held) begin
          in_valid = ($urandom_range(0, 9) < 8);
          in_instr = encode($urandom_range(0, 9) == 0 ? OP_NONE : crypto_op_e'($urandom_range(1, 19)),
                            ($urandom_range(0, 15) == 0) ? 5'd0 : 5'($urandom_range(1, 7)),
                            5'($urandom_range(0, 7)), 5'($urandom_range(0, 7)),
                            4'($urandom_range(0, 10)), 2'($urandom));
        end
      end
    end
    drain();

    // phase 2: directed forwarding from the external write port
    for (int i = 0; i < 20; i++) begin
      logic [63:0] v;
      v = rand64();
      @(negedge clk);
      in_valid = 1;
      in_instr = encode(OP_SHA512SUM0, 5'd21, 5'd20, 5'd0, 4'd0, 2'd0);
      @(negedge clk);
      in_valid = 0;
      while (!dut.r2_valid) @(negedge clk);
      // the instruction reads its operands in this cycle; the value arrives now
      ext_we = 1; ext_waddr = 5'd20; ext_wdata = v;
      q[$].data = ref_exec(OP_SHA512SUM0, v, 0, 0, 0);
      model[20] = v;
      model[21] = q[$].data;
      @(negedge clk) ext_we = 0;
      drain();
    end

    // register read port for the rest of the core
    for (int r = 0; r < 32; r++) begin
      dbg_raddr = 5'(r);
      #1;
      check(dbg_rdata == model[r], $sformatf("final x%0d", r));
    end

    check(retired > 1500, "enough retired");
    check(n_stall > 0, "hazard stall");
    check(n_bp > 0, "hand-off back-pressure");
    check(n_fwd3 > 0, "forward from MEM");
    check(n_fwd4 > 0, "forward from WB");
    check(n_fwdx > 0, "forward from external port");
    check(n_nc > 0, "non-crypto retirement");
    check(n_x0 > 0, "x0 destination");
    check(n_sw > 0, "share-wise CFU path");
    for (int m = 0; m < 4; m++) check(n_mode[m] > 0, $sformatf("MASK_MODE %0d", m));
    for (int s = 0; s < 4; s++) check(n_sh[s] > 0, $sformatf("MASK_SHARES %0d", s));
    $display("mechanisms: stall=%0d backpressure=%0d fwd_mem=%0d fwd_wb=%0d fwd_ext=%0d noncrypto=%0d x0=%0d sharewise=%0d",
             n_stall, n_bp, n_fwd3, n_fwd4, n_fwdx, n_nc, n_x0, n_sw);
    $display("modes %0d %0d %0d %0d shares %0d %0d %0d %0d retired %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_sh[0], n_sh[1], n_sh[2], n_sh[3], retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
