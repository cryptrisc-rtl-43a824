// tb_register_file: random reads and writes on both write ports against a
// shadow array: x0 stays zero, port 0 wins a same-register collision,
// reads are combinational and see the value written at the last edge,
// reset clears everything.
module tb_register_file;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra, rb, rc, wa0, wa1;
  logic [63:0] da, db, dc, wd0, wd1;
  logic we0, we1;
  logic [63:0] shadow [32];
  int checks = 0, failures = 0, collisions = 0;

  always #5 clk = ~clk;

  register_file dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .raddr_b_i(rb),
                     .rdata_a_o(da), .rdata_b_o(db), .raddr_c_i(rc), .rdata_c_o(dc),
                     .we0_i(we0), .waddr0_i(wa0), .wdata0_i(wd0),
                     .we1_i(we1), .waddr1_i(wa1), .wdata1_i(wd1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we0 = 0; we1 = 0; ra = 0; rb = 0; rc = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we0 = $urandom_range(0, 1); we1 = $urandom_range(0, 1);
      wa0 = 5'($urandom); wa1 = (i % 7 == 0) ? wa0 : 5'($urandom);
      wd0 = {$urandom, $urandom}; wd1 = {$urandom, $urandom};
      ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom);
      #1;
      checks++;
      if (da != shadow[ra] || db != shadow[rb] || dc != shadow[rc]) begin
        failures++;
        if (failures < 5) $display("FAIL read %0d %0d %0d", ra, rb, rc);
      end
      @(posedge clk);
      if (we1 && wa1 != 0) shadow[wa1] = wd1;
      if (we0 && wa0 != 0) shadow[wa0] = wd0;
      if (we0 && we1 && wa0 == wa1 && wa0 != 0) collisions++;
    end
    checks++;
    if (collisions == 0) failures++;
    @(negedge clk) rst_n = 0; we0 = 0; we1 = 0;
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      ra = 5'(r);
      #1;
      checks++;
      if (da != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
