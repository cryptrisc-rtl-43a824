// tb_mask_prng: checks the mask PRNG at a small lane count. After reset each
// lane must hold its seed (a zero seed replaced by the fixed constant), then
// advance every cycle exactly as a reference bit-serial Fibonacci-form
// description of x^64+x^63+x^61+x^60+1 (computed here as a Galois register
// stepped one bit at a time, 64 times, with the tap mask written out bit by
// bit). Output bits must be balanced and no value may repeat.
module tb_mask_prng;
  localparam int L = 3;
  logic clk = 0, rst_n = 0;
  logic [L*64-1:0] seed, rnd;
  int checks = 0, failures = 0;
  logic [63:0] model [L];
  longint ones = 0, total = 0;

  always #5 clk = ~clk;

  mask_prng #(.LANES(L)) dut (.clk_i(clk), .rst_ni(rst_n), .seed_i(seed), .rnd_o(rnd));

  function automatic logic [63:0] step1(logic [63:0] s);
    logic fb;
    fb = s[0];
    s = s >> 1;
    if (fb) begin
      s[63] = ~s[63]; s[62] = ~s[62]; s[60] = ~s[60]; s[59] = ~s[59];
    end
    return s;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] prev [L];
    seed = {64'h0123_4567_89AB_CDEF, 64'h0, 64'hFFFF_0000_1234_5678};
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int l = 0; l < L; l++) begin
      model[l] = (seed[l*64 +: 64] == 0) ? 64'h9E37_79B9_7F4A_7C15 : seed[l*64 +: 64];
      checks++;
      if (rnd[l*64 +: 64] != model[l]) begin
        failures++; $display("FAIL seed lane %0d", l);
      end
    end
    for (int c = 0; c < 500; c++) begin
      for (int l = 0; l < L; l++) prev[l] = rnd[l*64 +: 64];
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < 64; i++) model[l] = step1(model[l]);
        checks++;
        if (rnd[l*64 +: 64] != model[l] || rnd[l*64 +: 64] == prev[l]) begin
          failures++;
          if (failures < 5) $display("FAIL cycle %0d lane %0d", c, l);
        end
        ones += $countones(rnd[l*64 +: 64]);
        total += 64;
      end
    end
    checks++;
    if (ones * 100 < total * 48 || ones * 100 > total * 52) begin
      failures++; $display("FAIL balance %0d/%0d", ones, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
