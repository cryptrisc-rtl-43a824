// mask_prng: the LFSR-based pseudo-random generator that feeds the Masking
// Control Unit with fresh mask bits every clock cycle.
//
// LANES independent 64-bit Galois LFSRs (polynomial x^64+x^63+x^61+x^60+1,
// maximal length). Each lane advances 64 steps per clock, so every output
// bit is new each cycle. While rst_ni is low (sampled on the clock edge,
// synchronous load) each lane loads its 64-bit slice
// of seed_i, the seed from the entropy source; an all-zero slice is replaced
// by a fixed non-zero constant so a lane cannot lock up. rnd_o is the lane
// state, registered, and valid from the first cycle after reset.
//
// The LFSR basis and the reset-time seeding follow the published
// description; the polynomial, the lane count (12 lanes = 768 bits: two
// operands x three shares x a 64-bit A and a 64-bit B mask) and delivering
// all shares in one cycle rather than over extra rounds are local choices.
module mask_prng #(
  parameter int unsigned LANES = 12
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [LANES*64-1:0]   seed_i,
  output logic [LANES*64-1:0]   rnd_o
);

  localparam logic [63:0] TAPS      = 64'hD800_0000_0000_0000; // x^64+x^63+x^61+x^60
  localparam logic [63:0] SEED_ZERO = 64'h9E37_79B9_7F4A_7C15;

  logic [63:0] state_q [LANES];

  function automatic logic [63:0] lfsr_leap64(logic [63:0] s);
    logic [63:0] x;
    x = s;
    for (int i = 0; i < 64; i++)
      x = x[0] ? ((x >> 1) ^ TAPS) : (x >> 1);
    return x;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk_i) begin
      if (!rst_ni)
        state_q[l] <= (seed_i[l*64 +: 64] == '0) ? SEED_ZERO : seed_i[l*64 +: 64];
      else
        state_q[l] <= lfsr_leap64(state_q[l]);
    end
    assign rnd_o[l*64 +: 64] = state_q[l];
  end

endmodule
