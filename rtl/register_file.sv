// register_file: 32 x 64-bit RISC-V integer register file with two
// combinational read ports and two write ports.
//
// x0 reads as zero and ignores writes. Write port 0 carries the crypto
// write-back; write port 1 carries writes from the rest of the core (ALU,
// loads). If both write the same register in one cycle, port 0 wins. Writes
// land on the rising clock edge; reads see the old value in the same cycle
// (the pipeline forwards around that). The register file is not part of
// the published changes; this is a plain stand-in so that the crypto path
// can execute instruction sequences. Synchronous active-low reset clears
// all registers.
module register_file
  import cryptrisc_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [$clog2(NREGS)-1:0]  raddr_a_i,
  input  logic [$clog2(NREGS)-1:0]  raddr_b_i,
  output logic [XLEN-1:0]           rdata_a_o,
  output logic [XLEN-1:0]           rdata_b_o,
  input  logic [$clog2(NREGS)-1:0]  raddr_c_i,
  output logic [XLEN-1:0]           rdata_c_o,
  input  logic                      we0_i,
  input  logic [$clog2(NREGS)-1:0]  waddr0_i,
  input  logic [XLEN-1:0]           wdata0_i,
  input  logic                      we1_i,
  input  logic [$clog2(NREGS)-1:0]  waddr1_i,
  input  logic [XLEN-1:0]           wdata1_i
);

  logic [XLEN-1:0] regs_q [NREGS];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(NREGS); i++) regs_q[i] <= '0;
    end else begin
      if (we1_i && waddr1_i != '0) regs_q[waddr1_i] <= wdata1_i;
      if (we0_i && waddr0_i != '0) regs_q[waddr0_i] <= wdata0_i;
    end
  end

  assign rdata_a_o = (raddr_a_i == '0) ? '0 : regs_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0) ? '0 : regs_q[raddr_b_i];
  assign rdata_c_o = (raddr_c_i == '0) ? '0 : regs_q[raddr_c_i];

endmodule
