// pim_regfile: the PIM unit's register file, NUM_REGS words of 256 bits.
//
// Three combinational read ports feed the ALU (two operands) and the
// row-buffer write path. Two synchronous write ports: port 1 serves every
// ALU result and row-buffer move, port 2 serves the second result of the
// MADDSUB butterfly command, the extra write port the paper says the
// augmentation needs. If both ports write the same register in one cycle,
// port 2 wins (this design's choice). Registers reset to zero on rst_n low.
// Size (16 registers) and width (one DRAM word) follow the paper.
module pim_regfile
  import pim_pkg::*;
#(
  parameter int unsigned NREGS = NUM_REGS,
  parameter int unsigned W     = WORD_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra0,
  input  logic [$clog2(NREGS)-1:0] ra1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  output logic [W-1:0]             rd0,
  output logic [W-1:0]             rd1,
  output logic [W-1:0]             rd2,
  input  logic                     we1,
  input  logic [$clog2(NREGS)-1:0] wa1,
  input  logic [W-1:0]             wd1,
  input  logic                     we2,
  input  logic [$clog2(NREGS)-1:0] wa2,
  input  logic [W-1:0]             wd2
);
  logic [W-1:0] regs [NREGS];

  assign rd0 = regs[ra0];
  assign rd1 = regs[ra1];
  assign rd2 = regs[ra2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (we1) regs[wa1] <= wd1;
      if (we2) regs[wa2] <= wd2;
    end
  end
endmodule
