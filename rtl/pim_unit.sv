// pim_unit: one processing-in-memory unit, shared by an even and an odd bank.
//
// It holds the SIMD ALU and the register file. Real parts of the FFT data
// live in the even bank and imaginary parts in the odd bank, so with both
// rows open a butterfly reaches all four components without a new
// activation. Every command arrives by broadcast, with the column address on
// the bank bus:
//   MOV_RD  register dst <- word at the column of the even/odd row buffer
//   MOV_WR  word at the column of the even/odd row buffer <- register src0
//   ADD/SUB/MUL/MADD/MADDSUB  ALU on registers src0, src1 and scalar k,
//           results to dst (and dst2 for MADDSUB)
// Timing: a command presented with cmd_valid in one cycle has its register
// result written at the next clock edge; row-buffer writes are requested in
// the same cycle through even_we/odd_we. One command per cycle at most.
// The split into ALU, register file and row-buffer moves follows the paper;
// the command fields are this design's own.
module pim_unit
  import pim_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  input  pim_cmd_t cmd,
  input  word_t    even_rdata,   // open-row word of the even bank at the bus column
  input  word_t    odd_rdata,    // open-row word of the odd bank at the bus column
  output logic     even_we,
  output logic     odd_we,
  output word_t    wdata
);
  word_t   rd0, rd1, rd2, alu_r1, alu_r2, wd1;
  logic    alu_we1, alu_we2, we1, we2;
  pim_op_e alu_op;

  assign alu_op = cmd_valid ? cmd.op : PIM_NOP;

  simd_alu u_alu (
    .op (alu_op), .a(rd0), .b(rd1), .k(cmd.k),
    .r1 (alu_r1), .r2(alu_r2), .we1(alu_we1), .we2(alu_we2)
  );

  always_comb begin
    we1 = alu_we1 || (alu_op == PIM_MOV_RD);
    we2 = alu_we2;
    wd1 = (alu_op == PIM_MOV_RD) ? (cmd.odd ? odd_rdata : even_rdata) : alu_r1;
    even_we = (alu_op == PIM_MOV_WR) && !cmd.odd;
    odd_we  = (alu_op == PIM_MOV_WR) &&  cmd.odd;
  end
  assign wdata = rd2;

  pim_regfile u_rf (
    .clk, .rst_n,
    .ra0(cmd.src0), .ra1(cmd.src1), .ra2(cmd.src0),
    .rd0, .rd1, .rd2,
    .we1, .wa1(cmd.dst),  .wd1,
    .we2, .wa2(cmd.dst2), .wd2(alu_r2)
  );
endmodule
