// tb_pseudo_channel: one pseudo channel driven directly on its bank bus.
// The host writes random words into all sixteen banks, then broadcasts pim
// commands once; every one of the eight PIM units must compute on its own
// even/odd bank pair (real part from the even bank, imaginary from the odd
// bank). Results written back to the row buffers are read out bank by bank
// over the shared data bus after a precharge and re-activation, and compared
// with the reference arithmetic. Checks that a broadcast reaches all units
// and that a host write touches only the addressed bank.
module tb_pseudo_channel;
  import pim_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  pch_bus_t bus;
  word_t rdata;
  word_t mem [BANKS_PER_PCH][4];
  int checks = 0, failures = 0;

  pseudo_channel dut (.clk, .rst_n, .bus, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    @(negedge clk);
    bus = '0;
  endtask

  task automatic pim(input pim_op_e op, input logic odd, input int col, input int dst,
                     input int dst2, input int s0, input int s1, input logic [31:0] k);
    bus.pim = 1'b1;
    bus.col = col_t'(col);
    bus.cmd = '{op: op, odd: odd, dst: reg_idx_t'(dst), dst2: reg_idx_t'(dst2),
                src0: reg_idx_t'(s0), src1: reg_idx_t'(s1), k: k};
    step();
  endtask

  initial begin
    logic [31:0] k;
    bus = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    bus.act = '1; bus.row = 16'd2; step();
    for (int b = 0; b < BANKS_PER_PCH; b++)
      for (int c = 0; c < 2; c++) begin
        for (int l = 0; l < LANES; l++) mem[b][c][l*32 +: 32] = rand_f(10);
        bus.wr = 1'b1; bus.bank = bank_t'(b); bus.col = col_t'(c); bus.wdata = mem[b][c];
        step();
      end
    k = rand_f(3);
    // x = col0, w*x2 style: r2 = even0 + odd1, then MADDSUB of even1/odd0
    pim(PIM_MOV_RD, 0, 0, 0, 0, 0, 0, 0);   // R0 = even col0
    pim(PIM_MOV_RD, 1, 0, 1, 0, 0, 0, 0);   // R1 = odd col0
    pim(PIM_MOV_RD, 0, 1, 2, 0, 0, 0, 0);   // R2 = even col1
    pim(PIM_MOV_RD, 1, 1, 3, 0, 0, 0, 0);   // R3 = odd col1
    pim(PIM_ADD, 0, 0, 4, 0, 0, 3, 0);      // R4 = R0 + R3
    pim(PIM_MADDSUB, 0, 0, 5, 6, 2, 1, k);  // R5 = R1 + k*R2, R6 = R1 - k*R2
    pim(PIM_MOV_WR, 0, 3, 0, 0, 4, 0, 0);   // even col3 = R4
    pim(PIM_MOV_WR, 1, 3, 0, 0, 5, 0, 0);   // odd  col3 = R5
    pim(PIM_MOV_WR, 0, 2, 0, 0, 6, 0, 0);   // even col2 = R6
    bus.pre = '1; step();
    bus.act = '1; bus.row = 16'd2; step();
    for (int p = 0; p < BANKS_PER_PCH / 2; p++) begin
      for (int l = 0; l < LANES; l++) begin
        logic [31:0] r0, r1, r2, r3;
        r0 = mem[2*p][0][l*32 +: 32];   r1 = mem[2*p+1][0][l*32 +: 32];
        r2 = mem[2*p][1][l*32 +: 32];   r3 = mem[2*p+1][1][l*32 +: 32];
        mem[2*p][3][l*32 +: 32]   = fadd(r0, r3);
        mem[2*p+1][3][l*32 +: 32] = fadd(r1, fmul(k, r2));
        mem[2*p][2][l*32 +: 32]   = fadd(r1, fneg(fmul(k, r2)));
      end
    end
    for (int b = 0; b < BANKS_PER_PCH; b++)
      for (int c = 0; c < 4; c++) begin
        if (c == 2 && b % 2 == 1) continue;      // odd col2 never written
        if (c == 3 || c == 2 || c < 2) begin
          bus.bank = bank_t'(b); bus.col = col_t'(c); #1;
          checks++;
          if (rdata !== mem[b][c]) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d col %0d: %h vs %h", b, c, rdata, mem[b][c]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
