// tb_pim_unit: one PIM unit between two small row-buffer models (even bank
// for real parts, odd bank for imaginary parts). It runs a radix-2
// butterfly on eight lanes three ways, with the command sequences a host
// would issue:
//   baseline     4 MOV_RD, 6 MADD (m1 = d - delta*e, m2 = e + delta*d,
//                y = a +- c*m1, b +- c*m2), 4 MOV_WR
//   augmented    4 MOV_RD, 2 MADD, 2 MADDSUB, 4 MOV_WR
//   w = 1 / -j   4 MOV_RD, 4 ADD/SUB, 4 MOV_WR
// and compares the row-buffer words written back with the same sequence
// evaluated by the reference arithmetic. Register results are visible one
// cycle after the command.
module tb_pim_unit;
  import pim_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0;
  pim_cmd_t cmd;
  word_t even_rb [COLS], odd_rb [COLS];
  col_t col = '0;
  word_t even_rdata, odd_rdata, wdata;
  logic even_we, odd_we;
  int checks = 0, failures = 0;

  pim_unit dut (.clk, .rst_n, .cmd_valid, .cmd, .even_rdata, .odd_rdata,
                .even_we, .odd_we, .wdata);

  assign even_rdata = even_rb[col];
  assign odd_rdata  = odd_rb[col];
  always @(posedge clk) begin
    if (even_we) even_rb[col] <= wdata;
    if (odd_we)  odd_rb[col]  <= wdata;
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input pim_op_e op, input logic odd, input int c,
                       input int dst, input int dst2, input int s0, input int s1,
                       input logic [31:0] k);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, odd: odd, dst: reg_idx_t'(dst), dst2: reg_idx_t'(dst2),
            src0: reg_idx_t'(s0), src1: reg_idx_t'(s1), k: k};
    col = col_t'(c);
    @(negedge clk);
    cmd_valid = 1'b0;
    cmd.op = PIM_NOP;
  endtask

  // mode 0: baseline, 1: augmented MADDSUB, 2: w = 1, 3: w = -j
  task automatic butterfly(input int mode, input int c1, input int c2);
    logic [31:0] cc, ss, dl, a, b, d, e, m1, m2, y1r, y1i, y2r, y2i;
    word_t ea, oa, eb, ob;
    cc = rand_f(1); ss = rand_f(1);
    dl = r2f(f2r(ss) / f2r(cc));
    ea = even_rb[c1]; oa = odd_rb[c1]; eb = even_rb[c2]; ob = odd_rb[c2];
    issue(PIM_MOV_RD, 0, c1, 0, 0, 0, 0, 0);   // a
    issue(PIM_MOV_RD, 1, c1, 1, 0, 0, 0, 0);   // b
    issue(PIM_MOV_RD, 0, c2, 2, 0, 0, 0, 0);   // d
    issue(PIM_MOV_RD, 1, c2, 3, 0, 0, 0, 0);   // e
    case (mode)
      0, 1: begin
        issue(PIM_MADD, 0, 0, 4, 0, 3, 2, fneg(dl));   // m1 = d - dl*e
        issue(PIM_MADD, 0, 0, 5, 0, 2, 3, dl);         // m2 = e + dl*d
        if (mode == 0) begin
          issue(PIM_MADD, 0, 0, 6, 0, 4, 0, cc);
          issue(PIM_MADD, 0, 0, 7, 0, 4, 0, fneg(cc));
          issue(PIM_MADD, 0, 0, 8, 0, 5, 1, cc);
          issue(PIM_MADD, 0, 0, 9, 0, 5, 1, fneg(cc));
        end else begin
          issue(PIM_MADDSUB, 0, 0, 6, 7, 4, 0, cc);
          issue(PIM_MADDSUB, 0, 0, 8, 9, 5, 1, cc);
        end
      end
      2: begin
        issue(PIM_ADD, 0, 0, 6, 0, 0, 2, 0);
        issue(PIM_SUB, 0, 0, 7, 0, 0, 2, 0);
        issue(PIM_ADD, 0, 0, 8, 0, 1, 3, 0);
        issue(PIM_SUB, 0, 0, 9, 0, 1, 3, 0);
      end
      default: begin   // y1 = (a + e) + j(b - d), y2 = (a - e) + j(b + d)
        issue(PIM_ADD, 0, 0, 6, 0, 0, 3, 0);
        issue(PIM_SUB, 0, 0, 7, 0, 0, 3, 0);
        issue(PIM_SUB, 0, 0, 8, 0, 1, 2, 0);
        issue(PIM_ADD, 0, 0, 9, 0, 1, 2, 0);
      end
    endcase
    issue(PIM_MOV_WR, 0, c1, 0, 0, 6, 0, 0);
    issue(PIM_MOV_WR, 0, c2, 0, 0, 7, 0, 0);
    issue(PIM_MOV_WR, 1, c1, 0, 0, 8, 0, 0);
    issue(PIM_MOV_WR, 1, c2, 0, 0, 9, 0, 0);
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      a = ea[l*32 +: 32]; b = oa[l*32 +: 32]; d = eb[l*32 +: 32]; e = ob[l*32 +: 32];
      case (mode)
        0, 1: begin
          m1 = fadd(d, fmul(fneg(dl), e));
          m2 = fadd(e, fmul(dl, d));
          y1r = fadd(a, fmul(cc, m1));  y2r = fadd(a, fneg(fmul(cc, m1)));
          y1i = fadd(b, fmul(cc, m2));  y2i = fadd(b, fneg(fmul(cc, m2)));
        end
        2: begin
          y1r = fadd(a, d); y2r = fadd(a, fneg(d)); y1i = fadd(b, e); y2i = fadd(b, fneg(e));
        end
        default: begin
          y1r = fadd(a, e); y2r = fadd(a, fneg(e)); y1i = fadd(b, fneg(d)); y2i = fadd(b, d);
        end
      endcase
      checks += 4;
      if (even_rb[c1][l*32 +: 32] !== y1r) failures++;
      if (even_rb[c2][l*32 +: 32] !== y2r) failures++;
      if (odd_rb[c1][l*32 +: 32]  !== y1i) failures++;
      if (odd_rb[c2][l*32 +: 32]  !== y2i) begin
        failures++;
        $display("FAIL mode %0d lane %0d: Im(y2) %h vs %h", mode, l, odd_rb[c2][l*32 +: 32], y2i);
      end
    end
  endtask

  initial begin
    cmd = '0;
    for (int c = 0; c < COLS; c++)
      for (int l = 0; l < LANES; l++) begin
        even_rb[c][l*32 +: 32] = rand_f(8);
        odd_rb[c][l*32 +: 32]  = rand_f(8);
      end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40; it++) begin
      int c1, c2;
      c1 = int'($urandom_range(COLS - 1));
      c2 = (c1 + 1 + int'($urandom_range(COLS - 2))) % COLS;
      butterfly(it % 4, c1, c2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
