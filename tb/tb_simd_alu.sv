// tb_simd_alu: checks every ALU operation of the PIM SIMD ALU lane by lane
// against the reference arithmetic of tb_fp_pkg, with random operands,
// operands of equal exponent (cancellation), zeros and exact ties. Also
// checks the write-enable flags, in particular that only MADDSUB asks for
// the second register-file write port.
module tb_simd_alu;
  import pim_pkg::*;
  import tb_fp_pkg::*;

  pim_op_e op;
  word_t   a, b, r1, r2;
  fp32_t   k;
  logic    we1, we2;
  int      checks = 0, failures = 0;

  simd_alu dut (.op, .a, .b, .k, .r1, .r2, .we1, .we2);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: got %h expected %h (a=%h b=%h k=%h)", what, got, exp, a, b, k);
    end
  endtask

  task automatic run(input pim_op_e o, input int mode);
    op = o;
    k  = rand_f(20);
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] x, y;
      x = rand_f(20);
      y = rand_f(20);
      case (mode)
        1: y = {$urandom_range(1) == 1 ? x[31] : ~x[31], x[30:23], 23'($urandom)}; // same exponent
        2: y = 32'd0;
        3: y = {x[31], x[30:0] - 31'(32'd1 << 24)};   // exponent differs by 2
        default: ;
      endcase
      a[l*32 +: 32] = x;
      b[l*32 +: 32] = y;
    end
    #1;
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] x, y, p;
      x = a[l*32 +: 32];
      y = b[l*32 +: 32];
      p = fmul(k, x);
      case (o)
        PIM_ADD:  check(r1[l*32 +: 32], fadd(x, y), "ADD");
        PIM_SUB:  check(r1[l*32 +: 32], fadd(x, fneg(y)), "SUB");
        PIM_MUL:  check(r1[l*32 +: 32], p, "MUL");
        PIM_MADD: check(r1[l*32 +: 32], fadd(y, p), "MADD");
        PIM_MADDSUB: begin
          check(r1[l*32 +: 32], fadd(y, p), "MADDSUB.add");
          check(r2[l*32 +: 32], fadd(y, fneg(p)), "MADDSUB.sub");
        end
        default: ;
      endcase
    end
    checks++;
    if (we1 !== (o inside {PIM_ADD, PIM_SUB, PIM_MUL, PIM_MADD, PIM_MADDSUB}) ||
        we2 !== (o == PIM_MADDSUB)) begin
      failures++;
      $display("FAIL write enables for %s: we1=%b we2=%b", o.name(), we1, we2);
    end
  endtask

  initial begin
    // a few fixed values: 1.5 + 2.25 = 3.75, 1.0 - 1.0 = +0, 3 * 0.5 = 1.5
    op = PIM_ADD; a = '0; b = '0; k = 32'h3f00_0000;
    a[31:0] = 32'h3fc0_0000; b[31:0] = 32'h4010_0000; #1;
    check(r1[31:0], 32'h4070_0000, "ADD fixed");
    op = PIM_SUB; a[31:0] = 32'h3f80_0000; b[31:0] = 32'h3f80_0000; #1;
    check(r1[31:0], 32'h0000_0000, "SUB to zero");
    op = PIM_MUL; a[31:0] = 32'h4040_0000; #1;
    check(r1[31:0], 32'h3fc0_0000, "MUL fixed");
    // tie: 1 + 2^-24 rounds to even (1.0)
    op = PIM_ADD; a[31:0] = 32'h3f80_0000; b[31:0] = 32'h3380_0000; #1;
    check(r1[31:0], 32'h3f80_0000, "ADD tie to even");
    op = PIM_ADD; a[31:0] = 32'h3f80_0001; b[31:0] = 32'h3380_0000; #1;
    check(r1[31:0], 32'h3f80_0002, "ADD tie to even up");

    for (int it = 0; it < 400; it++) begin
      pim_op_e o;
      case (it % 5)
        0: o = PIM_ADD;
        1: o = PIM_SUB;
        2: o = PIM_MUL;
        3: o = PIM_MADD;
        default: o = PIM_MADDSUB;
      endcase
      run(o, (it / 5) % 4);
    end
    // NOP and moves write nothing through the ALU
    op = PIM_NOP; #1; checks++; if (we1 || we2) failures++;
    op = PIM_MOV_RD; #1; checks++; if (we1 || we2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
