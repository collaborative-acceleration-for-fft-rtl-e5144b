// tb_pim_regfile: drives random traffic into the two write ports of the PIM
// register file and compares all three read ports with a model array each
// cycle. Checks reset to zero, simultaneous writes to different registers
// (the MADDSUB case) and port 2 winning when both ports hit one register.
module tb_pim_regfile;
  import pim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  reg_idx_t ra0, ra1, ra2, wa1, wa2;
  word_t rd0, rd1, rd2, wd1, wd2;
  logic we1, we2;
  word_t model [NUM_REGS];
  int checks = 0, failures = 0, dual = 0, cycles = 0;

  pim_regfile dut (.clk, .rst_n, .ra0, .ra1, .ra2, .rd0, .rd1, .rd2,
                   .we1, .wa1, .wd1, .we2, .wa2, .wd2);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rword();
    word_t w;
    for (int i = 0; i < WORD_W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic cmp(input word_t got, input word_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    we1 = 0; we2 = 0; wa1 = 0; wa2 = 0; wd1 = '0; wd2 = '0; ra0 = 0; ra1 = 0; ra2 = 0;
    for (int i = 0; i < NUM_REGS; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NUM_REGS; i++) begin
      ra0 = reg_idx_t'(i); #1; cmp(rd0, '0, "reset");
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we1 = 1'($urandom); we2 = 1'($urandom);
      wa1 = reg_idx_t'($urandom); wa2 = reg_idx_t'($urandom);
      if (it % 50 == 0) wa2 = wa1;
      wd1 = rword(); wd2 = rword();
      ra0 = reg_idx_t'($urandom); ra1 = reg_idx_t'($urandom); ra2 = reg_idx_t'($urandom);
      #1;
      cmp(rd0, model[ra0], "rd0");
      cmp(rd1, model[ra1], "rd1");
      cmp(rd2, model[ra2], "rd2");
      @(posedge clk);
      if (we1) model[wa1] = wd1;
      if (we2) model[wa2] = wd2;
      if (we1 && we2) dual++;
    end
    checks++;
    if (dual == 0) failures++;
    $display("dual-port writes: %0d", dual);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
