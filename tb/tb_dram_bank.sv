// tb_dram_bank: checks the bank model's row buffer protocol. Rows are
// activated, written through the row buffer at random columns, precharged
// and reopened in random order; every read of the row buffer must match a
// model of the cell array. Rows never written must read as zero, and a
// write must not reach the cells of another row.
module tb_dram_bank;
  import pim_pkg::*;

  localparam int NROWS = 6;
  logic clk = 1'b0, act = 0, pre = 0, we = 0;
  row_t row = '0;
  col_t col = '0;
  word_t wdata = '0, rdata;
  word_t model [NROWS][COLS];
  int checks = 0, failures = 0;

  dram_bank dut (.clk, .act, .pre, .we, .row, .col, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input logic a, input logic p, input logic w);
    @(negedge clk);
    act = a; pre = p; we = w;
    @(negedge clk);
    act = 0; pre = 0; we = 0;
  endtask

  initial begin
    for (int r = 0; r < NROWS; r++) for (int c = 0; c < COLS; c++) model[r][c] = '0;
    for (int it = 0; it < 60; it++) begin
      int r;
      r = int'($urandom_range(NROWS - 1));
      row = row_t'(r * 1000 + 7);   // sparse row numbers
      pulse(1, 0, 0);
      for (int c = 0; c < COLS; c++) begin
        col = col_t'(c); #1;
        checks++;
        if (rdata !== model[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d col %0d: %h vs %h", r, c, rdata, model[r][c]);
        end
      end
      for (int n = 0; n < 8; n++) begin
        col = col_t'($urandom);
        for (int i = 0; i < WORD_W / 32; i++) wdata[i*32 +: 32] = $urandom;
        model[r][col] = wdata;
        pulse(0, 0, 1);
      end
      row = row_t'($urandom);      // PRE must close the row that is open
      pulse(0, 1, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
