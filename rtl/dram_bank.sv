// dram_bank: behavioural model of one HBM DRAM bank with its row buffer and
// column decoder. It stands for the memory vendor's array and is not
// synthesizable logic: the cells are held in an associative array keyed by
// row, so only rows that are touched take simulator memory.
//
// Commands, sampled at the rising clock edge:
//   act  copy row `row` into the row buffer (the bank must be closed)
//   pre  write the row buffer back to its row and close the bank
//   we   write `wdata` to word `col` of the row buffer (bank must be open)
// `rdata` is the row buffer word at `col`, combinationally, so a PIM unit
// can consume it in the same cycle. Rows never written read as zero.
// A row is ROW_BYTES = 1024 bytes, 32 words of 256 bits, as the paper's
// HBM3 parameters give. ROWS = 8192 (8 MiB per bank) is derived from the
// paper's statement that an FFT of 2^21 single-precision complex points fits
// in the bank pair under one PIM unit. Timing (tRP, tRAS) is enforced by the
// memory controller; this model checks only the open/closed protocol.
module dram_bank
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 8192
) (
  input  logic  clk,
  input  logic  act,
  input  logic  pre,
  input  logic  we,
  input  row_t  row,
  input  col_t  col,
  input  word_t wdata,
  output word_t rdata
);
  typedef logic [COLS*WORD_W-1:0] row_bits_t;

  row_bits_t cells [row_t];
  word_t     row_buf [COLS];
  logic      open_q;
  row_t      open_row;

  initial begin
    open_q   = 1'b0;
    open_row = '0;
    for (int c = 0; c < COLS; c++) row_buf[c] = '0;
  end

  assign rdata = row_buf[col];

  always @(posedge clk) begin
    if (act) begin
      row_bits_t bits;
      bits = cells.exists(row) ? cells[row] : '0;
      for (int c = 0; c < COLS; c++) row_buf[c] <= bits[c*WORD_W +: WORD_W];
      open_q   <= 1'b1;
      open_row <= row;
    end else if (pre) begin
      row_bits_t bits;
      for (int c = 0; c < COLS; c++) bits[c*WORD_W +: WORD_W] = row_buf[c];
      cells[open_row] = bits;  // storage only read at a later ACT
      open_q <= 1'b0;
    end else if (we) begin
      row_buf[col] <= wdata;
    end
  end

  a_act_closed: assert property (@(posedge clk) act |-> !open_q)
    else $error("dram_bank: ACT to an open bank");
  a_act_row:    assert property (@(posedge clk) act |-> 32'(row) < ROWS)
    else $error("dram_bank: row %0d beyond %0d rows", row, ROWS);
  a_pre_open:   assert property (@(posedge clk) pre |-> open_q)
    else $error("dram_bank: PRE to a closed bank");
  a_we_open:    assert property (@(posedge clk) we |-> open_q && !act && !pre)
    else $error("dram_bank: column write to a closed bank");
endmodule
