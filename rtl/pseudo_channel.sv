// pseudo_channel: one HBM pseudo channel with processing in memory.
//
// Sixteen banks share the channel's data bus; a PIM unit sits between each
// even/odd bank pair (banks 2p and 2p+1 feed PIM unit p), so eight PIM
// units. Host reads and writes reach a single bank, chosen by bus.bank.
// A pim command (bus.pim) is broadcast: every PIM unit executes it in the
// same cycle on its own bank pair at the same column, which is where the
// bandwidth gain of PIM comes from. ACT and PRE carry a per-bank mask so the
// controller can open a row in all even (or all odd) banks at once.
// Timing: all bus fields are sampled at the rising edge; rdata is the
// selected bank's open-row word at bus.col in the same cycle.
// The bank/PIM arrangement follows the paper (16 banks per pseudo channel,
// one PIM unit per two banks); the bus encoding is this design's own.
module pseudo_channel
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 8192
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pch_bus_t bus,
  output word_t    rdata
);
  localparam int unsigned NBANKS = BANKS_PER_PCH;
  localparam int unsigned NPIM   = NBANKS / 2;

  word_t bank_rdata [NBANKS];
  word_t pim_wdata  [NPIM];
  logic  pim_we     [NBANKS];

  for (genvar p = 0; p < NPIM; p++) begin : g_pim
    pim_unit u_pim (
      .clk, .rst_n,
      .cmd_valid  (bus.pim),
      .cmd        (bus.cmd),
      .even_rdata (bank_rdata[2*p]),
      .odd_rdata  (bank_rdata[2*p+1]),
      .even_we    (pim_we[2*p]),
      .odd_we     (pim_we[2*p+1]),
      .wdata      (pim_wdata[p])
    );
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic  host_we;
    word_t wdata;
    assign host_we = bus.wr && (32'(bus.bank) == b);
    assign wdata   = host_we ? bus.wdata : pim_wdata[b/2];
    dram_bank #(.ROWS(ROWS)) u_bank (
      .clk,
      .act   (bus.act[b]),
      .pre   (bus.pre[b]),
      .we    (host_we || pim_we[b]),
      .row   (bus.row),
      .col   (bus.col),
      .wdata (wdata),
      .rdata (bank_rdata[b])
    );
  end

  assign rdata = bank_rdata[bus.bank];

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
      bus.wr |-> !bus.pim)
    else $error("pseudo_channel: host write and pim command in one cycle");
  a_one_host: assert property (@(posedge clk) disable iff (!rst_n)
      bus.rd |-> !bus.wr && !bus.pim)
    else $error("pseudo_channel: host read together with another column command");
endmodule
