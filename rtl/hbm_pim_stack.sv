// hbm_pim_stack: one HBM3 stack with processing in memory, as the host's
// memory controllers see it.
//
// NUM_CH independent channels, each a pim_mem_controller driving two pseudo
// channels over a shared command bus. With the defaults that is 16 channels,
// 32 pseudo channels, 512 banks and 256 PIM units, the per-stack numbers of
// the HBM3-PIM configuration the design targets. Channels share nothing;
// the host gets a request port, a read response port and event flags per
// channel, so a pim kernel reaches several channels by issuing the same
// command to each (a command broadcast across channels is the host's job).
// The host (a GPU), the interposer, the base logic die and the TSV/PHY
// interface are outside this model: their signals are the ports here.
module hbm_pim_stack
  import pim_pkg::*;
#(
  parameter int unsigned NUM_CH = 16,
  parameter int unsigned ROWS   = 8192,
  parameter int unsigned QDEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid [NUM_CH],
  output logic      req_ready [NUM_CH],
  input  mem_req_t  req       [NUM_CH],
  output logic      rsp_valid [NUM_CH],
  output word_t     rsp_data  [NUM_CH],
  output ctrl_evt_t evt       [NUM_CH]
);
  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    pch_bus_t bus [2];
    word_t    pch_rdata [2];

    pim_mem_controller #(.QDEPTH(QDEPTH)) u_ctrl (
      .clk, .rst_n,
      .req_valid (req_valid[c]),
      .req_ready (req_ready[c]),
      .req       (req[c]),
      .rsp_valid (rsp_valid[c]),
      .rsp_data  (rsp_data[c]),
      .bus       (bus),
      .pch_rdata (pch_rdata),
      .evt       (evt[c])
    );

    for (genvar p = 0; p < 2; p++) begin : g_pch
      pseudo_channel #(.ROWS(ROWS)) u_pch (
        .clk, .rst_n,
        .bus   (bus[p]),
        .rdata (pch_rdata[p])
      );
    end
  end
endmodule
