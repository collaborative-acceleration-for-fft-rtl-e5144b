// tb_pim_mem_controller: the channel controller against a protocol monitor.
//
// Random host reads, writes and pim commands (moves and ALU operations) go
// into the queue; the monitor keeps its own open-row table from the ACT and
// PRE masks on the two pseudo-channel buses and checks that
//   - every column command finds its banks open at its row (all even banks
//     for a MOV of real parts, all odd banks for imaginary parts),
//   - ACT comes no sooner than TRP cycles after PRE, PRE no sooner than TRAS
//     cycles after ACT, pim commands at least PIM_INTERVAL cycles apart,
//   - at most one command per cycle and column commands leave in the order
//     the requests were accepted, each with its own fields,
//   - read data returns one cycle after the RD.
// It also checks the exact latency of a read that misses an open row
// (PRE, TRP cycles, ACT, RD, data) and counts row hits, misses, waits
// forced by the half-rate pim limit and queue-full back-pressure.
module tb_pim_mem_controller;
  import pim_pkg::*;

  localparam int TRP = 5, TRAS = 10, PIM_INTERVAL = 2, QDEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready, rsp_valid;
  mem_req_t req;
  word_t rsp_data;
  pch_bus_t bus [2];
  word_t pch_rdata [2];
  ctrl_evt_t evt;
  int checks = 0, failures = 0;
  int cyc = 0;

  pim_mem_controller #(.QDEPTH(QDEPTH), .TRP(TRP), .TRAS(TRAS), .PIM_INTERVAL(PIM_INTERVAL)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data,
    .bus, .pch_rdata, .evt);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rdfun(input int p, input pch_bus_t b);
    return {p[3:0], b.bank, b.row, b.col, 203'd0, 24'hc0ffee};
  endfunction
  assign pch_rdata[0] = rdfun(0, bus[0]);
  assign pch_rdata[1] = rdfun(1, bus[1]);

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  // ---------------- monitor ----------------
  logic      mopen [2][BANKS_PER_PCH];
  row_t      mrow  [2][BANKS_PER_PCH];
  int        last_act [2][BANKS_PER_PCH];
  int        last_pre [2][BANKS_PER_PCH];
  int        last_pim = -100;
  mem_req_t  sent [$];
  word_t     exp_rsp [$];
  int        n_col = 0, n_act = 0, n_pre = 0, n_pim_wait = 0, n_qfull = 0, n_hit = 0;
  logic      rsp_pending = 1'b0;
  word_t     rsp_exp;

  initial for (int p = 0; p < 2; p++) for (int b = 0; b < BANKS_PER_PCH; b++) begin
    mopen[p][b] = 1'b0; mrow[p][b] = '0; last_act[p][b] = -100; last_pre[p][b] = -100;
  end

  always @(posedge clk) if (rst_n) begin
    int ncmd;
    cyc++;
    ncmd = 0;
    if (rsp_pending) begin
      checks++;
      if (!rsp_valid || rsp_data !== rsp_exp) fail("read response");
    end
    rsp_pending = 1'b0;
    for (int p = 0; p < 2; p++) begin
      if (bus[p].act != 0) ncmd++;
      if (bus[p].pre != 0) ncmd++;
      if (bus[p].rd || bus[p].wr || bus[p].pim) ncmd++;
      for (int b = 0; b < BANKS_PER_PCH; b++) begin
        if (bus[p].pre[b]) begin
          checks++;
          if (!mopen[p][b]) fail("PRE to closed bank");
          if (cyc - last_act[p][b] < TRAS) fail($sformatf("tRAS violated: %0d", cyc - last_act[p][b]));
          mopen[p][b] = 1'b0; last_pre[p][b] = cyc; n_pre++;
        end
        if (bus[p].act[b]) begin
          checks++;
          if (mopen[p][b]) fail("ACT to open bank");
          if (cyc - last_pre[p][b] < TRP) fail($sformatf("tRP violated: %0d", cyc - last_pre[p][b]));
          mopen[p][b] = 1'b1; mrow[p][b] = bus[p].row; last_act[p][b] = cyc;
        end
      end
      if (bus[p].act != 0) n_act++;
      if (bus[p].rd || bus[p].wr || bus[p].pim) begin
        mem_req_t r;
        logic [BANKS_PER_PCH-1:0] need;
        n_col++;
        checks++;
        if (sent.size() == 0) begin fail("column command with nothing queued"); continue; end
        r = sent.pop_front();
        if (32'(r.pch) != p) fail("wrong pseudo channel");
        if (bus[p].rd != (r.kind == REQ_RD) || bus[p].wr != (r.kind == REQ_WR) ||
            bus[p].pim != (r.kind == REQ_PIM)) fail("wrong command kind / order");
        need = '0;
        if (r.kind != REQ_PIM) begin
          need[r.bank] = 1'b1;
          if (bus[p].bank != r.bank || bus[p].wdata != r.wdata) fail("wrong bank/data");
        end else begin
          if (bus[p].cmd != r.pim) fail("wrong pim fields");
          if (r.pim.op inside {PIM_MOV_RD, PIM_MOV_WR})
            need = r.pim.odd ? {8{2'b10}} : {8{2'b01}};
          if (bus[p].pim) begin
            if (cyc - last_pim < PIM_INTERVAL) fail("pim issue faster than half rate");
            last_pim = cyc;
          end
        end
        if (need != 0 && bus[p].col != r.col) fail("wrong column");
        for (int b = 0; b < BANKS_PER_PCH; b++)
          if (need[b] && (!mopen[p][b] || mrow[p][b] != r.row))
            fail($sformatf("column command to bank %0d not open at row %0d", b, r.row));
        if (bus[p].rd) begin rsp_pending = 1'b1; rsp_exp = pch_rdata[p]; end
      end
    end
    checks++;
    if (ncmd > 1) fail("more than one command in a cycle");
    if (evt.pim_wait) n_pim_wait++;
    if (evt.q_full) n_qfull++;
  end

  always @(posedge clk) if (rst_n && req_valid && req_ready) sent.push_back(req);

  task automatic send(input mem_req_t r);
    @(negedge clk);
    req = r; req_valid = 1'b1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  function automatic mem_req_t rand_req(input int nrows);
    mem_req_t r;
    r = '0;
    r.kind  = req_kind_e'($urandom_range(2));
    r.pch   = 1'($urandom);
    r.bank  = bank_t'($urandom);
    r.row   = row_t'($urandom_range(nrows - 1));
    r.col   = col_t'($urandom);
    r.wdata = {8{$urandom}};
    r.pim.op   = pim_op_e'($urandom_range(1, 7));
    r.pim.odd  = 1'($urandom);
    r.pim.dst  = reg_idx_t'($urandom);
    r.pim.src0 = reg_idx_t'($urandom);
    r.pim.k    = $urandom;
    return r;
  endfunction

  initial begin
    mem_req_t r;
    int t0, t_rsp;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // directed: read of closed bank, then read of another row of that bank
    r = '0; r.kind = REQ_RD; r.bank = 4'd3; r.row = 16'd7; r.col = 5'd9;
    send(r);
    r.row = 16'd8;
    t0 = cyc;
    send(r);
    t_rsp = -1;
    for (int i = 0; i < 60 && t_rsp < 0; i++) begin
      @(posedge clk);
      if (rsp_valid && rsp_data[255:24] == {4'd0, 4'd3, 16'd8, 5'd9, 203'd0}) t_rsp = cyc;
    end
    // second read: PRE at earliest TRAS after the first ACT, ACT TRP later,
    // RD one cycle after ACT, data one cycle after RD
    checks++;
    if (t_rsp - t0 != TRAS + TRP + 2) fail($sformatf("row-miss read latency %0d, expected %0d", t_rsp - t0, TRAS + TRP + 2));
    $display("row-miss read latency: %0d cycles after enqueue", t_rsp - t0);

    // random traffic, short bursts so the queue fills
    for (int it = 0; it < 3000; it++) begin
      fork
        send(rand_req(3));
      join
      if ($urandom_range(9) == 0) repeat ($urandom_range(20)) @(posedge clk);
    end
    while (sent.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);

    checks++;
    if (n_pim_wait == 0) fail("half-rate pim limit never held a command");
    checks++;
    if (n_qfull == 0) fail("queue never filled");
    checks++;
    if (n_pre == 0) fail("no row-miss precharge");
    $display("column cmds %0d, ACT %0d, PRE %0d, pim waits %0d, queue-full cycles %0d",
             n_col, n_act, n_pre, n_pim_wait, n_qfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
