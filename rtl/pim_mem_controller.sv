// pim_mem_controller: memory controller of one HBM channel with PIM support.
//
// The host enqueues requests (valid/ready): single-bank reads and writes and
// pim commands. Each pim command is broadcast to every PIM unit of the
// chosen pseudo channel. The two pseudo channels of the channel share one
// command bus, so at most one DRAM command (ACT, PRE, RD, WR or PIM) leaves
// per cycle. Requests are served strictly in order from a QDEPTH-entry queue.
//
// For the head request the controller works out which banks it needs open
// and at which row: the one bank of a read or write, all even banks for a
// MOV of real parts, all odd banks for a MOV of imaginary parts, none for an
// ALU command. It then
//   1. precharges needed banks holding another row, once tRAS has passed
//      since their ACT;
//   2. activates the needed closed banks (all at once, a multi-bank ACT),
//      once tRP has passed since their PRE;
//   3. issues the column command. Reads and writes may go every cycle
//      (tCCDL = one clock); pim commands go at most every PIM_INTERVAL
//      cycles, half the read/write rate, as commercial PIM designs do.
// Rows stay open after use (open-page policy), so the next access to the
// same row is a hit. Read data appears on rsp_data with rsp_valid one cycle
// after the RD leaves.
//
// Timing in cycles assumes a clock period equal to tCCDL = 3.33 ns:
// tRP = 15 ns -> TRP = 5, tRAS = 33 ns -> TRAS = 10. The paper gives the ns
// values and the half-rate rule; the clock choice, queue depth, in-order
// policy, open-page policy and lack of tRCD/refresh are this design's own.
module pim_mem_controller
  import pim_pkg::*;
#(
  parameter int unsigned QDEPTH       = 16,
  parameter int unsigned TRP          = 5,
  parameter int unsigned TRAS         = 10,
  parameter int unsigned PIM_INTERVAL = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  // host request queue
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  // read response
  output logic      rsp_valid,
  output word_t     rsp_data,
  // the two pseudo channels
  output pch_bus_t  bus [2],
  input  word_t     pch_rdata [2],
  // event flags
  output ctrl_evt_t evt
);
  localparam int unsigned NB  = BANKS_PER_PCH;
  localparam int unsigned QAW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int unsigned CW  = 8;
  localparam logic [CW-1:0] CMAX = '1;

  // ---------------- request queue ----------------
  mem_req_t         q [QDEPTH];
  logic [QAW-1:0]   wptr, rptr;
  logic [QAW:0]     count;
  logic             push, pop;
  mem_req_t         h;

  assign req_ready = (count != (QAW+1)'(QDEPTH));
  assign push      = req_valid && req_ready;
  assign h         = q[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        wptr <= (32'(wptr) == QDEPTH-1) ? '0 : wptr + 1'b1;
      end
      if (pop) begin
        rptr <= (32'(rptr) == QDEPTH-1) ? '0 : rptr + 1'b1;
      end
      count <= count + (QAW+1)'(push) - (QAW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[wptr] <= req;
  end

  // ---------------- bank state ----------------
  logic [NB-1:0]  open_q  [2];
  row_t           orow_q  [2][NB];
  logic [CW-1:0]  tras_q  [2][NB];  // cycles since ACT (saturating)
  logic [CW-1:0]  trp_q   [2][NB];  // cycles since PRE (saturating)
  logic [CW-1:0]  pim_gap_q;        // cycles since the last pim command

  // ---------------- head decode ----------------
  logic [NB-1:0] tmask, conflict, closed, pre_ok, act_ok;
  logic          is_mov, issue_act, issue_pre, issue_col;

  always_comb begin
    is_mov = (h.kind == REQ_PIM) &&
             (h.pim.op == PIM_MOV_RD || h.pim.op == PIM_MOV_WR);
    tmask = '0;
    if (h.kind == REQ_RD || h.kind == REQ_WR) tmask[h.bank] = 1'b1;
    else if (is_mov) tmask = h.pim.odd ? {NB/2{2'b10}} : {NB/2{2'b01}};
    for (int b = 0; b < NB; b++) begin
      conflict[b] = tmask[b] && open_q[h.pch][b] && (orow_q[h.pch][b] != h.row);
      closed[b]   = tmask[b] && !open_q[h.pch][b];
      pre_ok[b]   = !conflict[b] || (tras_q[h.pch][b] >= CW'(TRAS - 1));
      act_ok[b]   = !closed[b]   || (trp_q[h.pch][b]  >= CW'(TRP - 1));
    end
    issue_pre = (count != 0) && (conflict != 0) && (&pre_ok);
    issue_act = (count != 0) && (conflict == 0) && (closed != 0) && (&act_ok);
    issue_col = (count != 0) && (conflict == 0) && (closed == 0) &&
                ((h.kind != REQ_PIM) || (pim_gap_q >= CW'(PIM_INTERVAL - 1)));
    pop = issue_col;

    for (int p = 0; p < 2; p++) begin
      bus[p]       = '0;
      bus[p].bank  = h.bank;
      bus[p].row   = h.row;
      bus[p].col   = h.col;
      bus[p].wdata = h.wdata;
      bus[p].cmd   = h.pim;
      if (32'(h.pch) == p) begin
        if (issue_pre) bus[p].pre = conflict;
        if (issue_act) bus[p].act = closed;
        bus[p].rd  = issue_col && (h.kind == REQ_RD);
        bus[p].wr  = issue_col && (h.kind == REQ_WR);
        bus[p].pim = issue_col && (h.kind == REQ_PIM);
      end
    end

    evt             = '0;
    evt.act         = issue_act;
    evt.pre         = issue_pre;
    evt.rd          = issue_col && (h.kind == REQ_RD);
    evt.wr          = issue_col && (h.kind == REQ_WR);
    evt.pim         = issue_col && (h.kind == REQ_PIM);
    evt.pim_wait    = (count != 0) && (conflict == 0) && (closed == 0) &&
                      (h.kind == REQ_PIM) && !issue_col;
    evt.timing_wait = (count != 0) && !issue_pre && !issue_act &&
                      ((conflict != 0) || (closed != 0));
    evt.q_full      = req_valid && !req_ready;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        open_q[p] <= '0;
        for (int b = 0; b < NB; b++) begin
          orow_q[p][b] <= '0;
          tras_q[p][b] <= CMAX;
          trp_q[p][b]  <= CMAX;
        end
      end
      pim_gap_q <= CMAX;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        for (int b = 0; b < NB; b++) begin
          if (bus[p].act[b]) begin
            open_q[p][b] <= 1'b1;
            orow_q[p][b] <= h.row;
            tras_q[p][b] <= '0;
          end else if (tras_q[p][b] != CMAX) begin
            tras_q[p][b] <= tras_q[p][b] + 1'b1;
          end
          if (bus[p].pre[b]) begin
            open_q[p][b] <= 1'b0;
            trp_q[p][b]  <= '0;
          end else if (trp_q[p][b] != CMAX) begin
            trp_q[p][b] <= trp_q[p][b] + 1'b1;
          end
        end
      end
      if (evt.pim)                   pim_gap_q <= '0;
      else if (pim_gap_q != CMAX)    pim_gap_q <= pim_gap_q + 1'b1;
      rsp_valid <= evt.rd;
      if (evt.rd) rsp_data <= pch_rdata[h.pch];
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      count <= (QAW+1)'(QDEPTH))
    else $error("pim_mem_controller: queue overflow");
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({issue_pre, issue_act, issue_col}))
    else $error("pim_mem_controller: two commands in one cycle");
endmodule
