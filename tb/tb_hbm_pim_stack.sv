// tb_hbm_pim_stack: end-to-end test of the whole stack at its default size
// (16 channels, 32 pseudo channels, 512 banks, 256 PIM units).
//
// The testbench plays the host. For each run it
//   1. writes a batch of complex inputs into every channel, in bit-reversed
//      order, with the strided layout: element k of a transform sits at word
//      k of the bank pair (row BASE + k/32, column k%32), real part in the
//      even bank and imaginary part in the odd bank, and each of the eight
//      32-bit lanes of a word holds a different transform of the batch;
//   2. runs the log2(N) radix-2 decimation-in-time stages as pim commands,
//      the same command stream sent to every channel at once and broadcast
//      by each controller to the eight PIM units of one pseudo channel, so
//      16 x 8 x 8 = 1024 transforms run together;
//   3. reads every result word back and compares it with a direct DFT
//      computed in double precision.
// The butterfly is orchestrated in the four ways the design supports:
//   BASE   6 MADD per butterfly (m1 = d - delta*e, m2 = e + delta*d,
//          y = a +- c*m1, b +- c*m2, delta = s/c)
//   SW     twiddle-aware: 4 ADD/SUB when w = 1 or w = -j, else 6 MADD
//   HW     2 MADD + 2 MADDSUB (augmented ALU)
//   SWHW   2 MADDSUB when w = 1 or -j, 3 commands when |Re w| = |Im w|,
//          else 4
// and the average ALU command count per butterfly, counted at the
// controllers, is checked against the closed form for the size.
// Each mechanism (multi-bank ACT, precharge on a row miss, the half-rate
// pim issue limit, queue back-pressure, host reads and writes, every ALU
// operation) is counted and must occur at least once.
module tb_hbm_pim_stack;
  import pim_pkg::*;
  import tb_fp_pkg::*;

  localparam int NCH = 16;
  localparam int MAXN = 64;
  typedef enum int { BASE = 0, SW = 1, HW = 2, SWHW = 3 } mode_e;

  // Reset starts high and falls at 1 ns so the asynchronous reset acts before
  // the first clock edge, whatever the registers power up holding.
  logic clk = 1'b0, rst_n = 1'b1;
  logic      req_valid [NCH];
  logic      req_ready [NCH];
  mem_req_t  req       [NCH];
  logic      rsp_valid [NCH];
  word_t     rsp_data  [NCH];
  ctrl_evt_t evt       [NCH];
  int checks = 0, failures = 0, cyc = 0;

  hbm_pim_stack dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data, .evt);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- event counters ----------------
  int n_act = 0, n_pre = 0, n_pim = 0, n_pim_wait = 0, n_qfull = 0, n_rd = 0, n_wr = 0, n_twait = 0;
  int n_op [8];
  word_t rsp_q [NCH][$];
  initial for (int i = 0; i < 8; i++) n_op[i] = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < NCH; c++) begin
      n_act += int'(evt[c].act); n_pre += int'(evt[c].pre); n_pim += int'(evt[c].pim);
      n_pim_wait += int'(evt[c].pim_wait); n_qfull += int'(evt[c].q_full);
      n_rd += int'(evt[c].rd); n_wr += int'(evt[c].wr); n_twait += int'(evt[c].timing_wait);
      if (rsp_valid[c]) rsp_q[c].push_back(rsp_data[c]);
    end
    if (evt[0].pim) n_op[int'(dut.g_ch[0].u_ctrl.h.pim.op)]++;
  end

  // ---------------- host request path ----------------
  task automatic send_all(input mem_req_t r);
    logic [NCH-1:0] pending, acc;
    pending = '1;
    while (pending != 0) begin
      @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        req[c] = r;
        req[c].pch = 1'(c);
        req_valid[c] = pending[c];
        acc[c] = pending[c] && req_ready[c];
      end
      @(posedge clk);
      pending &= ~acc;
    end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) req_valid[c] = 1'b0;
  endtask

  // one request per channel, all channels in the same cycles
  task automatic send_each(input mem_req_t r [NCH]);
    logic [NCH-1:0] pending, acc;
    pending = '1;
    while (pending != 0) begin
      @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        req[c] = r[c];
        req_valid[c] = pending[c];
        acc[c] = pending[c] && req_ready[c];
      end
      @(posedge clk);
      pending &= ~acc;
    end
  endtask

  task automatic pim_cmd(input pim_op_e op, input logic odd, input int addr, input int dst,
                         input int dst2, input int s0, input int s1, input logic [31:0] k);
    mem_req_t r;
    r = '0; r.kind = REQ_PIM;
    r.row = row_t'(addr / COLS); r.col = col_t'(addr % COLS);
    r.pim = '{op: op, odd: odd, dst: reg_idx_t'(dst), dst2: reg_idx_t'(dst2),
              src0: reg_idx_t'(s0), src1: reg_idx_t'(s1), k: k};
    send_all(r);
  endtask

  // ---------------- data ----------------
  real xin_re [NCH][8][LANES][MAXN];
  real xin_im [NCH][8][LANES][MAXN];

  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if ((v & (1 << i)) != 0) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // one butterfly at word addresses i1, i2 with twiddle w = exp(-2 pi i j / L)
  task automatic butterfly(input mode_e mode, input int base, input int i1, input int i2,
                           input int j, input int L);
    real th, cr, sr;
    logic [31:0] c, s, dl;
    bit w_one, w_mj, w_diag;
    th = 2.0 * 3.14159265358979323846 * real'(j) / real'(L);
    cr = $cos(th); sr = -$sin(th);
    w_one  = (j == 0);
    w_mj   = (4 * j == L);
    w_diag = (8 * j == L) || (8 * j == 3 * L);
    c = r2f(cr); s = r2f(sr);
    pim_cmd(PIM_MOV_RD, 0, base + i1, 0, 0, 0, 0, 0);   // R0 = a
    pim_cmd(PIM_MOV_RD, 1, base + i1, 1, 0, 0, 0, 0);   // R1 = b
    pim_cmd(PIM_MOV_RD, 0, base + i2, 2, 0, 0, 0, 0);   // R2 = d
    pim_cmd(PIM_MOV_RD, 1, base + i2, 3, 0, 0, 0, 0);   // R3 = e
    if ((mode == SW || mode == SWHW) && (w_one || w_mj)) begin
      if (mode == SW) begin
        if (w_one) begin
          pim_cmd(PIM_ADD, 0, 0, 6, 0, 0, 2, 0); pim_cmd(PIM_SUB, 0, 0, 7, 0, 0, 2, 0);
          pim_cmd(PIM_ADD, 0, 0, 8, 0, 1, 3, 0); pim_cmd(PIM_SUB, 0, 0, 9, 0, 1, 3, 0);
        end else begin
          pim_cmd(PIM_ADD, 0, 0, 6, 0, 0, 3, 0); pim_cmd(PIM_SUB, 0, 0, 7, 0, 0, 3, 0);
          pim_cmd(PIM_SUB, 0, 0, 8, 0, 1, 2, 0); pim_cmd(PIM_ADD, 0, 0, 9, 0, 1, 2, 0);
        end
      end else begin
        if (w_one) begin
          pim_cmd(PIM_MADDSUB, 0, 0, 6, 7, 2, 0, 32'h3f80_0000);   // a +- d
          pim_cmd(PIM_MADDSUB, 0, 0, 8, 9, 3, 1, 32'h3f80_0000);   // b +- e
        end else begin
          pim_cmd(PIM_MADDSUB, 0, 0, 6, 7, 3, 0, 32'h3f80_0000);   // a +- e
          pim_cmd(PIM_MADDSUB, 0, 0, 8, 9, 2, 1, 32'hbf80_0000);   // b -+ d
        end
      end
    end else if (mode == SWHW && w_diag) begin
      // |c| = |s|: the pair d+e, d-e comes from one MADDSUB with k = 1
      pim_cmd(PIM_MADDSUB, 0, 0, 4, 5, 3, 2, 32'h3f80_0000);       // R4 = d+e, R5 = d-e
      if ((cr > 0.0) != (sr > 0.0)) begin                        // delta = -1: m1 = d+e, m2 = -(d-e)
        pim_cmd(PIM_MADDSUB, 0, 0, 6, 7, 4, 0, c);
        pim_cmd(PIM_MADDSUB, 0, 0, 8, 9, 5, 1, fneg(c));
      end else begin                                             // delta = +1: m1 = d-e, m2 = d+e
        pim_cmd(PIM_MADDSUB, 0, 0, 6, 7, 5, 0, c);
        pim_cmd(PIM_MADDSUB, 0, 0, 8, 9, 4, 1, c);
      end
    end else begin
      dl = r2f(f2r(s) / f2r(c));
      pim_cmd(PIM_MADD, 0, 0, 4, 0, 3, 2, fneg(dl));   // m1 = d - delta*e
      pim_cmd(PIM_MADD, 0, 0, 5, 0, 2, 3, dl);         // m2 = e + delta*d
      if (mode == BASE || mode == SW) begin
        pim_cmd(PIM_MADD, 0, 0, 6, 0, 4, 0, c);
        pim_cmd(PIM_MADD, 0, 0, 7, 0, 4, 0, fneg(c));
        pim_cmd(PIM_MADD, 0, 0, 8, 0, 5, 1, c);
        pim_cmd(PIM_MADD, 0, 0, 9, 0, 5, 1, fneg(c));
      end else begin
        pim_cmd(PIM_MADDSUB, 0, 0, 6, 7, 4, 0, c);
        pim_cmd(PIM_MADDSUB, 0, 0, 8, 9, 5, 1, c);
      end
    end
    pim_cmd(PIM_MOV_WR, 0, base + i1, 0, 0, 6, 0, 0);
    pim_cmd(PIM_MOV_WR, 0, base + i2, 0, 0, 7, 0, 0);
    pim_cmd(PIM_MOV_WR, 1, base + i1, 0, 0, 8, 0, 0);
    pim_cmd(PIM_MOV_WR, 1, base + i2, 0, 0, 9, 0, 0);
  endtask

  // closed form of the ALU commands of one N-point transform in a mode
  function automatic int expected_alu(input mode_e mode, input int n);
    int tot = 0;
    for (int L = 2; L <= n; L *= 2)
      for (int j = 0; j < L / 2; j++) begin
        int per;
        bit one, mj, diag;
        one = (j == 0); mj = (4 * j == L); diag = (8 * j == L) || (8 * j == 3 * L);
        case (mode)
          BASE: per = 6;
          HW:   per = 4;
          SW:   per = (one || mj) ? 4 : 6;
          default: per = (one || mj) ? 2 : (diag ? 3 : 4);
        endcase
        tot += per * (n / L);
      end
    return tot;
  endfunction

  task automatic run_fft(input mode_e mode, input int n, input int base);
    int bits, alu0, pim0, nbf, t0;
    real tol;
    bits = $clog2(n);
    // 1. load, bit-reversed
    for (int c = 0; c < NCH; c++)
      for (int p = 0; p < 8; p++)
        for (int l = 0; l < LANES; l++)
          for (int k = 0; k < n; k++) begin
            xin_re[c][p][l][k] = real'(int'($urandom_range(2000)) - 1000) / 1000.0;
            xin_im[c][p][l][k] = real'(int'($urandom_range(2000)) - 1000) / 1000.0;
          end
    for (int b = 0; b < 16; b++)
      for (int k = 0; k < n; k++) begin
        mem_req_t r [NCH];
        for (int c = 0; c < NCH; c++) begin
          r[c] = '0; r[c].kind = REQ_WR; r[c].pch = 1'(c); r[c].bank = bank_t'(b);
          r[c].row = row_t'((base + k) / COLS); r[c].col = col_t'((base + k) % COLS);
          for (int l = 0; l < LANES; l++)
            r[c].wdata[l*32 +: 32] = (b % 2 == 0) ? r2f(xin_re[c][b/2][l][bitrev(k, bits)])
                                                  : r2f(xin_im[c][b/2][l][bitrev(k, bits)]);
        end
        send_each(r);
      end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) req_valid[c] = 1'b0;
    // 2. transform
    pim0 = n_pim; t0 = cyc;
    nbf = 0;
    for (int L = 2; L <= n; L *= 2)
      for (int g = 0; g < n; g += L)
        for (int j = 0; j < L / 2; j++) begin
          butterfly(mode, base, g + j, g + j + L / 2, j, L);
          nbf++;
        end
    // 3. read back and compare
    for (int c = 0; c < NCH; c++) rsp_q[c].delete();
    for (int p = 0; p < 16; p++)
      for (int k = 0; k < n; k++) begin
        mem_req_t r [NCH];
        for (int c = 0; c < NCH; c++) begin
          r[c] = '0; r[c].kind = REQ_RD; r[c].pch = 1'(c); r[c].bank = bank_t'(p);
          r[c].row = row_t'((base + k) / COLS); r[c].col = col_t'((base + k) % COLS);
        end
        send_each(r);
      end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) req_valid[c] = 1'b0;
    for (int i = 0; i < 4000 && rsp_q[NCH-1].size() < 16 * n; i++) @(posedge clk);
    repeat (4) @(posedge clk);
    // every PIM command leaves the controller of each channel once
    alu0 = (n_pim - pim0) / NCH - 8 * nbf;
    checks++;
    if (alu0 != expected_alu(mode, n)) begin
      failures++;
      $display("FAIL mode %0d N=%0d: %0d ALU commands, expected %0d", mode, n, alu0, expected_alu(mode, n));
    end
    $display("mode %s N=%0d: %0d butterflies, %0.3f ALU commands per butterfly, %0d cycles",
             mode.name(), n, nbf, real'(alu0) / real'(nbf), cyc - t0);
    tol = 2.0e-5 * real'(n);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (rsp_q[c].size() != 16 * n) begin
        failures++;
        $display("FAIL channel %0d returned %0d words", c, rsp_q[c].size());
        continue;
      end
      for (int p = 0; p < 8; p++)
        for (int k = 0; k < n; k++) begin
          word_t wr, wi;
          wr = rsp_q[c][(2 * p) * n + k];
          wi = rsp_q[c][(2 * p + 1) * n + k];
          for (int l = 0; l < LANES; l++) begin
            real er, ei;
            er = 0.0; ei = 0.0;
            for (int t = 0; t < n; t++) begin
              real ang;
              ang = -2.0 * 3.14159265358979323846 * real'((t * k) % n) / real'(n);
              er += xin_re[c][p][l][t] * $cos(ang) - xin_im[c][p][l][t] * $sin(ang);
              ei += xin_re[c][p][l][t] * $sin(ang) + xin_im[c][p][l][t] * $cos(ang);
            end
            checks++;
            if ((f2r(wr[l*32 +: 32]) - er > tol) || (er - f2r(wr[l*32 +: 32]) > tol) ||
                (f2r(wi[l*32 +: 32]) - ei > tol) || (ei - f2r(wi[l*32 +: 32]) > tol)) begin
              failures++;
              if (failures < 10)
                $display("FAIL mode %0d ch %0d pair %0d lane %0d bin %0d: (%f,%f) vs (%f,%f)",
                         mode, c, p, l, k, f2r(wr[l*32 +: 32]), f2r(wi[l*32 +: 32]), er, ei);
            end
          end
        end
    end
  endtask

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin req_valid[c] = 1'b0; req[c] = '0; end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_fft(BASE, 32, 64);
    $fflush;
    run_fft(SW,   32, 64);
    run_fft(HW,   32, 64);
    run_fft(SWHW, 32, 64);
    run_fft(SWHW, 64, 128);   // spans two rows: row misses inside the transform
    $display("mechanisms:");
    need(n_act, "multi-bank / single-bank ACT");
    need(n_pre, "precharge on row miss");
    need(n_twait, "tRP/tRAS wait");
    need(n_pim, "pim broadcast");
    need(n_pim_wait, "half-rate pim hold");
    need(n_qfull, "queue full back-pressure");
    need(n_wr, "host write");
    need(n_rd, "host read");
    need(n_op[PIM_MOV_RD], "MOV_RD");
    need(n_op[PIM_MOV_WR], "MOV_WR");
    need(n_op[PIM_MADD], "MADD");
    need(n_op[PIM_MADDSUB], "MADDSUB (second write port)");
    need(n_op[PIM_ADD], "ADD");
    need(n_op[PIM_SUB], "SUB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
