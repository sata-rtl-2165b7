// tb_schedule_fsm: the scheduling FSM fed from real FIFOs.
//
// Part 1 replays the three-head example of the paper's Fig. 2(c) (N = 8,
// S_h = 4, 3, 4; head 1 has five major queries): every key read and query
// load must appear in the time step, state and head of the figure's table:
//   T0 WR Q0-3 | T1 RD K0-3, WR Q4-7 | T2 RD K4-7, WR Q0-4 (next head) |
//   T3 RD K0-2, WR Q5-7 | T4 RD K3-4 | T5 RD K5-7, WR Q0-3 | T6 RD K0-3,
//   WR Q4-7 | T7 RD K4-7.
// With ready always high the example must take 40 cycles (one extra cycle
// per step, one more in OUTTAHD to fetch the next head's info).
// Part 2 streams random heads (random S_h including 0 = GLOB, random head
// type, missing keys as after zero-skip, two layers) in with random gaps and
// random ready on both streams, and checks order, head and state of every
// transfer against a model of the schedule.
module tb_schedule_fsm;
  import sata_pkg::*;
  localparam int N = 8;
  localparam int D = 3 * N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic k_push, q_push, h_push, k_pop, q_pop, h_pop, k_empty, q_empty, h_empty, k_full, q_full, h_full;
  kentry_t k_din, k_dout; qentry_t q_din, q_dout; hinfo_t h_din, h_dout;
  logic rd_k_valid, rd_k_ready, wr_q_valid, wr_q_ready;
  idx_t rd_k_idx, wr_q_idx; logic [HEAD_W-1:0] rd_k_head, wr_q_head;
  sched_state_e state; logic [15:0] step, starve_cnt; logic step_end; idx_t cur_s_h; htype_e cur_ht;

  sync_fifo #(.WIDTH($bits(kentry_t)), .DEPTH(D)) u_k (.clk, .rst_n, .push(k_push), .din(k_din),
    .pop(k_pop), .dout(k_dout), .empty(k_empty), .full(k_full), .count());
  sync_fifo #(.WIDTH($bits(qentry_t)), .DEPTH(D)) u_q (.clk, .rst_n, .push(q_push), .din(q_din),
    .pop(q_pop), .dout(q_dout), .empty(q_empty), .full(q_full), .count());
  sync_fifo #(.WIDTH($bits(hinfo_t)), .DEPTH(2)) u_h (.clk, .rst_n, .push(h_push), .din(h_din),
    .pop(h_pop), .dout(h_dout), .empty(h_empty), .full(h_full), .count());

  schedule_fsm #(.N(N)) dut (.*);

  typedef struct { int idx; int head; int step; sched_state_e st; } ev_t;
  ev_t exp_rd [$], exp_wr [$];
  bit chk_step;
  int n_glob = 0, n_midst = 0, n_starve_seen = 0, n_stall = 0;

  ev_t e;
  always @(posedge clk) if (rst_n) begin
    if ((rd_k_valid && !rd_k_ready) || (wr_q_valid && !wr_q_ready)) n_stall++;
    if (rd_k_valid && rd_k_ready) begin
      if (exp_rd.size() == 0) chk(0, "unexpected RD");
      else begin
        e = exp_rd.pop_front();
        chk(int'(rd_k_idx) == e.idx && int'(rd_k_head) == e.head && state == e.st &&
            (!chk_step || int'(step) == e.step),
            $sformatf("RD k%0d h%0d %s T%0d, exp k%0d h%0d %s T%0d", rd_k_idx, rd_k_head,
                      state.name(), step, e.idx, e.head, e.st.name(), e.step));
      end
    end
    if (wr_q_valid && wr_q_ready) begin
      if (exp_wr.size() == 0) chk(0, "unexpected WR");
      else begin
        e = exp_wr.pop_front();
        chk(int'(wr_q_idx) == e.idx && int'(wr_q_head) == e.head && state == e.st &&
            (!chk_step || int'(step) == e.step),
            $sformatf("WR q%0d h%0d %s T%0d, exp q%0d h%0d %s T%0d", wr_q_idx, wr_q_head,
                      state.name(), step, e.idx, e.head, e.st.name(), e.step));
      end
    end
  end

  function automatic void expect_ev(bit rd, int lo, int hi, int head, int stp, sched_state_e st);
    for (int i = lo; i <= hi; i++) begin
      ev_t x;
      x.idx = i; x.head = head; x.step = stp; x.st = st;
      if (rd) exp_rd.push_back(x); else exp_wr.push_back(x);
    end
  endfunction

  task automatic push_head(int s_h, htype_e ht, int ranks [$], int nmaj, int nmin, bit last);
    push_entries(ranks, nmaj + nmin);
    push_info(s_h, ht, ranks.size(), nmaj, nmin, last);
  endtask

  task automatic push_entries(int ranks [$], int nq);
    foreach (ranks[i]) begin
      @(negedge clk); while (k_full) @(negedge clk);
      k_push = 1; k_din = '{kid: idx_t'((ranks[i] * 5 + 3) % N), rank: idx_t'(ranks[i])};
      @(negedge clk); k_push = 0;
    end
    for (int i = 0; i < nq; i++) begin
      @(negedge clk); while (q_full) @(negedge clk);
      q_push = 1; q_din = '{qid: idx_t'(i), qt: QT_HEAD};
      @(negedge clk); q_push = 0;
    end
  endtask

  task automatic push_info(int s_h, htype_e ht, int nk, int nmaj, int nmin, bit last);
    hinfo_t hi;
    hi = '{s_h: idx_t'(s_h), ht: ht, n_k: (IDX_W+1)'(nk), n_major: (IDX_W+1)'(nmaj),
           n_minor: (IDX_W+1)'(nmin), last: last};
    @(negedge clk); while (h_full) @(negedge clk);
    h_push = 1; h_din = hi;
    @(negedge clk); h_push = 0;
  endtask

  int rdy_pct = 100;
  always @(negedge clk) begin
    rd_k_ready <= ($urandom_range(1, 100) <= rdy_pct);
    wr_q_ready <= ($urandom_range(1, 100) <= rdy_pct);
  end

  int t0, t1;
  initial begin
    int all [$];
    k_push = 0; q_push = 0; h_push = 0; k_din = '0; q_din = '0; h_din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- part 1: Fig. 2(c) ----------------
    chk_step = 1;
    for (int i = 0; i < N; i++) all.push_back(i);
    // expected, in the figure's sorted operand indices (kid = rank mapping undone below)
    expect_ev(0, 0, 3, 0, 0, ST_INIT);
    expect_ev(1, 0, 3, 0, 1, ST_INTOHD);   expect_ev(0, 4, 7, 0, 1, ST_INTOHD);
    expect_ev(1, 4, 7, 0, 2, ST_OUTTAHD);  expect_ev(0, 0, 4, 1, 2, ST_OUTTAHD);
    expect_ev(1, 0, 2, 1, 3, ST_INTOHD);   expect_ev(0, 5, 7, 1, 3, ST_INTOHD);
    expect_ev(1, 3, 4, 1, 4, ST_MIDSTHD);
    expect_ev(1, 5, 7, 1, 5, ST_OUTTAHD);  expect_ev(0, 0, 3, 2, 5, ST_OUTTAHD);
    expect_ev(1, 0, 3, 2, 6, ST_INTOHD);   expect_ev(0, 4, 7, 2, 6, ST_INTOHD);
    expect_ev(1, 4, 7, 2, 7, ST_OUTTAHD);
    foreach (exp_rd[i]) exp_rd[i].idx = (exp_rd[i].idx * 5 + 3) % N;   // keys carry kid = f(rank)
    fork
      begin
        // all entries first, then the three info words back to back
        push_entries(all, 8); push_entries(all, 8); push_entries(all, 8);
        push_info(4, HT_HEAD, N, 4, 4, 0);
        push_info(3, HT_TAIL, N, 5, 3, 0);
        push_info(4, HT_HEAD, N, 4, 4, 1);
      end
      begin
        wait (state == ST_INIT); @(posedge clk); t0 = $time;
        wait (state == ST_IDLE); t1 = $time;
      end
    join
    wait (state == ST_IDLE);
    repeat (3) @(posedge clk);
    chk(exp_rd.size() == 0 && exp_wr.size() == 0, "Fig.2(c) all transfers seen");
    chk(int'(step) == 8, $sformatf("Fig.2(c) eight time steps (%0d)", step));
    chk((t1 - t0) / 10 == 40 - 1, $sformatf("Fig.2(c) cycles %0d", (t1 - t0) / 10 + 1));
    // ---------------- part 2: random ----------------
    chk_step = 0;
    rdy_pct = 70;
    begin
      automatic int nh = 24;
      automatic bit first = 1, prev_glob = 0;
      for (int h = 0; h < nh; h++) begin
        automatic int s_h = (h % 5 == 3) ? 0 : $urandom_range(1, N / 2);
        automatic htype_e ht = (s_h == 0) ? HT_GLOB : ($urandom_range(0, 1) ? HT_HEAD : HT_TAIL);
        automatic int nmaj = $urandom_range(1, N - 1);
        automatic int nmin = $urandom_range(0, N - nmaj);
        automatic bit last = (h == 11 || h == nh - 1);
        automatic int ranks [$];
        automatic int head = 3 + h;
        for (int r = 0; r < N; r++) if ($urandom_range(0, 9) != 0) ranks.push_back(r);
        if (s_h == 0) begin nmaj = nmaj + nmin; nmin = 0; end
        // expected
        for (int i = 0; i < nmaj + nmin; i++) begin
          ev_t x;
          x.idx = i; x.head = head; x.step = 0;
          if (ht == HT_GLOB)        x.st = ST_WRAPGQ;
          else if (i >= nmaj)       x.st = ST_INTOHD;
          else if (first || prev_glob) x.st = ST_INIT;
          else                      x.st = ST_OUTTAHD;
          exp_wr.push_back(x);
        end
        foreach (ranks[i]) begin
          ev_t x;
          x.idx = (ranks[i] * 5 + 3) % N; x.head = head; x.step = 0;
          if (ht == HT_GLOB)              x.st = ST_WRAPGK;
          else if (ranks[i] < s_h)        x.st = ST_INTOHD;
          else if (ranks[i] < N - s_h)    x.st = ST_MIDSTHD;
          else                            x.st = ST_OUTTAHD;
          exp_rd.push_back(x);
        end
        if (ht == HT_GLOB) n_glob++;
        if (ht != HT_GLOB && 2 * s_h < N) n_midst++;
        push_head(s_h, ht, ranks, nmaj, nmin, last);
        first = last; prev_glob = (ht == HT_GLOB);
        repeat ($urandom_range(0, 40)) @(negedge clk);
      end
    end
    wait (exp_rd.size() == 0 && exp_wr.size() == 0 && state == ST_IDLE);
    repeat (5) @(posedge clk);
    chk(!rd_k_valid && !wr_q_valid, "quiet at the end");
    chk(n_glob > 0 && n_midst > 0 && starve_cnt > 0 && n_stall > 0,
        $sformatf("wrapGLOB %0d, midstHD %0d, waits %0d, stalls %0d seen", n_glob, n_midst, starve_cnt, n_stall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog rd=%0d wr=%0d state=%s", exp_rd.size(), exp_wr.size(), state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
