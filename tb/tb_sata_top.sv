// tb_sata_top: end-to-end test of the SATA scheduler at its default tile size.
//
// A sequence of tiles in two layers is streamed in. Each mask is built to
// provoke one mechanism: block-local masks of HEAD and TAIL type, a HEAD/TAIL
// tie, masks with many boundary-crossing queries (S_h concede), an all-ones
// mask (GLOB head, wrapGLOB), empty rows and columns with zero-skip on, a seed
// from the internal LFSR. For each tile the reference package computes the key
// order, query tags, S_h and head type; from those the testbench predicts the
// exact RD-key and WR-query streams, the head number and the FSM state of every
// transfer, and compares them with what the scheduler emits. Ready is dropped
// at random and, for one long stretch, completely, so FIFO back-pressure and
// the scheduler waiting for a sorted head both occur. Each mechanism is
// counted and a mechanism that never occurs counts as a failure.
module tb_sata_top;
  import sata_pkg::*;
  import sata_ref_pkg::*;

  localparam int N      = 30;
  localparam int NHEADS = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              zero_skip_en;
  logic [IDX_W:0]    theta;
  logic              seed_ext_en;
  idx_t              seed_ext;
  logic              mask_valid, mask_ready, last_head;
  logic [N-1:0]      mask_row;
  logic              rd_k_valid, rd_k_ready, wr_q_valid, wr_q_ready;
  idx_t              rd_k_idx, wr_q_idx;
  logic [HEAD_W-1:0] rd_k_head, wr_q_head;
  sched_state_e      sched_state;
  logic [15:0]       sched_step, sched_starve;
  idx_t              sched_s_h, sort_seed;
  htype_e            sched_ht;
  logic              sort_busy;
  logic [IDX_W:0]    sort_concedes;

  sata_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- stimulus ----------------
  rowv_t masks [NHEADS][MAXN];
  int    seeds [NHEADS];
  bit    use_lfsr [NHEADS];
  bit    zskip [NHEADS];
  bit    lastf [NHEADS];
  ref_t  refs [NHEADS];

  // Queries in group A attend only keys of set A, group B only set B; `cross`
  // of them also attend one key of the other set.
  function automatic void make_local(int h, int na, int ncross, int picks);
    bit inA [N];
    int k;
    for (int i = 0; i < N; i++) inA[i] = ($urandom_range(0, 1) == 1);
    for (int q = 0; q < MAXN; q++) masks[h][q] = '0;
    for (int q = 0; q < N; q++) begin
      bit ga = (q < na);
      for (int p = 0; p < picks; p++) begin
        do k = $urandom_range(0, N - 1); while (inA[k] != ga);
        masks[h][q][k] = 1'b1;
      end
      if (q % 2 == 0 && q / 2 < ncross) begin
        do k = $urandom_range(0, N - 1); while (inA[k] == ga);
        masks[h][q][k] = 1'b1;
      end
    end
  endfunction

  // counters of mechanisms
  int n_concede = 0, n_glob_head = 0, n_midst = 0, n_ht_head = 0, n_ht_tail = 0;
  int n_tie = 0, n_zq = 0, n_zk = 0, n_lfsr = 0, n_rd_stall = 0, n_wr_stall = 0;
  int n_fifo_stall = 0, n_overlap = 0, n_outta_wr = 0;

  // expected streams
  typedef struct { int idx; int head; sched_state_e st; } exp_t;
  exp_t exp_rd [$], exp_wr [$];

  function automatic void predict(int h, bit first_of_layer, bit prev_glob);
    ref_t r = refs[h];
    bit   qnz [N], knz [N];
    int   major, minor;
    for (int i = 0; i < N; i++) begin qnz[i] = 0; knz[i] = 0; end
    for (int q = 0; q < N; q++) for (int k = 0; k < N; k++)
      if (masks[h][q][k]) begin qnz[q] = 1; knz[k] = 1; end
    for (int i = 0; i < N; i++) begin
      if (zskip[h] && !qnz[i]) n_zq++;
      if (zskip[h] && !knz[i]) n_zk++;
    end
    major = (r.ht == 1) ? 1 : 0;
    minor = (r.ht == 1) ? 0 : 1;
    for (int pass = 0; pass < 3; pass++) begin
      int t = (pass == 0) ? major : (pass == 1) ? 2 : minor;
      for (int q = 0; q < N; q++) begin
        exp_t e;
        if (r.qt[q] != t || (zskip[h] && !qnz[q])) continue;
        e.idx = q; e.head = h;
        if (r.ht == 2)                          e.st = ST_WRAPGQ;
        else if (pass == 2)                     e.st = ST_INTOHD;
        else if (first_of_layer || prev_glob)   e.st = ST_INIT;
        else                                    e.st = ST_OUTTAHD;
        exp_wr.push_back(e);
      end
    end
    for (int s = 0; s < N; s++) begin
      exp_t e;
      int k = r.order[s];
      if (zskip[h] && !knz[k]) continue;
      e.idx = k; e.head = h;
      if (r.ht == 2)            e.st = ST_WRAPGK;
      else if (s < r.s_h)       e.st = ST_INTOHD;
      else if (s < N - r.s_h)   e.st = ST_MIDSTHD;
      else                      e.st = ST_OUTTAHD;
      exp_rd.push_back(e);
    end
    if (r.concedes > 0) n_concede++;
    if (r.ht == 2) n_glob_head++;
    if (r.ht != 2 && 2 * r.s_h < N) n_midst++;
    if (r.ht == 0) n_ht_head++;
    if (r.ht == 1) n_ht_tail++;
    if (r.ht == 0 && r.n_head == r.n_tail) n_tie++;
  endfunction

  // ---------------- driver ----------------
  bit stall_all = 0;
  bit driver_done = 0;
  int rdy_pct = 100;
  initial begin
    zero_skip_en = 0; theta = (IDX_W+1)'(N / 2); seed_ext_en = 1; seed_ext = '0;
    mask_valid = 0; mask_row = '0; last_head = 0;
    // layer 1: heads 0..4, layer 2: heads 5..9
    for (int q = 0; q < MAXN; q++) masks[0][q] = '0;   // tie -> HEAD: two disjoint halves
    for (int q = 0; q < N; q++) for (int k = 0; k < N; k++) masks[0][q][k] = ((q < N / 2) == (k % 2 == 0));
    make_local(1, 10, 0, 8);                      // TAIL type
    make_local(2, 20, 10, 6);                     // HEAD type with GLOB queries
    make_local(3, 15, 15, 6);                     // many crossers -> concede
    for (int q = 0; q < MAXN; q++) masks[4][q] = (q < N) ? rowv_t'((64'd1 << N) - 1) : '0; // GLOB head
    make_local(5, 18, 4, 5);                      // zero-skip tile: clear some rows / columns
    for (int q = 0; q < N; q++) if (q % 7 == 3) masks[5][q] = '0;
    for (int q = 0; q < N; q++) begin masks[5][q][4] = 0; masks[5][q][11] = 0; end
    make_local(6, 12, 6, 7);                      // LFSR seed
    make_local(7, 16, 17, 5);
    make_local(8, 14, 2, 9);
    make_local(9, 22, 0, 6);
    for (int h = 0; h < NHEADS; h++) begin
      seeds[h] = $urandom_range(0, N - 1);
      use_lfsr[h] = (h == 6);
      zskip[h] = (h == 5 || h == 8);
      lastf[h] = (h == 4 || h == NHEADS - 1);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < NHEADS; h++) begin
      zero_skip_en = zskip[h];
      for (int q = 0; q < N; q++) begin
        mask_valid <= 1; mask_row <= masks[h][q][N-1:0];
        last_head <= lastf[h];
        seed_ext_en <= !use_lfsr[h]; seed_ext <= idx_t'(seeds[h]);
        @(posedge clk iff mask_ready);
      end
      mask_valid <= 0;
      @(posedge clk);   // start pulse
      @(posedge clk);   // seed sampled
      if (use_lfsr[h]) begin seeds[h] = int'(sort_seed); n_lfsr++; end
      check(int'(sort_seed) == seeds[h], $sformatf("head %0d seed", h));
      refs[h] = sata_ref_pkg::run(masks[h], N, seeds[h], N / 2);
      predict(h, h == 0 || lastf[(h + NHEADS - 1) % NHEADS], h > 0 && refs[h-1].ht == 2);
      // zero-skip setting must stay until the tile's queues are written
      while (sort_busy) @(posedge clk);
      zero_skip_en = 0;
      if (h == 2) fork begin stall_all = 1; repeat (3000) @(posedge clk); stall_all = 0; end join_none
      if (h == 6) rdy_pct = 60;
    end
    driver_done = 1;
  end

  always @(negedge clk) begin
    rd_k_ready <= !stall_all && ($urandom_range(1, 100) <= rdy_pct);
    wr_q_ready <= !stall_all && ($urandom_range(1, 100) <= rdy_pct);
  end

  // ---------------- monitor ----------------
  int got_rd = 0, got_wr = 0;
  exp_t e;
  always @(posedge clk) if (rst_n) begin
    if (rd_k_valid && !rd_k_ready) n_rd_stall++;
    if (wr_q_valid && !wr_q_ready) n_wr_stall++;
    if ((dut.u_status.st == dut.u_status.C_PICK && dut.k_full) ||
        (dut.u_status.st == dut.u_status.C_QW && dut.q_full) ||
        (dut.u_status.st == dut.u_status.C_HW && dut.h_full)) n_fifo_stall++;
    if (rd_k_valid && rd_k_ready && wr_q_valid && wr_q_ready) n_overlap++;
    if (rd_k_valid && rd_k_ready) begin
      got_rd++;
      if (exp_rd.size() == 0) check(0, "unexpected RD");
      else begin
        e = exp_rd.pop_front();
        check(int'(rd_k_idx) == e.idx && int'(rd_k_head) == e.head && sched_state == e.st,
              $sformatf("RD got k%0d h%0d %s, exp k%0d h%0d %s", rd_k_idx, rd_k_head,
                        sched_state.name(), e.idx, e.head, e.st.name()));
        check(int'(sched_s_h) == refs[e.head].s_h && int'(sched_ht) == refs[e.head].ht,
              $sformatf("head %0d S_h %0d/%0d type %0d/%0d", e.head, sched_s_h,
                        refs[e.head].s_h, sched_ht, refs[e.head].ht));
      end
    end
    if (wr_q_valid && wr_q_ready) begin
      got_wr++;
      if (sched_state == ST_OUTTAHD) n_outta_wr++;
      if (exp_wr.size() == 0) check(0, "unexpected WR");
      else begin
        e = exp_wr.pop_front();
        check(int'(wr_q_idx) == e.idx && int'(wr_q_head) == e.head && sched_state == e.st,
              $sformatf("WR got q%0d h%0d %s, exp q%0d h%0d %s", wr_q_idx, wr_q_head,
                        sched_state.name(), e.idx, e.head, e.st.name()));
      end
    end
  end

  // ---------------- end ----------------
  initial begin
    // wait for all heads to be scheduled and the FSM to fall idle
    wait (driver_done);
    forever begin
      @(posedge clk);
      if (exp_rd.size() == 0 && exp_wr.size() == 0 && sched_state == ST_IDLE && !sort_busy
          && driver_done) break;
    end
    repeat (5) @(posedge clk);
    check(!rd_k_valid && !wr_q_valid, "streams quiet at the end");
    $display("mechanisms: concede=%0d glob_head=%0d midst=%0d ht_head=%0d ht_tail=%0d tie=%0d",
             n_concede, n_glob_head, n_midst, n_ht_head, n_ht_tail, n_tie);
    $display("            zero_q=%0d zero_k=%0d lfsr=%0d rd_stall=%0d wr_stall=%0d fifo_full=%0d",
             n_zq, n_zk, n_lfsr, n_rd_stall, n_wr_stall, n_fifo_stall);
    $display("            overlap=%0d outta_wr=%0d starve=%0d rd=%0d wr=%0d",
             n_overlap, n_outta_wr, sched_starve, got_rd, got_wr);
    check(n_concede > 0, "S_h concede happened");
    check(n_glob_head > 0, "GLOB head happened");
    check(n_midst > 0, "midstHD happened");
    check(n_ht_head > 0 && n_ht_tail > 0, "both head types happened");
    check(n_tie > 0, "HEAD/TAIL tie happened");
    check(n_zq > 0 && n_zk > 0, "zero-skip of queries and keys happened");
    check(n_lfsr > 0, "LFSR seed used");
    check(n_rd_stall > 0 && n_wr_stall > 0, "stream back-pressure happened");
    check(n_fifo_stall > 0, "queue-full stall of the sorter happened");
    check(n_overlap > 0 && n_outta_wr > 0, "load/MAC overlap happened");
    check(sched_starve > 0, "scheduler waited for a sorted head");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog exp_rd=%0d exp_wr=%0d state=%s busy=%b got_rd=%0d", exp_rd.size(), exp_wr.size(), sched_state.name(), sort_busy, got_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
