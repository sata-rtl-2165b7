// tb_status_regs: sorting and classification of whole tiles.
//
// 1. The six-token mask of the paper's Fig. 2 with seed key 0: the first three
//    sorted keys must be {0,3,4}, S_h stays 3, the head is HEAD (2/2 tie), and
//    the query writes must be 0,4 (HEAD) then 3,5 (GLOB) then 1,2 (TAIL).
// 2. Random tiles at the default size, some dense enough to force concedes,
//    compared entry by entry with the reference model, with and without random
//    FIFO-full back-pressure. Without back-pressure the cycle of the last key
//    write and of the head-info write are checked against
//    last key  = 1 + N(N-1)/2 + 2(N-1) cycles after start,
//    head info = last key + (N+1)(1+concedes) + 3N + 1.
module tb_status_regs;
  import sata_pkg::*;
  import sata_ref_pkg::*;
  localparam int N = 30;
  localparam int M = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // ---- full-size instance ----
  logic wr_en; idx_t wr_row; logic [N-1:0] wr_data;
  idx_t ci_sel, cj_sel; logic [N-1:0] ci, cj; logic [N-1:0] mask [N];
  logic start, seed_ext_en, busy; idx_t seed_ext, seed_o, s_h_o; logic [IDX_W:0] theta, conc;
  logic k_push, q_push, h_push, k_full, q_full, h_full;
  kentry_t k_entry; qentry_t q_entry; hinfo_t h_entry;

  qk_trace_regs #(.N(N)) u_regs (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .col_a_sel(ci_sel),
    .col_b_sel(cj_sel), .col_a(ci), .col_b(cj), .mask_o(mask));
  status_regs #(.N(N)) dut (.clk, .rst_n, .start, .last_head_i(1'b1), .seed_ext_en, .seed_ext,
    .theta, .busy, .seed_o, .s_h_o, .concede_cnt_o(conc), .col_i_sel(ci_sel), .col_j_sel(cj_sel),
    .col_i(ci), .col_j(cj), .mask, .k_push, .k_entry, .k_acc(k_push), .k_full, .q_push, .q_entry,
    .q_acc(q_push), .q_full, .h_push, .h_entry, .h_full);

  // ---- Fig. 2 instance ----
  logic s_wr_en; idx_t s_wr_row; logic [M-1:0] s_wr_data;
  idx_t s_ci_sel, s_cj_sel; logic [M-1:0] s_ci, s_cj; logic [M-1:0] s_mask [M];
  logic s_start, s_busy; idx_t s_seed_o, s_sh_o; logic [IDX_W:0] s_conc;
  logic s_k_push, s_q_push, s_h_push;
  kentry_t s_k_entry; qentry_t s_q_entry; hinfo_t s_h_entry;

  qk_trace_regs #(.N(M)) u_sregs (.clk, .rst_n, .wr_en(s_wr_en), .wr_row(s_wr_row),
    .wr_data(s_wr_data), .col_a_sel(s_ci_sel), .col_b_sel(s_cj_sel), .col_a(s_ci), .col_b(s_cj),
    .mask_o(s_mask));
  status_regs #(.N(M)) dut_s (.clk, .rst_n, .start(s_start), .last_head_i(1'b0),
    .seed_ext_en(1'b1), .seed_ext('0), .theta((IDX_W+1)'(M / 2)), .busy(s_busy), .seed_o(s_seed_o),
    .s_h_o(s_sh_o), .concede_cnt_o(s_conc), .col_i_sel(s_ci_sel), .col_j_sel(s_cj_sel),
    .col_i(s_ci), .col_j(s_cj), .mask(s_mask), .k_push(s_k_push), .k_entry(s_k_entry),
    .k_acc(s_k_push), .k_full(1'b0), .q_push(s_q_push), .q_entry(s_q_entry), .q_acc(s_q_push),
    .q_full(1'b0), .h_push(s_h_push), .h_entry(s_h_entry), .h_full(1'b0));

  // capture
  int kq [$], kr [$], qq [$], qt [$];
  int sk [$], sq [$];
  hinfo_t hcap, shcap;
  int cyc, t_lastk, t_h;
  bit bp;
  int n_conc = 0;
  always @(posedge clk) begin
    cyc = start ? 0 : cyc + 1;
    if (k_push) begin kq.push_back(int'(k_entry.kid)); kr.push_back(int'(k_entry.rank)); t_lastk = cyc; end
    if (q_push) begin qq.push_back(int'(q_entry.qid)); qt.push_back(int'(q_entry.qt)); end
    if (h_push) begin hcap = h_entry; t_h = cyc; end
    if (s_k_push) sk.push_back(int'(s_k_entry.kid));
    if (s_q_push) sq.push_back(int'(s_q_entry.qid));
    if (s_h_push) shcap = s_h_entry;
  end
  always @(negedge clk) begin
    k_full <= bp && ($urandom_range(0, 3) == 0);
    q_full <= bp && ($urandom_range(0, 3) == 0);
    h_full <= bp && ($urandom_range(0, 3) == 0);
  end

  rowv_t rm [MAXN];
  int fig_exp_q [6] = '{0, 4, 3, 5, 1, 2};

  initial begin
    wr_en = 0; wr_row = '0; wr_data = '0; start = 0; seed_ext_en = 1; seed_ext = '0;
    theta = (IDX_W+1)'(N / 2); bp = 0; cyc = 0;
    s_wr_en = 0; s_wr_row = '0; s_wr_data = '0; s_start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- Fig. 2 ----
    begin
      logic [M-1:0] fig [M];
      fig[0] = 6'b011001; fig[1] = 6'b100110; fig[2] = 6'b100110;
      fig[3] = 6'b010011; fig[4] = 6'b011001; fig[5] = 6'b010101;
      for (int q = 0; q < M; q++) begin
        @(negedge clk); s_wr_en = 1; s_wr_row = idx_t'(q); s_wr_data = fig[q];
      end
      @(negedge clk); s_wr_en = 0; s_start = 1;
      @(negedge clk); s_start = 0;
      wait (!s_busy);
      @(negedge clk);
      chk(sk.size() == M, "Fig.2 all keys written");
      if (sk.size() == M) begin
        int firsts [$];
        firsts = '{sk[0], sk[1], sk[2]};
        firsts.sort();
        chk(firsts[0] == 0 && firsts[1] == 3 && firsts[2] == 4, "Fig.2 first half {0,3,4}");
      end
      chk(sq.size() == M, "Fig.2 all queries written");
      for (int i = 0; i < M && i < sq.size(); i++)
        chk(sq[i] == fig_exp_q[i], $sformatf("Fig.2 query write %0d = %0d", i, sq[i]));
      chk(int'(shcap.s_h) == 3 && shcap.ht == HT_HEAD && int'(shcap.n_major) == 4 &&
          int'(shcap.n_minor) == 2, "Fig.2 head info");
    end
    // ---- random full-size tiles ----
    for (int t = 0; t < 12; t++) begin
      ref_t r;
      automatic int seed = $urandom_range(0, N - 1);
      automatic int dens = (t % 3 == 2) ? 2 : 4;     // some dense tiles force concedes
      int maj, mnr, qi;
      bp = (t % 2 == 1);
      kq.delete(); kr.delete(); qq.delete(); qt.delete();
      for (int q = 0; q < MAXN; q++) rm[q] = '0;
      for (int q = 0; q < N; q++) begin
        for (int k = 0; k < N; k++) rm[q][k] = ($urandom_range(0, dens) == 0);
        @(negedge clk); wr_en = 1; wr_row = idx_t'(q); wr_data = rm[q][N-1:0];
      end
      @(negedge clk); wr_en = 0; seed_ext = idx_t'(seed); start = 1;
      @(negedge clk); start = 0;
      wait (!busy);
      @(negedge clk);
      r = sata_ref_pkg::run(rm, N, seed, N / 2);
      chk(kq.size() == N && qq.size() == N, $sformatf("tile %0d entry counts %0d %0d", t, kq.size(), qq.size()));
      for (int s = 0; s < N && s < kq.size(); s++)
        chk(kq[s] == r.order[s] && kr[s] == s, $sformatf("tile %0d key %0d: %0d exp %0d", t, s, kq[s], r.order[s]));
      chk(int'(hcap.s_h) == r.s_h && int'(hcap.ht) == r.ht && int'(conc) == r.concedes,
          $sformatf("tile %0d S_h %0d/%0d type %0d/%0d", t, hcap.s_h, r.s_h, hcap.ht, r.ht));
      maj = (r.ht == 1) ? 1 : 0; mnr = 1 - maj; qi = 0;
      for (int p = 0; p < 3; p++) begin
        automatic int ty = (p == 0) ? maj : (p == 1) ? 2 : mnr;
        for (int q = 0; q < N; q++) if (r.qt[q] == ty) begin
          if (qi < qq.size())
            chk(qq[qi] == q && qt[qi] == ty, $sformatf("tile %0d query write %0d", t, qi));
          qi++;
        end
      end
      chk(int'(hcap.n_k) == N && int'(hcap.n_major) + int'(hcap.n_minor) == N, "head info counts");
      if (!bp) begin
        automatic int exp_k = 1 + N * (N - 1) / 2 + 2 * (N - 1);
        chk(t_lastk == exp_k, $sformatf("sorting latency %0d exp %0d", t_lastk, exp_k));
        chk(t_h == exp_k + (N + 1) * (1 + r.concedes) + 3 * N + 1,
            $sformatf("head-info latency %0d", t_h));
      end
      if (r.concedes > 0) n_conc++;
    end
    chk(n_conc > 0, "some tile needed a concede");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
