// sata_workload_run: drives one sata_top instance with the tiles of one
// attention head of a given workload shape and checks every output transfer.
//
// A T x T TopK mask is generated in which every query attends exactly K keys
// chosen at random (the real score matrices of the evaluated models are not
// available, so only the shape of the workload is reproduced: sequence length
// T, TopK K, tile size N). The mask is cut into (T/N)^2 tiles of N x N, which
// are streamed into the scheduler row by row as one layer: for each fold of
// keys, all folds of queries in turn, then the next key fold (the order in which
// the tiling scheme reuses a fold's keys).
// The key seed of every tile comes from the scheduler's own LFSR and is read
// back from sort_seed. For each tile sata_ref_pkg computes the key order, tags,
// S_h and head type, and the expected RD-key / WR-query streams (index, tile
// number, FSM state) are compared transfer by transfer, with the consumer
// always ready. At the end the harness reports cycles per tile, the average
// S_h / N, the average number of S_h decrements and the share of GLOB queries.
//
// Interface: done rises when all tiles have been scheduled; checks and
// failures count the comparisons. Parameters: N tile size, T tokens, K TopK,
// ZSKIP zero-skip enable, NAME_ID only labels the printout.
module sata_workload_run
  import sata_pkg::*;
  import sata_ref_pkg::*;
#(
  parameter int N     = 30,
  parameter int T     = 30,
  parameter int K     = 15,
  parameter bit ZSKIP = 1'b0,
  parameter string NAME = "workload"
) (
  input  logic clk,
  input  logic rst_n,
  output bit   done,
  output int   checks,
  output int   failures
);
  localparam int NB     = T / N;
  localparam int NTILES = NB * NB;

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

  sata_top #(.N(N)) dut (.*);

  assign rd_k_ready = 1'b1;
  assign wr_q_ready = 1'b1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: %s", NAME, what); end
  endtask

  bit    full [T][T];
  rowv_t masks [NTILES][MAXN];
  ref_t  refs [NTILES];

  typedef struct { int idx; int tile; sched_state_e st; } exp_t;
  exp_t exp_rd [$], exp_wr [$];

  function automatic void build_masks();
    for (int q = 0; q < T; q++) begin
      int picked = 0;
      for (int k = 0; k < T; k++) full[q][k] = 0;
      while (picked < K) begin
        int k = $urandom_range(0, T - 1);
        if (!full[q][k]) begin full[q][k] = 1; picked++; end
      end
    end
    for (int t = 0; t < NTILES; t++) begin
      int r0 = (t % NB) * N, c0 = (t / NB) * N;   // Q-folds inner, K-folds outer
      for (int q = 0; q < MAXN; q++) masks[t][q] = '0;
      for (int q = 0; q < N; q++) for (int k = 0; k < N; k++)
        masks[t][q][k] = full[r0 + q][c0 + k];
    end
  endfunction

  function automatic void predict(int t);
    ref_t r = refs[t];
    bit   qnz [N], knz [N];
    int   major, minor;
    bit   after_init = (t == 0) || (refs[t-1].ht == 2);
    for (int i = 0; i < N; i++) begin qnz[i] = 0; knz[i] = 0; end
    for (int q = 0; q < N; q++) for (int k = 0; k < N; k++)
      if (masks[t][q][k]) begin qnz[q] = 1; knz[k] = 1; end
    major = (r.ht == 1) ? 1 : 0;
    minor = (r.ht == 1) ? 0 : 1;
    for (int pass = 0; pass < 3; pass++) begin
      int ty = (pass == 0) ? major : (pass == 1) ? 2 : minor;
      for (int q = 0; q < N; q++) begin
        exp_t e;
        if (r.qt[q] != ty || (ZSKIP && !qnz[q])) continue;
        e.idx = q; e.tile = t;
        if (r.ht == 2)        e.st = ST_WRAPGQ;
        else if (pass == 2)   e.st = ST_INTOHD;
        else if (after_init)  e.st = ST_INIT;
        else                  e.st = ST_OUTTAHD;
        exp_wr.push_back(e);
      end
    end
    for (int s = 0; s < N; s++) begin
      exp_t e;
      int k = r.order[s];
      if (ZSKIP && !knz[k]) continue;
      e.idx = k; e.tile = t;
      if (r.ht == 2)            e.st = ST_WRAPGK;
      else if (s < r.s_h)       e.st = ST_INTOHD;
      else if (s < N - r.s_h)   e.st = ST_MIDSTHD;
      else                      e.st = ST_OUTTAHD;
      exp_rd.push_back(e);
    end
  endfunction

  bit driver_done = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    longint t_start;
    zero_skip_en = ZSKIP; theta = (IDX_W+1)'(N / 2); seed_ext_en = 0; seed_ext = '0;
    mask_valid = 0; mask_row = '0; last_head = 0;
    checks = 0; failures = 0; done = 0;
    build_masks();
    wait (rst_n);
    @(posedge clk);
    t_start = cyc;
    for (int t = 0; t < NTILES; t++) begin
      for (int q = 0; q < N; q++) begin
        mask_valid <= 1; mask_row <= masks[t][q][N-1:0];
        last_head <= (t == NTILES - 1);
        @(posedge clk iff mask_ready);
      end
      mask_valid <= 0;
      @(posedge clk);   // start pulse
      @(posedge clk);   // seed sampled
      refs[t] = sata_ref_pkg::run(masks[t], N, int'(sort_seed), N / 2);
      predict(t);
    end
    driver_done = 1;
    forever begin
      @(posedge clk);
      if (exp_rd.size() == 0 && exp_wr.size() == 0 && sched_state == ST_IDLE && !sort_busy) break;
    end
    begin
      automatic real sh = 0.0, cc = 0.0, gq = 0.0;
      automatic int n_glob_heads = 0;
      for (int t = 0; t < NTILES; t++) begin
        sh += real'(refs[t].s_h) / real'(N);
        cc += real'(refs[t].concedes);
        gq += real'(refs[t].n_glob);
        if (refs[t].ht == 2) n_glob_heads++;
      end
      $display("%s: T=%0d K=%0d tile %0dx%0d, %0d tiles, %0d cycles (%0d per tile), avg S_h=%.3fN, avg S_h decrements=%.2f, GLOB queries %.1f%%, GLOB tiles %0d",
               NAME, T, K, N, N, NTILES, cyc - t_start, (cyc - t_start) / longint'(NTILES),
               sh / NTILES, cc / NTILES, 100.0 * gq / (NTILES * N), n_glob_heads);
    end
    check(!rd_k_valid && !wr_q_valid, "streams quiet at the end");
    done = 1;
  end

  exp_t e;
  always @(posedge clk) if (rst_n) begin
    if (rd_k_valid && rd_k_ready) begin
      if (exp_rd.size() == 0) check(0, "unexpected RD");
      else begin
        e = exp_rd.pop_front();
        check(int'(rd_k_idx) == e.idx && int'(rd_k_head) == (e.tile % (1 << HEAD_W)) && sched_state == e.st,
              $sformatf("RD got k%0d t%0d %s, exp k%0d t%0d %s", rd_k_idx, rd_k_head,
                        sched_state.name(), e.idx, e.tile, e.st.name()));
      end
    end
    if (wr_q_valid && wr_q_ready) begin
      if (exp_wr.size() == 0) check(0, "unexpected WR");
      else begin
        e = exp_wr.pop_front();
        check(int'(wr_q_idx) == e.idx && int'(wr_q_head) == (e.tile % (1 << HEAD_W)) && sched_state == e.st,
              $sformatf("WR got q%0d t%0d %s, exp q%0d t%0d %s", wr_q_idx, wr_q_head,
                        sched_state.name(), e.idx, e.tile, e.st.name()));
      end
    end
  end

endmodule
