// status_regs: controller of the sorting and classification of one tile.
//
// This is the "Status Regs" block of the scheduler: it holds the per-key sorted
// flags and ranks, the per-query tags, the heavy size S_h and the seed LFSR,
// and it steps the dot-product engine, PSum registers, Max-K argmax and the
// classifier (all instantiated here) through the paper's Algorithm 1:
//
//  1. SEED  - pick a random key j (LFSR folded into [0,N), or seed_ext), give it
//             rank 0 and write it to KFIFO.
//  2. PASS  - the priority encoder walks the unsorted, not yet visited keys i in
//             ascending order, one per cycle: psum[i] += popcount(QK[:,i] &
//             QK[:,j]) and Max-K tracks the largest updated psum.
//  3. PICK  - the argmax becomes the next sorted key j (next rank, written to
//             KFIFO); back to PASS until one key is left, which PICK takes last.
//  4. CLS   - S_h = floor(N/2); every query is classified, one per cycle.
//  5. DEC   - if more than theta queries are GLOB, S_h -= 1 and CLS repeats
//             ("concede"); otherwise the head type is fixed.
//  6. QW    - queries are written to QFIFO in three passes: major tag, GLOB,
//             minor tag (major = HEAD for a HEAD head, TAIL for a TAIL head).
//  7. HW    - the head-info word (S_h, type, entry counts, last flag) is written.
//
// Writes go through the zero-unit, which may drop them; the *_acc inputs tell
// which were accepted so the counts in the head-info word are exact. Any write
// waits while its FIFO is full. Timing with no back-pressure, counting the
// cycle that samples start as cycle 0: the seed key is written in cycle 1, a
// pass over u unsorted keys takes u+1 cycles plus one PICK cycle, so the last
// key is written in cycle 1 + N(N-1)/2 + 2(N-1) (494 for N = 30).
// Classification then takes N+1 cycles per S_h tried, the query writes 3N
// cycles and the head-info write one more.
// The step order and the one-column-per-cycle walk follow the paper's
// description; cycle-level timing, the three-pass query write and the LFSR
// (x^8+x^6+x^5+x^4+1) are this design's choices.
//
// Lint notes: the Max-K value and the classifier's per-tag counters are not
// needed by the controller (only the argmax index, the concede decision and
// the head type are); rst_n also appears in assertion disable conditions.
module status_regs
  import sata_pkg::*;
#(
  parameter int unsigned N = 30
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           start,          // mask of a new tile is loaded
  input  logic           last_head_i,    // tile is the last head of the layer
  input  logic           seed_ext_en,
  input  idx_t           seed_ext,
  input  logic [IDX_W:0] theta,
  output logic           busy,
  output idx_t           seed_o,         // seed key of the tile in progress
  output idx_t           s_h_o,
  output logic [IDX_W:0] concede_cnt_o,  // S_h decrements of the tile in progress
  // mask access
  output idx_t           col_i_sel,
  output idx_t           col_j_sel,
  input  logic [N-1:0]   col_i,
  input  logic [N-1:0]   col_j,
  input  logic [N-1:0]   mask [N],
  // FIFO writes (before the zero-unit) and their acceptance
  output logic           k_push,
  output kentry_t        k_entry,
  input  logic           k_acc,
  input  logic           k_full,
  output logic           q_push,
  output qentry_t        q_entry,
  input  logic           q_acc,
  input  logic           q_full,
  output logic           h_push,
  output hinfo_t         h_entry,
  input  logic           h_full
);

  localparam int unsigned DOT_W  = $clog2(N + 1);
  localparam int unsigned PSUM_W = $clog2(N * N + 1);

  typedef enum logic [2:0] {C_IDLE, C_SEED, C_PASS, C_PICK, C_CLS, C_DEC, C_QW, C_HW} cstate_e;

  cstate_e        st;
  logic [N-1:0]   sorted_q, visited_q;
  idx_t           rank_q [N];
  qtype_e         qt_q [N];
  idx_t           j_q, seed_q, s_h_q, nsorted_q, q_cnt;
  logic [1:0]     qw_pass;
  htype_e         ht_q;
  logic           last_q;
  logic [IDX_W:0] n_k_q, n_major_q, n_minor_q, concede_q;
  logic [7:0]     lfsr_q;

  // ---------------- datapath ----------------
  logic             pe_valid;
  idx_t             pe_idx;
  logic [DOT_W-1:0] dot;
  logic [PSUM_W-1:0] psum_new, best_val;
  idx_t             best_idx;
  logic             best_valid;
  logic             pass_en, psum_clr, maxk_clr;
  qtype_e           cls_qtype;
  logic             cls_clr, cls_en, cls_concede;
  htype_e           cls_ht;
  logic [IDX_W:0]   n_head, n_tail, n_glob;

  priority_encoder #(.W(N)) u_pe (
    .req(~sorted_q & ~visited_q), .valid(pe_valid), .idx(pe_idx));

  assign col_i_sel = pe_idx;
  assign col_j_sel = j_q;

  dot_product_engine #(.N(N)) u_dot (.col_i(col_i), .col_j(col_j), .dot(dot));

  assign pass_en = (st == C_PASS) && pe_valid;

  psum_regs #(.N(N)) u_psum (
    .clk, .rst_n, .clr(psum_clr), .acc_en(pass_en), .acc_idx(pe_idx), .acc_val(dot),
    .sum_o(psum_new));

  max_k #(.N(N)) u_maxk (
    .clk, .rst_n, .clr(maxk_clr), .en(pass_en), .idx(pe_idx), .val(psum_new),
    .best_idx, .best_val, .best_valid);

  classifier #(.N(N)) u_cls (
    .clk, .rst_n, .clr(cls_clr), .en(cls_en), .row(mask[q_cnt]), .rank(rank_q),
    .s_h(s_h_q), .theta, .qtype(cls_qtype), .n_head, .n_tail, .n_glob,
    .concede(cls_concede), .head_type(cls_ht));

  // ---------------- seed ----------------
  idx_t lfsr_seed;
  assign lfsr_seed = idx_t'(int'(lfsr_q) % N);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr_q <= 8'h5A;
    else        lfsr_q <= {lfsr_q[6:0], lfsr_q[7] ^ lfsr_q[5] ^ lfsr_q[4] ^ lfsr_q[3]};
  end

  // ---------------- query write pass selection ----------------
  qtype_e major_t, minor_t, pass_t;
  always_comb begin
    major_t = (ht_q == HT_TAIL) ? QT_TAIL : QT_HEAD;
    minor_t = (ht_q == HT_TAIL) ? QT_HEAD : QT_TAIL;
    case (qw_pass)
      2'd0:    pass_t = major_t;
      2'd1:    pass_t = QT_GLOB;
      default: pass_t = minor_t;
    endcase
  end

  // ---------------- control ----------------
  always_comb begin
    k_push   = 1'b0;
    k_entry  = '{kid: j_q, rank: nsorted_q};
    q_push   = (st == C_QW) && (qt_q[q_cnt] == pass_t) && !q_full;
    q_entry  = '{qid: q_cnt, qt: qt_q[q_cnt]};
    h_push   = (st == C_HW) && !h_full;
    h_entry  = '{s_h: s_h_q, ht: ht_q, n_k: n_k_q, n_major: n_major_q,
                 n_minor: n_minor_q, last: last_q};
    psum_clr = (st == C_IDLE) && start;
    maxk_clr = (st == C_PICK && !k_full) || (st == C_IDLE);
    cls_en   = (st == C_CLS);
    cls_clr  = (st == C_DEC) || (st == C_PICK) || (st == C_IDLE);
    if (st == C_SEED && !k_full) begin
      k_push  = 1'b1;
      k_entry = '{kid: seed_q, rank: '0};
    end else if (st == C_PICK && !k_full) begin
      k_push  = 1'b1;
      k_entry = '{kid: best_idx, rank: nsorted_q};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      sorted_q  <= '0;
      visited_q <= '0;
      for (int k = 0; k < N; k++) rank_q[k] <= '0;
      for (int q = 0; q < N; q++) qt_q[q] <= QT_HEAD;
      j_q       <= '0;
      seed_q    <= '0;
      s_h_q     <= '0;
      nsorted_q <= '0;
      q_cnt     <= '0;
      qw_pass   <= '0;
      ht_q      <= HT_HEAD;
      last_q    <= 1'b0;
      n_k_q     <= '0;
      n_major_q <= '0;
      n_minor_q <= '0;
      concede_q <= '0;
    end else begin
      unique case (st)
        C_IDLE: if (start) begin
          seed_q    <= seed_ext_en ? seed_ext : lfsr_seed;
          last_q    <= last_head_i;
          sorted_q  <= '0;
          visited_q <= '0;
          n_k_q     <= '0;
          n_major_q <= '0;
          n_minor_q <= '0;
          concede_q <= '0;
          st        <= C_SEED;
        end
        C_SEED: if (!k_full) begin
          sorted_q[seed_q] <= 1'b1;
          rank_q[seed_q]   <= '0;
          j_q              <= seed_q;
          nsorted_q        <= idx_t'(1);
          if (k_acc) n_k_q <= n_k_q + 1'b1;
          if (N == 1) begin
            s_h_q <= idx_t'(N / 2);
            q_cnt <= '0;
            st    <= C_CLS;
          end else begin
            st <= C_PASS;
          end
        end
        C_PASS: begin
          if (pe_valid) visited_q[pe_idx] <= 1'b1;
          else          st <= C_PICK;
        end
        C_PICK: if (!k_full) begin
          sorted_q[best_idx] <= 1'b1;
          rank_q[best_idx]   <= nsorted_q;
          j_q                <= best_idx;
          nsorted_q          <= nsorted_q + 1'b1;
          visited_q          <= '0;
          if (k_acc) n_k_q <= n_k_q + 1'b1;
          if (int'(nsorted_q) == N - 1) begin
            s_h_q <= idx_t'(N / 2);
            q_cnt <= '0;
            st    <= C_CLS;
          end else begin
            st <= C_PASS;
          end
        end
        C_CLS: begin
          qt_q[q_cnt] <= cls_qtype;
          if (int'(q_cnt) == N - 1) st <= C_DEC;
          else                      q_cnt <= q_cnt + 1'b1;
        end
        C_DEC: begin
          q_cnt <= '0;
          if (cls_concede) begin
            s_h_q     <= s_h_q - 1'b1;
            concede_q <= concede_q + 1'b1;
            st        <= C_CLS;
          end else begin
            ht_q    <= cls_ht;
            qw_pass <= '0;
            st      <= C_QW;
          end
        end
        C_QW: begin
          if (!(qt_q[q_cnt] == pass_t && q_full)) begin
            if (q_acc) begin
              if (qw_pass == 2'd2) n_minor_q <= n_minor_q + 1'b1;
              else                 n_major_q <= n_major_q + 1'b1;
            end
            if (int'(q_cnt) == N - 1) begin
              q_cnt <= '0;
              if (qw_pass == 2'd2) st <= C_HW;
              else                 qw_pass <= qw_pass + 1'b1;
            end else begin
              q_cnt <= q_cnt + 1'b1;
            end
          end
        end
        C_HW: if (!h_full) st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy          = (st != C_IDLE);
  assign seed_o        = seed_q;
  assign s_h_o         = s_h_q;
  assign concede_cnt_o = concede_q;

  // The pass always produces a candidate before PICK.
  a_pick_has_max: assert property (@(posedge clk) disable iff (!rst_n)
                                   (st == C_PICK) |-> best_valid);

endmodule
