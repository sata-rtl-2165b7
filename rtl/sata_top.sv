// sata_top: the SATA scheduler for selective (TopK) Query-Key attention.
//
// Input: the binary TopK mask of one tile (a head, or an S_f x S_f sub-block of
// a head), streamed one query row per cycle, query 0 first. Output: two operand
// streams for a query-stationary compute engine (for example a CIM macro):
// wr_q_* loads a query, rd_k_* runs a key past the loaded queries (MAC).
//
// Inside, the tile is held in qk_trace_regs. status_regs sorts the keys so that
// keys attended by the same queries sit next to each other (greedy cumulative
// similarity, dot-product engine + PSum registers + Max-K), tags the queries
// HEAD / TAIL / GLOB against the heavy size S_h, lowering S_h while too many
// are GLOB, and writes the key order to KFIFO, the query order to QFIFO and a
// head-info word to a two-entry queue, through the zero-unit that drops
// trivial queries and keys when zero_skip_en is set. schedule_fsm reads the
// three queues and overlaps the loading of queries with the MACs of keys that
// those queries do not need, across consecutive heads.
//
// mask_ready is high while the mask registers are free: the 1st..Nth accepted
// rows fill them, the Nth starts the tile (last_head flags the final head of a
// layer, sampled with row N-1). The next tile is accepted once the current one
// has been written to the queues, so sorting a tile overlaps the scheduling of
// the previous one. FIFO depths (2N) and the single mask buffer are this
// design's choices.
//
// Lint notes: the zero-unit's q_nz/k_nz vectors, the FIFO occupancy counts,
// the sorter's own S_h output and the FSM's step_end pulse are left unused
// here on purpose (the same values reach the outputs through sched_s_h and the
// streams); synthesis removes them. rst_n is seen as both asynchronous reset
// and synchronous net only because the assertions are disabled during reset.
module sata_top
  import sata_pkg::*;
#(
  parameter int unsigned N          = 30,       // tile size S_f
  parameter int unsigned FIFO_DEPTH = 2 * N
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              zero_skip_en,
  input  logic [IDX_W:0]    theta,
  input  logic              seed_ext_en,
  input  idx_t              seed_ext,
  // mask input
  input  logic              mask_valid,
  output logic              mask_ready,
  input  logic [N-1:0]      mask_row,
  input  logic              last_head,
  // key MAC stream
  output logic              rd_k_valid,
  input  logic              rd_k_ready,
  output idx_t              rd_k_idx,
  output logic [HEAD_W-1:0] rd_k_head,
  // query load stream
  output logic              wr_q_valid,
  input  logic              wr_q_ready,
  output idx_t              wr_q_idx,
  output logic [HEAD_W-1:0] wr_q_head,
  // status
  output sched_state_e      sched_state,
  output logic [15:0]       sched_step,
  output idx_t              sched_s_h,
  output htype_e            sched_ht,
  output logic [15:0]       sched_starve,
  output logic              sort_busy,
  output idx_t              sort_seed,
  output logic [IDX_W:0]    sort_concedes
);

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- mask load ----------------
  idx_t         row_cnt;
  logic         busy, start, last_q;
  logic         row_fire;
  idx_t         col_i_sel, col_j_sel;
  logic [N-1:0] col_i, col_j;
  logic [N-1:0] mask [N];

  assign mask_ready = !busy && !start;
  assign row_fire   = mask_valid && mask_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_cnt <= '0;
      start   <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      start <= 1'b0;
      if (row_fire) begin
        if (int'(row_cnt) == N - 1) begin
          row_cnt <= '0;
          start   <= 1'b1;
          last_q  <= last_head;
        end else begin
          row_cnt <= row_cnt + 1'b1;
        end
      end
    end
  end

  qk_trace_regs #(.N(N)) u_trace (
    .clk, .rst_n, .wr_en(row_fire), .wr_row(row_cnt), .wr_data(mask_row),
    .col_a_sel(col_i_sel), .col_b_sel(col_j_sel), .col_a(col_i), .col_b(col_j),
    .mask_o(mask));

  // ---------------- sorting / classification ----------------
  logic    k_push_req, q_push_req, h_push;
  kentry_t k_entry;
  qentry_t q_entry;
  hinfo_t  h_entry;
  logic    k_push, q_push;
  logic    k_full, q_full, h_full;
  logic [N-1:0] q_nz, k_nz;

  status_regs #(.N(N)) u_status (
    .clk, .rst_n, .start, .last_head_i(last_q), .seed_ext_en, .seed_ext, .theta,
    .busy, .seed_o(sort_seed), .s_h_o(), .concede_cnt_o(sort_concedes),
    .col_i_sel, .col_j_sel, .col_i, .col_j, .mask,
    .k_push(k_push_req), .k_entry, .k_acc(k_push), .k_full,
    .q_push(q_push_req), .q_entry, .q_acc(q_push), .q_full,
    .h_push, .h_entry, .h_full);

  assign sort_busy = busy;

  zero_unit #(.N(N)) u_zero (
    .mask, .zero_skip_en,
    .q_push_i(q_push_req), .q_idx(q_entry.qid),
    .k_push_i(k_push_req), .k_idx(k_entry.kid),
    .q_push_o(q_push), .k_push_o(k_push), .q_nz, .k_nz);

  // ---------------- queues ----------------
  kentry_t k_dout;
  qentry_t q_dout;
  hinfo_t  h_dout;
  logic    k_empty, q_empty, h_empty, k_pop, q_pop, h_pop;
  logic [CW-1:0] k_cnt, q_cnt;
  logic [1:0]    h_cnt;

  sync_fifo #(.WIDTH($bits(kentry_t)), .DEPTH(FIFO_DEPTH)) u_kfifo (
    .clk, .rst_n, .push(k_push), .din(k_entry), .pop(k_pop), .dout(k_dout),
    .empty(k_empty), .full(k_full), .count(k_cnt));

  sync_fifo #(.WIDTH($bits(qentry_t)), .DEPTH(FIFO_DEPTH)) u_qfifo (
    .clk, .rst_n, .push(q_push), .din(q_entry), .pop(q_pop), .dout(q_dout),
    .empty(q_empty), .full(q_full), .count(q_cnt));

  sync_fifo #(.WIDTH($bits(hinfo_t)), .DEPTH(2)) u_hfifo (
    .clk, .rst_n, .push(h_push), .din(h_entry), .pop(h_pop), .dout(h_dout),
    .empty(h_empty), .full(h_full), .count(h_cnt));

  // ---------------- scheduling ----------------
  schedule_fsm #(.N(N)) u_sched (
    .clk, .rst_n,
    .h_dout, .h_empty, .h_pop,
    .k_dout, .k_empty, .k_pop,
    .q_dout, .q_empty, .q_pop,
    .rd_k_valid, .rd_k_ready, .rd_k_idx, .rd_k_head,
    .wr_q_valid, .wr_q_ready, .wr_q_idx, .wr_q_head,
    .state(sched_state), .step(sched_step), .step_end(), .cur_s_h(sched_s_h),
    .cur_ht(sched_ht), .starve_cnt(sched_starve));

endmodule
