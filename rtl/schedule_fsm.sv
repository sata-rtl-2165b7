// schedule_fsm: sparsity-aware inter-head scheduler (the paper's Algorithm 2).
//
// Queries are the stationary operand: they are written (loaded, WR) into the
// compute engine, and keys are read past them (RD = MAC). After sorting, the
// HEAD queries of a head need none of its last S_h keys and the TAIL queries
// none of its first S_h keys, so loads and MACs can overlap:
//
//   INIT     WR major queries of the first head (major = HEAD and GLOB queries
//            for a HEAD-type head, TAIL and GLOB for a TAIL-type head)
//   INTOHD   RD keys of rank [0, S_h)       | WR minor queries of this head
//   MIDSTHD  RD keys of rank [S_h, N-S_h)   | -   (only when that range exists)
//   OUTTAHD  RD keys of rank [N-S_h, N)     | WR major queries of the next head
//   then INTOHD of the next head, ...
//   WRAPGQ / WRAPGK: a GLOB head is loaded whole, then all its keys are read.
//
// One state is one time step. A step issues its RD list on the rd_k stream and
// its WR list on the wr_q stream at the same time (valid/ready each, one item
// per cycle) and ends one cycle after both lists are done, so an unstalled step
// takes max(#RD, #WR) + 1 cycles. OUTTAHD of a head that is not the last waits
// for the next head's info word before it can know its WR list (counted as
// starve cycles). Keys carry their rank in KFIFO, so a range ends when the next
// key's rank leaves it; zero-skipped keys simply never appear.
//
// The states and their order follow the paper; the handshake, the extra cycle
// per step and scheduling a GLOB head in place (the paper leaves GLOB heads for
// after all local heads) are this design's choices.
//
// Lint notes: the FSM uses only the index of a QFIFO entry (its tag is
// implied by the order of the three write passes). Of the latched head-info
// word only S_h, type, minor count and last flag are read later; its key and
// major counts are used when the word is taken from the queue. rst_n also appears in assertion disable conditions.
module schedule_fsm
  import sata_pkg::*;
#(
  parameter int unsigned N = 30
) (
  input  logic              clk,
  input  logic              rst_n,
  // head-info queue
  input  hinfo_t            h_dout,
  input  logic              h_empty,
  output logic              h_pop,
  // KFIFO
  input  kentry_t           k_dout,
  input  logic              k_empty,
  output logic              k_pop,
  // QFIFO
  input  qentry_t           q_dout,
  input  logic              q_empty,
  output logic              q_pop,
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
  output sched_state_e      state,
  output logic [15:0]       step,
  output logic              step_end,
  output idx_t              cur_s_h,
  output htype_e            cur_ht,
  output logic [15:0]       starve_cnt
);

  sched_state_e      st;
  hinfo_t            cur;
  logic [IDX_W:0]    k_left, wq_left;
  logic              wq_next;      // WR list of this step belongs to the next head
  logic              wq_known;     // OUTTAHD: next head's WR list is known
  logic [HEAD_W-1:0] head_id;

  // upper rank bound (exclusive) of the RD list of the current step
  logic [IDX_W+1:0] bound;
  always_comb begin
    unique case (st)
      ST_INTOHD:  bound = (IDX_W+2)'(cur.s_h);
      ST_MIDSTHD: bound = (IDX_W+2)'(N) - (IDX_W+2)'(cur.s_h);
      ST_OUTTAHD, ST_WRAPGK: bound = (IDX_W+2)'(N);
      default:    bound = '0;
    endcase
  end

  logic rd_done, wr_done, done, rd_fire, wr_fire;
  assign rd_done = (k_left == '0) || ((IDX_W+2)'(k_dout.rank) >= bound);
  assign wr_done = (wq_left == '0);

  assign rd_k_valid = !rd_done && !k_empty;
  assign rd_k_idx   = k_dout.kid;
  assign rd_k_head  = head_id;
  assign wr_q_valid = !wr_done && !q_empty;
  assign wr_q_idx   = q_dout.qid;
  assign wr_q_head  = wq_next ? head_id + 1'b1 : head_id;
  assign rd_fire    = rd_k_valid && rd_k_ready;
  assign wr_fire    = wr_q_valid && wr_q_ready;
  assign k_pop      = rd_fire;
  assign q_pop      = wr_fire;

  always_comb begin
    unique case (st)
      ST_IDLE:    done = !h_empty;
      ST_INIT, ST_WRAPGQ:    done = wr_done;
      ST_INTOHD, ST_MIDSTHD: done = rd_done && wr_done;
      ST_OUTTAHD: done = rd_done && wr_done && (cur.last || wq_known);
      ST_WRAPGK:  done = rd_done && (cur.last || !h_empty);
      default:    done = 1'b0;
    endcase
  end

  // the next head is taken from the head-info queue at the end of these steps
  assign h_pop = done && ((st == ST_IDLE) ||
                          ((st == ST_OUTTAHD || st == ST_WRAPGK) && !cur.last));

  assign step_end = done && (st != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= ST_IDLE;
      cur        <= '0;
      k_left     <= '0;
      wq_left    <= '0;
      wq_next    <= 1'b0;
      wq_known   <= 1'b0;
      head_id    <= '0;
      step       <= '0;
      starve_cnt <= '0;
    end else begin
      if (rd_fire) k_left  <= k_left - 1'b1;
      if (wr_fire) wq_left <= wq_left - 1'b1;
      // OUTTAHD learns the next head's major-query count as soon as it is queued
      if (st == ST_OUTTAHD && !cur.last && !wq_known) begin
        if (!h_empty) begin
          wq_known <= 1'b1;
          wq_next  <= 1'b1;
          wq_left  <= (h_dout.ht == HT_GLOB) ? '0 : h_dout.n_major;
        end else begin
          starve_cnt <= starve_cnt + 1'b1;
        end
      end
      if (done) begin
        if (st != ST_IDLE) step <= step + 1'b1;
        wq_next  <= 1'b0;
        wq_known <= 1'b0;
        unique case (st)
          ST_IDLE: begin
            cur    <= h_dout;
            k_left <= h_dout.n_k;
            if (h_dout.ht == HT_GLOB) begin
              wq_left <= h_dout.n_major + h_dout.n_minor;
              st      <= ST_WRAPGQ;
            end else begin
              wq_left <= h_dout.n_major;
              st      <= ST_INIT;
            end
          end
          ST_INIT: begin
            wq_left <= cur.n_minor;
            st      <= ST_INTOHD;
          end
          ST_INTOHD: begin
            wq_left <= '0;
            st <= (2 * int'(cur.s_h) < N) ? ST_MIDSTHD : ST_OUTTAHD;
          end
          ST_MIDSTHD: begin
            wq_left <= '0;
            st      <= ST_OUTTAHD;
          end
          ST_OUTTAHD, ST_WRAPGK: begin
            head_id <= head_id + 1'b1;
            if (cur.last) begin
              st <= ST_IDLE;
            end else begin
              cur    <= h_dout;
              k_left <= h_dout.n_k;
              if (h_dout.ht == HT_GLOB) begin
                wq_left <= h_dout.n_major + h_dout.n_minor;
                st      <= ST_WRAPGQ;
              end else if (st == ST_WRAPGK) begin
                wq_left <= h_dout.n_major;      // nothing was preloaded
                st      <= ST_INIT;
              end else begin
                wq_left <= h_dout.n_minor;      // major queries loaded in OUTTAHD
                st      <= ST_INTOHD;
              end
            end
          end
          ST_WRAPGQ: begin
            wq_left <= '0;
            st      <= ST_WRAPGK;
          end
          default: st <= ST_IDLE;
        endcase
      end
    end
  end

  assign state   = st;
  assign cur_s_h = cur.s_h;
  assign cur_ht  = cur.ht;

  a_k_present: assert property (@(posedge clk) disable iff (!rst_n)
                                (st != ST_IDLE && k_left != '0) |-> !k_empty);

endmodule
