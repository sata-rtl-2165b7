// classifier: tags queries HEAD / TAIL / GLOB and decides the head type.
//
// With the keys sorted, the heavy size S_h splits them into the first S_h, the
// middle and the last S_h sorted positions (rank < S_h, rank >= N - S_h).
// A query whose row touches none of the last S_h keys is HEAD; otherwise one
// that touches none of the first S_h keys is TAIL; every other query is GLOB.
// A query that meets both rules (only middle keys, or none) is tagged HEAD; that
// order is this design's choice.
//
// One row is classified per cycle: qtype is combinational from row / rank / s_h,
// and en counts it into n_head / n_tail / n_glob (cleared by clr). After a full
// pass over the N queries:
//   concede   = n_glob > theta     -> the controller lowers S_h and repeats
//   head_type = HEAD if n_head >= n_tail, else TAIL; GLOB when S_h is 0.
// A tie goes to HEAD as in the paper's worked example; reporting GLOB only once
// S_h has reached 0 is this design's reading of "escape GLOB with smaller S_h".
module classifier
  import sata_pkg::*;
#(
  parameter int unsigned N = 30
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [N-1:0] row,
  input  idx_t         rank [N],
  input  idx_t         s_h,
  input  logic [IDX_W:0] theta,
  output qtype_e       qtype,
  output logic [IDX_W:0] n_head,
  output logic [IDX_W:0] n_tail,
  output logic [IDX_W:0] n_glob,
  output logic         concede,
  output htype_e       head_type
);

  logic [N-1:0] in_first, in_last;

  // Key regions for the current heavy size.
  always_comb begin
    for (int k = 0; k < N; k++) begin
      in_first[k] = ({1'b0, rank[k]} < {1'b0, s_h});
      in_last[k]  = ((IDX_W+1)'(rank[k]) + (IDX_W+1)'(s_h) >= (IDX_W+1)'(N));
    end
  end

  always_comb begin
    if ((row & in_last) == '0)       qtype = QT_HEAD;
    else if ((row & in_first) == '0) qtype = QT_TAIL;
    else                             qtype = QT_GLOB;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_head <= '0;
      n_tail <= '0;
      n_glob <= '0;
    end else if (clr) begin
      n_head <= '0;
      n_tail <= '0;
      n_glob <= '0;
    end else if (en) begin
      case (qtype)
        QT_HEAD: n_head <= n_head + 1'b1;
        QT_TAIL: n_tail <= n_tail + 1'b1;
        default: n_glob <= n_glob + 1'b1;
      endcase
    end
  end

  assign concede = (n_glob > theta);

  always_comb begin
    if (s_h == '0)             head_type = HT_GLOB;
    else if (n_head >= n_tail) head_type = HT_HEAD;
    else                       head_type = HT_TAIL;
  end

endmodule
