// qk_trace_regs: register array holding the binary selective mask of one tile.
//
// Row q, bit k is 1 when query q attends to key k (one TopK index). The array is
// written one query row per cycle and read back three ways at once: two key
// columns QK[:,a] and QK[:,b] for the dot-product engine, and the whole array
// for the classifier and the zero-unit. Reads are combinational; a write is
// visible the cycle after wr_en. The paper only names this block ("QK Trace
// Regs"); the port organisation is this design's own.
module qk_trace_regs
  import sata_pkg::*;
#(
  parameter int unsigned N = 30            // tile size S_f
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  idx_t         wr_row,
  input  logic [N-1:0] wr_data,
  input  idx_t         col_a_sel,
  input  idx_t         col_b_sel,
  output logic [N-1:0] col_a,
  output logic [N-1:0] col_b,
  output logic [N-1:0] mask_o [N]
);

  logic [N-1:0] mask_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) mask_q[q] <= '0;
    end else if (wr_en && (int'(wr_row) < N)) begin
      mask_q[wr_row] <= wr_data;
    end
  end

  always_comb begin
    for (int q = 0; q < N; q++) begin
      col_a[q] = mask_q[q][col_a_sel];
      col_b[q] = mask_q[q][col_b_sel];
    end
  end

  assign mask_o = mask_q;

endmodule
