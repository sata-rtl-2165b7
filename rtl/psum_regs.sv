// psum_regs: cumulative similarity score of every key column.
//
// Instead of rebuilding the dummy vector and recomputing Dummy^T . QK[:,i] from
// scratch, the scheduler keeps psum[i] = sum over sorted keys j of
// QK[:,i]^T . QK[:,j]. Whenever a key j is sorted, every unsorted column i is
// visited once and psum[i] += dot(i, j) (the paper's Eq. 2). This block holds the
// N registers and the adder in front of them: sum_o is psum[acc_idx] + acc_val
// combinationally (it is the value the argmax compares) and is stored on the
// clock edge when acc_en is high. clr zeroes all registers for a new tile.
module psum_regs
  import sata_pkg::*;
#(
  parameter int unsigned N      = 30,
  parameter int unsigned DOT_W  = $clog2(N + 1),
  parameter int unsigned PSUM_W = $clog2(N * N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              acc_en,
  input  idx_t              acc_idx,
  input  logic [DOT_W-1:0]  acc_val,
  output logic [PSUM_W-1:0] sum_o
);

  logic [PSUM_W-1:0] psum_q [N];
  logic [PSUM_W-1:0] cur;

  always_comb begin
    cur = '0;
    for (int i = 0; i < N; i++)
      if (idx_t'(i) == acc_idx) cur = psum_q[i];
    sum_o = cur + PSUM_W'(acc_val);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) psum_q[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < N; i++) psum_q[i] <= '0;
    end else if (acc_en && (int'(acc_idx) < N)) begin
      psum_q[acc_idx] <= sum_o;
    end
  end

endmodule
