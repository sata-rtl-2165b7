// max_k: running argmax of one sorting pass ("Max K" in the paper's schematic).
//
// While a pass visits the unsorted key columns one per cycle, each updated psum
// is offered here with its key index (en, idx, val). The block keeps the largest
// value seen and its index; a later candidate replaces it only if strictly
// larger, so on a tie the first-visited (lowest-index) key wins. clr starts a
// new pass. best_* are registered and valid from the cycle after the first
// candidate. The strict-greater tie rule is this design's choice.
module max_k
  import sata_pkg::*;
#(
  parameter int unsigned N      = 30,
  parameter int unsigned PSUM_W = $clog2(N * N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  idx_t              idx,
  input  logic [PSUM_W-1:0] val,
  output idx_t              best_idx,
  output logic [PSUM_W-1:0] best_val,
  output logic              best_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_idx   <= '0;
      best_val   <= '0;
      best_valid <= 1'b0;
    end else if (clr) begin
      best_idx   <= '0;
      best_val   <= '0;
      best_valid <= 1'b0;
    end else if (en && (!best_valid || val > best_val)) begin
      best_idx   <= idx;
      best_val   <= val;
      best_valid <= 1'b1;
    end
  end

endmodule
