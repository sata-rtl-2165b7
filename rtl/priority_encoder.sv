// priority_encoder: index of the lowest set bit of a request vector.
//
// The scheduler uses it to step through the still-unsorted key columns in
// ascending order, one per cycle, during each sorting pass; visiting columns in
// that order is also what makes the argmax keep the lowest index on a tie.
// Purely combinational. valid is 0 and idx is 0 when no bit is set.
module priority_encoder
  import sata_pkg::*;
#(
  parameter int unsigned W = 30
) (
  input  logic [W-1:0] req,
  output logic         valid,
  output idx_t         idx
);

  always_comb begin
    valid = 1'b0;
    idx   = '0;
    for (int i = W - 1; i >= 0; i--) begin
      if (req[i]) begin
        valid = 1'b1;
        idx   = idx_t'(i);
      end
    end
  end

endmodule
