// zero_unit: zero-skip filter in front of QFIFO and KFIFO.
//
// In a tile cut from a longer sequence, some queries attend to no key of the
// tile and some keys are attended by no query. Their rows / columns are all
// zero; the unit finds them by reducing every row and every column of the mask
// (q_nz / k_nz = 1 for a non-trivial query / key) and, when zero_skip_en is set,
// drops the FIFO write of a trivial index, so the compute engine never loads or
// MACs it. With zero_skip_en low every write passes. Purely combinational.
module zero_unit
  import sata_pkg::*;
#(
  parameter int unsigned N = 30
) (
  input  logic [N-1:0] mask [N],
  input  logic         zero_skip_en,
  input  logic         q_push_i,
  input  idx_t         q_idx,
  input  logic         k_push_i,
  input  idx_t         k_idx,
  output logic         q_push_o,
  output logic         k_push_o,
  output logic [N-1:0] q_nz,
  output logic [N-1:0] k_nz
);

  always_comb begin
    k_nz = '0;
    for (int q = 0; q < N; q++) begin
      q_nz[q] = |mask[q];
      k_nz    = k_nz | mask[q];
    end
  end

  assign q_push_o = q_push_i && (!zero_skip_en || q_nz[q_idx]);
  assign k_push_o = k_push_i && (!zero_skip_en || k_nz[k_idx]);

endmodule
