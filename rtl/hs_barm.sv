// hs_barm -- base hypervector source of one SA row (the "BARM" bar above each
// PE row of the systolic array).
//
// Function: returns, for N read ports at once, the base element of the
// independently drawn chunk `id[i]` of fragment row `row`, at element `lane`
// of the chunk. Under the chunk-shift permutation B[j][m] = B[j-1][m-1] a
// w-wide window row has only 2w-1 distinct chunks: the first chunks B[j][0]
// of the w positions (ids 0..w-1) and the chunks B[0][m], m >= 1 (ids
// w..2w-2). The PEs ask for chunks by that identity.
//
// How: the elements are not stored but computed from a seeded hash
// (hs_pkg::hs_base_elem), approximately Gaussian with sigma ~32 LSB. This is
// the design's choice; the published design only names the block. A host
// that knows the seed regenerates the same vectors for offline training.
//
// Timing: purely combinational, zero latency.
module hs_barm
  import hs_pkg::*;
#(
  parameter int unsigned N = 1
) (
  input  logic [31:0]              seed,
  input  logic [15:0]              row,
  input  logic [15:0]              lane,
  input  logic [N-1:0][15:0]       id,
  output logic [N-1:0][ELEM_W-1:0] val
);
  always_comb begin
    for (int i = 0; i < int'(N); i++)
      val[i] = hs_base_elem(seed, row, id[i], lane);
  end
endmodule
