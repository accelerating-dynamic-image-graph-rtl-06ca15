// summing_module: final distance of one (node, co-node) pair.
//
// Combines the partial results of the mesh into
//   dist = ||x||^2 + ||y||^2 - 2<x,y> + P(i,j)
// i.e. the squared Euclidean distance plus the relative positional embedding,
// as in the serial DIGC algorithm of the paper. When `valid` is low (node or
// co-node past the end of the matrix, or column past the end of the partition)
// the result is the empty candidate (distance DIST_INF), which sorts last.
// Purely combinational; the output carries the co-node index `j`.
module summing_module
  import digc_pkg::*;
(
  input  dist_t x_sq,
  input  dist_t y_sq,
  input  dist_t xy,
  input  pos_t  p,
  input  idx_t  j,
  input  logic  valid,
  output cand_t out
);
  always_comb begin
    if (valid) begin
      out.dval = x_sq + y_sq - (xy <<< 1) + dist_t'(p);
      out.idx  = j;
    end else begin
      out = CAND_EMPTY;
    end
  end
endmodule
