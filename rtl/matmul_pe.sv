// matmul_pe: one processing element of the P_ROW x P_COL distance mesh.
//
// PE (r,c) owns the pair (node row_base+r, co-node col_base+c). Each cycle
// with `en` set it multiplies P_VEC feature elements of the node by the same
// P_VEC elements of the co-node and accumulates the dot product <x_i, y_j>
// (the xy_sum of the per-PE distance listing); the feature dimension is thus
// unrolled by P_VEC as in the paper. `clear` starts a new pair and may
// coincide with `en`. Lanes past D must be zero.
// Timing: xy is registered, valid the cycle after the last enabled cycle;
// a pair takes ceil(D/P_VEC) cycles.
module matmul_pe
  import digc_pkg::*;
#(
  parameter int unsigned P_VEC = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic [P_VEC*FEAT_W-1:0] x,
  input  logic [P_VEC*FEAT_W-1:0] y,
  output dist_t                   xy
);
  dist_t lane_sum;

  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < P_VEC; l++) begin
      feat_t a, b;
      a = x[l*FEAT_W +: FEAT_W];
      b = y[l*FEAT_W +: FEAT_W];
      lane_sum += dist_t'(a) * dist_t'(b);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      xy <= '0;
    else if (en)     xy <= (clear ? '0 : xy) + lane_sum;
    else if (clear)  xy <= '0;
  end
endmodule
