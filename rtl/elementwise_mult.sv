// elementwise_mult: squared-norm accumulator (the element-wise multiply unit
// of the distance computation module).
//
// Each cycle with `en` set it squares P_VEC feature elements and adds them to
// a running sum; `clear` starts a new vector (it may coincide with `en`, the
// new sum then starts from this cycle's elements). After ceil(D/P_VEC) enabled
// cycles `sq` holds ||v||^2. One unit serves each row of the node block (x_sq)
// and each column of the co-node block (y_sq), so the squares are computed
// once per vector rather than once per mesh PE; this sharing follows the
// separate element-wise module drawn beside the PE mesh in the published block
// diagram, while the per-PE listing of the paper computes the same sums inside
// every PE. Lanes past the vector length must be driven with zero.
// Timing: sq is registered, valid the cycle after the last enabled cycle.
module elementwise_mult
  import digc_pkg::*;
#(
  parameter int unsigned P_VEC = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   en,
  input  logic [P_VEC*FEAT_W-1:0] v,
  output dist_t                  sq
);
  dist_t lane_sum;

  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < P_VEC; l++) begin
      feat_t e;
      e = v[l*FEAT_W +: FEAT_W];
      lane_sum += dist_t'(e) * dist_t'(e);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sq <= '0;
    else if (en)     sq <= (clear ? '0 : sq) + lane_sum;
    else if (clear)  sq <= '0;
  end
endmodule
