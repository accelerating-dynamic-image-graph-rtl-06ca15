// dcm: Distance Computation Module.
//
// A P_ROW x P_COL mesh of matmul_pe units computes the dot products of the
// block's P_ROW nodes with its P_COL co-nodes, P_VEC feature elements per
// cycle; P_ROW + P_COL elementwise_mult units compute the squared norms, and
// one summing_module per PE forms ||x||^2 + ||y||^2 - 2<x,y> + P. The node
// and co-node words are broadcast along mesh rows and columns from the
// partition buffer banks (the published figure draws the mesh with
// neighbour links; broadcasting gives the same sums without skew).
// Interface: pulse `start` with `n_words` = ceil(D/P_VEC), the co-node index
// of column 0 (`col_base`) and validity masks for rows and columns. The DCM
// reads the partition buffer words 0..n_words-1 and pulses `done` with the
// P_ROW x P_COL block of candidates in `dist_blk`, held until the next start.
// Timing: done arrives n_words + 3 cycles after start (one cycle of buffer
// read latency, n_words accumulate cycles, one cycle to sum, one to register).
module dcm
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW = 8,
  parameter int unsigned P_COL = 8,
  parameter int unsigned P_VEC = 8,
  parameter int unsigned D_MAX = 1024,
  localparam int unsigned BUS_W = P_VEC*FEAT_W,
  localparam int unsigned DW_MAX = (D_MAX + P_VEC - 1) / P_VEC,
  localparam int unsigned WA_W = clog2_min1(DW_MAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [WA_W:0]     n_words,
  input  idx_t              col_base,
  input  logic [P_ROW-1:0]  row_valid,
  input  logic [P_COL-1:0]  col_valid,
  output logic              busy,
  output logic              done,
  // partition buffer read port
  output logic              pb_rd_en,
  output logic [WA_W-1:0]   pb_rd_word,
  input  logic [BUS_W-1:0]  x_rd [P_ROW],
  input  logic [BUS_W-1:0]  y_rd [P_COL],
  input  pos_t              p_rd [P_ROW][P_COL],
  output cand_t             dist_blk [P_ROW][P_COL]
);
  logic [WA_W:0] word;
  logic          issuing, feed_en, feed_first, issued_first, fin;
  idx_t          col_base_q;
  logic [P_ROW-1:0] row_valid_q;
  logic [P_COL-1:0] col_valid_q;

  assign pb_rd_en   = issuing;
  assign pb_rd_word = word[WA_W-1:0];
  assign busy       = issuing | feed_en | fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; word <= '0; feed_en <= 1'b0; feed_first <= 1'b0;
      issued_first <= 1'b0; fin <= 1'b0; done <= 1'b0;
      col_base_q <= '0; row_valid_q <= '0; col_valid_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing      <= (n_words != 0);
        issued_first <= 1'b1;
        word         <= '0;
        col_base_q   <= col_base;
        row_valid_q  <= row_valid;
        col_valid_q  <= col_valid;
      end else if (issuing) begin
        issued_first <= 1'b0;
        if (word + 1 == n_words) issuing <= 1'b0;
        word <= word + 1;
      end
      feed_en    <= issuing;
      feed_first <= issuing & issued_first;
      fin        <= feed_en & ~issuing;
      if (fin) done <= 1'b1;
    end
  end

  dist_t x_sq [P_ROW];
  dist_t y_sq [P_COL];

  for (genvar r = 0; r < P_ROW; r++) begin : g_xsq
    elementwise_mult #(.P_VEC(P_VEC)) u_xsq (
      .clk, .rst_n, .clear(feed_first), .en(feed_en), .v(x_rd[r]), .sq(x_sq[r]));
  end
  for (genvar c = 0; c < P_COL; c++) begin : g_ysq
    elementwise_mult #(.P_VEC(P_VEC)) u_ysq (
      .clk, .rst_n, .clear(feed_first), .en(feed_en), .v(y_rd[c]), .sq(y_sq[c]));
  end

  for (genvar r = 0; r < P_ROW; r++) begin : g_row
    for (genvar c = 0; c < P_COL; c++) begin : g_col
      dist_t xy;
      cand_t sum;
      matmul_pe #(.P_VEC(P_VEC)) u_pe (
        .clk, .rst_n, .clear(feed_first), .en(feed_en), .x(x_rd[r]), .y(y_rd[c]), .xy(xy));
      summing_module u_sum (
        .x_sq(x_sq[r]), .y_sq(y_sq[c]), .xy(xy), .p(p_rd[r][c]),
        .j(col_base_q + idx_t'(c)), .valid(row_valid_q[r] & col_valid_q[c]), .out(sum));
      always_ff @(posedge clk) if (fin) dist_blk[r][c] <= sum;
    end
  end
endmodule
