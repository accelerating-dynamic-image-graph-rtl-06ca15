// tb_dcm: runs the distance mesh (3 x 2 PEs, P_VEC = 4) on random blocks of
// 1..5 words with random masks, modelling the partition buffer here, and
// checks every distance against ||x-y||^2 + P computed here. It also checks
// the block latency: done n_words + 3 cycles after start, i.e. the
// ceil(D/P_VEC) accumulate cycles of the published cycle model plus 3.
module tb_dcm;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 3, P_COL = 2, P_VEC = 4, D_MAX = 20;
  localparam int unsigned BUS_W = P_VEC * FEAT_W, DW = (D_MAX + P_VEC - 1) / P_VEC;
  logic clk = 0, rst_n = 0, start = 0, busy, done, pb_rd_en;
  always #5 clk = ~clk;
  logic [3:0] n_words = 0;
  idx_t col_base = 0;
  logic [P_ROW-1:0] row_valid = '1;
  logic [P_COL-1:0] col_valid = '1;
  logic [2:0] pb_rd_word;
  logic [BUS_W-1:0] x_rd [P_ROW];
  logic [BUS_W-1:0] y_rd [P_COL];
  pos_t p_rd [P_ROW][P_COL];
  cand_t dist_blk [P_ROW][P_COL];
  logic [BUS_W-1:0] xm [P_ROW][DW];
  logic [BUS_W-1:0] ym [P_COL][DW];
  int checks = 0, failures = 0;

  dcm #(.P_ROW(P_ROW), .P_COL(P_COL), .P_VEC(P_VEC), .D_MAX(D_MAX)) dut (
    .clk, .rst_n, .start, .n_words, .col_base, .row_valid, .col_valid, .busy, .done,
    .pb_rd_en, .pb_rd_word, .x_rd, .y_rd, .p_rd, .dist_blk);

  // partition buffer model: registered read
  always @(posedge clk) if (pb_rd_en) begin
    for (int r = 0; r < P_ROW; r++) x_rd[r] <= xm[r][pb_rd_word];
    for (int c = 0; c < P_COL; c++) y_rd[c] <= ym[c][pb_rd_word];
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int nw, cyc;
      nw = 1 + $urandom % DW;
      for (int r = 0; r < P_ROW; r++) for (int w = 0; w < DW; w++) xm[r][w] = {$urandom, $urandom};
      for (int c = 0; c < P_COL; c++) for (int w = 0; w < DW; w++) ym[c][w] = {$urandom, $urandom};
      for (int r = 0; r < P_ROW; r++) for (int c = 0; c < P_COL; c++) p_rd[r][c] = pos_t'($urandom);
      @(negedge clk);
      n_words = 4'(nw); col_base = idx_t'($urandom % 1000);
      row_valid = (t % 3 == 0) ? P_ROW'($urandom) : '1;
      col_valid = (t % 4 == 0) ? P_COL'($urandom) : '1;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != nw + 3) begin failures++; $display("latency %0d expected %0d", cyc, nw + 3); end
      for (int r = 0; r < P_ROW; r++) for (int c = 0; c < P_COL; c++) begin
        int s;
        s = 0;
        for (int w = 0; w < nw; w++) for (int l = 0; l < P_VEC; l++) begin
          int a, b;
          a = int'($signed(xm[r][w][l*8 +: 8])); b = int'($signed(ym[c][w][l*8 +: 8]));
          s += (a - b) * (a - b);
        end
        s += int'(p_rd[r][c]);
        checks++;
        if (row_valid[r] && col_valid[c]) begin
          if (dist_blk[r][c].dval != dist_t'(s) || dist_blk[r][c].idx != col_base + idx_t'(c)) begin
            failures++; $display("(%0d,%0d) got %0d expected %0d", r, c, dist_blk[r][c].dval, s);
          end
        end else if (dist_blk[r][c].dval != DIST_INF) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
