// tb_partition_buffer: fills the X store and both sets of the Y and P stores
// of a small partition buffer with random words, then reads every word
// address from each set and checks all banks, the one-cycle read latency,
// that the outputs hold without a read, and that writing one set leaves the
// other unchanged.
module tb_partition_buffer;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 3, P_COL = 2, P_VEC = 4, D_MAX = 20;
  localparam int unsigned BUS_W = P_VEC * FEAT_W, DW = (D_MAX + P_VEC - 1) / P_VEC;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, wr_set = 0, rd_set = 0;
  logic [1:0] wr_sel = 0;
  logic [1:0] wr_bank = 0;
  logic [2:0] wr_word = 0, rd_word = 0;
  logic [BUS_W-1:0] wr_data = 0;
  logic [BUS_W-1:0] x_rd [P_ROW];
  logic [BUS_W-1:0] y_rd [P_COL];
  pos_t p_rd [P_ROW][P_COL];
  logic [BUS_W-1:0] xr [P_ROW][DW];
  logic [BUS_W-1:0] yr [2][P_COL][DW];
  pos_t pr [2][P_ROW][P_COL];
  int checks = 0, failures = 0;

  partition_buffer #(.P_ROW(P_ROW), .P_COL(P_COL), .P_VEC(P_VEC), .D_MAX(D_MAX)) dut (
    .clk, .wr_en, .wr_sel, .wr_set, .rd_set, .wr_bank, .wr_word, .wr_data, .rd_en, .rd_word,
    .x_rd, .y_rd, .p_rd);

  task automatic wr(int sel, int set, int bank, int word, logic [BUS_W-1:0] data);
    @(negedge clk); wr_en = 1; wr_sel = 2'(sel); wr_set = 1'(set); wr_bank = 2'(bank);
    wr_word = 3'(word); wr_data = data;
  endtask

  initial begin
    for (int r = 0; r < P_ROW; r++) for (int w = 0; w < DW; w++) begin
      xr[r][w] = {$urandom, $urandom}; wr(0, 0, r, w, xr[r][w]); end
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < P_COL; c++) for (int w = 0; w < DW; w++) begin
        yr[s][c][w] = {$urandom, $urandom}; wr(1, s, c, w, yr[s][c][w]); end
      for (int r = 0; r < P_ROW; r++) for (int c = 0; c < P_COL; c++) begin
        pr[s][r][c] = pos_t'($urandom); wr(2, s, r, c, BUS_W'(pr[s][r][c])); end
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 2; s++) begin
      rd_set = 1'(s);
      for (int w = 0; w < DW; w++) begin
        @(negedge clk); rd_en = 1; rd_word = 3'(w);
        @(negedge clk); rd_en = 0; rd_word = 3'((w + 1) % DW);
        for (int r = 0; r < P_ROW; r++) begin checks++; if (x_rd[r] != xr[r][w]) failures++; end
        for (int c = 0; c < P_COL; c++) begin checks++; if (y_rd[c] != yr[s][c][w]) failures++; end
        // without rd_en the outputs hold
        @(negedge clk);
        checks++; if (x_rd[0] != xr[0][w]) failures++;
      end
      for (int r = 0; r < P_ROW; r++) for (int c = 0; c < P_COL; c++) begin
        checks++; if (p_rd[r][c] != pr[s][r][c]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
