// tb_gmm: the Global Merging Module with Q = 4 streams of up to 6 sorted
// candidates (partial and empty streams, fewer streams than Q, repeated
// distances), the partial sum buffer and heap buffer modelled here. Checks the
// kd outputs against a merge computed here (empty entries when the streams
// hold fewer than kd), and that each output takes at most 2 + ceil(log2 Q)
// cycles after the heap is built.
module tb_gmm;
  import digc_pkg::*;
  localparam int unsigned Q = 4, M_PART = 6, P_ROW = 2, KD_MAX = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done, hb_we;
  always #5 clk = ~clk;
  logic row = 0, g_row, hb_row;
  logic [2:0] n_q = 0;
  logic [3:0] len [Q];
  logic [4:0] kd = 0, hb_pos;
  logic [1:0] g_q;
  logic [2:0] g_pos;
  cand_t g_rdata, hb_wdata;
  logic [31:0] n_exhausted;
  cand_t psb [P_ROW][Q][M_PART];
  cand_t hb [KD_MAX];
  cand_t all [Q*M_PART];
  int checks = 0, failures = 0;

  gmm #(.Q(Q), .M_PART(M_PART), .P_ROW(P_ROW), .KD_MAX(KD_MAX)) dut (
    .clk, .rst_n, .start, .row, .n_q, .len, .kd, .busy, .done, .g_row, .g_q, .g_pos, .g_rdata,
    .hb_we, .hb_row, .hb_pos, .hb_wdata, .n_exhausted);

  assign g_rdata = psb[g_row][g_q][g_pos];
  always @(posedge clk) if (hb_we) begin
    hb[hb_pos] <= hb_wdata;
    if (hb_row != row) $display("wrong heap buffer row");
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cnt, cyc;
      n_q = 3'(1 + $urandom % Q);
      kd = 5'(1 + $urandom % KD_MAX);
      row = 1'($urandom);
      cnt = 0;
      for (int p = 0; p < Q; p++) begin
        int base;
        len[p] = (p < n_q) ? 4'($urandom % (M_PART + 1)) : 4'd0;
        if (t % 3 == 0 && p < n_q) len[p] = 4'(M_PART);
        base = $urandom % 10;
        for (int i = 0; i < M_PART; i++) begin
          base += $urandom % 3;     // sorted, with repeats
          psb[row][p][i] = '{dval: dist_t'(base), idx: idx_t'(p * M_PART + i)};
          if (32'(i) < len[p]) begin all[cnt] = psb[row][p][i]; cnt++; end
        end
      end
      for (int i = 1; i < cnt; i++)
        for (int j = i; j > 0 && cand_lt(all[j], all[j-1]); j--) begin
          cand_t tmp; tmp = all[j]; all[j] = all[j-1]; all[j-1] = tmp;
        end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < int'(kd); i++) begin
        checks++;
        if (hb[i] != ((i < cnt) ? all[i] : CAND_EMPTY)) begin
          failures++;
          if (failures < 5) $display("t=%0d out %0d: got %0d/%0d expected %0d/%0d", t, i,
                                     hb[i].dval, hb[i].idx, all[i].dval, all[i].idx);
        end
      end
      // build: <= n_q * (2 + log2 Q) ; merge: <= kd * (2 + log2 Q)
      checks++;
      if (cyc > (int'(n_q) + int'(kd)) * (2 + 2) + 4) begin
        failures++; $display("GMM took %0d cycles", cyc);
      end
    end
    checks++;
    if (n_exhausted == 0) begin failures++; $display("no stream ran dry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
