// tb_nsm: the Neighbor Selection Module with 5 rows and 2 PEs (three
// rounds), heap and output buffers modelled here. For random k and d checks
// that slot s of each row receives the index at position s*d, and that the
// module takes ceil(P_ROW/P_NSM) * k cycles (plus one to start).
module tb_nsm;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 5, P_NSM = 2, K_MAX = 8, KD_MAX = 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = ~clk;
  logic [3:0] k = 0;
  logic [5:0] d = 0;
  logic [5:0] hb_pos [P_ROW];
  cand_t hb_data [P_ROW];
  logic [P_ROW-1:0] ob_we;
  logic [3:0] ob_slot [P_ROW];
  idx_t ob_data [P_ROW];
  cand_t hb [P_ROW][KD_MAX];
  idx_t ob [P_ROW][K_MAX];
  int checks = 0, failures = 0;

  nsm #(.P_ROW(P_ROW), .P_NSM(P_NSM), .K_MAX(K_MAX), .KD_MAX(KD_MAX)) dut (
    .clk, .rst_n, .start, .k, .d, .busy, .done, .hb_pos, .hb_data, .ob_we, .ob_slot, .ob_data);

  always_comb for (int r = 0; r < P_ROW; r++) hb_data[r] = hb[r][hb_pos[r]];
  always @(posedge clk) for (int r = 0; r < P_ROW; r++) if (ob_we[r]) ob[r][ob_slot[r]] <= ob_data[r];

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int cyc;
      k = 4'(1 + $urandom % K_MAX);
      d = 6'(1 + $urandom % (KD_MAX / k));
      for (int r = 0; r < P_ROW; r++) begin
        for (int i = 0; i < KD_MAX; i++) hb[r][i] = '{dval: dist_t'(i), idx: idx_t'($urandom)};
        for (int i = 0; i < K_MAX; i++) ob[r][i] = '1;
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int r = 0; r < P_ROW; r++) for (int s = 0; s < int'(k); s++) begin
        checks++;
        if (ob[r][s] != hb[r][s * d].idx) begin
          failures++; $display("row %0d slot %0d got %0d expected %0d", r, s, ob[r][s], hb[r][s*d].idx);
        end
      end
      checks++;
      if (cyc != 3 * int'(k) + 1) begin failures++; $display("NSM took %0d cycles, k=%0d", cyc, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
