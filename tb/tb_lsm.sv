// tb_lsm: the Local Sorting Module with 5 rows and 2 sorting PEs (three
// rounds) on partitions of 7 candidates, with the partial sum buffer ports
// modelled here. Checks every row of the chosen partition is sorted in place,
// other partitions are untouched, and the module time is three rounds.
module tb_lsm;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 5, P_SORT = 2, Q = 3, M_PART = 7;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = ~clk;
  logic [1:0] q = 0, ls_q;
  logic [P_ROW-1:0] ls_we;
  logic [2:0] ls_addr [P_ROW];
  cand_t ls_wdata [P_ROW], ls_rdata [P_ROW];
  cand_t mem [P_ROW][Q][M_PART];
  cand_t exp_mem [P_ROW][Q][M_PART];
  int checks = 0, failures = 0;

  lsm #(.P_ROW(P_ROW), .P_SORT(P_SORT), .Q(Q), .M_PART(M_PART)) dut (
    .clk, .rst_n, .start, .q, .busy, .done, .ls_q, .ls_we, .ls_addr, .ls_wdata, .ls_rdata);

  always_comb for (int r = 0; r < P_ROW; r++) ls_rdata[r] = mem[r][ls_q][ls_addr[r]];
  always @(posedge clk) for (int r = 0; r < P_ROW; r++) if (ls_we[r]) mem[r][ls_q][ls_addr[r]] <= ls_wdata[r];

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int cyc;
      for (int r = 0; r < P_ROW; r++) for (int p = 0; p < Q; p++) for (int i = 0; i < M_PART; i++) begin
        mem[r][p][i] = '{dval: dist_t'($urandom % 50), idx: idx_t'($urandom)};
        exp_mem[r][p][i] = mem[r][p][i];
      end
      q = 2'(t % Q);
      for (int r = 0; r < P_ROW; r++)
        for (int i = 1; i < M_PART; i++)
          for (int j = i; j > 0 && cand_lt(exp_mem[r][q][j], exp_mem[r][q][j-1]); j--) begin
            cand_t tmp; tmp = exp_mem[r][q][j]; exp_mem[r][q][j] = exp_mem[r][q][j-1]; exp_mem[r][q][j-1] = tmp;
          end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int r = 0; r < P_ROW; r++) for (int p = 0; p < Q; p++) for (int i = 0; i < M_PART; i++) begin
        checks++; if (mem[r][p][i] != exp_mem[r][p][i]) failures++;
      end
      // 3 rounds of (7*3 merge + 2*7 copy + 1) cycles, plus start/round handshakes
      checks++;
      if (cyc < 3 * (7*3 + 14 + 1) || cyc > 3 * (7*3 + 14 + 1) + 8) begin
        failures++; $display("LSM took %0d cycles", cyc);
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
