// tb_lsm_sort_pe: sorts random rows of M_PART = 28 candidates (with repeated
// distances and empty entries) in a row memory modelled here, and checks that
// the result is the (distance, index) ordering of the input. Checks the sort
// time: 28*ceil(log2 28) = 140 merge cycles plus 2*28 copy cycles.
module tb_lsm_sort_pe;
  import digc_pkg::*;
  localparam int unsigned M_PART = 28;
  logic clk = 0, rst_n = 0, start = 0, busy, done, we;
  always #5 clk = ~clk;
  logic [4:0] addr;
  cand_t wdata, rdata;
  cand_t row [M_PART];
  cand_t exp_row [M_PART];
  int checks = 0, failures = 0;

  lsm_sort_pe #(.M_PART(M_PART)) dut (.clk, .rst_n, .start, .busy, .done, .addr, .we, .wdata, .rdata);

  assign rdata = row[addr];
  always @(posedge clk) if (we) row[addr] <= wdata;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int cyc;
      for (int i = 0; i < M_PART; i++) begin
        row[i].dval = dist_t'(int'($urandom % ((t % 2) ? 8 : 100000)) - 50);
        row[i].idx  = idx_t'($urandom);
        if (t % 5 == 0 && i > 20) row[i] = CAND_EMPTY;
        exp_row[i] = row[i];
      end
      // reference: insertion sort by (distance, index)
      for (int i = 1; i < M_PART; i++)
        for (int j = i; j > 0 && cand_lt(exp_row[j], exp_row[j-1]); j--) begin
          cand_t tmp; tmp = exp_row[j]; exp_row[j] = exp_row[j-1]; exp_row[j-1] = tmp;
        end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < M_PART; i++) begin
        checks++;
        if (row[i] != exp_row[i]) begin
          failures++;
          if (failures < 5) $display("row %0d pos %0d: got %0d/%0d expected %0d/%0d", t, i,
                                     row[i].dval, row[i].idx, exp_row[i].dval, exp_row[i].idx);
        end
      end
      checks++;
      if (cyc != M_PART * 5 + 2 * M_PART + 1) begin
        failures++; $display("sort took %0d cycles, expected %0d", cyc, M_PART * 5 + 2 * M_PART + 1);
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
