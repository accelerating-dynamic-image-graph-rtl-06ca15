// tb_elementwise_mult: checks the squared-norm accumulator on random vectors
// of 1..6 words (P_VEC = 4 lanes), with idle cycles between words, against
// a sum of squares computed here.
module tb_elementwise_mult;
  import digc_pkg::*;
  localparam int unsigned P_VEC = 4;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [P_VEC*FEAT_W-1:0] v = '0;
  dist_t sq;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  elementwise_mult #(.P_VEC(P_VEC)) dut (.clk, .rst_n, .clear, .en, .v, .sq);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int words, ref_sum;
      words = 1 + $urandom % 6; ref_sum = 0;
      for (int w = 0; w < words; w++) begin
        @(negedge clk);
        for (int l = 0; l < P_VEC; l++) begin
          feat_t e;
          e = feat_t'($urandom);
          if (t % 7 == 0) e = feat_t'(-128);   // extreme value
          v[l*FEAT_W +: FEAT_W] = e;
          ref_sum += int'(e) * int'(e);
        end
        clear = (w == 0); en = 1;
        if ($urandom % 3 == 0) begin @(negedge clk); en = 0; clear = 0; end
      end
      @(negedge clk); en = 0; clear = 0; v = '0;
      checks++;
      if (sq != dist_t'(ref_sum)) begin
        failures++; $display("sq %0d expected %0d", sq, ref_sum);
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
