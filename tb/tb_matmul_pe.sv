// tb_matmul_pe: checks the dot-product PE on random vector pairs of 1..6
// words (P_VEC = 4 lanes), with idle cycles and back-to-back pairs, against a
// dot product computed here.
module tb_matmul_pe;
  import digc_pkg::*;
  localparam int unsigned P_VEC = 4;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [P_VEC*FEAT_W-1:0] x = '0, y = '0;
  dist_t xy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  matmul_pe #(.P_VEC(P_VEC)) dut (.clk, .rst_n, .clear, .en, .x, .y, .xy);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int words, ref_sum;
      words = 1 + $urandom % 6; ref_sum = 0;
      for (int w = 0; w < words; w++) begin
        @(negedge clk);
        for (int l = 0; l < P_VEC; l++) begin
          feat_t a, b;
          a = feat_t'($urandom); b = feat_t'($urandom);
          x[l*FEAT_W +: FEAT_W] = a; y[l*FEAT_W +: FEAT_W] = b;
          ref_sum += int'(a) * int'(b);
        end
        clear = (w == 0); en = 1;
        if ($urandom % 3 == 0) begin @(negedge clk); en = 0; clear = 0; end
      end
      @(negedge clk); en = 0; clear = 0;
      checks++;
      if (xy != dist_t'(ref_sum)) begin
        failures++; $display("xy %0d expected %0d", xy, ref_sum);
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
