// tb_summing_module: checks dist = x_sq + y_sq - 2xy + P and the empty
// result for masked pairs on random operands.
module tb_summing_module;
  import digc_pkg::*;
  dist_t x_sq, y_sq, xy;
  pos_t  p;
  idx_t  j;
  logic  valid;
  cand_t out;
  int checks = 0, failures = 0;

  summing_module dut (.x_sq, .y_sq, .xy, .p, .j, .valid, .out);

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint r;
      x_sq = dist_t'($urandom % (1 << 24)); y_sq = dist_t'($urandom % (1 << 24));
      xy = dist_t'(int'($urandom % (1 << 24)) - (1 << 23));
      p = pos_t'($urandom); j = idx_t'($urandom); valid = ($urandom % 4) != 0;
      #1;
      r = longint'(x_sq) + longint'(y_sq) - 2 * longint'(xy) + longint'(p);
      checks++;
      if (valid ? (out.dval != dist_t'(r) || out.idx != j) : (out.dval != DIST_INF)) begin
        failures++; $display("t=%0d valid=%0d got %0d/%0d expected %0d/%0d", t, valid, out.dval, out.idx, r, j);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
