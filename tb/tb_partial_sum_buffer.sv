// tb_partial_sum_buffer: writes blocks through the DCM port (including a
// block overhanging the partition end), overwrites entries through the
// per-row LSM ports, and checks everything through the LSM and GMM read
// ports against a model kept here.
module tb_partial_sum_buffer;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 3, P_COL = 4, Q = 3, M_PART = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [1:0] wr_q = 0, ls_q = 0, g_q = 0;
  logic [4:0] wr_off = 0;
  cand_t wr_data [P_ROW][P_COL];
  logic [P_ROW-1:0] ls_we = 0;
  logic [3:0] ls_addr [P_ROW];
  cand_t ls_wdata [P_ROW], ls_rdata [P_ROW], g_rdata;
  logic [1:0] g_row = 0;
  logic [3:0] g_pos = 0;
  cand_t model [P_ROW][Q][M_PART];
  int checks = 0, failures = 0;

  partial_sum_buffer #(.P_ROW(P_ROW), .P_COL(P_COL), .Q(Q), .M_PART(M_PART)) dut (
    .clk, .wr_en, .wr_q, .wr_off, .wr_data, .ls_q, .ls_we, .ls_addr, .ls_wdata, .ls_rdata,
    .g_row, .g_q, .g_pos, .g_rdata);

  initial begin
    for (int r = 0; r < P_ROW; r++) begin ls_addr[r] = 0; ls_wdata[r] = '0; end
    // DCM-port writes: 3 column blocks per partition, the last overhangs
    for (int q = 0; q < Q; q++) for (int cb = 0; cb < 3; cb++) begin
      @(negedge clk);
      wr_en = 1; wr_q = 2'(q); wr_off = 5'(cb * P_COL);
      for (int r = 0; r < P_ROW; r++) for (int c = 0; c < P_COL; c++) begin
        wr_data[r][c] = cand_t'({$urandom, 16'($urandom)});
        if (cb * P_COL + c < M_PART) model[r][q][cb*P_COL + c] = wr_data[r][c];
      end
    end
    @(negedge clk); wr_en = 0;
    // LSM-port writes on partition 1
    ls_q = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int r = 0; r < P_ROW; r++) begin
        ls_we[r] = $urandom % 2; ls_addr[r] = 4'($urandom % M_PART);
        ls_wdata[r] = cand_t'({$urandom, 16'($urandom)});
        if (ls_we[r]) model[r][1][ls_addr[r]] = ls_wdata[r];
      end
    end
    @(negedge clk); ls_we = 0;
    // read back through both ports
    for (int q = 0; q < Q; q++) for (int p = 0; p < M_PART; p++) begin
      ls_q = 2'(q);
      for (int r = 0; r < P_ROW; r++) ls_addr[r] = 4'(p);
      #1;
      for (int r = 0; r < P_ROW; r++) begin
        checks++; if (ls_rdata[r] != model[r][q][p]) failures++;
        ls_q = 2'((q + 1) % Q);
        g_row = 2'(r); g_q = 2'(q); g_pos = 4'(p); #1;
        checks++; if (g_rdata != model[r][q][p]) failures++;
        ls_q = 2'(q); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
