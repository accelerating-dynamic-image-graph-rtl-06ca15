// tb_output_buffer: parallel per-row writes to a 3-row output buffer, then
// reads of every (row, slot) compared with a model.
module tb_output_buffer;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 3, K_MAX = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [P_ROW-1:0] we = 0;
  logic [2:0] wr_slot [P_ROW];
  idx_t wdata [P_ROW];
  logic [1:0] rd_row = 0;
  logic [2:0] rd_slot = 0;
  idx_t rd_data;
  idx_t model [P_ROW][K_MAX];
  int checks = 0, failures = 0;

  output_buffer #(.P_ROW(P_ROW), .K_MAX(K_MAX)) dut (.clk, .we, .wr_slot, .wdata, .rd_row, .rd_slot, .rd_data);

  initial begin
    for (int i = 0; i < K_MAX; i++) begin
      @(negedge clk);
      for (int r = 0; r < P_ROW; r++) begin
        we[r] = 1; wr_slot[r] = 3'(i); wdata[r] = idx_t'($urandom); model[r][i] = wdata[r];
      end
    end
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int r = 0; r < P_ROW; r++) begin
        we[r] = 1'($urandom); wr_slot[r] = 3'($urandom % K_MAX); wdata[r] = idx_t'($urandom);
        if (we[r]) model[r][wr_slot[r]] = wdata[r];
      end
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < P_ROW; r++) for (int i = 0; i < K_MAX; i++) begin
      rd_row = 2'(r); rd_slot = 3'(i); #1;
      checks++; if (rd_data != model[r][i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
