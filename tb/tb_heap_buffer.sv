// tb_heap_buffer: random writes to a 3-row heap buffer, then parallel reads
// of all rows compared with a model; out-of-range reads return empty.
module tb_heap_buffer;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 3, KD_MAX = 8;
  logic clk = 0, we = 0;
  always #5 clk = ~clk;
  logic [1:0] wr_row = 0;
  logic [3:0] wr_pos = 0;
  cand_t wdata = '0;
  logic [3:0] rd_pos [P_ROW];
  cand_t rd_data [P_ROW];
  cand_t model [P_ROW][KD_MAX];
  int checks = 0, failures = 0;

  heap_buffer #(.P_ROW(P_ROW), .KD_MAX(KD_MAX)) dut (.clk, .we, .wr_row, .wr_pos, .wdata, .rd_pos, .rd_data);

  initial begin
    for (int r = 0; r < P_ROW; r++) for (int i = 0; i < KD_MAX; i++) begin
      @(negedge clk); we = 1; wr_row = 2'(r); wr_pos = 4'(i); wdata = cand_t'({$urandom, 16'($urandom)});
      model[r][i] = wdata;
    end
    for (int t = 0; t < 30; t++) begin
      @(negedge clk); we = 1; wr_row = 2'($urandom % P_ROW); wr_pos = 4'($urandom % KD_MAX);
      wdata = cand_t'({$urandom, 16'($urandom)}); model[wr_row][wr_pos] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < KD_MAX + 1; i++) begin
      for (int r = 0; r < P_ROW; r++) rd_pos[r] = 4'((i + r) % (KD_MAX + 1));
      #1;
      for (int r = 0; r < P_ROW; r++) begin
        checks++;
        if (rd_data[r] != ((rd_pos[r] < KD_MAX) ? model[r][rd_pos[r]] : CAND_EMPTY)) failures++;
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
