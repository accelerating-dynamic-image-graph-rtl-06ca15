// output_buffer: selected neighbour indices of the current row block (the
// paper's output buffer, OB).
//
// Row r holds the k neighbour indices of node row_base+r. One write port per
// row (the neighbour-selection PEs write in parallel) and one read port used
// by the controller to stream the block out to external memory. Reads are
// combinational. The paper only names this buffer.
module output_buffer
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW = 8,
  parameter int unsigned K_MAX = 16,
  localparam int unsigned ROW_W = clog2_min1(P_ROW),
  localparam int unsigned K_W   = clog2_min1(K_MAX + 1),
  localparam int unsigned KS_W  = clog2_min1(K_MAX)
) (
  input  logic              clk,
  input  logic [P_ROW-1:0]  we,
  input  logic [K_W-1:0]    wr_slot [P_ROW],
  input  idx_t              wdata   [P_ROW],
  input  logic [ROW_W-1:0]  rd_row,
  input  logic [K_W-1:0]    rd_slot,
  output idx_t              rd_data
);
  idx_t mem [P_ROW][K_MAX];

  always_ff @(posedge clk)
    for (int r = 0; r < P_ROW; r++)
      if (we[r] && 32'(wr_slot[r]) < K_MAX) mem[r][wr_slot[r][KS_W-1:0]] <= wdata[r];

  assign rd_data = (32'(rd_row) < P_ROW && 32'(rd_slot) < K_MAX) ? mem[rd_row][rd_slot[KS_W-1:0]] : '0;
endmodule
