// heap_buffer: globally merged candidate lists of the current row block
// (the paper's heap buffer, HB).
//
// Row r holds the first k*d candidates of node row_base+r in ascending
// distance order, as written by the GMM. One write port (GMM); one read port
// per row so that the neighbour-selection PEs read their rows in parallel.
// Reads are combinational. The paper only names this buffer; its shape
// follows from what the GMM produces and the NSM consumes.
module heap_buffer
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned KD_MAX = 32,
  localparam int unsigned ROW_W = clog2_min1(P_ROW),
  localparam int unsigned KD_W  = clog2_min1(KD_MAX + 1),
  localparam int unsigned KA_W  = clog2_min1(KD_MAX)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ROW_W-1:0]  wr_row,
  input  logic [KD_W-1:0]   wr_pos,
  input  cand_t             wdata,
  input  logic [KD_W-1:0]   rd_pos  [P_ROW],
  output cand_t             rd_data [P_ROW]
);
  cand_t mem [P_ROW][KD_MAX];

  always_ff @(posedge clk)
    if (we && 32'(wr_row) < P_ROW && 32'(wr_pos) < KD_MAX) mem[wr_row][wr_pos[KA_W-1:0]] <= wdata;

  always_comb
    for (int r = 0; r < P_ROW; r++)
      rd_data[r] = (32'(rd_pos[r]) < KD_MAX) ? mem[r][rd_pos[r][KA_W-1:0]] : CAND_EMPTY;
endmodule
