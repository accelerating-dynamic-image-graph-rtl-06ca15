// partial_sum_buffer: distances of the current row block (the paper's PSB).
//
// Holds P_ROW rows x Q partitions x M_PART candidates. Three users:
//  * the DCM writes a P_ROW x P_COL block at partition `wr_q`, column offset
//    `wr_off` (entries whose offset reaches M_PART are dropped, so the last
//    column block of a partition may overhang it);
//  * the LSM reads and writes each row through its own port (one port per
//    row, all on partition `ls_q`), sorting a partition in place;
//  * the GMM reads one entry (row, partition, position) per cycle.
// Reads are combinational; writes take effect at the clock edge. The port
// structure is a choice of this design: the paper names the buffer and its
// role but not its organisation.
module partial_sum_buffer
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned P_COL  = 8,
  parameter int unsigned Q      = 8,
  parameter int unsigned M_PART = 28,
  localparam int unsigned Q_W   = clog2_min1(Q),
  localparam int unsigned POS_W = clog2_min1(M_PART),
  localparam int unsigned ROW_W = clog2_min1(P_ROW)
) (
  input  logic              clk,
  // DCM block write
  input  logic              wr_en,
  input  logic [Q_W-1:0]    wr_q,
  input  logic [POS_W:0]    wr_off,
  input  cand_t             wr_data [P_ROW][P_COL],
  // LSM per-row ports
  input  logic [Q_W-1:0]    ls_q,
  input  logic [P_ROW-1:0]  ls_we,
  input  logic [POS_W-1:0]  ls_addr  [P_ROW],
  input  cand_t             ls_wdata [P_ROW],
  output cand_t             ls_rdata [P_ROW],
  // GMM read port
  input  logic [ROW_W-1:0]  g_row,
  input  logic [Q_W-1:0]    g_q,
  input  logic [POS_W-1:0]  g_pos,
  output cand_t             g_rdata
);
  cand_t mem [P_ROW][Q][M_PART];

  always_ff @(posedge clk) begin
    for (int r = 0; r < P_ROW; r++) begin
      if (wr_en)
        for (int c = 0; c < P_COL; c++)
          if (32'(wr_off) + c < M_PART) mem[r][wr_q][32'(wr_off) + c] <= wr_data[r][c];
      if (ls_we[r]) mem[r][ls_q][ls_addr[r]] <= ls_wdata[r];
    end
  end

  always_comb begin
    for (int r = 0; r < P_ROW; r++) ls_rdata[r] = mem[r][ls_q][ls_addr[r]];
    g_rdata = mem[g_row][g_q][g_pos];
  end
endmodule
