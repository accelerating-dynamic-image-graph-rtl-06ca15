// partition_buffer: on-chip banks for the block of inputs the distance mesh
// is working on.
//
// X bank r holds the feature vector of node row_base+r, Y bank c that of
// co-node col_base+c, each as ceil(D/P_VEC) words of P_VEC features (the
// "r-th bank" and "c-th bank" of the paper's per-PE listing). The P store
// holds the P_ROW x P_COL positional-embedding entries of the block.
// Write port: one word per cycle, `wr_sel` chooses X, Y or P; for P, `wr_bank`
// is the row, `wr_word` the column and the low PE_W bits of `wr_data` the
// value. Read port: one word address for all banks at once, registered like a
// block RAM (data the cycle after `rd_en`). The P store is read directly.
// The Y and P stores are double-buffered: `wr_set` selects the set being
// loaded and `rd_set` the set the mesh reads, so the next column block is
// loaded while the mesh works on the current one (the overlap of loading and
// distance computation drawn in the paper's pipeline figure). The X store is
// single: it changes only between row blocks, when the mesh is idle.
module partition_buffer
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW = 8,
  parameter int unsigned P_COL = 8,
  parameter int unsigned P_VEC = 8,
  parameter int unsigned D_MAX = 1024,
  localparam int unsigned BUS_W = P_VEC*FEAT_W,
  localparam int unsigned DW_MAX = (D_MAX + P_VEC - 1) / P_VEC,
  localparam int unsigned WA_W = clog2_min1(DW_MAX),
  localparam int unsigned BK_W = clog2_min1((P_ROW > P_COL) ? P_ROW : P_COL),
  localparam int unsigned PC_W = clog2_min1(P_COL)
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic                  wr_set,   // Y/P set written
  input  logic                  rd_set,   // Y/P set read
  input  logic [1:0]            wr_sel,   // 0: X, 1: Y, 2: P
  input  logic [BK_W-1:0]       wr_bank,
  input  logic [WA_W-1:0]       wr_word,
  input  logic [BUS_W-1:0]      wr_data,
  input  logic                  rd_en,
  input  logic [WA_W-1:0]       rd_word,
  output logic [BUS_W-1:0]      x_rd [P_ROW],
  output logic [BUS_W-1:0]      y_rd [P_COL],
  output pos_t                  p_rd [P_ROW][P_COL]
);
  logic [BUS_W-1:0] xmem [P_ROW][DW_MAX];
  logic [BUS_W-1:0] ymem [2][P_COL][DW_MAX];
  pos_t             pmem [2][P_ROW][P_COL];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        2'd0: if (32'(wr_bank) < P_ROW) xmem[wr_bank][wr_word] <= wr_data;
        2'd1: if (32'(wr_bank) < P_COL) ymem[wr_set][wr_bank][wr_word] <= wr_data;
        2'd2: if (32'(wr_bank) < P_ROW && 32'(wr_word) < P_COL) pmem[wr_set][wr_bank][wr_word[PC_W-1:0]] <= wr_data[PE_W-1:0];
        default: ;
      endcase
    end
    if (rd_en) begin
      for (int r = 0; r < P_ROW; r++) x_rd[r] <= xmem[r][rd_word];
      for (int c = 0; c < P_COL; c++) y_rd[c] <= ymem[rd_set][c][rd_word];
    end
  end

  assign p_rd = pmem[rd_set];
endmodule
