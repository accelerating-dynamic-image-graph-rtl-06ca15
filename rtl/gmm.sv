// gmm: Global Merging Module.
//
// Merges the Q locally sorted partition streams of one node (row of the
// partial sum buffer) into one globally sorted list and keeps its first `kd`
// entries (k*d for dilated k-NN). It follows the paper's k-way merge: the
// head of every non-empty stream is inserted into a min-heap of Q entries;
// then, repeatedly, the root (the smallest remaining distance) is appended to
// the output and replaced by the next element of the same stream, or by the
// last heap entry when that stream is exhausted, and the heap is repaired.
// The heap lives in registers; insertion sifts up and repair sifts down one
// level per cycle, so an output costs at most 2 + ceil(log2 Q) cycles.
// Interface: pulse `start` with the buffer row, the number of partitions
// `n_q` (<= Q) and the valid length of each partition (`len`). The GMM reads
// the partial sum buffer one entry per cycle and writes output position
// 0..kd-1 of `row` into the heap buffer. If fewer than kd candidates exist,
// the rest are written as empty (distance DIST_INF). `done` pulses at the end.
module gmm
  import digc_pkg::*;
#(
  parameter int unsigned Q      = 8,
  parameter int unsigned M_PART = 28,
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned KD_MAX = 32,
  localparam int unsigned Q_W   = clog2_min1(Q),
  localparam int unsigned POS_W = clog2_min1(M_PART),
  localparam int unsigned ROW_W = clog2_min1(P_ROW),
  localparam int unsigned KD_W  = clog2_min1(KD_MAX + 1),
  localparam int unsigned H_W   = clog2_min1(Q + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ROW_W-1:0]  row,
  input  logic [Q_W:0]      n_q,
  input  logic [POS_W:0]    len [Q],
  input  logic [KD_W-1:0]   kd,
  output logic              busy,
  output logic              done,
  // partial sum buffer read port
  output logic [ROW_W-1:0]  g_row,
  output logic [Q_W-1:0]    g_q,
  output logic [POS_W-1:0]  g_pos,
  input  cand_t             g_rdata,
  // heap buffer write port
  output logic              hb_we,
  output logic [ROW_W-1:0]  hb_row,
  output logic [KD_W-1:0]   hb_pos,
  output cand_t             hb_wdata,
  // number of stream exhaustions seen (a stream ran dry before kd outputs)
  output logic [31:0]       n_exhausted
);
  typedef struct packed {
    cand_t          c;
    logic [Q_W-1:0] q;
    logic [POS_W:0] pos;
  } hent_t;

  typedef enum logic [2:0] {S_IDLE, S_INS, S_UP, S_POP, S_DOWN} state_t;
  state_t state;

  hent_t          heap [Q];
  logic [H_W-1:0] size;
  logic [H_W-1:0] cur;       // node being sifted
  logic [Q_W:0]   ins_q;     // next stream to insert
  logic [KD_W-1:0] out_cnt;
  logic [ROW_W-1:0] row_q;

  // sift-down choice
  logic [H_W:0] lc, rc, sm;
  always_comb begin
    lc = 2*(H_W+1)'(cur) + 1;
    rc = 2*(H_W+1)'(cur) + 2;
    sm = (H_W+1)'(cur);
    if (lc < (H_W+1)'(size) && cand_lt(heap[lc[Q_W-1:0]].c, heap[cur[Q_W-1:0]].c)) sm = lc;
    if (rc < (H_W+1)'(size) && cand_lt(heap[rc[Q_W-1:0]].c, heap[sm[Q_W-1:0]].c)) sm = rc;
  end

  logic [H_W-1:0] par;
  assign par = (cur - 1) >> 1;

  hent_t root;
  assign root = heap[0];

  // buffer read address: stream heads while inserting, otherwise the
  // successor of the root's element
  always_comb begin
    g_row = row_q;
    if (state == S_INS) begin
      g_q = ins_q[Q_W-1:0]; g_pos = '0;
    end else begin
      g_q = root.q; g_pos = root.pos[POS_W-1:0] + 1'b1;
    end
  end

  assign busy     = (state != S_IDLE);
  assign hb_row   = row_q;
  assign hb_pos   = out_cnt;
  assign hb_we    = (state == S_POP) && (out_cnt < kd);
  assign hb_wdata = (size != 0) ? root.c : CAND_EMPTY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; size <= '0; cur <= '0; ins_q <= '0; out_cnt <= '0;
      row_q <= '0; done <= 1'b0; n_exhausted <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          row_q <= row; size <= '0; ins_q <= '0; out_cnt <= '0; state <= S_INS;
        end
        S_INS: begin
          if (ins_q >= n_q) state <= S_POP;
          else begin
            ins_q <= ins_q + 1;
            if (len[ins_q[Q_W-1:0]] != 0) begin
              heap[size[Q_W-1:0]] <= '{c: g_rdata, q: ins_q[Q_W-1:0], pos: '0};
              cur  <= size;
              size <= size + 1;
              state <= S_UP;
            end
          end
        end
        S_UP: begin
          if (cur != 0 && cand_lt(heap[cur[Q_W-1:0]].c, heap[par[Q_W-1:0]].c)) begin
            heap[cur[Q_W-1:0]] <= heap[par[Q_W-1:0]];
            heap[par[Q_W-1:0]] <= heap[cur[Q_W-1:0]];
            cur <= par;
          end else state <= S_INS;
        end
        S_POP: begin
          if (out_cnt >= kd) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            out_cnt <= out_cnt + 1;
            if (size != 0) begin
              cur <= '0;
              state <= S_DOWN;
              if (root.pos + 1 < len[root.q]) begin
                heap[0] <= '{c: g_rdata, q: root.q, pos: root.pos + 1'b1};
              end else begin
                n_exhausted <= n_exhausted + 1;
                heap[0] <= heap[size[Q_W-1:0] - 1'b1];
                size <= size - 1;
              end
            end
          end
        end
        S_DOWN: begin
          if (sm != (H_W+1)'(cur)) begin
            heap[cur[Q_W-1:0]] <= heap[sm[Q_W-1:0]];
            heap[sm[Q_W-1:0]]  <= heap[cur[Q_W-1:0]];
            cur <= sm[H_W-1:0];
          end else state <= S_POP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
