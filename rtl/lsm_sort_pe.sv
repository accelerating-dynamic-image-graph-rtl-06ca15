// lsm_sort_pe: one sorting PE of the Local Sorting Module.
//
// Sorts one partition row of M_PART candidates into ascending distance order
// (ties by smaller co-node index) with a bottom-up merge sort, as the paper's
// text and figures describe. It copies the row out of the partial sum buffer
// (M_PART cycles), runs ceil(log2 M_PART) merge passes between two local
// buffers, each pass writing one element per cycle (M_PART cycles), and
// writes the sorted row back in place (M_PART cycles). The sort thus takes
// M_PART*ceil(log2 M_PART) cycles, the paper's per-row figure, plus
// 2*M_PART cycles of copying.
// Interface: pulse `start`; the PE drives `addr` (and `we`/`wdata` when
// writing) on its buffer row, reads `rdata` combinationally, and pulses
// `done` when the row is back in the buffer.
// The paper's LSM listing shows a partial selection sort of the first k
// entries; its text, figure and cycle formula describe merge sort, which is
// what is built here.
module lsm_sort_pe
  import digc_pkg::*;
#(
  parameter int unsigned M_PART = 28,
  localparam int unsigned POS_W = clog2_min1(M_PART)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [POS_W-1:0]  addr,
  output logic              we,
  output cand_t             wdata,
  input  cand_t             rdata
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_MERGE, S_STORE} state_t;
  state_t state;

  cand_t buf_a [M_PART];
  cand_t buf_b [M_PART];
  logic         src_b;           // current pass reads buf_b
  logic [POS_W+1:0] width;       // run width of this pass
  logic [POS_W+1:0] lo, i, j, k; // pair start, left head, right head, output
  logic [POS_W+1:0] mid, hi;
  cand_t ci, cj;
  logic  take_i;

  always_comb begin
    mid = (32'(lo) + 32'(width) > M_PART) ? (POS_W+2)'(M_PART) : lo + width;
    hi  = (32'(lo) + 2*32'(width) > M_PART) ? (POS_W+2)'(M_PART) : lo + 2*width;
    ci  = src_b ? buf_b[i[POS_W-1:0]] : buf_a[i[POS_W-1:0]];
    cj  = src_b ? buf_b[j[POS_W-1:0]] : buf_a[j[POS_W-1:0]];
    take_i = (i < mid) && ((j >= hi) || !cand_lt(cj, ci));
  end

  assign busy  = (state != S_IDLE);
  assign addr  = k[POS_W-1:0];
  assign we    = (state == S_STORE);
  assign wdata = src_b ? buf_b[k[POS_W-1:0]] : buf_a[k[POS_W-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; src_b <= 1'b0;
      width <= '0; lo <= '0; i <= '0; j <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD; k <= '0; src_b <= 1'b0;
        end
        S_LOAD: begin
          if (32'(k) + 1 == M_PART) begin
            k <= '0; lo <= '0; i <= '0; width <= 1; j <= 1;
            state <= (M_PART > 1) ? S_MERGE : S_STORE;
          end else k <= k + 1;
        end
        S_MERGE: begin
          if (take_i) i <= i + 1; else j <= j + 1;
          if (k + 1 == hi) begin
            if (32'(hi) == M_PART) begin
              // pass finished: double the run width and swap buffers
              src_b <= ~src_b;
              k <= '0; lo <= '0; i <= '0;
              if (2*width >= M_PART) state <= S_STORE;
              else begin
                width <= 2*width;
                j <= ((2*width) > M_PART) ? (POS_W+2)'(M_PART) : 2*width;
              end
            end else begin
              lo <= hi; i <= hi; k <= hi;
              j <= (32'(hi) + 32'(width) > M_PART) ? (POS_W+2)'(M_PART) : hi + width;
            end
          end else k <= k + 1;
        end
        S_STORE: begin
          if (32'(k) + 1 == M_PART) begin state <= S_IDLE; done <= 1'b1; end
          k <= k + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // local buffers: load fills buf_a; each merge pass writes the other buffer
  always_ff @(posedge clk) begin
    if (state == S_LOAD) buf_a[k[POS_W-1:0]] <= rdata;
    if (state == S_MERGE) begin
      if (src_b) buf_a[k[POS_W-1:0]] <= take_i ? ci : cj;
      else       buf_b[k[POS_W-1:0]] <= take_i ? ci : cj;
    end
  end
endmodule
