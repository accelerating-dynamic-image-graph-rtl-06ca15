// lsm: Local Sorting Module.
//
// P_SORT lsm_sort_pe units sort the P_ROW rows of one partition of the
// partial sum buffer in place. With P_SORT < P_ROW the rows are taken in
// ceil(P_ROW/P_SORT) rounds (PE i sorts row round*P_SORT + i). Each row has
// its own buffer port, so all PEs of a round work at once.
// Interface: pulse `start` with the partition `q`; `busy` stays high until
// every row is sorted and `done` pulses once at the end. The controller
// starts the LSM on a finished partition while the DCM fills the next one.
// Timing: per round M_PART*ceil(log2 M_PART) + 2*M_PART + 1 cycles.
// Lint notes: the PEs' done pulses are not read, because a round ends when
// every PE is idle; the loop variable p is an int whose high bits are unused.
module lsm
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned P_SORT = 8,
  parameter int unsigned Q      = 8,
  parameter int unsigned M_PART = 28,
  localparam int unsigned Q_W   = clog2_min1(Q),
  localparam int unsigned POS_W = clog2_min1(M_PART),
  localparam int unsigned ROUNDS = (P_ROW + P_SORT - 1) / P_SORT,
  localparam int unsigned RND_W = clog2_min1(ROUNDS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [Q_W-1:0]    q,
  output logic              busy,
  output logic              done,
  output logic [Q_W-1:0]    ls_q,
  output logic [P_ROW-1:0]  ls_we,
  output logic [POS_W-1:0]  ls_addr  [P_ROW],
  output cand_t             ls_wdata [P_ROW],
  input  cand_t             ls_rdata [P_ROW]
);
  logic [RND_W-1:0]  round;
  logic              active, pe_start;
  logic [P_SORT-1:0] pe_busy, pe_done;
  logic [POS_W-1:0]  pe_addr  [P_SORT];
  logic              pe_we    [P_SORT];
  cand_t             pe_wdata [P_SORT];
  cand_t             pe_rdata [P_SORT];

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; round <= '0; pe_start <= 1'b0; done <= 1'b0; ls_q <= '0;
    end else begin
      pe_start <= 1'b0;
      done     <= 1'b0;
      if (start && !active) begin
        active <= 1'b1; round <= '0; pe_start <= 1'b1; ls_q <= q;
      end else if (active && !pe_start && pe_busy == '0) begin
        if (32'(round) + 1 == ROUNDS) begin
          active <= 1'b0; done <= 1'b1;
        end else begin
          round <= round + 1; pe_start <= 1'b1;
        end
      end
    end
  end

  for (genvar p = 0; p < P_SORT; p++) begin : g_pe
    lsm_sort_pe #(.M_PART(M_PART)) u_pe (
      .clk, .rst_n, .start(pe_start), .busy(pe_busy[p]), .done(pe_done[p]),
      .addr(pe_addr[p]), .we(pe_we[p]), .wdata(pe_wdata[p]), .rdata(pe_rdata[p]));
  end

  // row r is served by PE r % P_SORT during round r / P_SORT
  always_comb begin
    for (int p = 0; p < P_SORT; p++) pe_rdata[p] = CAND_EMPTY;
    for (int r = 0; r < P_ROW; r++) begin
      int p;
      p = r % P_SORT;
      ls_addr[r]  = pe_addr[p];
      ls_wdata[r] = pe_wdata[p];
      ls_we[r]    = active && (32'(round) == r / P_SORT) && pe_we[p];
      if (32'(round) == r / P_SORT) pe_rdata[p] = ls_rdata[r];
    end
  end
endmodule
