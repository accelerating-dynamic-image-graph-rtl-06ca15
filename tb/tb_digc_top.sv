// tb_digc_top: end-to-end test of the DIGC accelerator at reduced sizes.
//
// Runs several jobs whose sizes do not divide the block sizes (partial row
// blocks, partial column blocks, a partial last partition, a feature length
// that is not a multiple of P_VEC) through the accelerator with a randomly
// stalling memory, and checks every neighbour index against an exact
// reference (digc_harness). It also counts how often each mechanism of the
// design occurred and fails if one never did: loading of a column block while
// the DCM works on the previous one, LSM sorting while the loader or DCM works
// on the next partition, multiple LSM rounds (P_SORT < P_ROW),
// masked rows, masked columns, GMM stream exhaustion, memory back-pressure.
module tb_digc_top;
  import digc_pkg::*;
  localparam int unsigned P_ROW = 4, P_COL = 4, P_VEC = 4, P_SORT = 2, P_NSM = 2;
  localparam int unsigned Q = 4, M_PART = 10, D_MAX = 64, K_MAX = 8, KD_MAX = 16;
  localparam int unsigned BUS_W = P_VEC * FEAT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go, job_done, start, done, busy;
  int unsigned n, m, dd, kk, dl, checks, failures, k_o, d_o;
  longint unsigned last_cycles;
  logic [16:0] n_nodes, n_conodes;
  logic [15:0] dim;
  logic [31:0] x_base, y_base, p_base, i_base, rd_addr, wr_addr;
  logic rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
  logic [BUS_W-1:0] rd_rdata;
  idx_t wr_data;

  digc_top #(.P_ROW(P_ROW), .P_COL(P_COL), .P_VEC(P_VEC), .P_SORT(P_SORT), .P_NSM(P_NSM),
             .Q(Q), .M_PART(M_PART), .D_MAX(D_MAX), .K_MAX(K_MAX), .KD_MAX(KD_MAX)) u_dut (
    .clk, .rst_n, .start, .n_nodes, .n_conodes, .dim,
    .k(4'(k_o)), .dil(5'(d_o)), .x_base, .y_base, .p_base, .i_base, .busy, .done,
    .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata, .wr_req, .wr_addr, .wr_data, .wr_gnt);

  digc_harness #(.P_VEC(P_VEC)) u_h (
    .clk, .go, .n, .m, .dd, .kk, .dl, .job_done, .checks, .failures, .last_cycles,
    .start, .n_nodes, .n_conodes, .dim, .k_o, .d_o, .x_base, .y_base, .p_base, .i_base,
    .done, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata, .wr_req, .wr_addr, .wr_data, .wr_gnt);

  // mechanism counters
  int unsigned n_ld_dcm = 0, n_overlap = 0, n_lsm_rounds = 0, n_row_mask = 0, n_col_mask = 0, n_stall = 0;
  always @(posedge clk) begin
    if (u_dut.loading && u_dut.dcm_busy) n_ld_dcm++;
    if (u_dut.lsm_busy && (u_dut.loading || u_dut.dcm_busy))
      n_overlap++;
    if (u_dut.u_lsm.active && u_dut.u_lsm.round != 0) n_lsm_rounds++;
    if (u_dut.dcm_start && u_dut.row_valid != '1) n_row_mask++;
    if (u_dut.dcm_start && u_dut.col_valid != '1) n_col_mask++;
    if (rd_req && !rd_gnt) n_stall++;
  end

  task automatic run(int unsigned nn, int unsigned mm, int unsigned ddd, int unsigned k_, int unsigned d_);
    n = nn; m = mm; dd = ddd; kk = k_; dl = d_;
    @(negedge clk); go = 1; @(negedge clk); go = 0;
    @(posedge clk iff job_done);
    $display("job N=%0d M=%0d D=%0d k=%0d d=%0d: %0d cycles, failures so far %0d",
             nn, mm, ddd, k_, d_, last_cycles, failures);
  endtask

  int unsigned extra_checks = 0, extra_fail = 0;
  initial begin
    go = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(10, 35, 13, 4, 2);
    run(5, 12, 8, 3, 2);
    run(9, 40, 20, 8, 2);
    run(4, 16, 4, 2, 8);
    // every mechanism must have occurred
    extra_checks += 7;
    if (n_ld_dcm == 0)     begin extra_fail++; $display("never: load overlapped with DCM"); end
    if (n_overlap == 0)    begin extra_fail++; $display("never: LSM overlapped with load/DCM"); end
    if (n_lsm_rounds == 0) begin extra_fail++; $display("never: second LSM round"); end
    if (n_row_mask == 0)   begin extra_fail++; $display("never: masked rows"); end
    if (n_col_mask == 0)   begin extra_fail++; $display("never: masked columns"); end
    if (u_dut.gmm_exhausted == 0) begin extra_fail++; $display("never: GMM stream exhausted"); end
    if (n_stall == 0)      begin extra_fail++; $display("never: memory back-pressure"); end
    $display("mechanisms: load_dcm=%0d overlap=%0d lsm_round2=%0d row_mask=%0d col_mask=%0d exhausted=%0d stalls=%0d",
             n_ld_dcm, n_overlap, n_lsm_rounds, n_row_mask, n_col_mask, u_dut.gmm_exhausted, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_fail);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_fail + 1);
    $finish;
  end
endmodule
