// tb_digc_full: the DIGC accelerator at its default (published) configuration
// on the ViG-Tiny graph construction job: N = M = 196 nodes (14 x 14 patches
// of a 224 x 224 image), D = 192 features, k = 8 neighbours, dilation d = 2.
// Every neighbour index is checked against an exact reference; the total
// cycle count is printed and checked against a loose bound.
module tb_digc_full;
  import digc_pkg::*;
  localparam int unsigned BUS_W = 8 * FEAT_W;

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

  digc_top u_dut (
    .clk, .rst_n, .start, .n_nodes, .n_conodes, .dim,
    .k(5'(k_o)), .dil(6'(d_o)), .x_base, .y_base, .p_base, .i_base, .busy, .done,
    .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata, .wr_req, .wr_addr, .wr_data, .wr_gnt);

  digc_harness #(.P_VEC(8), .STALL_PCT(5)) u_h (
    .clk, .go, .n, .m, .dd, .kk, .dl, .job_done, .checks, .failures, .last_cycles,
    .start, .n_nodes, .n_conodes, .dim, .k_o, .d_o, .x_base, .y_base, .p_base, .i_base,
    .done, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata, .wr_req, .wr_addr, .wr_data, .wr_gnt);

  initial begin
    go = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 196; m = 196; dd = 192; kk = 8; dl = 2;
    @(negedge clk); go = 1; @(negedge clk); go = 0;
    @(posedge clk iff job_done);
    $display("ViG-Tiny job: %0d cycles (%0d us at 600 MHz)", last_cycles, last_cycles / 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
