// digc_harness: job driver, external memory and result checker for the DIGC
// accelerator (testbench only).
//
// On a `go` pulse it fills the memory model with random features X (N x D),
// Y (M x D) and positional terms P (N x M) in the accelerator's layout, starts
// the accelerator, waits for `done`, and compares every written neighbour
// index with a reference computed here: exact integer distances
// ||x_i - y_j||^2 + P(i,j), a full ordering by (distance, index), then every
// d-th of the first k*d. It also checks the cycle count against a bound.
module digc_harness #(
  parameter int unsigned P_VEC  = 8,
  parameter int unsigned NMAX   = 256,
  parameter int unsigned MMAX   = 256,
  parameter int unsigned STALL_PCT = 20,
  parameter int unsigned P_RANGE = 300,
  localparam int unsigned BUS_W = P_VEC * 8,
  localparam int unsigned PPW   = BUS_W / 16
) (
  input  logic             clk,
  input  logic             go,
  input  int unsigned      n, m, dd, kk, dl,
  output logic             job_done,
  output int unsigned      checks,
  output int unsigned      failures,
  output longint unsigned  last_cycles,
  // accelerator side
  output logic             start,
  output logic [16:0]      n_nodes, n_conodes,
  output logic [15:0]      dim,
  output int unsigned      k_o, d_o,
  output logic [31:0]      x_base, y_base, p_base, i_base,
  input  logic             done,
  input  logic             rd_req,
  input  logic [31:0]      rd_addr,
  output logic             rd_gnt,
  output logic             rd_rvalid,
  output logic [BUS_W-1:0] rd_rdata,
  input  logic             wr_req,
  input  logic [31:0]      wr_addr,
  input  logic [15:0]      wr_data,
  output logic             wr_gnt
);
  localparam logic [31:0] XB = 32'h0000_0000, YB = 32'h0001_0000,
                          PB = 32'h0002_0000, IB = 32'h0003_0000;

  ddr_model #(.BUS_W(BUS_W), .DEPTH(262144), .LAT(4), .STALL_PCT(STALL_PCT)) u_mem (
    .clk, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
    .wr_req, .wr_addr, .wr_data, .wr_gnt);

  assign x_base = XB; assign y_base = YB; assign p_base = PB; assign i_base = IB;

  longint dref [MMAX];
  int     order [MMAX];

  function automatic int feat(logic [31:0] base, int unsigned row, int unsigned e, int unsigned dw);
    logic [BUS_W-1:0] w;
    w = u_mem.mem[base + row * dw + e / P_VEC];
    return int'($signed(w[(e % P_VEC) * 8 +: 8]));
  endfunction

  initial begin
    start = 0; job_done = 0; checks = 0; failures = 0; last_cycles = 0;
    n_nodes = 0; n_conodes = 0; dim = 0; k_o = 0; d_o = 0;
    forever begin
      int unsigned dw, pw;
      longint unsigned t0, bound;
      @(posedge clk iff go);
      job_done = 0;
      dw = (dd + P_VEC - 1) / P_VEC;
      pw = (m + PPW - 1) / PPW;
      // fill X, Y (lanes past D zero) and P
      for (int unsigned i = 0; i < n * dw; i++) u_mem.mem[XB + i] = '0;
      for (int unsigned i = 0; i < m * dw; i++) u_mem.mem[YB + i] = '0;
      for (int unsigned i = 0; i < n; i++)
        for (int unsigned e = 0; e < dd; e++)
          u_mem.mem[XB + i*dw + e/P_VEC][(e%P_VEC)*8 +: 8] = 8'($urandom);
      for (int unsigned j = 0; j < m; j++)
        for (int unsigned e = 0; e < dd; e++)
          u_mem.mem[YB + j*dw + e/P_VEC][(e%P_VEC)*8 +: 8] = 8'($urandom);
      for (int unsigned i = 0; i < n * pw; i++) u_mem.mem[PB + i] = '0;
      for (int unsigned i = 0; i < n; i++)
        for (int unsigned j = 0; j < m; j++)
          u_mem.mem[PB + i*pw + j/PPW][(j%PPW)*16 +: 16] = 16'(int'($urandom % (2*P_RANGE+1)) - int'(P_RANGE));
      for (int unsigned i = 0; i < n * kk; i++) u_mem.mem[IB + i] = '1;
      // run
      n_nodes = 17'(n); n_conodes = 17'(m); dim = 16'(dd); k_o = kk; d_o = dl;
      @(negedge clk); start = 1; t0 = 0;
      @(negedge clk); start = 0;
      while (!done) begin @(posedge clk); t0++; end
      last_cycles = t0;
      // check against the reference
      for (int unsigned i = 0; i < n; i++) begin
        for (int unsigned j = 0; j < m; j++) begin
          longint s;
          logic [BUS_W-1:0] pw_w;
          s = 0;
          for (int unsigned e = 0; e < dd; e++) begin
            int a, b;
            a = feat(XB, i, e, dw); b = feat(YB, j, e, dw);
            s += longint'((a - b) * (a - b));
          end
          pw_w = u_mem.mem[PB + i*pw + j/PPW];
          s += longint'($signed(pw_w[(j%PPW)*16 +: 16]));
          dref[j] = s; order[j] = int'(j);
        end
        // selection of the first k*d by (distance, index)
        for (int unsigned a = 0; a < kk * dl; a++) begin
          int unsigned best;
          int tmp;
          best = a;
          for (int unsigned b = a + 1; b < m; b++)
            if (dref[order[b]] < dref[order[best]] ||
                (dref[order[b]] == dref[order[best]] && order[b] < order[best])) best = b;
          tmp = order[a]; order[a] = order[best]; order[best] = tmp;
        end
        for (int unsigned s = 0; s < kk; s++) begin
          logic [15:0] got;
          got = u_mem.mem[IB + i*kk + s][15:0];
          checks++;
          if (got != 16'(order[s*dl])) begin
            failures++;
            if (failures < 10) $display("MISMATCH node %0d slot %0d: got %0d expected %0d", i, s, got, order[s*dl]);
          end
        end
      end
      // cycle bound: generous upper bound from the load volume
      // generous bound: every word loaded once per (node block, column block)
      bound = 64'(n + 8) * 64'(m + 8) * 64'(dw + 4) + 64'(n) * 64'(m) * 64 + 10000;
      checks++;
      if (last_cycles > bound) begin
        failures++; $display("job too slow: %0d cycles, bound %0d", last_cycles, bound);
      end
      @(negedge clk); job_done = 1;
      @(negedge clk); job_done = 0;
    end
  end
endmodule
