// digc_top: dynamic image graph construction (DIGC) accelerator.
//
// For every node i of X (N x D) it finds the k*d co-nodes j of Y (M x D) with
// the smallest dist(i,j) = ||x_i - y_j||^2 + P(i,j) and returns every d-th of
// them (dilated k-NN), i.e. the neighbour index matrix I (N x k).
//
// Operation, one row block of P_ROW nodes at a time:
//   1. load the block's node vectors into the partition buffer;
//   2. for each partition q of M_PART co-nodes, for each column block of
//      P_COL co-nodes in it: load the co-node vectors and P entries, run the
//      DCM (P_ROW x P_COL distances), write them into the partial sum buffer.
//      The Y/P part of the partition buffer is double-buffered, so the next
//      column block is loaded while the DCM works on the current one. When
//      the last block of partition q has been written, the LSM sorts q while
//      the loader and DCM work on q+1;
//   3. after the last partition is sorted, run the GMM once per node of the
//      block (k-way heap merge of the sorted partitions into the heap buffer);
//   4. run the NSM (every d-th of the first k*d) into the output buffer;
//   5. write the block's k indices per node to external memory.
// The stage order and the overlaps (loading with DCM, loading/DCM with LSM)
// follow the paper's pipeline figure; the controller, loader and memory ports
// are this design's. A DCM start waits for the previous DCM to finish, and
// the start of a partition's last block also waits until the LSM has taken
// the previous partition, so at most one sort request is pending.
//
// External memory is word addressed, one word = P_VEC features:
//   X:  node i, word w        at x_base + i*DW + w,  DW = ceil(D/P_VEC)
//   Y:  co-node j, word w     at y_base + j*DW + w   (lanes past D are zero)
//   P:  element (i,j)         at p_base + i*PW + j/PPW, lane j%PPW,
//                             PPW = P_VEC*FEAT_W/PE_W, PW = ceil(M/PPW)
//   I:  node i, slot s        at i_base + i*k + s    (one index per write)
// Read port: request/grant handshake, responses in request order, any
// latency. Write port: request/grant.
// Limits: M <= Q*M_PART, D <= D_MAX, k <= K_MAX, k*d <= KD_MAX, k*d <= M.
// Lint notes: lsm_done, gmm_busy, nsm_busy and gmm_exhausted are left
// unread on purpose. The controller needs only one handshake signal of each
// unit, and gmm_exhausted is a status count that the testbench observes.
module digc_top
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned P_COL  = 8,
  parameter int unsigned P_VEC  = 8,
  parameter int unsigned P_SORT = 8,
  parameter int unsigned P_NSM  = 8,
  parameter int unsigned Q      = 8,
  parameter int unsigned M_PART = 28,
  parameter int unsigned D_MAX  = 1024,
  parameter int unsigned K_MAX  = 16,
  parameter int unsigned KD_MAX = 32,
  localparam int unsigned BUS_W = P_VEC*FEAT_W,
  localparam int unsigned DW_MAX = (D_MAX + P_VEC - 1) / P_VEC,
  localparam int unsigned WA_W  = clog2_min1(DW_MAX),
  localparam int unsigned Q_W   = clog2_min1(Q),
  localparam int unsigned POS_W = clog2_min1(M_PART),
  localparam int unsigned ROW_W = clog2_min1(P_ROW),
  localparam int unsigned K_W   = clog2_min1(K_MAX + 1),
  localparam int unsigned KD_W  = clog2_min1(KD_MAX + 1),
  localparam int unsigned BK_W  = clog2_min1((P_ROW > P_COL) ? P_ROW : P_COL),
  localparam int unsigned PPW   = BUS_W / PE_W,
  localparam int unsigned CB_N  = (M_PART + P_COL - 1) / P_COL
) (
  input  logic              clk,
  input  logic              rst_n,
  // job
  input  logic              start,
  input  logic [IDX_W:0]    n_nodes,     // N
  input  logic [IDX_W:0]    n_conodes,   // M
  input  logic [15:0]       dim,         // D
  input  logic [K_W-1:0]    k,
  input  logic [KD_W-1:0]   dil,         // d
  input  addr_t             x_base,
  input  addr_t             y_base,
  input  addr_t             p_base,
  input  addr_t             i_base,
  output logic              busy,
  output logic              done,
  // external memory read port
  output logic              rd_req,
  output addr_t             rd_addr,
  input  logic              rd_gnt,
  input  logic              rd_rvalid,
  input  logic [BUS_W-1:0]  rd_rdata,
  // external memory write port (neighbour indices)
  output logic              wr_req,
  output addr_t             wr_addr,
  output idx_t              wr_data,
  input  logic              wr_gnt
);
  typedef enum logic [3:0] {
    S_IDLE, S_LDX, S_LDY, S_LDP, S_HAND, S_DRAIN,
    S_GMM, S_GMMW, S_NSM, S_NSMW, S_WR, S_NEXT
  } state_t;
  state_t state;

  // ---------------- job configuration ----------------
  logic [IDX_W:0]  cfg_n, cfg_m;
  logic [WA_W:0]   cfg_dw;
  logic [IDX_W:0]  cfg_pw;
  logic [K_W-1:0]  cfg_k;
  logic [KD_W-1:0] cfg_d, cfg_kd;
  addr_t           cfg_xb, cfg_yb, cfg_pb, cfg_ib;
  logic [Q_W:0]    cfg_nq;
  logic [POS_W:0]  part_len [Q];

  // ---------------- loop counters ----------------
  logic [IDX_W:0]  row_base;
  logic [Q_W:0]    q_cur;         // block being loaded: partition
  logic [POS_W:0]  cb_cur;        //   and column block within it
  logic            lset;          // Y/P set being loaded
  logic            dcm_set;       // Y/P set the DCM reads
  logic [Q_W-1:0]  dcm_q;         // block in the DCM: partition,
  logic [POS_W:0]  dcm_off;       //   offset in it,
  logic            dcm_last;      //   last block of the partition
  logic            lsm_pend;      // a complete partition awaits the LSM
  logic [Q_W-1:0]  lsm_q;
  logic [ROW_W:0]  g_cur;         // GMM row
  logic [ROW_W:0]  w_row;         // write-out row
  logic [K_W-1:0]  w_slot;
  idx_t            col_base;

  assign col_base = idx_t'(32'(q_cur) * M_PART + 32'(cb_cur) * P_COL);

  // ---------------- loader ----------------
  // request side (ra, rb) and response side (sa, sb) walk the same 2-D
  // sequence: LDX rows x words, LDY columns x words, LDP rows x columns
  logic [BK_W:0]  ra, sa;
  logic [WA_W:0]  rb, sb;
  logic           req_done;
  logic [BK_W:0]  lim_a;
  logic [WA_W:0]  lim_b;
  logic           loading;

  always_comb begin
    unique case (state)
      S_LDX:   begin lim_a = (BK_W+1)'(P_ROW); lim_b = cfg_dw; end
      S_LDY:   begin lim_a = (BK_W+1)'(P_COL); lim_b = cfg_dw; end
      default: begin lim_a = (BK_W+1)'(P_ROW); lim_b = (WA_W+1)'(P_COL); end
    endcase
  end
  assign loading = (state == S_LDX) || (state == S_LDY) || (state == S_LDP);

  // request address; rows/columns past the matrix read node/co-node 0 and
  // are masked later
  logic [IDX_W:0] req_node, req_con;
  always_comb begin
    req_node = row_base + (IDX_W+1)'(ra);
    req_con  = (IDX_W+1)'(col_base) + (IDX_W+1)'((state == S_LDP) ? 32'(rb) : 32'(ra));
    if (req_node >= cfg_n) req_node = '0;
    if (req_con  >= cfg_m) req_con  = '0;
    unique case (state)
      S_LDX:   rd_addr = cfg_xb + addr_t'(req_node) * addr_t'(cfg_dw) + addr_t'(rb);
      S_LDY:   rd_addr = cfg_yb + addr_t'(req_con) * addr_t'(cfg_dw) + addr_t'(rb);
      default: rd_addr = cfg_pb + addr_t'(req_node) * addr_t'(cfg_pw) + addr_t'(32'(req_con) / PPW);
    endcase
  end
  assign rd_req = loading && !req_done;

  // response side: write into the partition buffer
  logic             pb_wr_en;
  logic [1:0]       pb_wr_sel;
  logic [BUS_W-1:0] pb_wr_data;
  logic [IDX_W:0]   rsp_con;
  always_comb begin
    rsp_con    = (IDX_W+1)'(col_base) + (IDX_W+1)'(sb);
    pb_wr_en   = loading && rd_rvalid;
    pb_wr_sel  = (state == S_LDX) ? 2'd0 : (state == S_LDY) ? 2'd1 : 2'd2;
    pb_wr_data = rd_rdata;
    if (state == S_LDP)
      pb_wr_data = BUS_W'(rd_rdata[(32'(rsp_con) % PPW) * PE_W +: PE_W]);
  end

  // ---------------- blocks ----------------
  logic              dcm_start, dcm_busy, dcm_done;
  logic              pb_rd_en;
  logic [WA_W-1:0]   pb_rd_word;
  logic [BUS_W-1:0]  x_rd [P_ROW];
  logic [BUS_W-1:0]  y_rd [P_COL];
  pos_t              p_rd [P_ROW][P_COL];
  cand_t             dcm_dist [P_ROW][P_COL];
  logic [P_ROW-1:0]  row_valid;
  logic [P_COL-1:0]  col_valid;

  partition_buffer #(.P_ROW(P_ROW), .P_COL(P_COL), .P_VEC(P_VEC), .D_MAX(D_MAX)) u_pb (
    .clk, .wr_en(pb_wr_en), .wr_sel(pb_wr_sel), .wr_set(lset), .rd_set(dcm_set),
    .wr_bank(BK_W'(sa)), .wr_word(WA_W'(sb)), .wr_data(pb_wr_data),
    .rd_en(pb_rd_en), .rd_word(pb_rd_word), .x_rd, .y_rd, .p_rd);

  always_comb begin
    for (int r = 0; r < P_ROW; r++) row_valid[r] = (row_base + (IDX_W+1)'(r)) < cfg_n;
    for (int c = 0; c < P_COL; c++)
      col_valid[c] = (32'(cb_cur) * P_COL + c < M_PART) &&
                     ((IDX_W+1)'(col_base) + (IDX_W+1)'(c) < cfg_m);
  end

  dcm #(.P_ROW(P_ROW), .P_COL(P_COL), .P_VEC(P_VEC), .D_MAX(D_MAX)) u_dcm (
    .clk, .rst_n, .start(dcm_start), .n_words(cfg_dw), .col_base,
    .row_valid, .col_valid, .busy(dcm_busy), .done(dcm_done),
    .pb_rd_en, .pb_rd_word, .x_rd, .y_rd, .p_rd, .dist_blk(dcm_dist));

  logic              lsm_start, lsm_busy, lsm_done;
  logic [Q_W-1:0]    ls_q;
  logic [P_ROW-1:0]  ls_we;
  logic [POS_W-1:0]  ls_addr  [P_ROW];
  cand_t             ls_wdata [P_ROW];
  cand_t             ls_rdata [P_ROW];
  logic [ROW_W-1:0]  g_row;
  logic [Q_W-1:0]    g_q;
  logic [POS_W-1:0]  g_pos;
  cand_t             g_rdata;

  partial_sum_buffer #(.P_ROW(P_ROW), .P_COL(P_COL), .Q(Q), .M_PART(M_PART)) u_psb (
    .clk, .wr_en(dcm_done), .wr_q(dcm_q), .wr_off(dcm_off),
    .wr_data(dcm_dist), .ls_q, .ls_we, .ls_addr, .ls_wdata, .ls_rdata,
    .g_row, .g_q, .g_pos, .g_rdata);

  lsm #(.P_ROW(P_ROW), .P_SORT(P_SORT), .Q(Q), .M_PART(M_PART)) u_lsm (
    .clk, .rst_n, .start(lsm_start), .q(lsm_q), .busy(lsm_busy), .done(lsm_done),
    .ls_q, .ls_we, .ls_addr, .ls_wdata, .ls_rdata);

  logic              gmm_start, gmm_busy, gmm_done;
  logic              hb_we;
  logic [ROW_W-1:0]  hb_row;
  logic [KD_W-1:0]   hb_pos;
  cand_t             hb_wdata;
  logic [31:0]       gmm_exhausted;
  logic [KD_W-1:0]   hb_rd_pos  [P_ROW];
  cand_t             hb_rd_data [P_ROW];

  gmm #(.Q(Q), .M_PART(M_PART), .P_ROW(P_ROW), .KD_MAX(KD_MAX)) u_gmm (
    .clk, .rst_n, .start(gmm_start), .row(ROW_W'(g_cur)), .n_q(cfg_nq), .len(part_len),
    .kd(cfg_kd), .busy(gmm_busy), .done(gmm_done), .g_row, .g_q, .g_pos, .g_rdata,
    .hb_we, .hb_row, .hb_pos, .hb_wdata, .n_exhausted(gmm_exhausted));

  heap_buffer #(.P_ROW(P_ROW), .KD_MAX(KD_MAX)) u_hb (
    .clk, .we(hb_we), .wr_row(hb_row), .wr_pos(hb_pos), .wdata(hb_wdata),
    .rd_pos(hb_rd_pos), .rd_data(hb_rd_data));

  logic              nsm_start, nsm_busy, nsm_done;
  logic [P_ROW-1:0]  ob_we;
  logic [K_W-1:0]    ob_slot [P_ROW];
  idx_t              ob_data [P_ROW];
  idx_t              ob_rd_data;

  nsm #(.P_ROW(P_ROW), .P_NSM(P_NSM), .K_MAX(K_MAX), .KD_MAX(KD_MAX)) u_nsm (
    .clk, .rst_n, .start(nsm_start), .k(cfg_k), .d(cfg_d), .busy(nsm_busy), .done(nsm_done),
    .hb_pos(hb_rd_pos), .hb_data(hb_rd_data), .ob_we, .ob_slot, .ob_data);

  output_buffer #(.P_ROW(P_ROW), .K_MAX(K_MAX)) u_ob (
    .clk, .we(ob_we), .wr_slot(ob_slot), .wdata(ob_data),
    .rd_row(ROW_W'(w_row)), .rd_slot(w_slot), .rd_data(ob_rd_data));

  // ---------------- control ----------------
  logic last_cb, last_q, row_ok_g, row_ok_w;
  assign last_cb  = (32'(cb_cur) + 1 == CB_N);
  assign last_q   = (q_cur + 1 == cfg_nq);
  assign row_ok_g = (row_base + (IDX_W+1)'(g_cur)) < cfg_n;
  assign row_ok_w = (row_base + (IDX_W+1)'(w_row)) < cfg_n;

  assign dcm_start = (state == S_HAND) && !dcm_busy &&
                     !(last_cb && (lsm_pend || (dcm_done && dcm_last)));
  assign lsm_start = lsm_pend && !lsm_busy;
  assign gmm_start = (state == S_GMM) && row_ok_g;
  assign nsm_start = (state == S_NSM);
  assign wr_req    = (state == S_WR) && row_ok_w;
  assign wr_addr   = cfg_ib + (addr_t'(row_base) + addr_t'(w_row)) * addr_t'(cfg_k) + addr_t'(w_slot);
  assign wr_data   = ob_rd_data;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      cfg_n <= '0; cfg_m <= '0; cfg_dw <= '0; cfg_pw <= '0; cfg_k <= '0; cfg_d <= '0;
      cfg_kd <= '0; cfg_xb <= '0; cfg_yb <= '0; cfg_pb <= '0; cfg_ib <= '0; cfg_nq <= '0;
      for (int q = 0; q < Q; q++) part_len[q] <= '0;
      row_base <= '0; q_cur <= '0; cb_cur <= '0; g_cur <= '0; w_row <= '0; w_slot <= '0;
      ra <= '0; rb <= '0; sa <= '0; sb <= '0; req_done <= 1'b0;
      lset <= 1'b0; dcm_set <= 1'b0; dcm_q <= '0; dcm_off <= '0; dcm_last <= 1'b0;
      lsm_pend <= 1'b0; lsm_q <= '0;
    end else begin
      done <= 1'b0;
      // sort requests: a partition is complete when its last block is written
      if (lsm_start) lsm_pend <= 1'b0;
      if (dcm_done && dcm_last) begin lsm_pend <= 1'b1; lsm_q <= dcm_q; end
      // loader counters
      if (rd_req && rd_gnt) begin
        if (rb + 1 == lim_b) begin
          rb <= '0;
          if (ra + 1 == lim_a) req_done <= 1'b1; else ra <= ra + 1;
        end else rb <= rb + 1;
      end
      if (pb_wr_en) begin
        if (sb + 1 == lim_b) begin sb <= '0; sa <= sa + 1; end
        else sb <= sb + 1;
      end

      unique case (state)
        S_IDLE: if (start) begin
          cfg_n  <= n_nodes;
          cfg_m  <= n_conodes;
          cfg_dw <= (WA_W+1)'((32'(dim) + P_VEC - 1) / P_VEC);
          cfg_pw <= (IDX_W+1)'((32'(n_conodes) + PPW - 1) / PPW);
          cfg_k  <= k;
          cfg_d  <= dil;
          cfg_kd <= KD_W'(32'(k) * 32'(dil));
          cfg_xb <= x_base; cfg_yb <= y_base; cfg_pb <= p_base; cfg_ib <= i_base;
          cfg_nq <= (Q_W+1)'((32'(n_conodes) + M_PART - 1) / M_PART);
          for (int q = 0; q < Q; q++)
            part_len[q] <= (32'(n_conodes) >= (q + 1) * M_PART) ? (POS_W+1)'(M_PART) :
                           (32'(n_conodes) >  q * M_PART) ? (POS_W+1)'(32'(n_conodes) - q * M_PART) :
                           '0;
          row_base <= '0;
          state    <= (n_nodes == 0 || n_conodes == 0) ? S_NEXT : S_LDX;
          ra <= '0; rb <= '0; sa <= '0; sb <= '0; req_done <= 1'b0;
          q_cur <= '0; cb_cur <= '0;
        end
        S_LDX, S_LDY, S_LDP: begin
          if (pb_wr_en && sb + 1 == lim_b && sa + 1 == lim_a) begin
            ra <= '0; rb <= '0; sa <= '0; sb <= '0; req_done <= 1'b0;
            state <= (state == S_LDX) ? S_LDY : (state == S_LDY) ? S_LDP : S_HAND;
          end
        end
        // hand the loaded block to the DCM, then load the next one into the
        // other set while the DCM runs
        S_HAND: if (dcm_start) begin
          dcm_set  <= lset;
          dcm_q    <= Q_W'(q_cur);
          dcm_off  <= (POS_W+1)'(32'(cb_cur) * P_COL);
          dcm_last <= last_cb;
          lset     <= !lset;
          if (!last_cb) begin cb_cur <= cb_cur + 1; state <= S_LDY; end
          else if (!last_q) begin cb_cur <= '0; q_cur <= q_cur + 1; state <= S_LDY; end
          else state <= S_DRAIN;
        end
        S_DRAIN: if (!dcm_busy && !dcm_done && !lsm_pend && !lsm_busy) begin
          g_cur <= '0; state <= S_GMM;
        end
        S_GMM: state <= row_ok_g ? S_GMMW : S_NSM;
        S_GMMW: if (gmm_done) begin
          if (32'(g_cur) + 1 == P_ROW) state <= S_NSM;
          else begin g_cur <= g_cur + 1; state <= S_GMM; end
        end
        S_NSM:  state <= S_NSMW;
        S_NSMW: if (nsm_done) begin w_row <= '0; w_slot <= '0; state <= S_WR; end
        S_WR: if (!row_ok_w || wr_gnt) begin
          if (row_ok_w && w_slot + 1 != cfg_k) w_slot <= w_slot + 1;
          else begin
            w_slot <= '0;
            if (32'(w_row) + 1 == P_ROW || !row_ok_w) state <= S_NEXT;
            else w_row <= w_row + 1;
          end
        end
        S_NEXT: begin
          if (row_base + (IDX_W+1)'(P_ROW) >= cfg_n) begin state <= S_IDLE; done <= 1'b1; end
          else begin
            row_base <= row_base + (IDX_W+1)'(P_ROW);
            q_cur <= '0; cb_cur <= '0; state <= S_LDX;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- protocol and configuration rules ----------------
  // a read request is held, with its address, until granted; a job must fit
  // the built buffers; responses arrive only for outstanding loads
  logic  rd_req_q, rd_gnt_q;
  addr_t rd_addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_req_q <= 1'b0; rd_gnt_q <= 1'b0; rd_addr_q <= '0;
    end else begin
      rd_req_q <= rd_req; rd_gnt_q <= rd_gnt; rd_addr_q <= rd_addr;
      if (rd_req_q && !rd_gnt_q)
        a_req_stable: assert (rd_req && rd_addr == rd_addr_q)
          else $error("read request dropped or changed before grant");
      if (state == S_IDLE && start)
        a_job_fits: assert (32'(n_conodes) <= Q * M_PART && 32'(dim) <= D_MAX &&
                            32'(k) <= K_MAX && 32'(k) * 32'(dil) <= KD_MAX)
          else $error("job exceeds the configured buffer sizes");
      if (rd_rvalid)
        a_no_stray_rsp: assert (loading) else $error("read response outside a load");
    end
  end
endmodule
