// nsm: Neighbor Selection Module.
//
// A row of P_NSM selection PEs implements dilated k-NN selection: PE i reads
// the globally sorted k*d list of its node from the heap buffer and writes the
// indices at positions 0, d, 2d, ..., (k-1)d to slots 0..k-1 of the output
// buffer, one per cycle. Rows are dealt out in ceil(P_ROW/P_NSM) rounds
// (PE i takes row round*P_NSM + i), so a block takes that many rounds of k
// cycles, matching the paper's ceil(N/Q)*k cycle estimate when P_NSM = Q.
// Interface: pulse `start` with k and d; `done` pulses when all rows are
// written. Heap-buffer read and output-buffer write ports are per row.
// ob_data is wired straight from the index field of hb_data: the PE chooses
// which entry is read (hb_pos) and when it is written (ob_we, ob_slot), so
// the data path itself has no logic.
module nsm
  import digc_pkg::*;
#(
  parameter int unsigned P_ROW  = 8,
  parameter int unsigned P_NSM  = 8,
  parameter int unsigned K_MAX  = 16,
  parameter int unsigned KD_MAX = 32,
  localparam int unsigned K_W   = clog2_min1(K_MAX + 1),
  localparam int unsigned KD_W  = clog2_min1(KD_MAX + 1),
  localparam int unsigned ROUNDS = (P_ROW + P_NSM - 1) / P_NSM,
  localparam int unsigned RND_W = clog2_min1(ROUNDS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [K_W-1:0]    k,
  input  logic [KD_W-1:0]   d,
  output logic              busy,
  output logic              done,
  output logic [KD_W-1:0]   hb_pos  [P_ROW],
  input  cand_t             hb_data [P_ROW],
  output logic [P_ROW-1:0]  ob_we,
  output logic [K_W-1:0]    ob_slot [P_ROW],
  output idx_t              ob_data [P_ROW]
);
  logic [RND_W-1:0] round;
  logic [K_W-1:0]   slot;   // shared by all PEs: they run in lockstep
  logic [KD_W-1:0]  pos;    // slot * d
  logic             active;

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; round <= '0; slot <= '0; pos <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= (k != 0); done <= (k == 0); round <= '0; slot <= '0; pos <= '0;
      end else if (active) begin
        if (slot + 1 == k) begin
          slot <= '0; pos <= '0;
          if (32'(round) + 1 == ROUNDS) begin active <= 1'b0; done <= 1'b1; end
          else round <= round + 1;
        end else begin
          slot <= slot + 1; pos <= pos + d;
        end
      end
    end
  end

  // PE p serves row r = round*P_NSM + p
  always_comb begin
    for (int r = 0; r < P_ROW; r++) begin
      hb_pos[r]  = pos;
      ob_slot[r] = slot;
      ob_data[r] = hb_data[r].idx;
      ob_we[r]   = active && (32'(round) == r / P_NSM);
    end
  end
endmodule
