// ddr_model: behavioural model of the external memory seen by the DIGC
// accelerator (testbench only, not synthesizable logic).
//
// Word-addressed array of BUS_W-bit words. Read port: a request is granted
// when `rd_gnt` is high (randomly withheld one cycle in STALL_PCT percent of
// cycles); the data returns LAT cycles after the grant, in order. Write port:
// a request writes the low IDX_W bits of the word when granted (same random
// stall). Addresses wrap at DEPTH. The testbench fills and reads `mem`
// through hierarchical references.
module ddr_model #(
  parameter int unsigned BUS_W     = 64,
  parameter int unsigned DEPTH     = 65536,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic             clk,
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
  logic [BUS_W-1:0] mem [DEPTH];
  logic             pipe_v [LAT];
  logic [BUS_W-1:0] pipe_d [LAT];
  int unsigned      n_stalls = 0;

  initial begin
    rd_gnt = 1'b1; wr_gnt = 1'b1;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rd_rvalid = pipe_v[LAT-1];
  assign rd_rdata  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= rd_req && rd_gnt;
    pipe_d[0] <= mem[rd_addr % DEPTH];
    if (wr_req && wr_gnt) mem[wr_addr % DEPTH] <= BUS_W'(wr_data);
    rd_gnt <= ($urandom % 100) >= STALL_PCT;
    wr_gnt <= ($urandom % 100) >= STALL_PCT;
    if ((rd_req && !rd_gnt) || (wr_req && !wr_gnt)) n_stalls <= n_stalls + 1;
  end
endmodule
