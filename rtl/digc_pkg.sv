// digc_pkg: types and constants shared by the dynamic image graph
// construction (DIGC) accelerator.
//
// A candidate neighbour is a (distance, co-node index) pair. Distances are
// 32 bits wide and indices 16-bit unsigned, as in the published design. The
// published design keeps distances as 32-bit floats; this RTL uses signed
// 32-bit integers computed from signed 8-bit fixed-point features, which makes
// the arithmetic exact and the ordering a plain signed compare. DIST_INF marks
// an empty slot (a column past the end of a partition) and sorts last.
package digc_pkg;
  localparam int unsigned FEAT_W = 8;    // node / co-node feature element
  localparam int unsigned PE_W   = 16;   // relative positional embedding element
  localparam int unsigned DIST_W = 32;   // distance
  localparam int unsigned IDX_W  = 16;   // co-node index
  localparam int unsigned ADDR_W = 32;   // external memory word address

  typedef logic signed [FEAT_W-1:0] feat_t;
  typedef logic signed [PE_W-1:0]   pos_t;
  typedef logic signed [DIST_W-1:0] dist_t;
  typedef logic        [IDX_W-1:0]  idx_t;
  typedef logic        [ADDR_W-1:0] addr_t;

  localparam dist_t DIST_INF = {1'b0, {(DIST_W-1){1'b1}}};

  typedef struct packed {
    dist_t dval;
    idx_t  idx;
  } cand_t;

  localparam cand_t CAND_EMPTY = '{dval: DIST_INF, idx: '1};

  // a sorts strictly before b: smaller distance, ties broken by smaller index
  function automatic logic cand_lt(cand_t a, cand_t b);
    return (a.dval < b.dval) || (a.dval == b.dval && a.idx < b.idx);
  endfunction

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction
endpackage
