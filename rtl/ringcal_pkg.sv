// ringcal_pkg: shared sizes, feature numbering and configuration-bus types of
// the ring-based jet calibration datapath.
//
// The feature order follows the list of sixteen BDT inputs: jet eta first,
// then (EM, HAD, SUM) for ring 1, ring 2, ring 3, ring 4 and ring_jet
// (rings 1-3 combined). The number of trees (30) and their depth (8) are the
// trained models' sizes. All word widths, the eta code and the configuration
// bus are this design's own choices; the method's description gives none.
package ringcal_pkg;

  // ---- tower grid and ring features ----
  localparam int unsigned TOW_W   = 10;  // tower ET, unsigned, 1 LSB = one ET unit
  localparam int unsigned WIN     = 12;  // side of the square tower window around the jet
  localparam int unsigned N_RINGS = 4;
  localparam int unsigned N_FEAT  = 16;
  localparam int unsigned FEAT_W  = 18;  // holds 68 towers x (2 x 1023) with margin
  localparam int unsigned FIDX_W  = $clog2(N_FEAT);
  localparam int unsigned ETA_W   = 8;   // jet eta code, see ring_sum

  // Feature numbering: F_ETA, then ring r (1..4) component c (EM=0, HAD=1,
  // SUM=2) at 1 + 3*(r-1) + c, ring_jet at 13..15.
  typedef enum logic [FIDX_W-1:0] {
    F_ETA      = 4'd0,
    F_R1_EM    = 4'd1,  F_R1_HAD  = 4'd2,  F_R1_SUM  = 4'd3,
    F_R2_EM    = 4'd4,  F_R2_HAD  = 4'd5,  F_R2_SUM  = 4'd6,
    F_R3_EM    = 4'd7,  F_R3_HAD  = 4'd8,  F_R3_SUM  = 4'd9,
    F_R4_EM    = 4'd10, F_R4_HAD  = 4'd11, F_R4_SUM  = 4'd12,
    F_JET_EM   = 4'd13, F_JET_HAD = 4'd14, F_JET_SUM = 4'd15
  } feat_idx_e;

  typedef logic [FEAT_W-1:0] feat_t;
  typedef feat_t             feat_vec_t [N_FEAT];

  // ---- boosted decision trees ----
  localparam int unsigned N_TREES = 30;
  localparam int unsigned DEPTH   = 8;
  localparam int unsigned LEAF_W  = 16;  // signed leaf value, tree weight already folded in
  localparam int unsigned SCORE_W = LEAF_W + $clog2(N_TREES) + 1;

  // ---- HS probability and output ----
  localparam int unsigned PHS_BINS = 64;
  localparam int unsigned PHS_W    = 9;  // unsigned, 256 = probability 1.0
  localparam int unsigned PHS_FRAC = 8;
  localparam int unsigned ET_W     = 16; // BDT_ET and E_T^ML, same unit as tower ET

  // ---- configuration bus (writes tree nodes, leaves and the p_HS table) ----
  localparam int unsigned CFG_TREE_W = 5;
  localparam int unsigned CFG_ADDR_W = 9;
  localparam int unsigned CFG_DATA_W = 24;

  typedef enum logic [1:0] {
    CFG_BDT_ET = 2'd0,   // regression ensemble
    CFG_BDT_HS = 2'd1,   // classification ensemble
    CFG_PHS    = 2'd2    // p_HS table
  } cfg_target_e;

  // Tree words: leaf=0 writes node number addr (1..2^DEPTH-1, heap order:
  // children of n are 2n and 2n+1) with data = {feature index, threshold};
  // leaf=1 writes leaf addr (0..2^DEPTH-1) with data = signed leaf value.
  typedef struct packed {
    logic                  we;
    cfg_target_e           target;
    logic                  leaf;
    logic [CFG_TREE_W-1:0] tree;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;
  } cfg_wr_t;

  // Node word layout inside cfg_wr_t.data
  function automatic logic [CFG_DATA_W-1:0] node_word(logic [FIDX_W-1:0] f, feat_t thr);
    return CFG_DATA_W'({f, thr});
  endfunction

endpackage
