// ml_jet_calib: real-time ML calibration of one primitive jet per clock.
//
// A primitive jet from the existing sliding-window jet finder arrives as the
// EM and HAD tower ET of the WIN x WIN window around its centre plus its eta.
// ring_sum reduces the window to sixteen ring features. Two boosted decision
// tree ensembles read the same features side by side: BDT_ET estimates the
// jet ET as if the jet were from the hard scatter, and BDT_HS scores how
// likely the jet is hard scatter rather than pileup. phs_lut turns that score
// into the probability p_HS, and et_combiner forms the output
// E_T^ML = p_HS * BDT_ET. The ring quantities of the outer rings measure the
// local pileup level, so the pileup correction happens inside the trees.
// This chain is the method's inference flow; the pipelining, widths and the
// configuration bus are this design's choices.
//
// Timing: fully pipelined, a new jet every clock. out_valid and the outputs
// follow in_valid by LATENCY = 2 (rings) + DEPTH + 2 (trees) + 1 (p_HS) +
// 1 (product) = 14 cycles with the default depth. The BDT_ET score waits one
// cycle in a register while the p_HS lookup runs.
//
// Configuration: cfg_i writes one word per cycle into the BDT_ET trees, the
// BDT_HS trees or the p_HS table (see ringcal_pkg::cfg_wr_t). Trees and table
// must be loaded before jets are sent; reset clears only valid flags.
module ml_jet_calib
  import ringcal_pkg::*;
#(
  parameter int unsigned N_TREES_P = N_TREES,
  parameter int unsigned DEPTH_P   = DEPTH
) (
  input  logic                    clk,
  input  logic                    rst,
  // jet input
  input  logic                    in_valid,
  input  logic [TOW_W-1:0]        em_i  [WIN][WIN],
  input  logic [TOW_W-1:0]        had_i [WIN][WIN],
  input  logic signed [ETA_W-1:0] eta_i,
  // configuration
  input  cfg_wr_t                 cfg_i,
  // calibrated jet output
  output logic                    out_valid,
  output logic [ET_W-1:0]         et_ml_o,    // E_T^ML
  output logic [ET_W-1:0]         et_bdt_o,   // BDT_ET, clamped to 0 .. 2^ET_W-1
  output logic [PHS_W-1:0]        phs_o       // p_HS used for this jet
);

  localparam int unsigned LATENCY = DEPTH_P + 6;

  // ---- ring features ----
  logic  feat_valid;
  feat_t feat [N_FEAT];

  ring_sum u_rings (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (in_valid),
    .em_i      (em_i),
    .had_i     (had_i),
    .eta_i     (eta_i),
    .out_valid (feat_valid),
    .feat_o    (feat)
  );

  // ---- the two ensembles ----
  logic                      et_valid, hs_valid;
  logic signed [SCORE_W-1:0] et_score, hs_score;

  bdt_engine #(.N_TREES_P(N_TREES_P), .DEPTH_P(DEPTH_P), .SCORE_WP(SCORE_W)) u_bdt_et (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (feat_valid),
    .feat_i    (feat),
    .out_valid (et_valid),
    .score_o   (et_score),
    .cfg_we    (cfg_i.we && cfg_i.target == CFG_BDT_ET),
    .cfg_tree  (cfg_i.tree),
    .cfg_leaf  (cfg_i.leaf),
    .cfg_addr  ((DEPTH_P + 1)'(cfg_i.addr)),
    .cfg_data  (cfg_i.data)
  );

  bdt_engine #(.N_TREES_P(N_TREES_P), .DEPTH_P(DEPTH_P), .SCORE_WP(SCORE_W)) u_bdt_hs (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (feat_valid),
    .feat_i    (feat),
    .out_valid (hs_valid),
    .score_o   (hs_score),
    .cfg_we    (cfg_i.we && cfg_i.target == CFG_BDT_HS),
    .cfg_tree  (cfg_i.tree),
    .cfg_leaf  (cfg_i.leaf),
    .cfg_addr  ((DEPTH_P + 1)'(cfg_i.addr)),
    .cfg_data  (cfg_i.data)
  );

  // ---- HS probability, with BDT_ET held one cycle alongside ----
  logic             phs_valid;
  logic [PHS_W-1:0] phs;
  logic signed [SCORE_W-1:0] et_score_q;

  phs_lut #(.SCORE_WP(SCORE_W)) u_phs (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (hs_valid),
    .score_i   (hs_score),
    .out_valid (phs_valid),
    .phs_o     (phs),
    .cfg_we    (cfg_i.we && cfg_i.target == CFG_PHS),
    .cfg_addr  (cfg_i.addr[$clog2(PHS_BINS)-1:0]),
    .cfg_data  (cfg_i.data[PHS_W-1:0])
  );

  always_ff @(posedge clk) et_score_q <= et_score;

  // ---- E_T^ML = p_HS * BDT_ET ----
  et_combiner #(.SCORE_WP(SCORE_W)) u_comb (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (phs_valid),
    .et_bdt_i  (et_score_q),
    .phs_i     (phs),
    .out_valid (out_valid),
    .et_bdt_o  (et_bdt_o),
    .et_ml_o   (et_ml_o)
  );

  always_ff @(posedge clk) phs_o <= phs;

  // Both ensembles share one valid pipeline length, so their results align.
  a_ens_aligned : assert property (@(posedge clk) disable iff (rst) et_valid == hs_valid);
  // Every result belongs to a jet that entered exactly LATENCY cycles earlier.
  a_latency : assert property (@(posedge clk) disable iff (rst) out_valid |-> $past(in_valid, LATENCY));

endmodule
