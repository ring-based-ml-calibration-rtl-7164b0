// bdt_engine: boosted decision tree ensemble. N_TREES_P trees of depth
// DEPTH_P are evaluated side by side on the same sixteen features and the
// ensemble score is the sum of their leaf values.
//
// The ensemble size (30 trees, depth 8, trained with adaptive boosting) is
// that of both trained models, the ET regressor and the hard-scatter
// classifier; the same module serves for both. Adaptive boosting weighs each
// tree's answer by a tree weight; here that weight is assumed folded into the
// leaf values when the trees are loaded, so the weighted vote becomes a plain
// sum (this design's choice; the normalisation by the sum of weights is a
// constant factor that the p_HS table or the ET scale absorbs).
//
// Timing: one jet per clock. A jet presented with in_valid has its score on
// score_o with out_valid DEPTH_P + 2 cycles later (DEPTH_P tree levels, leaf
// register, adder register). The feature vector is carried once through a
// delay line shared by all trees; tree level k reads stage k of it.
// Configuration: cfg_tree selects the tree, the other cfg_* fields are those
// of bdt_tree. Reset clears the valid pipeline only; tree contents are
// undefined until loaded.
module bdt_engine
  import ringcal_pkg::*;
#(
  parameter int unsigned N_TREES_P = N_TREES,
  parameter int unsigned DEPTH_P   = DEPTH,
  parameter int unsigned SCORE_WP  = LEAF_W + $clog2(N_TREES_P) + 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  feat_t                      feat_i [N_FEAT],
  output logic                       out_valid,
  output logic signed [SCORE_WP-1:0] score_o,
  // configuration
  input  logic                       cfg_we,
  input  logic [CFG_TREE_W-1:0]      cfg_tree,
  input  logic                       cfg_leaf,
  input  logic [DEPTH_P:0]           cfg_addr,
  input  logic [CFG_DATA_W-1:0]      cfg_data
);

  localparam int unsigned LAT = DEPTH_P + 2;

  // ---- shared feature delay line: stage k = jet that entered k cycles ago ----
  feat_t feat_pipe [DEPTH_P][N_FEAT];
  assign feat_pipe[0] = feat_i;
  for (genvar k = 1; k < int'(DEPTH_P); k++) begin : g_fpipe
    always_ff @(posedge clk) feat_pipe[k] <= feat_pipe[k-1];
  end

  // ---- trees ----
  logic signed [LEAF_W-1:0] leaf [N_TREES_P];
  for (genvar t = 0; t < int'(N_TREES_P); t++) begin : g_tree
    bdt_tree #(.DEPTH_P(DEPTH_P)) u_tree (
      .clk      (clk),
      .feat_i   (feat_pipe),
      .leaf_o   (leaf[t]),
      .cfg_we   (cfg_we && (cfg_tree == CFG_TREE_W'(t))),
      .cfg_leaf (cfg_leaf),
      .cfg_addr (cfg_addr),
      .cfg_data (cfg_data)
    );
  end

  // ---- ensemble sum ----
  logic signed [SCORE_WP-1:0] sum;
  always_comb begin
    sum = '0;
    for (int t = 0; t < int'(N_TREES_P); t++) sum += SCORE_WP'(leaf[t]);
  end
  always_ff @(posedge clk) score_o <= sum;

  // ---- valid pipeline ----
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (rst) vpipe <= '0;
    else     vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];

endmodule
