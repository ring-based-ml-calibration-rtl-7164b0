// bdt_tree: one binary decision tree of fixed depth, evaluated as a pipeline
// with one tree level per clock cycle.
//
// The tree is stored in heap order: node 1 is the root and the children of
// node n are 2n (feature below threshold) and 2n+1 (feature >= threshold).
// Each level k (nodes 2^k .. 2^(k+1)-1) has its own small table of
// {feature index, threshold}, so every level is read once per cycle and a new
// jet can enter every cycle. After DEPTH levels the node number minus
// 2^DEPTH selects one of 2^DEPTH leaf values. A trained tree shallower than
// DEPTH is stored by copying a leaf down to the full depth (any threshold,
// both leaves equal).
//
// Interface: feat_i[k] is the feature vector of the jet that is at level k in
// this cycle; the enclosing ensemble keeps one shared feature delay line for
// all of its trees, so feat_i[0] is the jet entering now and feat_i[k] the one
// that entered k cycles ago. leaf_o is that jet's leaf value DEPTH+1 cycles
// after it entered (DEPTH level registers and the leaf register).
// Configuration writes (cfg_we) land in one cycle: cfg_leaf = 0 writes node
// cfg_addr (1 .. 2^DEPTH-1) with {feature index, threshold} from cfg_data,
// cfg_leaf = 1 writes leaf cfg_addr with a signed value. Writing while jets
// are in flight is allowed; the affected jets see a mix of old and new
// contents.
//
// The depth (8) is the trained models' maximum depth. The ">=" comparison
// direction, heap layout, table per level and pipelining are this design's
// choices.
module bdt_tree
  import ringcal_pkg::*;
#(
  parameter int unsigned DEPTH_P = DEPTH,
  parameter int unsigned ADDR_W  = DEPTH_P + 1
) (
  input  logic                     clk,
  input  feat_t                    feat_i [DEPTH_P][N_FEAT],
  output logic signed [LEAF_W-1:0] leaf_o,
  // configuration
  input  logic                     cfg_we,
  input  logic                     cfg_leaf,
  input  logic [ADDR_W-1:0]        cfg_addr,
  input  logic [CFG_DATA_W-1:0]    cfg_data
);

  localparam int unsigned N_LEAVES = 1 << DEPTH_P;

  // node number of the jet at each level; level 0 is always the root
  logic [DEPTH_P:0] node_at [DEPTH_P+1];
  assign node_at[0] = (DEPTH_P + 1)'(1);

  for (genvar k = 0; k < int'(DEPTH_P); k++) begin : g_level
    localparam int unsigned NK = 1 << k;
    localparam int unsigned IW = (k > 0) ? k : 1;   // index width inside level k

    logic [FIDX_W-1:0] fsel [NK];
    feat_t             thr  [NK];

    // node n of level k has local index n - 2^k, i.e. its low k bits
    logic [DEPTH_P:0] cfg_n;
    logic [IW-1:0]    cfg_idx, idx;
    logic             cfg_hit;
    assign cfg_n   = (DEPTH_P + 1)'(cfg_addr);
    assign cfg_hit = (cfg_n >= (DEPTH_P + 1)'(NK)) && (cfg_n < (DEPTH_P + 1)'(2 * NK));
    assign cfg_idx = (k > 0) ? cfg_n[IW-1:0] : '0;
    assign idx     = (k > 0) ? node_at[k][IW-1:0] : '0;

    always_ff @(posedge clk) begin
      if (cfg_we && !cfg_leaf && cfg_hit) begin
        fsel[cfg_idx] <= cfg_data[FEAT_W +: FIDX_W];
        thr [cfg_idx] <= cfg_data[FEAT_W-1:0];
      end
    end

    logic go_right;
    assign go_right = feat_i[k][fsel[idx]] >= thr[idx];

    logic [DEPTH_P:0] next_q;
    always_ff @(posedge clk) next_q <= {node_at[k][DEPTH_P-1:0], go_right};
    assign node_at[k+1] = next_q;
  end

  // ---- leaves ----
  logic signed [LEAF_W-1:0] leaf [N_LEAVES];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_leaf)
      leaf[cfg_addr[DEPTH_P-1:0]] <= cfg_data[LEAF_W-1:0];
    leaf_o <= leaf[node_at[DEPTH_P][DEPTH_P-1:0]];
  end

endmodule
